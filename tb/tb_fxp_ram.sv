// tb_fxp_ram -- checks the RAM's write, one-cycle read latency and
// read-old-on-collision behaviour against a shadow array.
module tb_fxp_ram;
  localparam int WIDTH = 34;
  localparam int DEPTH = 100;
  localparam int AW = $clog2(DEPTH);

  logic             clk = 1'b0;
  logic             we = 1'b0;
  logic [AW-1:0]    waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;

  fxp_ram #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [WIDTH-1:0] shadow [DEPTH];

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] exp_d;
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(i); wdata = {$urandom, $urandom} & {WIDTH{1'b1}};
      shadow[i] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    // random reads, each with a random write to some address
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      raddr = AW'($urandom_range(0, DEPTH - 1));
      exp_d = shadow[raddr];
      we    = 1'($urandom_range(0, 1));
      waddr = ($urandom_range(0, 3) == 0) ? raddr : AW'($urandom_range(0, DEPTH - 1));
      wdata = {$urandom, $urandom} & {WIDTH{1'b1}};
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
      @(negedge clk);
      we = 1'b0;
      checks++;
      if (rdata !== exp_d) begin
        failures++;
        $display("FAIL addr %0d got %h expected %h", raddr, rdata, exp_d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
