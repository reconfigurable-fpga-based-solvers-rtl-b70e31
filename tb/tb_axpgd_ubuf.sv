// tb_axpgd_ubuf -- checks that the two iterate banks are independent.
//
// Writes different random words to the same index of both banks, reads them
// back by bank (one-cycle latency) and, while one bank is read, writes the
// other, as the solver does, checking the read bank is not disturbed.
module tb_axpgd_ubuf;
  localparam int W = 34;
  localparam int N = 40;
  localparam int IW = $clog2(N);

  logic          clk = 1'b0;
  logic          rd_bank = 1'b0, we = 1'b0, wr_bank = 1'b0;
  logic [IW-1:0] raddr = '0, waddr = '0;
  logic [W-1:0]  rdata, wdata = '0;

  axpgd_ubuf #(.W(W), .N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [W-1:0] shadow [2][N];

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(bit bk, int i, logic [W-1:0] d);
    @(negedge clk);
    we = 1'b1; wr_bank = bk; waddr = IW'(i); wdata = d;
    shadow[bk][i] = d;
    @(negedge clk);
    we = 1'b0;
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      wr(1'b0, i, {$urandom, $urandom} & {W{1'b1}});
      wr(1'b1, i, {$urandom, $urandom} & {W{1'b1}});
    end
    for (int k = 0; k < 1000; k++) begin
      int  ri, wi;
      bit  bk;
      logic [W-1:0] e;
      ri = $urandom_range(0, N - 1);
      wi = $urandom_range(0, N - 1);
      bk = 1'($urandom);
      @(negedge clk);
      rd_bank = bk; raddr = IW'(ri);
      e = shadow[bk][ri];
      // write the other bank in the same cycle, possibly at the same index
      we = 1'b1; wr_bank = ~bk; waddr = ($urandom_range(0, 1) != 0) ? IW'(ri) : IW'(wi);
      wdata = {$urandom, $urandom} & {W{1'b1}};
      shadow[~bk][waddr] = wdata;
      @(negedge clk);
      we = 1'b0;
      checks++;
      if (rdata !== e) begin
        failures++;
        $display("FAIL bank %0d idx %0d got %h expected %h", bk, ri, rdata, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
