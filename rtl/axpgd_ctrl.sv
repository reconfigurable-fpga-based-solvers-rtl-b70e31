// axpgd_ctrl -- sequencer of the AxPGD solver core.
//
// After `start` it runs `n_iter` iterations of u <- S_tau(u - s(Hu - b)).
// Each iteration sweeps row i = 0..N-1 and, inside a row, column
// j = 0..N-1, issuing one (i, j) term per cycle to the memories and the
// multiply-accumulate unit, so an iteration takes exactly N*N cycles and
// consecutive iterations follow each other with no idle cycle. Every issued
// term carries tags: `first`/`last` delimit a row and `bank` is the iterate
// bank read in this iteration (iteration parity); the result of the row is
// written into the other bank. Back-to-back iterations are safe because the
// row i result is written PIPE_LAT cycles after its last term, while the next
// iteration reads coordinate i only i+1 cycles after it starts; this needs
// N > PIPE_LAT, checked by an assertion. After the last term of the last
// iteration the sequencer waits PIPE_LAT cycles for the pipeline to drain,
// then pulses `done` for one cycle. `res_bank` names the bank that then holds
// the result (n_iter mod 2). With n_iter = 0 it pulses `done` one cycle after
// `start` and the warm start in bank 0 is the result.
//
// Timing: `start` sampled high in cycle t gives the first issued term in
// cycle t+1 and `done` in cycle t + n_iter*N*N + PIPE_LAT + 1.
// The fixed iteration count supplied at run time and the zero-bubble
// schedule are this design's choices; the source gives no stopping rule.
module axpgd_ctrl #(
  parameter int unsigned N        = axpgd_pkg::N_VAR,
  parameter int unsigned ITER_W   = 16,
  parameter int unsigned PIPE_LAT = 3,
  localparam int unsigned IW      = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ITER_W-1:0] n_iter,
  // issued term
  output logic              iss_valid,
  output logic [IW-1:0]     iss_row,
  output logic [IW-1:0]     iss_col,
  output logic              iss_first,
  output logic              iss_last,
  output logic              iss_bank,
  // status
  output logic              busy,
  output logic              done,
  output logic              res_bank
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  state_e            state;
  logic [IW-1:0]     row, col;
  logic [ITER_W-1:0] iter, iter_last;
  logic [1:0]        drain_cnt;

  logic end_row, end_iter, end_all;

  always_comb begin
    end_row  = (col == IW'(N - 1));
    end_iter = end_row && (row == IW'(N - 1));
    end_all  = end_iter && (iter == iter_last);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      row       <= '0;
      col       <= '0;
      iter      <= '0;
      iter_last <= '0;
      drain_cnt <= '0;
      done      <= 1'b0;
      res_bank  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            row       <= '0;
            col       <= '0;
            iter      <= '0;
            iter_last <= n_iter - 1'b1;
            res_bank  <= n_iter[0];
            if (n_iter == '0) done  <= 1'b1;
            else              state <= S_RUN;
          end
        end
        S_RUN: begin
          if (end_all) begin
            state     <= S_DRAIN;
            drain_cnt <= 2'(PIPE_LAT - 1);
          end
          if (end_row) begin
            col <= '0;
            if (end_iter) begin
              row  <= '0;
              iter <= iter + 1'b1;
            end else begin
              row <= row + 1'b1;
            end
          end else begin
            col <= col + 1'b1;
          end
        end
        S_DRAIN: begin
          if (drain_cnt == '0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            drain_cnt <= drain_cnt - 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    iss_valid = (state == S_RUN);
    iss_row   = row;
    iss_col   = col;
    iss_first = (col == '0);
    iss_last  = end_row;
    iss_bank  = iter[0];
    busy      = (state != S_IDLE);
  end

  // The zero-bubble schedule relies on rows being longer than the pipeline.
  initial assert (N > PIPE_LAT && PIPE_LAT >= 1 && PIPE_LAT <= 4)
    else $error("axpgd_ctrl: N must exceed PIPE_LAT (1..4)");

endmodule
