// ensemble_avg: equally weighted ensemble of the MC predictions of one input.
//
// Every exit of the network, run once per Monte-Carlo sample, returns a
// vector of N_CLASS class scores. The final prediction of the multi-exit MCD
// network is the plain mean of all N_TOTAL such vectors (all samples of all
// exits, each with weight 1/N_TOTAL). The method defines this mean; placing
// it in hardware, and its arithmetic, are this design's choices.
//
// How it works: up to N_IN score vectors may arrive in the same clock (one
// per MC engine). Their element-wise sum is added to a full-width
// accumulator and their number to a counter. The clock in which the counter
// reaches N_TOTAL, the accumulated sums are divided by the constant N_TOTAL
// (truncation toward zero) into a register, avg_valid pulses high for one
// clock on the next edge, and the accumulator restarts from zero.
//
// Interface: pred_valid[i]/pred_score[i] have no back-pressure; a score
// vector is taken in the clock its valid is high. More than N_TOTAL vectors
// before the mean is produced is a protocol error (assertion).
// Timing: mean available one clock after the last vector arrives.
module ensemble_avg
  import mcd_pkg::*;
#(
  parameter int unsigned N_IN    = 6,
  parameter int unsigned N_TOTAL = 6,
  parameter int unsigned N_CLASS = mcd_pkg::DFLT_N_CLASS,
  parameter int unsigned SCORE_W = mcd_pkg::DFLT_SCORE_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      pred_valid [N_IN],
  input  logic signed [SCORE_W-1:0] pred_score [N_IN][N_CLASS],
  output logic                      avg_valid,
  output logic signed [SCORE_W-1:0] avg_score  [N_CLASS]
);

  localparam int unsigned CNT_W = $clog2(N_TOTAL + N_IN + 1);
  localparam int unsigned ACC_W = SCORE_W + $clog2(N_TOTAL + N_IN + 1) + 1;

  logic signed [ACC_W-1:0] acc      [N_CLASS];
  logic signed [ACC_W-1:0] acc_next [N_CLASS];
  logic [CNT_W-1:0]        cnt, cnt_next;
  logic                    complete;

  always_comb begin
    cnt_next = cnt;
    for (int c = 0; c < N_CLASS; c++) acc_next[c] = acc[c];
    for (int i = 0; i < N_IN; i++) begin
      if (pred_valid[i]) begin
        cnt_next = cnt_next + 1'b1;
        for (int c = 0; c < N_CLASS; c++)
          acc_next[c] = acc_next[c] + ACC_W'(pred_score[i][c]);
      end
    end
    complete = (cnt_next == CNT_W'(N_TOTAL));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt       <= '0;
      avg_valid <= 1'b0;
      for (int c = 0; c < N_CLASS; c++) begin
        acc[c]       <= '0;
        avg_score[c] <= '0;
      end
    end else begin
      avg_valid <= complete;
      if (complete) begin
        cnt <= '0;
        for (int c = 0; c < N_CLASS; c++) begin
          acc[c]       <= '0;
          avg_score[c] <= SCORE_W'(acc_next[c] / $signed(ACC_W'(N_TOTAL)));
        end
      end else begin
        cnt <= cnt_next;
        for (int c = 0; c < N_CLASS; c++) acc[c] <= acc_next[c];
      end
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    cnt_next <= CNT_W'(N_TOTAL))
    else $error("ensemble_avg: more than N_TOTAL predictions for one input");

endmodule
