// me_bayes_top_tb: end-to-end test of the multi-exit MCD core at a reduced
// size that exercises every mechanism: two exits with tensors of 24 and 16
// elements, four MC samples per exit on two engines (so spatial and temporal
// mapping are mixed and the cached tensor is replayed), four classes, four
// inputs with the keep rate switched between them, random back-pressure from
// the exit classifiers. Stimulus, classifier model and checks are in
// me_bayes_checker. Each engine holds two MCD layers, with an identity layer
// played by the checker between them.
module me_bayes_top_tb;
  localparam int NMID = 1;
  localparam int NE = 2, NS = 4, NSP = 2, NC = 4;
  localparam int SMP_W = (NS > 1) ? $clog2(NS) : 1;

  logic               clk = 0, rst_n = 0;
  logic [15:0]        keep_rate;
  logic               feat_valid [NE];
  logic               feat_ready [NE];
  logic signed [15:0] feat_data  [NE];
  logic               mc_valid   [NE][NSP];
  logic               mc_ready   [NE][NSP];
  logic signed [15:0] mc_data    [NE][NSP];
  logic               mc_last    [NE][NSP];
  logic [SMP_W-1:0]   mc_sample  [NE][NSP];
  logic               mc_dropped [NE][NSP];
  logic               mid_out_valid [NE][NSP][NMID];
  logic               mid_out_ready [NE][NSP][NMID];
  logic signed [15:0] mid_out_data  [NE][NSP][NMID];
  logic               mid_out_last  [NE][NSP][NMID];
  logic               mid_in_valid  [NE][NSP][NMID];
  logic               mid_in_ready  [NE][NSP][NMID];
  logic signed [15:0] mid_in_data   [NE][NSP][NMID];
  logic               pred_valid [NE][NSP];
  logic signed [15:0] pred_score [NE][NSP][NC];
  logic               avg_valid;
  logic signed [15:0] avg_score  [NC];
  logic               busy       [NE];
  logic               done;
  int                 checks, failures;

  always #5 clk = ~clk;

  me_bayes_top #(.N_EXIT(2), .N_SAMPLE(4), .N_SPATIAL(2), .TENSOR_LEN('{24, 16}), .N_CLASS(4),
                .N_MCD(2), .MID_LEN('{'{24}, '{16}})) dut (
    .clk, .rst_n, .keep_rate, .feat_valid, .feat_ready, .feat_data,
    .mc_valid, .mc_ready, .mc_data, .mc_last, .mc_sample, .mc_dropped,
    .mid_out_valid, .mid_out_ready, .mid_out_data, .mid_out_last,
    .mid_in_valid, .mid_in_ready, .mid_in_data,
    .pred_valid, .pred_score, .avg_valid, .avg_score, .busy
  );

  me_bayes_checker #(.N_EXIT(2), .N_SAMPLE(4), .N_SPATIAL(2), .LEN('{24, 16}), .N_CLASS(4), .N_IMG(4), .N_MCD(2)) chk (
    .clk, .rst_n, .keep_rate, .feat_valid, .feat_ready, .feat_data,
    .mc_valid, .mc_ready, .mc_data, .mc_last, .mc_sample, .mc_dropped,
    .mid_out_valid, .mid_out_ready, .mid_out_data, .mid_out_last,
    .mid_in_valid, .mid_in_ready, .mid_in_data,
    .pred_valid, .pred_score, .avg_valid, .avg_score, .done, .checks, .failures
  );

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done);
    repeat (2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
