// me_bayes_top_full_tb: end-to-end test of the multi-exit MCD core with every
// parameter at its default: two exits caching 1176- and 400-element tensors,
// three MC samples per exit on three parallel engines, ten classes. Two
// inputs with different keep rates are run; the second without
// back-pressure, to check the stall-free latency. Stimulus, classifier model
// and checks are in me_bayes_checker.
module me_bayes_top_full_tb;
  localparam int NMID = 1;
  localparam int NE = 2, NS = 3, NSP = 3, NC = 10;
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

  me_bayes_top  dut (
    .clk, .rst_n, .keep_rate, .feat_valid, .feat_ready, .feat_data,
    .mc_valid, .mc_ready, .mc_data, .mc_last, .mc_sample, .mc_dropped,
    .mid_out_valid, .mid_out_ready, .mid_out_data, .mid_out_last,
    .mid_in_valid, .mid_in_ready, .mid_in_data,
    .pred_valid, .pred_score, .avg_valid, .avg_score, .busy
  );

  me_bayes_checker #(.N_IMG(2)) chk (
    .clk, .rst_n, .keep_rate, .feat_valid, .feat_ready, .feat_data,
    .mc_valid, .mc_ready, .mc_data, .mc_last, .mc_sample, .mc_dropped,
    .mid_out_valid, .mid_out_ready, .mid_out_data, .mid_out_last,
    .mid_in_valid, .mid_in_ready, .mid_in_data,
    .pred_valid, .pred_score, .avg_valid, .avg_score, .done, .checks, .failures
  );

  initial begin : watchdog
    repeat (100000) @(posedge clk);
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
