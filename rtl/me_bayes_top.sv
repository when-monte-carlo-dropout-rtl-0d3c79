// me_bayes_top: Bayesian core of a multi-exit Monte-Carlo Dropout network.
//
// The network is a non-Bayesian backbone with N_EXIT exits. Near each exit an
// MCD layer makes the rest of that exit random; re-running only that part
// N_SAMPLE times with fresh dropout masks gives N_SAMPLE Monte-Carlo
// predictions per exit, and the equally weighted mean of all
// N_EXIT * N_SAMPLE predictions is the network's calibrated output.
//
// This block holds everything of that scheme that is specific to it:
//   * per exit, an mc_branch: the cached backbone tensor, cloned onto
//     N_SPATIAL parallel MC engines and replayed N_SAMPLE / N_SPATIAL times
//     (spatial / temporal mapping); an engine is a chain of N_MCD MCD layers;
//   * an ensemble_avg over all returned predictions.
// The backbone layers and the exit classifiers are ordinary quantised
// convolution / pooling / dense layers and sit outside: feat_* carries each
// exit's backbone tensor in, mc_* carries each engine's masked stream out to
// its classifier copy, and pred_* brings that classifier's class scores back.
// mc_sample tells which MC sample an element (and hence a prediction)
// belongs to. With N_MCD > 1, mid_out / mid_in loop each engine out to the
// external layers between its MCD layers (MID_LEN[x][j] elements return per
// sample); with N_MCD = 1 (the default) they are unused width-one
// placeholders.
//
// keep_rate is the user's run-time keep probability (value / 65536); it is
// registered while all branches are idle, so it stays fixed during a run.
//
// Defaults: one MCD layer per engine, three MC samples on three engines per
// exit (pure spatial mapping), two exits, cached tensors of 1176 (6x14x14) and 400 (16x5x5)
// elements as in LeNet-5 after its two pooling layers, 10 classes, 16-bit
// data. The sample count and engine count follow the method's final design;
// the exit count, tensor sizes and widths are this design's choices.
//
// Timing: per exit, TENSOR_LEN clocks to load the tensor, then
// N_SAMPLE / N_SPATIAL * TENSOR_LEN clocks (+1) to emit all masked samples
// when the classifiers never stall (with N_MCD > 1, plus whatever the
// external layers between MCD layers take). The mean appears one clock after the last
// prediction returns.
module me_bayes_top
  import mcd_pkg::*;
#(
  parameter int unsigned N_EXIT              = 2,
  parameter int unsigned N_SAMPLE            = 3,
  parameter int unsigned N_SPATIAL           = 3,
  parameter int unsigned TENSOR_LEN [N_EXIT] = '{1176, 400},
  parameter int unsigned N_CLASS             = mcd_pkg::DFLT_N_CLASS,
  parameter int unsigned DATA_W              = mcd_pkg::DFLT_DATA_W,
  parameter int unsigned SCORE_W             = mcd_pkg::DFLT_SCORE_W,
  parameter int unsigned N_MCD               = 1,
  localparam int unsigned SMP_W              = idx_w(N_SAMPLE),
  localparam int unsigned N_MID              = (N_MCD > 1) ? N_MCD - 1 : 1,
  parameter int unsigned MID_LEN [N_EXIT][N_MID] = '{default: 1}
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [15:0]               keep_rate,
  // backbone tensors, one stream per exit
  input  logic                      feat_valid [N_EXIT],
  output logic                      feat_ready [N_EXIT],
  input  logic signed [DATA_W-1:0]  feat_data  [N_EXIT],
  // masked streams to the exit classifiers, one per exit and engine
  output logic                      mc_valid   [N_EXIT][N_SPATIAL],
  input  logic                      mc_ready   [N_EXIT][N_SPATIAL],
  output logic signed [DATA_W-1:0]  mc_data    [N_EXIT][N_SPATIAL],
  output logic                      mc_last    [N_EXIT][N_SPATIAL],
  output logic [SMP_W-1:0]          mc_sample  [N_EXIT][N_SPATIAL],
  output logic                      mc_dropped [N_EXIT][N_SPATIAL],
  // loop out to / back from the layers between MCD layers (N_MCD > 1)
  output logic                      mid_out_valid [N_EXIT][N_SPATIAL][N_MID],
  input  logic                      mid_out_ready [N_EXIT][N_SPATIAL][N_MID],
  output logic signed [DATA_W-1:0]  mid_out_data  [N_EXIT][N_SPATIAL][N_MID],
  output logic                      mid_out_last  [N_EXIT][N_SPATIAL][N_MID],
  input  logic                      mid_in_valid  [N_EXIT][N_SPATIAL][N_MID],
  output logic                      mid_in_ready  [N_EXIT][N_SPATIAL][N_MID],
  input  logic signed [DATA_W-1:0]  mid_in_data   [N_EXIT][N_SPATIAL][N_MID],
  // class scores returned by the exit classifiers
  input  logic                      pred_valid [N_EXIT][N_SPATIAL],
  input  logic signed [SCORE_W-1:0] pred_score [N_EXIT][N_SPATIAL][N_CLASS],
  // ensemble prediction
  output logic                      avg_valid,
  output logic signed [SCORE_W-1:0] avg_score  [N_CLASS],
  output logic                      busy       [N_EXIT]
);

  localparam int unsigned N_IN = N_EXIT * N_SPATIAL;

  typedef int unsigned mid_len_t [N_MID];

  // MID_LEN row of exit x (a constant function, as some tools do not take
  // a slice of an array parameter as a parameter value)
  function automatic mid_len_t mid_len_of(input int unsigned x);
    mid_len_t row;
    row = '{default: 1};
    for (int i = 0; i < N_EXIT; i++)
      if (i == x)
        for (int j = 0; j < N_MID; j++) row[j] = MID_LEN[i][j];
    return row;
  endfunction

  logic [15:0]              keep_q;
  logic [N_EXIT-1:0]        busy_v;
  logic                     ens_valid [N_IN];
  logic signed [SCORE_W-1:0] ens_score [N_IN][N_CLASS];

  always_ff @(posedge clk) begin
    if (!rst_n)
      keep_q <= keep_rate;
    else if (busy_v == '0)
      keep_q <= keep_rate;
  end

  for (genvar x = 0; x < N_EXIT; x++) begin : g_exit
    mc_branch #(
      .N_SAMPLE   (N_SAMPLE),
      .N_SPATIAL  (N_SPATIAL),
      .TENSOR_LEN (TENSOR_LEN[x]),
      .DATA_W     (DATA_W),
      .EXIT_ID    (x),
      .N_MCD      (N_MCD),
      .MID_LEN    (mid_len_of(x))
    ) u_branch (
      .clk        (clk),
      .rst_n      (rst_n),
      .keep_rate  (keep_q),
      .feat_valid (feat_valid[x]),
      .feat_ready (feat_ready[x]),
      .feat_data  (feat_data[x]),
      .mc_valid   (mc_valid[x]),
      .mc_ready   (mc_ready[x]),
      .mc_data    (mc_data[x]),
      .mc_last    (mc_last[x]),
      .mc_sample  (mc_sample[x]),
      .mc_dropped (mc_dropped[x]),
      .mid_out_valid (mid_out_valid[x]),
      .mid_out_ready (mid_out_ready[x]),
      .mid_out_data  (mid_out_data[x]),
      .mid_out_last  (mid_out_last[x]),
      .mid_in_valid  (mid_in_valid[x]),
      .mid_in_ready  (mid_in_ready[x]),
      .mid_in_data   (mid_in_data[x]),
      .busy       (busy_v[x])
    );
    assign busy[x] = busy_v[x];

    for (genvar e = 0; e < N_SPATIAL; e++) begin : g_pred
      assign ens_valid[x*N_SPATIAL+e] = pred_valid[x][e];
      assign ens_score[x*N_SPATIAL+e] = pred_score[x][e];
    end
  end

  ensemble_avg #(
    .N_IN    (N_IN),
    .N_TOTAL (N_EXIT * N_SAMPLE),
    .N_CLASS (N_CLASS),
    .SCORE_W (SCORE_W)
  ) u_ensemble (
    .clk        (clk),
    .rst_n      (rst_n),
    .pred_valid (ens_valid),
    .pred_score (ens_score),
    .avg_valid  (avg_valid),
    .avg_score  (avg_score)
  );

endmodule
