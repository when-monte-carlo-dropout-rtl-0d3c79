// mc_branch: Bayesian part of one exit, mapped onto MC engines.
//
// The tensor that leaves the last non-Bayesian layer of the exit is cached
// once and fed to N_SPATIAL MC engines working in parallel (spatial mapping:
// one engine per sample); when more samples are wanted than there are
// engines, the cached tensor is replayed N_SAMPLE / N_SPATIAL times and each
// engine produces one sample per replay (temporal mapping: samples take turns
// on a shared engine). Engine e produces, in round r, MC sample
// r * N_SPATIAL + e; that index travels with every element on mc_sample.
//
// An MC engine (mc_engine) holds N_MCD MCD layers, each with its own random
// sequence. The convolution / dense layers after an MCD layer are standard
// non-Bayesian layers and lie outside this block: between two MCD layers the
// engine loops out through mid_out / mid_in (MID_LEN[j] elements come back
// per sample), and the last MCD layer's stream is a port toward that exit's
// classifier copy. N_MCD = 1 is the configuration of the method's latency
// study; the mid_* ports are then unused placeholders.
//
// Clone rule: an element leaves the cache only when every engine can accept
// it, and then all engines take it in the same clock, so the engines stay in
// lock-step and each sees the whole tensor in order.
//
// Timing: without back-pressure the first masked element appears one clock
// after replay starts and the last one N_ROUND * TENSOR_LEN clocks later;
// latency therefore falls with N_SPATIAL and resources grow with it.
module mc_branch
  import mcd_pkg::*;
#(
  parameter int unsigned N_SAMPLE   = 3,
  parameter int unsigned N_SPATIAL  = 3,
  parameter int unsigned TENSOR_LEN = 400,
  parameter int unsigned DATA_W     = mcd_pkg::DFLT_DATA_W,
  parameter int unsigned EXIT_ID    = 0,
  parameter int unsigned N_MCD      = 1,
  localparam int unsigned SMP_W     = idx_w(N_SAMPLE),
  localparam int unsigned N_MID     = (N_MCD > 1) ? N_MCD - 1 : 1,
  parameter int unsigned MID_LEN [N_MID] = '{default: 1}
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [15:0]              keep_rate,
  // tensor from the last non-Bayesian layer of this exit
  input  logic                     feat_valid,
  output logic                     feat_ready,
  input  logic signed [DATA_W-1:0] feat_data,
  // one masked stream per MC engine
  output logic                     mc_valid  [N_SPATIAL],
  input  logic                     mc_ready  [N_SPATIAL],
  output logic signed [DATA_W-1:0] mc_data   [N_SPATIAL],
  output logic                     mc_last   [N_SPATIAL],
  output logic [SMP_W-1:0]         mc_sample [N_SPATIAL],
  output logic                     mc_dropped[N_SPATIAL],  // element was zeroed
  // loop out to / back from the layers between MCD layers (N_MCD > 1)
  output logic                     mid_out_valid [N_SPATIAL][N_MID],
  input  logic                     mid_out_ready [N_SPATIAL][N_MID],
  output logic signed [DATA_W-1:0] mid_out_data  [N_SPATIAL][N_MID],
  output logic                     mid_out_last  [N_SPATIAL][N_MID],
  input  logic                     mid_in_valid  [N_SPATIAL][N_MID],
  output logic                     mid_in_ready  [N_SPATIAL][N_MID],
  input  logic signed [DATA_W-1:0] mid_in_data   [N_SPATIAL][N_MID],
  output logic                     busy
);

  localparam int unsigned N_ROUND = N_SAMPLE / N_SPATIAL;
  localparam int unsigned RND_W   = idx_w(N_ROUND);

  logic                     c_valid, c_ready, c_last;
  logic signed [DATA_W-1:0] c_data;
  logic [RND_W-1:0]         c_round;
  logic [N_SPATIAL-1:0]     eng_ready;

  tensor_cache #(
    .DATA_W     (DATA_W),
    .TENSOR_LEN (TENSOR_LEN),
    .N_ROUND    (N_ROUND)
  ) u_cache (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (feat_valid),
    .in_ready  (feat_ready),
    .in_data   (feat_data),
    .out_valid (c_valid),
    .out_ready (c_ready),
    .out_data  (c_data),
    .out_last  (c_last),
    .out_round (c_round),
    .busy      (busy)
  );

  assign c_ready = &eng_ready;

  for (genvar e = 0; e < N_SPATIAL; e++) begin : g_engine
    logic [SMP_W-1:0] tag;
    assign tag = SMP_W'(int'(c_round) * N_SPATIAL + e);

    mc_engine #(
      .N_MCD     (N_MCD),
      .DATA_W    (DATA_W),
      .SMP_W     (SMP_W),
      .N_SPATIAL (N_SPATIAL),
      .N_ROUND   (N_ROUND),
      .ENG       (e),
      .EXIT_ID   (EXIT_ID),
      .MID_LEN   (MID_LEN)
    ) u_engine (
      .clk           (clk),
      .rst_n         (rst_n),
      .keep_rate     (keep_rate),
      .in_valid      (c_valid && c_ready),
      .in_ready      (eng_ready[e]),
      .in_data       (c_data),
      .in_last       (c_last),
      .in_tag        (tag),
      .mid_out_valid (mid_out_valid[e]),
      .mid_out_ready (mid_out_ready[e]),
      .mid_out_data  (mid_out_data[e]),
      .mid_out_last  (mid_out_last[e]),
      .mid_in_valid  (mid_in_valid[e]),
      .mid_in_ready  (mid_in_ready[e]),
      .mid_in_data   (mid_in_data[e]),
      .out_valid     (mc_valid[e]),
      .out_ready     (mc_ready[e]),
      .out_data      (mc_data[e]),
      .out_last      (mc_last[e]),
      .out_tag       (mc_sample[e]),
      .out_dropped   (mc_dropped[e])
    );
  end

  initial begin
    assert (N_SPATIAL >= 1 && N_SAMPLE % N_SPATIAL == 0)
      else $error("mc_branch: N_SAMPLE must be a multiple of N_SPATIAL");
  end

endmodule
