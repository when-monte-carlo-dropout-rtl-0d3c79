// mc_engine: one MC engine, i.e. the random tail of one exit for one sample
// stream, holding N_MCD Monte-Carlo Dropout layers.
//
// The number of MCD layers in front of an exit is a hyper-parameter of the
// method: MCD layers are inserted starting from the exit and moving towards
// the input, with ordinary (non-Bayesian-template) layers between them. Those
// in-between layers are outside this RTL, so the engine loops out to them:
//
//   in_* -> MCD 0 -> mid_out[0] -> (external layer) -> mid_in[0] -> MCD 1
//        -> mid_out[1] -> ... -> MCD N_MCD-1 -> out_*
//
// With N_MCD = 1 (the default) the engine is a single MCD layer and the
// mid_* ports are unused placeholders of width one (an array of size zero
// is not legal): their inputs are ignored and their outputs held at zero.
//
// Every MCD layer has its own random sequence (seed from exit, engine and
// layer index). Stage 0 gets `last` and the sample tag from the tensor
// cache; later stages rebuild them by counting the elements that come back
// from the external layer: a tensor of MID_LEN[j-1] elements per sample, and
// N_ROUND samples per engine per input, engine ENG producing samples
// r * N_SPATIAL + ENG.
//
// Timing: each MCD layer adds one clock; the external layers add their own.
module mc_engine
  import mcd_pkg::*;
#(
  parameter int unsigned N_MCD     = 1,
  parameter int unsigned DATA_W    = mcd_pkg::DFLT_DATA_W,
  parameter int unsigned SMP_W     = 2,
  parameter int unsigned N_SPATIAL = 3,
  parameter int unsigned N_ROUND   = 1,
  parameter int unsigned ENG       = 0,
  parameter int unsigned EXIT_ID   = 0,
  localparam int unsigned N_MID    = (N_MCD > 1) ? N_MCD - 1 : 1,
  parameter int unsigned MID_LEN [N_MID] = '{default: 1}
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [15:0]              keep_rate,
  // replayed cached tensor
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [DATA_W-1:0] in_data,
  input  logic                     in_last,
  input  logic [SMP_W-1:0]         in_tag,
  // loop out to / back from the layers between MCD layers
  output logic                     mid_out_valid [N_MID],
  input  logic                     mid_out_ready [N_MID],
  output logic signed [DATA_W-1:0] mid_out_data  [N_MID],
  output logic                     mid_out_last  [N_MID],
  input  logic                     mid_in_valid  [N_MID],
  output logic                     mid_in_ready  [N_MID],
  input  logic signed [DATA_W-1:0] mid_in_data   [N_MID],
  // masked stream toward the exit classifier
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic signed [DATA_W-1:0] out_data,
  output logic                     out_last,
  output logic [SMP_W-1:0]         out_tag,
  output logic                     out_dropped
);

  // stage-to-stage signals
  logic                     s_in_valid  [N_MCD];
  logic                     s_in_ready  [N_MCD];
  logic signed [DATA_W-1:0] s_in_data   [N_MCD];
  logic                     s_in_last   [N_MCD];
  logic [SMP_W-1:0]         s_in_tag    [N_MCD];
  logic                     s_out_valid [N_MCD];
  logic                     s_out_ready [N_MCD];
  logic signed [DATA_W-1:0] s_out_data  [N_MCD];
  logic                     s_out_last  [N_MCD];
  logic [SMP_W-1:0]         s_out_tag   [N_MCD];
  logic                     s_out_drop  [N_MCD];

  assign s_in_valid[0] = in_valid;
  assign in_ready      = s_in_ready[0];
  assign s_in_data[0]  = in_data;
  assign s_in_last[0]  = in_last;
  assign s_in_tag[0]   = in_tag;

  for (genvar j = 0; j < N_MCD; j++) begin : g_stage
    mcd_layer #(
      .DATA_W (DATA_W),
      .TAG_W  (SMP_W),
      .SEED   (engine_seed(EXIT_ID, ENG, j))
    ) u_mcd (
      .clk         (clk),
      .rst_n       (rst_n),
      .keep_rate   (keep_rate),
      .in_valid    (s_in_valid[j]),
      .in_ready    (s_in_ready[j]),
      .in_data     (s_in_data[j]),
      .in_last     (s_in_last[j]),
      .in_tag      (s_in_tag[j]),
      .out_valid   (s_out_valid[j]),
      .out_ready   (s_out_ready[j]),
      .out_data    (s_out_data[j]),
      .out_last    (s_out_last[j]),
      .out_tag     (s_out_tag[j]),
      .out_dropped (s_out_drop[j])
    );

    if (j > 0) begin : g_return
      // element and round counters rebuild last / tag of the returned tensor
      localparam int unsigned LEN   = MID_LEN[j-1];
      localparam int unsigned CNT_W = idx_w(LEN);
      localparam int unsigned RND_W = idx_w(N_ROUND);
      logic [CNT_W-1:0] cnt;
      logic [RND_W-1:0] rnd;
      logic             take;

      assign s_in_valid[j]   = mid_in_valid[j-1];
      assign mid_in_ready[j-1] = s_in_ready[j];
      assign s_in_data[j]    = mid_in_data[j-1];
      assign s_in_last[j]    = (cnt == CNT_W'(LEN - 1));
      assign s_in_tag[j]     = SMP_W'(int'(rnd) * N_SPATIAL + ENG);
      assign take            = s_in_valid[j] && s_in_ready[j];

      always_ff @(posedge clk) begin
        if (!rst_n) begin
          cnt <= '0;
          rnd <= '0;
        end else if (take) begin
          if (cnt == CNT_W'(LEN - 1)) begin
            cnt <= '0;
            rnd <= (rnd == RND_W'(N_ROUND - 1)) ? '0 : rnd + 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
      end
    end

    if (j < N_MCD - 1) begin : g_loop_out
      assign mid_out_valid[j] = s_out_valid[j];
      assign s_out_ready[j]   = mid_out_ready[j];
      assign mid_out_data[j]  = s_out_data[j];
      assign mid_out_last[j]  = s_out_last[j];
    end else begin : g_final
      assign out_valid      = s_out_valid[j];
      assign s_out_ready[j] = out_ready;
      assign out_data       = s_out_data[j];
      assign out_last       = s_out_last[j];
      assign out_tag        = s_out_tag[j];
      assign out_dropped    = s_out_drop[j];
    end
  end

  if (N_MCD == 1) begin : g_no_mid
    // placeholders: nothing loops out with a single MCD layer
    assign mid_out_valid[0] = 1'b0;
    assign mid_out_data[0]  = '0;
    assign mid_out_last[0]  = 1'b0;
    assign mid_in_ready[0]  = 1'b0;
  end

  initial begin
    assert (N_MCD >= 1) else $error("mc_engine: N_MCD must be at least 1");
  end

endmodule
