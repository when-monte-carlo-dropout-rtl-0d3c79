// mc_branch_harness: drives and checks one mc_branch (used by mc_branch_tb).
//
// Feeds N_TENSOR random tensors, then scoreboards every engine's masked
// stream: engine e's k-th output must be element k mod LEN of the current
// tensor, masked with engine e's own reference random sequence, tagged with
// sample (k / LEN mod N_ROUND) * N_SPATIAL + e. The first tensors run with
// random input gaps and output back-pressure; the last runs without stalls
// and its latency (clocks from the last input handshake to the last output
// handshake) is reported on `latency`.
//
// With N_MCD > 1 the harness also plays the layers between the MCD layers:
// each returns the sum of consecutive element pairs (wrapped to 16 bits), so
// the tensor halves at every loop-out (LEN must be divisible by
// 2**(N_MCD-1)). Every MCD layer's output is then checked against the
// reference applied to what actually entered that layer.
module mc_branch_harness
  import mcd_ref_pkg::*;
#(
  parameter int N_SAMPLE  = 3,
  parameter int N_SPATIAL = 3,
  parameter int LEN       = 20,
  parameter int EXIT_ID   = 0,
  parameter int N_TENSOR  = 3,
  parameter logic [15:0] KEEP = 16'hA000,
  parameter int N_MCD     = 1
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   latency,
  output int   n_dropped,
  output int   n_kept,
  output int   n_stall,
  output int   n_replay_rounds
);
  localparam int NR    = N_SAMPLE / N_SPATIAL;
  localparam int SMP_W = (N_SAMPLE > 1) ? $clog2(N_SAMPLE) : 1;
  localparam int N_MID = (N_MCD > 1) ? N_MCD - 1 : 1;
  typedef int unsigned midlen_t [N_MID];
  function automatic midlen_t mk_midlen();
    midlen_t m;
    for (int j = 0; j < N_MID; j++) m[j] = (N_MCD > 1) ? LEN >> (j + 1) : 1;
    return m;
  endfunction
  localparam midlen_t MIDL = mk_midlen();
  // length of the tensor entering MCD stage j
  function automatic int stage_len(input int j);
    return (j == 0) ? LEN : int'(MIDL[j-1]);
  endfunction
  localparam int LFIN = (N_MCD > 1) ? int'(MIDL[N_MID-1]) : LEN;

  logic               feat_valid, feat_ready, busy;
  logic signed [15:0] feat_data;
  logic               mc_valid  [N_SPATIAL];
  logic               mc_ready  [N_SPATIAL];
  logic signed [15:0] mc_data   [N_SPATIAL];
  logic               mc_last   [N_SPATIAL];
  logic [SMP_W-1:0]   mc_sample [N_SPATIAL];
  logic               mc_dropped[N_SPATIAL];
  logic               mid_out_valid [N_SPATIAL][N_MID];
  logic               mid_out_ready [N_SPATIAL][N_MID];
  logic signed [15:0] mid_out_data  [N_SPATIAL][N_MID];
  logic               mid_out_last  [N_SPATIAL][N_MID];
  logic               mid_in_valid  [N_SPATIAL][N_MID];
  logic               mid_in_ready  [N_SPATIAL][N_MID];
  logic signed [15:0] mid_in_data   [N_SPATIAL][N_MID];

  mc_branch #(
    .N_SAMPLE(N_SAMPLE), .N_SPATIAL(N_SPATIAL), .TENSOR_LEN(LEN),
    .DATA_W(16), .EXIT_ID(EXIT_ID), .N_MCD(N_MCD), .MID_LEN(MIDL)
  ) dut (
    .clk, .rst_n, .keep_rate(KEEP),
    .feat_valid, .feat_ready, .feat_data,
    .mc_valid, .mc_ready, .mc_data, .mc_last, .mc_sample, .mc_dropped,
    .mid_out_valid, .mid_out_ready, .mid_out_data, .mid_out_last,
    .mid_in_valid, .mid_in_ready, .mid_in_data, .busy
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 6) $display("FAIL [%0d/%0d]: %s", N_SAMPLE, N_SPATIAL, what);
    end
  endtask

  logic signed [15:0] tensors [N_TENSOR][LEN];
  logic [15:0]        rng   [N_SPATIAL];
  logic [15:0]        srng  [N_SPATIAL][N_MCD];     // per-stage reference LFSRs
  logic signed [15:0] q_in  [N_SPATIAL][N_MCD][$];  // what entered each stage
  logic signed [15:0] q_ret [N_SPATIAL][N_MID][$];  // external-layer results
  logic signed [15:0] pair  [N_SPATIAL][N_MID];
  int                 mcnt  [N_SPATIAL][N_MID];
  int                 outcnt[N_SPATIAL];
  int                 in_cnt;
  int                 stall_pct;
  int                 cycle, t_last_in, t_last_out;
  int                 total_out;

  initial begin
    checks = 0; failures = 0; latency = -1; done = 0;
    n_dropped = 0; n_kept = 0; n_stall = 0; n_replay_rounds = 0;
    for (int e = 0; e < N_SPATIAL; e++) begin
      rng[e] = ref_seed(EXIT_ID, e);
      for (int j = 0; j < N_MCD; j++) srng[e][j] = ref_seed_stage(EXIT_ID, e, j);
      for (int j = 0; j < N_MID; j++) mcnt[e][j] = 0;
      outcnt[e] = 0;
    end
    foreach (tensors[t, i]) tensors[t][i] = 16'($urandom);
    in_cnt = 0; stall_pct = 35; cycle = 0; total_out = 0;
  end

  always @(posedge clk) cycle <= cycle + 1;

  // input driver
  always @(posedge clk) begin
    if (!rst_n) begin
      feat_valid <= 0;
      feat_data  <= '0;
    end else begin
      if (feat_valid && feat_ready) begin
        in_cnt = in_cnt + 1;
        if (in_cnt == N_TENSOR * LEN) t_last_in = cycle;
      end
      if (in_cnt < N_TENSOR * LEN &&
          (in_cnt >= (N_TENSOR - 1) * LEN || $urandom_range(0, 99) >= 25)) begin
        feat_valid <= 1;
        feat_data  <= tensors[in_cnt / LEN][in_cnt % LEN];
      end else begin
        feat_valid <= 0;
      end
    end
  end

  // output back-pressure, none for the last tensor
  for (genvar e = 0; e < N_SPATIAL; e++) begin : g_rdy
    always @(posedge clk) begin
      if (!rst_n) mc_ready[e] <= 0;
      else mc_ready[e] <= (outcnt[e] >= (N_TENSOR - 1) * LFIN * NR - 1) ||
                          ($urandom_range(0, 99) >= stall_pct);
    end
  end

  // external layers between MCD stages (pair sums), and per-stage checks
  for (genvar e = 0; e < N_SPATIAL; e++) begin : g_ext
    for (genvar j = 0; j < N_MID; j++) begin : g_j
      always @(posedge clk) begin
        if (!rst_n || N_MCD == 1) begin
          mid_out_ready[e][j] <= 0;
          mid_in_valid[e][j]  <= 0;
          mid_in_data[e][j]   <= '0;
        end else begin
          if (mid_out_valid[e][j] && mid_out_ready[e][j]) begin
            logic signed [15:0] want;
            int m;
            m = mcnt[e][j];
            want = ref_mcd(q_in[e][j].pop_front(), srng[e][j], KEEP);
            check(mid_out_data[e][j] == want,
                  $sformatf("eng %0d stage %0d out %0d: %0d want %0d", e, j, m,
                            mid_out_data[e][j], want));
            check(mid_out_last[e][j] == (m % stage_len(j) == stage_len(j) - 1),
                  "stage last flag");
            srng[e][j] = ref_lfsr_next(srng[e][j]);
            if (m % 2 == 0) pair[e][j] = mid_out_data[e][j];
            else q_ret[e][j].push_back(16'(pair[e][j] + mid_out_data[e][j]));
            mcnt[e][j] = m + 1;
          end
          if (mid_in_valid[e][j] && mid_in_ready[e][j]) begin
            q_in[e][j+1].push_back(mid_in_data[e][j]);
            void'(q_ret[e][j].pop_front());
          end
          mid_out_ready[e][j] <= ($urandom_range(0, 99) >= stall_pct / 2);
          // present the head of the result queue (taking the one just popped
          // into account) with random gaps
          if (q_ret[e][j].size() > 0 && $urandom_range(0, 99) >= 20) begin
            mid_in_valid[e][j] <= 1;
            mid_in_data[e][j]  <= q_ret[e][j][0];
          end else begin
            mid_in_valid[e][j] <= 0;
          end
        end
      end
    end
  end

  // final-stage scoreboard
  always @(posedge clk) begin
    if (rst_n) begin
      if (busy && feat_valid && !feat_ready) n_stall++;
      // stage-0 inputs enter in lock-step on every cache handshake
      for (int e = 0; e < N_SPATIAL; e++)
        if (dut.c_valid && dut.c_ready) q_in[e][0].push_back(dut.c_data);
      for (int e = 0; e < N_SPATIAL; e++) begin
        if (mc_valid[e] && mc_ready[e]) begin
          int k, t, r, i;
          logic signed [15:0] want;
          k = outcnt[e];
          t = k / (LFIN * NR);
          r = (k / LFIN) % NR;
          i = k % LFIN;
          if (N_MCD == 1) begin
            want = ref_mcd(tensors[t][i], rng[e], KEEP);
            check(mc_dropped[e] == ref_drop(rng[e], KEEP), "drop flag");
            rng[e] = ref_lfsr_next(rng[e]);
            void'(q_in[e][0].pop_front());
          end else begin
            check(mc_dropped[e] == ref_drop(srng[e][N_MCD-1], KEEP), "drop flag");
            want = ref_mcd(q_in[e][N_MCD-1].pop_front(), srng[e][N_MCD-1], KEEP);
            srng[e][N_MCD-1] = ref_lfsr_next(srng[e][N_MCD-1]);
          end
          check(mc_data[e] == want,
                $sformatf("eng %0d out %0d: %0d want %0d", e, k, mc_data[e], want));
          check(int'(mc_sample[e]) == r * N_SPATIAL + e,
                $sformatf("eng %0d sample %0d want %0d", e, mc_sample[e], r * N_SPATIAL + e));
          check(mc_last[e] == (i == LFIN - 1), "last flag");
          if (mc_dropped[e]) n_dropped++; else n_kept++;
          if (e == 0 && i == 0 && r > 0) n_replay_rounds++;
          outcnt[e] = k + 1;
          total_out++;
          if (total_out == N_TENSOR * LFIN * NR * N_SPATIAL) begin
            t_last_out = cycle;
            latency = t_last_out - t_last_in;
            done = 1;
          end
        end
      end
    end
  end
endmodule
