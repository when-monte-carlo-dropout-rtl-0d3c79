// me_bayes_checker: stimulus, exit-classifier model and scoreboard for the
// whole multi-exit MCD core (used by me_bayes_top_tb and me_bayes_top_full_tb).
//
// For each of N_IMG inputs it
//   * sets a keep rate (alternating between KEEP_A and KEEP_B, so the
//     run-time rate is switched between inputs),
//   * streams one random backbone tensor per exit, with random gaps,
//   * stands in for the exit classifiers: a behavioural model consumes every
//     engine's masked stream (with random back-pressure, except on the last
//     input) and returns N_CLASS scores, score[c] = sum of the elements whose
//     index is c mod N_CLASS, wrapped to 16 bits, one clock after `last`,
//   * with N_MCD > 1, also plays the layers between MCD layers as identity
//     layers (elements returned unchanged, with random gaps and stalls),
//   * checks every masked element against the reference dropout model (all
//     N_MCD layers, each with its own random sequence), its sample tag and
//     last flag,
//   * checks the ensemble mean against the mean of the reference scores,
//   * on the last (stall-free) input, with N_MCD = 1, checks that each exit
//     emits its samples N_ROUND * LEN + 1 clocks after its last input element.
// It counts how often each mechanism happened (drop, keep, output stall,
// temporal replay, keep-rate switch, ensemble result) and counts a failure
// for one that never did (replay only where N_SAMPLE > N_SPATIAL).
module me_bayes_checker
  import mcd_ref_pkg::*;
#(
  parameter int N_EXIT         = 2,
  parameter int N_SAMPLE       = 3,
  parameter int N_SPATIAL      = 3,
  parameter int LEN [N_EXIT]   = '{1176, 400},
  parameter int N_CLASS        = 10,
  parameter int N_IMG          = 2,
  parameter logic [15:0] KEEP_A = 16'hA000,
  parameter logic [15:0] KEEP_B = 16'h6000,
  parameter int N_MCD          = 1,
  localparam int SMP_W         = (N_SAMPLE > 1) ? $clog2(N_SAMPLE) : 1,
  localparam int N_MID         = (N_MCD > 1) ? N_MCD - 1 : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  output logic [15:0]        keep_rate,
  output logic               feat_valid [N_EXIT],
  input  logic               feat_ready [N_EXIT],
  output logic signed [15:0] feat_data  [N_EXIT],
  input  logic               mc_valid   [N_EXIT][N_SPATIAL],
  output logic               mc_ready   [N_EXIT][N_SPATIAL],
  input  logic signed [15:0] mc_data    [N_EXIT][N_SPATIAL],
  input  logic               mc_last    [N_EXIT][N_SPATIAL],
  input  logic [SMP_W-1:0]   mc_sample  [N_EXIT][N_SPATIAL],
  input  logic               mc_dropped [N_EXIT][N_SPATIAL],
  input  logic               mid_out_valid [N_EXIT][N_SPATIAL][N_MID],
  output logic               mid_out_ready [N_EXIT][N_SPATIAL][N_MID],
  input  logic signed [15:0] mid_out_data  [N_EXIT][N_SPATIAL][N_MID],
  input  logic               mid_out_last  [N_EXIT][N_SPATIAL][N_MID],
  output logic               mid_in_valid  [N_EXIT][N_SPATIAL][N_MID],
  input  logic               mid_in_ready  [N_EXIT][N_SPATIAL][N_MID],
  output logic signed [15:0] mid_in_data   [N_EXIT][N_SPATIAL][N_MID],
  output logic               pred_valid [N_EXIT][N_SPATIAL],
  output logic signed [15:0] pred_score [N_EXIT][N_SPATIAL][N_CLASS],
  input  logic               avg_valid,
  input  logic signed [15:0] avg_score  [N_CLASS],
  output logic               done,
  output int                 checks,
  output int                 failures
);
  localparam int NR      = N_SAMPLE / N_SPATIAL;
  localparam int N_TOTAL = N_EXIT * N_SAMPLE;
  localparam int MAXLEN  = 4096;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 8) $display("FAIL: %s", what);
    end
  endtask

  logic signed [15:0] tensor [N_EXIT][MAXLEN];
  logic [15:0]        rng    [N_EXIT][N_SPATIAL][N_MCD];
  int                 outcnt [N_EXIT][N_SPATIAL];
  longint             head_acc [N_EXIT][N_SPATIAL][N_CLASS];
  longint             ref_acc  [N_EXIT][N_SPATIAL][N_CLASS];
  longint             ref_sum  [N_CLASS];
  int                 in_cnt [N_EXIT];
  int                 t_in   [N_EXIT];
  int                 t_out  [N_EXIT];
  int                 exit_out [N_EXIT];
  int                 img, results, cycle;
  bit                 no_stall, feeding;
  int                 n_drop, n_keep, n_ostall, n_replay, n_switch;

  initial begin
    checks = 0; failures = 0; done = 0;
    n_drop = 0; n_keep = 0; n_ostall = 0; n_replay = 0; n_switch = 0;
    results = 0; cycle = 0; feeding = 0; no_stall = 0;
    for (int x = 0; x < N_EXIT; x++)
      for (int e = 0; e < N_SPATIAL; e++)
        for (int j = 0; j < N_MCD; j++) rng[x][e][j] = ref_seed_stage(x, e, j);
    assert (N_EXIT <= 8 && N_SPATIAL <= 8);
    for (int x = 0; x < N_EXIT; x++) assert (LEN[x] <= MAXLEN);
  end

  always @(posedge clk) cycle <= cycle + 1;

  // ---------------------------------------------------------------- inputs
  for (genvar x = 0; x < N_EXIT; x++) begin : g_feed
    always @(posedge clk) begin
      if (!rst_n) begin
        feat_valid[x] <= 0;
        feat_data[x]  <= '0;
      end else begin
        if (feat_valid[x] && feat_ready[x]) begin
          in_cnt[x] = in_cnt[x] + 1;
          t_in[x]   = cycle;
        end
        if (feeding && in_cnt[x] < LEN[x] && $urandom_range(0, 99) >= 20) begin
          feat_valid[x] <= 1;
          feat_data[x]  <= tensor[x][in_cnt[x]];
        end else begin
          feat_valid[x] <= 0;
        end
      end
    end
  end

  // ------------------------------------------- exit-classifier model + refs
  for (genvar x = 0; x < N_EXIT; x++) begin : g_x
    for (genvar e = 0; e < N_SPATIAL; e++) begin : g_e
      always @(posedge clk) begin
        if (!rst_n) begin
          mc_ready[x][e]   <= 0;
          pred_valid[x][e] <= 0;
          for (int c = 0; c < N_CLASS; c++) pred_score[x][e][c] <= '0;
        end else begin
          pred_valid[x][e] <= 0;
          if (mc_valid[x][e] && !mc_ready[x][e]) n_ostall++;
          if (mc_valid[x][e] && mc_ready[x][e]) begin
            int k, r, i;
            logic signed [15:0] want;
            k = outcnt[x][e];
            r = (k / LEN[x]) % NR;
            i = k % LEN[x];
            want = tensor[x][i];
            for (int j = 0; j < N_MCD; j++) begin
              if (j == N_MCD - 1)
                check(mc_dropped[x][e] == ref_drop(rng[x][e][j], keep_rate), "drop flag");
              want = ref_mcd(want, rng[x][e][j], keep_rate);
              rng[x][e][j] = ref_lfsr_next(rng[x][e][j]);
            end
            check(mc_data[x][e] == want,
                  $sformatf("img %0d exit %0d eng %0d elem %0d: %0d want %0d",
                            img, x, e, k, mc_data[x][e], want));
            check(int'(mc_sample[x][e]) == r * N_SPATIAL + e, "sample tag");
            check(mc_last[x][e] == (i == LEN[x] - 1), "last flag");
            if (mc_dropped[x][e]) n_drop++; else n_keep++;
            if (e == 0 && i == 0 && r > 0) n_replay++;
            outcnt[x][e] = k + 1;
            head_acc[x][e][i % N_CLASS] += longint'(mc_data[x][e]);
            ref_acc[x][e][i % N_CLASS]  += longint'(want);
            exit_out[x] = exit_out[x] + 1;
            if (exit_out[x] == LEN[x] * N_SAMPLE) t_out[x] = cycle;
            if (mc_last[x][e]) begin
              pred_valid[x][e] <= 1;
              for (int c = 0; c < N_CLASS; c++) begin
                pred_score[x][e][c] <= 16'(head_acc[x][e][c]);
                ref_sum[c] += longint'(16'(ref_acc[x][e][c]));
                head_acc[x][e][c] = 0;
                ref_acc[x][e][c]  = 0;
              end
            end
          end
          mc_ready[x][e] <= no_stall || ($urandom_range(0, 99) >= 30);
        end
      end
    end
  end

  // ------------------------------- identity layers between the MCD layers
  int n_loop;
  initial n_loop = 0;
  for (genvar x = 0; x < N_EXIT; x++) begin : g_mx
    for (genvar e = 0; e < N_SPATIAL; e++) begin : g_me
      for (genvar j = 0; j < N_MID; j++) begin : g_mj
        logic signed [15:0] q [$];
        always @(posedge clk) begin
          if (!rst_n || N_MCD == 1) begin
            mid_out_ready[x][e][j] <= 0;
            mid_in_valid[x][e][j]  <= 0;
            mid_in_data[x][e][j]   <= '0;
          end else begin
            if (mid_out_valid[x][e][j] && mid_out_ready[x][e][j]) begin
              q.push_back(mid_out_data[x][e][j]);
              n_loop++;
            end
            if (mid_in_valid[x][e][j] && mid_in_ready[x][e][j]) void'(q.pop_front());
            mid_out_ready[x][e][j] <= no_stall || ($urandom_range(0, 99) >= 20);
            if (q.size() > 0 && (no_stall || $urandom_range(0, 99) >= 20)) begin
              mid_in_valid[x][e][j] <= 1;
              mid_in_data[x][e][j]  <= q[0];
            end else begin
              mid_in_valid[x][e][j] <= 0;
            end
          end
        end
      end
    end
  end

  // ---------------------------------------------------------- ensemble mean
  always @(posedge clk) begin
    if (rst_n && avg_valid) begin
      results++;
      for (int c = 0; c < N_CLASS; c++) begin
        int want;
        want = int'(ref_sum[c] / N_TOTAL);
        check(avg_score[c] == 16'(want),
              $sformatf("img %0d class %0d mean %0d want %0d", img, c, avg_score[c], want));
      end
    end
  end

  // --------------------------------------------------------------- sequence
  initial begin
    keep_rate = KEEP_A;
    wait (rst_n);
    for (img = 0; img < N_IMG; img++) begin
      @(negedge clk);
      if (img > 0 && ((img % 2) ? KEEP_B : KEEP_A) != keep_rate) n_switch++;
      keep_rate = (img % 2) ? KEEP_B : KEEP_A;
      no_stall  = (img == N_IMG - 1);
      for (int x = 0; x < N_EXIT; x++) begin
        for (int i = 0; i < LEN[x]; i++) tensor[x][i] = 16'($urandom);
        in_cnt[x] = 0; exit_out[x] = 0;
        for (int e = 0; e < N_SPATIAL; e++) outcnt[x][e] = 0;
      end
      for (int c = 0; c < N_CLASS; c++) ref_sum[c] = 0;
      foreach (head_acc[x, e, c]) begin
        head_acc[x][e][c] = 0;
        ref_acc[x][e][c]  = 0;
      end
      feeding = 1;
      wait (results == img + 1);
      feeding = 0;
      @(negedge clk);
      for (int x = 0; x < N_EXIT; x++)
        check(outcnt[x][0] == LEN[x] * NR, $sformatf("exit %0d output count", x));
    end
    for (int x = 0; x < N_EXIT && N_MCD == 1; x++)
      check(t_out[x] - t_in[x] == NR * LEN[x] + 1,
            $sformatf("exit %0d stall-free latency %0d want %0d", x,
                      t_out[x] - t_in[x], NR * LEN[x] + 1));
    $display("mechanisms: dropped=%0d kept=%0d output_stalls=%0d replays=%0d keep_switches=%0d loop_outs=%0d results=%0d",
             n_drop, n_keep, n_ostall, n_replay, n_switch, n_loop, results);
    check(n_drop > 0, "no element was dropped");
    check(n_keep > 0, "no element was kept");
    check(n_ostall > 0, "no output stall happened");
    check(N_IMG < 2 || n_switch > 0, "keep rate never switched");
    check(NR == 1 || n_replay > 0, "no temporal replay happened");
    check(N_MCD == 1 || n_loop > 0, "nothing looped through the layers between MCD layers");
    check(results == N_IMG, "ensemble result count");
    done = 1;
  end
endmodule
