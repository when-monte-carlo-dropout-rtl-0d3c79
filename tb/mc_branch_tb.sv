// mc_branch_tb: checks the spatial / temporal mapping of one exit.
// Three branches producing MC samples of the same tensors:
//   spatial  : 3 samples on 3 engines (one replay),
//   temporal : 3 samples on 1 engine (three replays),
//   mixed    : 4 samples on 2 engines (two replays),
//   deep     : 2 samples on 2 engines with three MCD layers in a chain, the
//              harness playing the layers between them.
// Each harness scoreboards data, drop flags, sample tags and last flags.
// The no-stall latency after the last input must be N_ROUND * LEN + 1 clocks,
// so spatial mapping stays at LEN + 1 whatever the sample count, while the
// temporal one grows with it.
module mc_branch_tb;
  localparam int LEN = 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic done_s, done_t, done_m;
  int   ck_s, ck_t, ck_m, fl_s, fl_t, fl_m, lat_s, lat_t, lat_m;
  int   dr_s, dr_t, dr_m, kp_s, kp_t, kp_m, st_s, st_t, st_m, rr_s, rr_t, rr_m;
  int   checks, failures;
  logic done_d;
  int   ck_d, fl_d, lat_d, dr_d, kp_d, st_d, rr_d;

  mc_branch_harness #(.N_SAMPLE(3), .N_SPATIAL(3), .LEN(LEN), .EXIT_ID(0)) h_spatial (
    .clk, .rst_n, .done(done_s), .checks(ck_s), .failures(fl_s), .latency(lat_s),
    .n_dropped(dr_s), .n_kept(kp_s), .n_stall(st_s), .n_replay_rounds(rr_s));
  mc_branch_harness #(.N_SAMPLE(3), .N_SPATIAL(1), .LEN(LEN), .EXIT_ID(1)) h_temporal (
    .clk, .rst_n, .done(done_t), .checks(ck_t), .failures(fl_t), .latency(lat_t),
    .n_dropped(dr_t), .n_kept(kp_t), .n_stall(st_t), .n_replay_rounds(rr_t));
  mc_branch_harness #(.N_SAMPLE(4), .N_SPATIAL(2), .LEN(LEN), .EXIT_ID(2)) h_mixed (
    .clk, .rst_n, .done(done_m), .checks(ck_m), .failures(fl_m), .latency(lat_m),
    .n_dropped(dr_m), .n_kept(kp_m), .n_stall(st_m), .n_replay_rounds(rr_m));

  mc_branch_harness #(.N_SAMPLE(2), .N_SPATIAL(2), .LEN(LEN), .EXIT_ID(3), .N_MCD(3)) h_deep (
    .clk, .rst_n, .done(done_d), .checks(ck_d), .failures(fl_d), .latency(lat_d),
    .n_dropped(dr_d), .n_kept(kp_d), .n_stall(st_d), .n_replay_rounds(rr_d));

  task automatic summary(input int extra_checks, input int extra_fail);
    checks   = ck_s + ck_t + ck_m + ck_d + extra_checks;
    failures = fl_s + fl_t + fl_m + fl_d + extra_fail;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    summary(0, 1);
    $finish;
  end

  initial begin
    int xc, xf;
    xc = 0; xf = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done_s && done_t && done_m && done_d);
    repeat (2) @(posedge clk);
    $display("latency spatial=%0d temporal=%0d mixed=%0d", lat_s, lat_t, lat_m);
    xc++; if (lat_s != LEN + 1)     begin xf++; $display("FAIL: spatial latency %0d", lat_s); end
    xc++; if (lat_t != 3 * LEN + 1) begin xf++; $display("FAIL: temporal latency %0d", lat_t); end
    xc++; if (lat_m != 2 * LEN + 1) begin xf++; $display("FAIL: mixed latency %0d", lat_m); end
    // each mechanism must have happened
    xc++; if (dr_s + dr_t + dr_m == 0) begin xf++; $display("FAIL: no element dropped"); end
    xc++; if (kp_s + kp_t + kp_m == 0) begin xf++; $display("FAIL: no element kept"); end
    xc++; if (st_s + st_t + st_m == 0) begin xf++; $display("FAIL: no input stall"); end
    xc++; if (rr_t == 0 || rr_m == 0)  begin xf++; $display("FAIL: no temporal replay"); end
    xc++; if (dr_d == 0 || kp_d == 0) begin xf++; $display("FAIL: deep chain idle"); end
    xc++; if (rr_s != 0)               begin xf++; $display("FAIL: spatial branch replayed"); end
    $display("dropped=%0d kept=%0d stalls=%0d replays t=%0d m=%0d",
             dr_s + dr_t + dr_m, kp_s + kp_t + kp_m, st_s + st_t + st_m, rr_t, rr_m);
    summary(xc, xf);
    $finish;
  end
endmodule
