// mcd_layer_tb: checks the streaming Monte-Carlo Dropout layer.
// A scoreboard predicts every output element from the reference LFSR and the
// dropout rule (0 when random > keep, else floor(x * keep / 65536)) and
// compares data, drop flag, last and tag, under random valid and ready.
// Also checked: keep = 0xFFFF never drops; keep = 0 always drops; keep = 0.5
// keeps about half; the layer moves one element per clock with one clock of
// latency when neither side stalls.
module mcd_layer_tb;
  import mcd_ref_pkg::*;

  localparam logic [15:0] SEED = 16'hBEEF;

  logic               clk = 0, rst_n = 0;
  logic [15:0]        keep_rate;
  logic               in_valid, in_ready, in_last, out_valid, out_ready, out_last, out_dropped;
  logic signed [15:0] in_data, out_data;
  logic [3:0]         in_tag, out_tag;
  int                 checks = 0, failures = 0;

  mcd_layer #(.DATA_W(16), .TAG_W(4), .SEED(SEED)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scoreboard
  typedef struct packed {
    logic signed [15:0] data;
    logic               dropped;
    logic               last;
    logic [3:0]         tag;
  } exp_t;
  exp_t        expq[$];
  logic [15:0] model_rng;
  int          n_out, n_drop;
  int          in_prob = 100, out_prob = 100;

  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) begin
      exp_t e;
      e.dropped = ref_drop(model_rng, keep_rate);
      e.data    = ref_mcd(in_data, model_rng, keep_rate);
      e.last    = in_last;
      e.tag     = in_tag;
      expq.push_back(e);
      model_rng = ref_lfsr_next(model_rng);
    end
    if (rst_n && out_valid && out_ready) begin
      exp_t e;
      if (expq.size() == 0) check(0, "output with nothing expected");
      else begin
        e = expq.pop_front();
        check(out_data == e.data && out_dropped == e.dropped && out_last == e.last
              && out_tag == e.tag,
              $sformatf("out %0d/%0b/%0b/%0d want %0d/%0b/%0b/%0d",
                        out_data, out_dropped, out_last, out_tag,
                        e.data, e.dropped, e.last, e.tag));
      end
      n_out++;
      if (out_dropped) n_drop++;
    end
  end

  // drivers
  always @(posedge clk) begin
    if (!rst_n) begin
      in_valid <= 0; in_data <= '0; in_last <= 0; in_tag <= '0;
      out_ready <= 0;
    end else begin
      out_ready <= ($urandom_range(1, 100) <= out_prob);
      if (!in_valid || in_ready) begin
        in_valid <= ($urandom_range(1, 100) <= in_prob);
        in_data  <= 16'($urandom);
        in_last  <= ($urandom_range(0, 7) == 0);
        in_tag   <= 4'($urandom);
      end
    end
  end

  task automatic run(input logic [15:0] k, input int n, input int ip, input int op);
    keep_rate = k; in_prob = ip; out_prob = op;
    n_out = 0; n_drop = 0;
    wait (n_out >= n);
    in_prob = 0; out_prob = 100;
    repeat (5) @(posedge clk);
  endtask

  initial begin
    int t0, t1;
    keep_rate = 16'h8000;
    model_rng = SEED;
    repeat (3) @(posedge clk);
    rst_n = 1;

    run(16'h8000, 4000, 70, 70);
    check(expq.size() == 0, "queue drained");
    check(n_drop > 1800 && n_drop < 2200, $sformatf("keep 0.5 dropped %0d of 4000", n_drop));

    run(16'hFFFF, 500, 80, 60);
    check(n_drop == 0, $sformatf("keep 1.0 dropped %0d", n_drop));

    run(16'h0000, 500, 60, 80);
    check(n_drop == n_out, $sformatf("keep 0 dropped %0d of %0d", n_drop, n_out));

    run(16'hE000, 2000, 100, 100);
    check(n_drop > 150 && n_drop < 350, $sformatf("keep 0.875 dropped %0d of 2000", n_drop));

    // throughput / latency: 200 elements, no stalls -> 200 outputs in 200 clocks
    keep_rate = 16'hC000; out_prob = 100; in_prob = 100;
    @(posedge clk); n_out = 0;
    t0 = 0;
    while (n_out == 0) begin @(posedge clk); t0++; end
    t1 = 0;
    while (n_out < 200) begin @(posedge clk); t1++; end
    check(t0 <= 2, $sformatf("first output after %0d clocks", t0));
    check(t1 == 199, $sformatf("200 outputs took %0d clocks after the first", t1 + 1));
    in_prob = 0;
    repeat (5) @(posedge clk);
    check(expq.size() == 0, "queue drained at end");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
