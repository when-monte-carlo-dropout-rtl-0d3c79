// mcd_rng_tb: checks the MCD random number generator.
// Compares 2000 steps with the reference LFSR, checks that the state holds
// while `advance` is low and that reset reloads the seed, then runs a full
// period and checks it is exactly 65535 steps with no zero state and a
// uniform top bit (half the states have bit 15 set, to within one).
module mcd_rng_tb;
  import mcd_ref_pkg::*;

  logic        clk = 0, rst_n = 0, advance = 0;
  logic [15:0] rand_o;
  int          checks = 0, failures = 0;
  localparam logic [15:0] SEED = 16'h1234;

  mcd_rng #(.SEED(SEED)) dut (.clk, .rst_n, .advance, .rand_o);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] model;
    int          period, ones;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(rand_o == SEED, "seed after reset");
    model = SEED;
    for (int i = 0; i < 2000; i++) begin
      advance = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (advance) model = ref_lfsr_next(model);
      @(negedge clk);
      check(rand_o == model, $sformatf("step %0d: got %h want %h", i, rand_o, model));
    end
    // reset reloads the seed
    rst_n = 0; advance = 1;
    @(posedge clk); @(negedge clk);
    check(rand_o == SEED, "reseed");
    rst_n = 1;
    // full period
    period = 0; ones = 0;
    do begin
      @(posedge clk); @(negedge clk);
      period++;
      if (rand_o == 16'h0000) check(0, "zero state");
      if (rand_o[15]) ones++;
    end while (rand_o != SEED && period < 70000);
    check(period == 65535, $sformatf("period %0d", period));
    check(ones == 32768, $sformatf("bit15 ones %0d", ones));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
