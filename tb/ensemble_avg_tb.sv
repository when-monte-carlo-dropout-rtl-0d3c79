// ensemble_avg_tb: checks the equally weighted ensemble mean.
// Sends 60 groups of N_TOTAL random score vectors, spread over clocks in
// random bunches (0..N_IN vectors per clock, with idle clocks between), and
// compares each result with the mean computed here (truncated toward zero).
// Also checks that the result appears exactly one clock after the last
// vector of a group and that avg_valid is a one-clock pulse.
module ensemble_avg_tb;
  localparam int N_IN = 4, N_TOTAL = 6, NC = 5;

  logic               clk = 0, rst_n = 0;
  logic               pred_valid [N_IN];
  logic signed [15:0] pred_score [N_IN][NC];
  logic               avg_valid;
  logic signed [15:0] avg_score  [NC];
  int                 checks = 0, failures = 0;

  ensemble_avg #(.N_IN(N_IN), .N_TOTAL(N_TOTAL), .N_CLASS(NC), .SCORE_W(16)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sum [NC];
    int     want, left, now;
    for (int i = 0; i < N_IN; i++) pred_valid[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int g = 0; g < 60; g++) begin
      foreach (sum[c]) sum[c] = 0;
      left = N_TOTAL;
      while (left > 0) begin
        now = $urandom_range(0, (left < N_IN) ? left : N_IN);
        for (int i = 0; i < N_IN; i++) begin
          pred_valid[i] = (i < now);
          for (int c = 0; c < NC; c++) begin
            // scores near the extremes in some groups, to exercise the width
            pred_score[i][c] = (g % 5 == 0) ? ((c % 2) ? 16'sh7FFF : -16'sh8000)
                                            : 16'($urandom);
            if (i < now) sum[c] += pred_score[i][c];
          end
        end
        left -= now;
        @(posedge clk);
        #1;
        check(!avg_valid || left == 0, "early result");
      end
      for (int i = 0; i < N_IN; i++) pred_valid[i] = 0;
      check(avg_valid, $sformatf("group %0d: result one clock after last vector", g));
      for (int c = 0; c < NC; c++) begin
        want = int'(sum[c] / N_TOTAL);
        check(avg_score[c] == 16'(want),
              $sformatf("group %0d class %0d: %0d want %0d", g, c, avg_score[c], want));
      end
      repeat ($urandom_range(1, 3)) begin
        @(posedge clk); #1;
        check(!avg_valid, "avg_valid is a single pulse");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
