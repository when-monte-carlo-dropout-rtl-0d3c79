// tensor_cache_tb: checks the cached-tensor replay buffer.
// Loads random tensors under random input gaps, then checks that every round
// replays the stored tensor in order with the right round index and `last`
// flag, under random back-pressure; that input is refused during replay;
// and that without stalls load + replay take TENSOR_LEN + N_ROUND*TENSOR_LEN
// clocks. Three tensors are pushed back to back.
module tensor_cache_tb;
  localparam int LEN = 37, NR = 3;

  logic               clk = 0, rst_n = 0;
  logic               in_valid, in_ready, out_valid, out_ready, out_last, busy;
  logic signed [15:0] in_data, out_data;
  logic [1:0]         out_round;
  int                 checks = 0, failures = 0;

  tensor_cache #(.DATA_W(16), .TENSOR_LEN(LEN), .N_ROUND(NR)) dut (.*);

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

  logic signed [15:0] tensor [LEN];

  task automatic one_tensor(input int in_gap, input int stall, output int cycles);
    int idx, r;
    cycles = 0;
    foreach (tensor[i]) tensor[i] = 16'($urandom);
    idx = 0;
    // load
    while (idx < LEN) begin
      in_valid  = ($urandom_range(0, 99) >= in_gap);
      in_data   = tensor[idx];
      out_ready = 1;
      @(posedge clk);
      cycles++;
      if (in_valid) begin
        check(in_ready, "in_ready during load");
        check(!out_valid, "no output during load");
        idx++;
      end
      #1;
    end
    in_valid = 1; in_data = 16'h7777;   // must be ignored during replay
    // replay
    for (r = 0; r < NR; r++) begin
      idx = 0;
      while (idx < LEN) begin
        out_ready = ($urandom_range(0, 99) >= stall);
        #1;
        check(!in_ready, "in_ready low during replay");
        @(posedge clk);
        cycles++;
        if (out_ready) begin
          check(out_valid, "out_valid during replay");
          check(out_data == tensor[idx], $sformatf("round %0d elem %0d: %0d want %0d",
                                                   r, idx, out_data, tensor[idx]));
          check(out_round == 2'(r), "round index");
          check(out_last == (idx == LEN - 1), "last flag");
          idx++;
        end
        #1;
      end
    end
    in_valid = 0;
  endtask

  initial begin
    int cyc;
    in_valid = 0; in_data = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    check(!busy, "idle after reset");
    one_tensor(30, 40, cyc);
    one_tensor(0, 0, cyc);
    check(cyc == LEN + NR * LEN, $sformatf("no-stall occupancy %0d clocks, want %0d",
                                          cyc, LEN + NR * LEN));
    one_tensor(10, 70, cyc);
    #1 check(!busy, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
