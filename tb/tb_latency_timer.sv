// tb_latency_timer -- self-checking test of the detection-latency timer.
//
// Generates sof / win_new / result pulses with random spacing, computes the
// expected cycle counts here, and checks last_lat, max_lat and n_meas,
// including a result without a pending window (ignored) and a window that is
// replaced before its result (the newer start time is used).
module tb_latency_timer;
  logic clk = 0, rst_n = 0;
  logic sof = 0, win_new = 0, result = 0;
  logic [31:0] last_lat, max_lat, n_meas;
  int checks = 0, failures = 0;
  longint cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  latency_timer dut (.clk, .rst_n, .sof, .win_new, .result, .last_lat, .max_lat, .n_meas);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic pulse(ref logic s);
    s = 1;
    @(posedge clk);
    #1 s = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    int d1, d2, expmax, n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    pulse(result);                      // nothing pending: ignored
    @(posedge clk); #1;
    check(n_meas == 0, "result without window counted");
    expmax = 0;
    n = 0;
    for (int t = 0; t < 40; t++) begin
      t0 = cyc;
      pulse(sof);
      d1 = $urandom_range(1, 300);
      repeat (d1) @(posedge clk);
      #1 pulse(win_new);
      d2 = $urandom_range(1, 50);
      repeat (d2) @(posedge clk);
      #1;
      // latency = cycles from the sof edge to the result edge
      begin
        int expv;
        expv = int'(cyc - t0);
        pulse(result);
        @(posedge clk); #1;
        n++;
        if (expv > expmax) expmax = expv;
        check(last_lat == expv, $sformatf("last_lat %0d exp %0d", last_lat, expv));
        check(max_lat == expmax, $sformatf("max_lat %0d exp %0d", max_lat, expmax));
        check(n_meas == n, "n_meas");
      end
    end
    // Replaced window: the later sof wins.
    pulse(sof);
    repeat (10) @(posedge clk); #1;
    pulse(win_new);
    t0 = cyc;
    pulse(sof);
    repeat (20) @(posedge clk); #1;
    pulse(win_new);
    begin
      int expv;
      expv = int'(cyc - t0);
      pulse(result);
      @(posedge clk); #1;
      check(last_lat == expv, $sformatf("replaced window: %0d exp %0d", last_lat, expv));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
