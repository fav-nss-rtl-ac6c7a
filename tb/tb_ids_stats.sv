// tb_ids_stats -- self-checking test of the IDS statistics counters.
//
// Drives random event pulses (verdicts of random class, receiver errors,
// overruns, several at once) for a few thousand cycles while counting the
// same events here, and compares every counter each cycle, one cycle after
// the event.  A clear in the middle of the run, coinciding with events, must
// zero every counter.
module tb_ids_stats;
  localparam int N = 4;

  logic clk = 0, rst_n = 0;
  logic clear = 0, result = 0, crc_err = 0, stuff_err = 0, overrun = 0;
  logic [1:0] cls = '0;
  logic [31:0] n_class [N];
  logic [31:0] n_crc_err, n_stuff_err, n_overrun;
  int checks = 0, failures = 0;
  int e_cls [N] = '{0, 0, 0, 0};
  int e_crc = 0, e_stuff = 0, e_ovr = 0;

  always #5 clk = ~clk;

  ids_stats #(.N_CLASS(N)) dut (
    .clk, .rst_n, .clear, .result, .cls, .crc_err, .stuff_err, .overrun,
    .n_class, .n_crc_err, .n_stuff_err, .n_overrun);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic compare(string when);
    bit ok;
    ok = (n_crc_err == 32'(e_crc)) && (n_stuff_err == 32'(e_stuff)) && (n_overrun == 32'(e_ovr));
    for (int i = 0; i < N; i++) ok &= (n_class[i] == 32'(e_cls[i]));
    check(ok, $sformatf("%s: class %0d/%0d/%0d/%0d crc %0d stuff %0d ovr %0d", when,
                        n_class[0], n_class[1], n_class[2], n_class[3], n_crc_err, n_stuff_err, n_overrun));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    compare("after reset");
    for (int t = 0; t < 4000; t++) begin
      result    = ($urandom_range(0, 2) == 0);
      cls       = 2'($urandom);
      crc_err   = ($urandom_range(0, 6) == 0);
      stuff_err = ($urandom_range(0, 6) == 0);
      overrun   = ($urandom_range(0, 4) == 0);
      clear     = (t == 2000);
      @(posedge clk);
      if (clear) begin
        e_cls = '{0, 0, 0, 0};
        e_crc = 0; e_stuff = 0; e_ovr = 0;
      end else begin
        if (result) e_cls[cls]++;
        if (crc_err) e_crc++;
        if (stuff_err) e_stuff++;
        if (overrun) e_ovr++;
      end
      #1 compare($sformatf("cycle %0d", t));
    end
    check(e_cls[0] > 100 && e_cls[3] > 100 && e_ovr > 100, "too few events driven");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
