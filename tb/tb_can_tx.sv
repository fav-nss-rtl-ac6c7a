// tb_can_tx -- self-checking test of the CAN transmitter.
//
// Two transmitters share a wired-AND bus with an acknowledging tester.  The
// tester records every bit from the start of frame at mid-bit and compares
// the sequence with the reference bit stream of can_tb_pkg (stuffing, CRC,
// tail).  Checks: single frames of every length are sent bit-exactly and take
// exactly their bit count in time; with two simultaneous requests the lower
// identifier wins, the other reports arb_lost once and follows after the
// 11-bit idle gap; a missing ACK gives ack_err.  Bit time shortened to 20.
module tb_can_tx;
  import fav_pkg::*;
  import can_tb_pkg::*;

  localparam int BT = 20;
  localparam int SP = 15;

  logic clk = 0, rst_n = 0;
  logic req_a = 0, req_b = 0, ack_drv = 1, ack_en = 1;
  can_frame_t fa, fb;
  logic tx_a, tx_b, busy_a, busy_b, done_a, done_b, arb_a, arb_b, berr_a, berr_b, aerr_a, aerr_b;
  logic bus;
  int checks = 0, failures = 0;
  int n_arb_a = 0, n_arb_b = 0, n_aerr = 0, n_berr = 0;

  always #5 clk = ~clk;
  assign bus = tx_a & tx_b & ack_drv;

  can_tx #(.BIT_CLKS(BT), .SAMPLE_CLK(SP)) dut_a (
    .clk, .rst_n, .req(req_a), .frame(fa), .bus_rx(bus), .tx(tx_a), .busy(busy_a),
    .done(done_a), .arb_lost(arb_a), .bit_err(berr_a), .ack_err(aerr_a));
  can_tx #(.BIT_CLKS(BT), .SAMPLE_CLK(SP)) dut_b (
    .clk, .rst_n, .req(req_b), .frame(fb), .bus_rx(bus), .tx(tx_b), .busy(busy_b),
    .done(done_b), .arb_lost(arb_b), .bit_err(berr_b), .ack_err(aerr_b));

  always @(posedge clk) if (rst_n) begin
    if (arb_a) n_arb_a++;
    if (arb_b) n_arb_b++;
    if (aerr_a || aerr_b) n_aerr++;
    if (berr_a || berr_b) n_berr++;
    if (done_a) req_a <= 0;
    if (done_b) req_b <= 0;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Waits for a start of frame, records the frame of 'exp' and acks it.
  task automatic capture(can_frame_t exp, output bit ok, output int cycles);
    bitq_t e;
    int n;
    e = bus_bits(exp);
    n = e.size();
    ok = 1;
    @(negedge bus);
    cycles = 0;
    for (int i = 0; i < n; i++) begin
      if (i == n - 9 && ack_en) ack_drv = 0;
      repeat (BT / 2) begin @(posedge clk); cycles++; end
      if (bus !== e[i] && !(i == n - 9 && ack_en)) begin
        ok = 0;
        $display("  bit %0d: bus %b exp %b", i, bus, e[i]);
      end
      repeat (BT - BT / 2) begin @(posedge clk); cycles++; end
      ack_drv = 1;
    end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ok;
    int cyc, t0;
    can_frame_t f2;
    repeat (5) @(posedge clk);
    rst_n = 1;
    // Single frames.
    for (int t = 0; t < 20; t++) begin
      fa = rand_frame();
      if (t == 0) begin fa.id = 11'h000; fa.rtr = 0; fa.dlc = 4'd8; fa.data = '0; end
      if (t == 1) begin fa.id = 11'h7FF; fa.rtr = 0; fa.dlc = 4'd8; fa.data = '1; end
      req_a = 1;
      capture(fa, ok, cyc);
      check(ok, $sformatf("frame %0d (id %h dlc %0d) bit stream", t, fa.id, fa.dlc));
      check(cyc == bus_bits(fa).size() * BT, $sformatf("frame %0d length %0d cycles", t, cyc));
      wait (req_a == 0);
    end
    check(n_aerr == 0, "ack_err with ACK present");

    // Arbitration: b has the lower identifier and must win.
    repeat (20 * BT) @(posedge clk);
    fa = rand_frame(); fa.id = 11'h123;
    fb = rand_frame(); fb.id = 11'h122;
    @(posedge clk);
    req_a = 1; req_b = 1;
    capture(fb, ok, cyc);
    check(ok, "arbitration winner bit stream");
    t0 = $time;
    capture(fa, ok, cyc);
    check(ok, "arbitration loser sent afterwards");
    check(n_arb_a == 1 && n_arb_b == 0, $sformatf("arb_lost counts a=%0d b=%0d", n_arb_a, n_arb_b));
    check(n_berr == 0, "bit error during arbitration");
    wait (req_a == 0 && req_b == 0);

    // Missing ACK.
    ack_en = 0;
    fa = rand_frame();
    req_a = 1;
    capture(fa, ok, cyc);
    repeat (4 * BT) @(posedge clk);
    check(n_aerr == 1, "missing ACK not reported");
    ack_en = 1;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
