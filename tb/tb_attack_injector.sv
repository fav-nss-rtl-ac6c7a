// tb_attack_injector -- self-checking test of the attack-injection node.
//
// The injector, a benign transmitter (identifier 0x100) and a receiver share
// a wired-AND bus.  Every received frame is compared with what the mode in
// force should produce: identifier 0x000 with zero payload for DoS, the
// xorshift sequence (recomputed here) for fuzzing, the user frame for spoofing.
// Checks also the frame period in clock cycles (frame bits + 3-bit
// intermission, or + gap), that the benign node loses arbitration and is
// starved during DoS, and that it gets through once the attack stops.
// Bit time shortened to 20 cycles.
module tb_attack_injector;
  import fav_pkg::*;
  import can_tb_pkg::*;

  localparam int BT = 20;
  localparam int SP = 15;
  localparam logic [31:0] SEED = 32'h1234_5678;

  logic clk = 0, rst_n = 0;
  attack_mode_t mode = ATK_OFF;
  can_frame_t user_frame, benign, rx_frame;
  logic [15:0] gap_bits = 0;
  logic tx_inj, tx_ben, ack_tx, bus, active;
  logic [31:0] n_sent, n_lost, n_err;
  logic ben_req = 0, ben_busy, ben_done, ben_arb, ben_berr, ben_aerr;
  logic sof, fv, crc_err, stuff_err;
  int checks = 0, failures = 0;
  int n_ben_arb = 0, n_ben_done = 0;

  always #5 clk = ~clk;
  assign bus = tx_inj & tx_ben & ack_tx;

  attack_injector #(.BIT_CLKS(BT), .SAMPLE_CLK(SP), .SEED(SEED)) dut (
    .clk, .rst_n, .mode, .user_frame, .gap_bits, .bus_rx(bus), .tx(tx_inj),
    .active, .n_sent, .n_lost, .n_err);
  can_tx #(.BIT_CLKS(BT), .SAMPLE_CLK(SP)) u_ben (
    .clk, .rst_n, .req(ben_req), .frame(benign), .bus_rx(bus), .tx(tx_ben),
    .busy(ben_busy), .done(ben_done), .arb_lost(ben_arb), .bit_err(ben_berr), .ack_err(ben_aerr));
  can_rx #(.BIT_CLKS(BT), .SAMPLE_CLK(SP)) u_rx (
    .clk, .rst_n, .bus_rx(bus), .ack_tx, .sof, .frame_valid(fv), .frame(rx_frame),
    .crc_err, .stuff_err);

  always @(posedge clk) if (rst_n) begin
    if (ben_arb) n_ben_arb++;
    if (ben_done) begin n_ben_done++; ben_req <= 0; end
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] xs(logic [31:0] x);
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  // Next received frame and the cycle it arrived.
  task automatic next_frame(output can_frame_t f, output longint t);
    do @(posedge clk); while (!fv);
    f = rx_frame;
    t = $time / 10;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    can_frame_t f, e;
    longint t, tp;
    logic [31:0] x;
    int period;
    benign = '{id: 11'h100, rtr: 1'b0, dlc: 4'd2, data: 64'hBEEF_0000_0000_0000};
    user_frame = '{id: 11'h316, rtr: 1'b0, dlc: 4'd8, data: 64'h0520_FF10_0000_0043};
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (15 * BT) @(posedge clk);

    // DoS, back to back, benign node pending all the time.
    mode = ATK_DOS;
    ben_req = 1;
    e = '{id: 11'h000, rtr: 1'b0, dlc: 4'd8, data: 64'h0};
    period = (bus_bits(e).size() + 3) * BT;
    next_frame(f, tp);
    check(f == e, "DoS frame content");
    for (int i = 0; i < 6; i++) begin
      next_frame(f, t);
      check(f == e, $sformatf("DoS frame %0d content", i));
      check(int'(t - tp) == period, $sformatf("DoS period %0d exp %0d", t - tp, period));
      tp = t;
    end
    check(n_ben_done == 0, "benign node got through a DoS flood");
    check(n_ben_arb >= 5, $sformatf("benign arbitration losses %0d", n_ben_arb));

    // Stop: the benign frame must now get through.
    mode = ATK_OFF;
    do next_frame(f, t); while (f.id == 11'h000);
    check(f == expected_rx(benign), "benign frame after DoS");
    wait (ben_req == 0);

    // Fuzzing, with a 20-bit gap.
    repeat (20 * BT) @(posedge clk);
    gap_bits = 16'd20;
    x = SEED;
    mode = ATK_FUZZ;
    for (int i = 0; i < 6; i++) begin
      logic [31:0] a, b, c;
      a = xs(x); b = xs(a); c = xs(b); x = c;
      e = '{id: a[10:0], rtr: 1'b0, dlc: 4'd8, data: {b, c}};
      next_frame(f, t);
      check(f == e, $sformatf("fuzz frame %0d got %h exp %h", i, f, e));
      if (i > 0) check(int'(t - tp) == (bus_bits(e).size() + 20) * BT, $sformatf("fuzz period %0d", t - tp));
      tp = t;
    end
    mode = ATK_OFF;
    repeat (200 * BT) @(posedge clk);

    // Spoofing.
    gap_bits = 16'd0;
    mode = ATK_SPOOF;
    for (int i = 0; i < 3; i++) begin
      next_frame(f, t);
      check(f == user_frame, "spoof frame content");
    end
    mode = ATK_OFF;
    repeat (200 * BT) @(posedge clk);
    check(!active, "injector still active after OFF");
    check(n_err == 0, "injector errors");
    check(n_sent >= 16, $sformatf("n_sent %0d", n_sent));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
