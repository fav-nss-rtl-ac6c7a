// tb_can_rx -- self-checking test of the CAN receiver.
//
// Random standard frames (all DLC values, some remote frames) are driven on
// the bus bit by bit from the reference model in can_tb_pkg, with the
// receiver's ACK line ANDed in as on the real bus.  Checks: every frame is
// delivered once with the right id/rtr/dlc/payload, the receiver drives the
// ACK slot dominant, SOF is flagged once per frame, a frame with one CRC bit
// flipped gives crc_err and no ACK, and six equal bits give stuff_err.
// The bit time is shortened to 20 cycles to keep the run short.
module tb_can_rx;
  import fav_pkg::*;
  import can_tb_pkg::*;

  localparam int BT = 20;
  localparam int SP = 15;

  logic clk = 0, rst_n = 0;
  logic drv = 1'b1;
  logic bus, ack_tx, sof, fv, crc_err, stuff_err;
  can_frame_t fr;
  int checks = 0, failures = 0;
  int n_sof = 0, n_fv = 0, n_crc = 0, n_stuff = 0;
  can_frame_t got_q[$];

  always #5 clk = ~clk;
  assign bus = drv & ack_tx;

  can_rx #(.BIT_CLKS(BT), .SAMPLE_CLK(SP)) dut (
    .clk, .rst_n, .bus_rx(bus), .ack_tx, .sof, .frame_valid(fv), .frame(fr),
    .crc_err, .stuff_err);

  always @(posedge clk) if (rst_n) begin
    if (sof) n_sof++;
    if (fv) begin n_fv++; got_q.push_back(fr); end
    if (crc_err) n_crc++;
    if (stuff_err) n_stuff++;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic idle(int nbits);
    drv = 1'b1;
    repeat (nbits * BT) @(posedge clk);
  endtask

  // Drives a bit sequence; returns the bus level seen mid ACK slot.
  task automatic send(bitq_t b, int ack_idx, output bit ack_seen);
    ack_seen = 1'b1;
    foreach (b[i]) begin
      drv = b[i];
      repeat (BT / 2) @(posedge clk);
      if (i == ack_idx) ack_seen = bus;
      repeat (BT - BT / 2) @(posedge clk);
    end
    drv = 1'b1;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bitq_t b;
    bit ack;
    can_frame_t f, e, g;
    int fv0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    idle(12);
    for (int t = 0; t < 40; t++) begin
      f = rand_frame();
      if (t == 0) begin f.id = 11'h000; f.dlc = 4'd8; f.data = '0; f.rtr = 0; end   // long stuffed runs
      if (t == 1) begin f.id = 11'h7FF; f.dlc = 4'd8; f.data = '1; f.rtr = 0; end
      b = bus_bits(f);
      fv0 = n_fv;
      send(b, b.size() - 9, ack);
      idle(4);
      check(ack == 1'b0, $sformatf("frame %0d: ACK slot not dominant", t));
      check(n_fv == fv0 + 1, $sformatf("frame %0d: delivered %0d times", t, n_fv - fv0));
      if (got_q.size() > 0) begin
        g = got_q.pop_front();
        e = expected_rx(f);
        check(g == e, $sformatf("frame %0d: got %h exp %h", t, g, e));
      end
    end
    check(n_sof == 40, $sformatf("sof count %0d", n_sof));

    // CRC error: flip the last CRC bit position before the delimiter.
    f = rand_frame();
    f.rtr = 0; f.dlc = 4'd2;
    b = bus_bits(f);
    b[b.size() - 11] = ~b[b.size() - 11];
    fv0 = n_fv;
    send(b, b.size() - 9, ack);
    idle(12);
    check(n_fv == fv0, "corrupted frame delivered");
    check(ack == 1'b1 || n_stuff > 0, "corrupted frame acknowledged");
    check(n_crc + n_stuff >= 1, "no error reported for corrupted frame");

    // Stuff error: SOF then six dominant bits.
    fv0 = n_stuff;
    b = {};
    for (int i = 0; i < 8; i++) b.push_back(1'b0);
    send(b, -1, ack);
    idle(14);
    check(n_stuff == fv0 + 1, "no stuff error on six equal bits");

    // Still works after errors.
    f = rand_frame();
    b = bus_bits(f);
    fv0 = n_fv;
    send(b, b.size() - 9, ack);
    idle(4);
    check(n_fv == fv0 + 1, "no frame after error recovery");
    if (got_q.size() > 0) begin
      g = got_q.pop_front();
      check(g == expected_rx(f), "frame after recovery wrong");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
