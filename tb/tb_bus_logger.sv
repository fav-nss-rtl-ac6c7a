// tb_bus_logger -- self-checking test of the CAN bus logger.
//
// Feeds random CAN frames (start-of-frame pulse, then the delivered frame a
// few cycles later) and parses every Ethernet frame that comes out under
// random back-pressure.  Each packet is checked against an independent
// reference: destination/source MAC, EtherType, sequence number, a record
// count between 1 and PKT_RECS, a length of 18 + 16 x count bytes, and each
// record's time stamp (the cycle count at SOF, counted here), identifier,
// RTR, DLC, drop count and payload in arrival order.  A second phase holds
// the MAC side off, offers DEPTH + 3 frames, and checks that exactly three
// are counted as dropped and that the next record carries a drop count of 3.
module tb_bus_logger;
  import fav_pkg::*;
  import can_tb_pkg::*;

  localparam int DEPTH = 16, PKT_RECS = 8;

  logic clk = 0, rst_n = 0;
  logic sof = 0, in_valid = 0, m_tready = 0;
  can_frame_t in_frame = '0;
  logic [7:0] m_tdata;
  logic m_tvalid, m_tlast;
  logic [31:0] n_logged, n_dropped;
  logic [15:0] n_frames;
  int checks = 0, failures = 0;
  int cyc = 0, n_pkts = 0, n_recs = 0;
  bit rand_ready = 1;
  logic [127:0] exp_q [$];
  byte unsigned pkt [$];

  always #5 clk = ~clk;

  bus_logger #(.DEPTH(DEPTH), .PKT_RECS(PKT_RECS)) dut (
    .clk, .rst_n, .sof, .in_valid, .in_frame, .m_tdata, .m_tvalid, .m_tready, .m_tlast,
    .n_logged, .n_dropped, .n_frames);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  always @(posedge clk) if (rand_ready) m_tready <= #1 ($urandom_range(0, 3) != 0);

  // Packet parser.
  always @(posedge clk) if (rst_n && m_tvalid && m_tready) begin
    pkt.push_back(m_tdata);
    if (m_tlast) begin
      int n;
      logic [127:0] r, e;
      n = int'(pkt[16]);
      check(pkt.size() == 18 + 16 * n, $sformatf("packet %0d length %0d for %0d records", n_pkts, pkt.size(), n));
      check(n >= 1 && n <= PKT_RECS, $sformatf("packet %0d record count %0d", n_pkts, n));
      check({pkt[0], pkt[1], pkt[2], pkt[3], pkt[4], pkt[5]} == 48'hFFFF_FFFF_FFFF &&
            {pkt[6], pkt[7], pkt[8], pkt[9], pkt[10], pkt[11]} == 48'h0200_0000_0001, "MAC addresses");
      check(pkt[12] == 8'h88 && pkt[13] == 8'hB6, "EtherType");
      check({pkt[14], pkt[15]} == 16'(n_pkts), $sformatf("sequence %0d, expected %0d", {pkt[14], pkt[15]}, n_pkts));
      for (int k = 0; k < n && pkt.size() == 18 + 16 * n; k++) begin
        for (int j = 0; j < 16; j++) r[127 - 8 * j -: 8] = pkt[18 + 16 * k + j];
        if (exp_q.size() == 0) begin
          check(0, "record without a logged frame");
        end else begin
          e = exp_q.pop_front();
          check(r == e, $sformatf("record %0d: got %h exp %h", n_recs, r, e));
        end
        n_recs++;
      end
      n_pkts++;
      pkt = {};
    end
  end

  task automatic log_frame(can_frame_t f, int gap, logic [7:0] drops, bit expect_kept);
    logic [31:0] t;
    @(posedge clk);
    #1 sof = 1;
    t = 32'(cyc);
    @(posedge clk);
    #1 sof = 0;
    repeat (gap) @(posedge clk);
    #1 in_valid = 1;
    in_frame = f;
    @(posedge clk);
    #1 in_valid = 0;
    if (expect_kept) exp_q.push_back({t, f.rtr, 4'b0, f.id, 4'b0, f.dlc, drops, f.data});
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    can_frame_t f;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // Phase 1: random frames, random spacing (bursts and idle), random ready.
    for (int t = 0; t < 120; t++) begin
      f = expected_rx(rand_frame());
      log_frame(f, (t % 10 < 6) ? $urandom_range(0, 3) : $urandom_range(60, 150), 8'd0, 1'b1);
    end
    repeat (2000) @(posedge clk);
    check(exp_q.size() == 0, $sformatf("%0d records never sent", exp_q.size()));
    check(n_logged == 120 && n_dropped == 0, $sformatf("logged %0d dropped %0d", n_logged, n_dropped));
    check(n_frames == 16'(n_pkts), $sformatf("n_frames %0d, parsed %0d", n_frames, n_pkts));
    check(n_pkts < 120, "records never shared a packet");

    // Phase 2: MAC held off, FIFO overflows by three.
    rand_ready = 0;
    @(posedge clk);
    #1 m_tready = 0;
    for (int t = 0; t < DEPTH + 3; t++) begin
      f = expected_rx(rand_frame());
      log_frame(f, 2, 8'd0, t < DEPTH);
    end
    check(n_dropped == 3, $sformatf("dropped %0d, expected 3", n_dropped));
    rand_ready = 1;
    repeat (2000) @(posedge clk);
    f = expected_rx(rand_frame());
    log_frame(f, 2, 8'd3, 1'b1);
    repeat (500) @(posedge clk);
    check(exp_q.size() == 0, $sformatf("%0d records never sent after overflow", exp_q.size()));
    check(n_logged == 120 + DEPTH + 1, $sformatf("logged %0d", n_logged));
    check(n_recs == 120 + DEPTH + 1, $sformatf("parsed %0d records", n_recs));

    $display("packets=%0d records=%0d", n_pkts, n_recs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
