// tb_fav_nss_top -- end-to-end test of the test-bed hardware at full size.
//
// Runs the top with every parameter at its default (100 MHz, 500 kbit/s,
// 200 cycles per bit, 4-frame window).  Around it: four ECU models sending
// periodic life-signal frames (identifiers 0x0A0..0x0D0, retrying when they
// lose arbitration), a control-node model sending spoofed frames, a node on
// the Pmod side (identifier 0x0A1), and a behavioural IDS core.  The test goes
// through benign traffic, a DoS flood, fuzzing, spoofing (from the control
// node and from the injector) and a stalled IDS core.
// Checks:
//   * every frame completed by a transmitter is received intact, in order;
//   * every window sent to the IDS holds the features of the last four frames;
//   * every Softmax class equals the class of the newest frame in its window,
//     with probability above 0.9;
//   * the latency timer agrees with start-of-frame to Softmax times measured
//     here (to within the 3-cycle synchroniser delay) and stays below the
//     1184 us line-rate bound for a 4-frame window;
//   * each mechanism happened at least once: arbitration loss, DoS, fuzzing
//     and spoof detection, benign detection, Pmod-side frame, IDS overrun,
//     signal capture and user capture frames, bus-log frames; no CRC or
//     stuff errors.
// The Ethernet stream is taken under random back-pressure and split by
// EtherType: every bus-log record must match the next frame seen on the
// receiver port (identifier, RTR, DLC, payload) with rising time stamps, and
// the user capture (cap_sel high, constant cap_user) must hold that constant
// in every sample.  The IDS statistics outputs must equal the verdicts per class
// and the overruns counted here, with no receiver errors.
module tb_fav_nss_top;
  import fav_pkg::*;

  localparam int BT = CAN_BIT_CLKS;
  localparam logic [10:0] ECU_ID [4] = '{11'h0A0, 11'h0B0, 11'h0C0, 11'h0D0};

  logic clk = 0, rst_n = 0;
  logic [3:0] ecu_tx, ecu_req = '0, ecu_done, ecu_arb, ecu_busy, ecu_be, ecu_ae;
  can_frame_t ecu_fr [4];
  logic ctrl_tx, ctrl_req = 0, ctrl_done, ctrl_arb, ctrl_busy, ctrl_be, ctrl_ae;
  can_frame_t ctrl_fr;
  logic ext_tx, ext_req = 0, ext_done, ext_arb, ext_busy, ext_be, ext_ae;
  can_frame_t ext_fr;
  logic can_bus, pmod_tx;
  attack_mode_t atk_mode = ATK_OFF;
  can_frame_t atk_frame;
  logic [15:0] atk_gap = '0;
  logic atk_active;
  logic [31:0] atk_n_sent, atk_n_lost, atk_n_err;
  logic rx_valid, rx_crc_err, rx_stuff_err;
  can_frame_t rx_frame;
  logic feat_v, feat_r, ovr, score_v, score_r, sm_valid, stall = 0;
  logic [319:0] feat_d;
  logic [63:0] score_d, sm_prob;
  logic [1:0] sm_cls;
  logic [3:0] sm_onehot;
  logic [31:0] lat_last, lat_max, lat_n;
  logic cap_arm = 0, cap_sel = 0, eth_tvalid, eth_tready = 0, eth_tlast, cap_busy;
  logic [15:0] cap_trig = '0, cap_n_frames, log_n_frames;
  logic [15:0] cap_user = 16'hA5C3;
  logic [31:0] log_n_logged, log_n_dropped;
  logic [31:0] stat_n_class [4];
  logic [31:0] stat_n_crc_err, stat_n_stuff_err, stat_n_overrun;
  logic [7:0] eth_tdata;
  byte unsigned eth_pkt [$];
  int n_cap_pkts = 0, n_log_pkts = 0, n_log_recs = 0;
  logic [31:0] log_ts_q = '0;

  int checks = 0, failures = 0;
  int n_arb = 0, n_cls [4] = '{0, 0, 0, 0}, n_ovr = 0, n_ext = 0, n_rx_err = 0;
  int n_lat = 0;
  longint cyc = 0;
  bit in_stall_phase = 0;

  can_frame_t sent_q[$], rx_q[$];
  longint     sof_t[$];
  int         win_k[$];          // newest-frame index of each window taken by the IDS
  logic [319:0] win_d[$];
  int         win_new_k[$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  fav_nss_top dut (
    .clk, .rst_n,
    .ecu_can_tx(ecu_tx), .ctrl_can_tx(ctrl_tx), .can_bus, .pmod_can_rx(ext_tx), .pmod_can_tx(pmod_tx),
    .atk_mode, .atk_frame, .atk_gap_bits(atk_gap), .atk_active, .atk_n_sent, .atk_n_lost, .atk_n_err,
    .rx_valid, .rx_frame, .rx_crc_err, .rx_stuff_err,
    .ids_feat_tvalid(feat_v), .ids_feat_tready(feat_r), .ids_feat_tdata(feat_d), .ids_overrun(ovr),
    .ids_score_tvalid(score_v), .ids_score_tready(score_r), .ids_score_tdata(score_d),
    .sm_valid, .sm_prob, .sm_cls, .sm_onehot, .lat_last, .lat_max, .lat_n,
    .cap_arm, .cap_trig_mask(cap_trig), .cap_sel, .cap_user, .eth_tdata, .eth_tvalid, .eth_tready,
    .eth_tlast, .cap_busy, .cap_n_frames, .log_n_logged, .log_n_dropped, .log_n_frames,
    .stat_clear(1'b0), .stat_n_class, .stat_n_crc_err, .stat_n_stuff_err, .stat_n_overrun);

  ids_core_model #(.WINDOW(4), .LAT(60)) u_ids (
    .clk, .rst_n, .stall, .s_tvalid(feat_v), .s_tready(feat_r), .s_tdata(feat_d),
    .m_tvalid(score_v), .m_tready(score_r), .m_tdata(score_d));

  for (genvar i = 0; i < 4; i++) begin : g_ecu
    can_tx u_ecu (.clk, .rst_n, .req(ecu_req[i]), .frame(ecu_fr[i]), .bus_rx(can_bus), .tx(ecu_tx[i]),
                  .busy(ecu_busy[i]), .done(ecu_done[i]), .arb_lost(ecu_arb[i]), .bit_err(ecu_be[i]),
                  .ack_err(ecu_ae[i]));
  end
  can_tx u_ctrl (.clk, .rst_n, .req(ctrl_req), .frame(ctrl_fr), .bus_rx(can_bus), .tx(ctrl_tx),
                 .busy(ctrl_busy), .done(ctrl_done), .arb_lost(ctrl_arb), .bit_err(ctrl_be), .ack_err(ctrl_ae));
  // The external node sees the bus through its own transceiver.
  can_tx u_ext (.clk, .rst_n, .req(ext_req), .frame(ext_fr), .bus_rx(pmod_tx & ext_tx), .tx(ext_tx),
                .busy(ext_busy), .done(ext_done), .arb_lost(ext_arb), .bit_err(ext_be), .ack_err(ext_ae));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  function automatic logic [1:0] classify(logic [10:0] id);
    if (id == 11'h000) return 2'd1;
    if (id == 11'h316) return 2'd3;
    if (id[10:4] inside {7'h0A, 7'h0B, 7'h0C, 7'h0D}) return 2'd0;
    return 2'd2;
  endfunction

  function automatic logic [79:0] feat(can_frame_t f);
    return {5'b0, f.id, f.rtr ? 64'h0 : f.data};
  endfunction

  // Ethernet side: random ready, frames split by EtherType.
  always @(posedge clk) eth_tready <= #1 ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n && eth_tvalid && eth_tready) begin
    eth_pkt.push_back(eth_tdata);
    if (eth_tlast) begin
      if (eth_pkt[12] == 8'h88 && eth_pkt[13] == 8'hB5) begin
        check(eth_pkt.size() == 16 + 512, $sformatf("capture frame length %0d", eth_pkt.size()));
        if (n_cap_pkts >= 4) begin
          bit ok;
          ok = 1;
          for (int i = 16; i < eth_pkt.size(); i += 2) ok &= ({eth_pkt[i], eth_pkt[i + 1]} == cap_user);
          check(ok, $sformatf("user capture frame %0d content", n_cap_pkts));
        end
        n_cap_pkts++;
      end else if (eth_pkt[12] == 8'h88 && eth_pkt[13] == 8'hB6) begin
        int n;
        n = int'(eth_pkt[16]);
        check(n >= 1 && eth_pkt.size() == 18 + 16 * n, $sformatf("bus-log frame length %0d", eth_pkt.size()));
        for (int k = 0; k < n && eth_pkt.size() == 18 + 16 * n; k++) begin
          logic [127:0] r;
          can_frame_t g;
          for (int j = 0; j < 16; j++) r[127 - 8 * j -: 8] = eth_pkt[18 + 16 * k + j];
          g = '{id: r[90:80], rtr: r[95], dlc: r[75:72], data: r[63:0]};
          check(n_log_recs < rx_q.size() && g == rx_q[n_log_recs] && r[71:64] == 8'd0,
                $sformatf("bus-log record %0d: %h", n_log_recs, r));
          check(r[127:96] > log_ts_q, $sformatf("bus-log time stamp %0d not rising", n_log_recs));
          log_ts_q = r[127:96];
          n_log_recs++;
        end
        n_log_pkts++;
      end else begin
        check(0, "unknown EtherType");
      end
      eth_pkt = {};
    end
  end

  // Start-of-frame detector of its own: falling edge after >= 10 idle bits.
  int hi_run = 0;
  logic bus_q = 1;
  always @(posedge clk) begin
    bus_q <= can_bus;
    if (can_bus) hi_run <= hi_run + 1; else hi_run <= 0;
    if (bus_q && !can_bus && hi_run >= 10 * BT) sof_t.push_back(cyc);
  end

  // Frames completed by transmitters (order on the bus = order of completion).
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < 4; i++) if (ecu_done[i]) sent_q.push_back(ecu_fr[i]);
    if (ctrl_done) sent_q.push_back(ctrl_fr);
    if (ext_done) begin sent_q.push_back(ext_fr); n_ext++; end
    if (atk_n_sent != n_sent_q) sent_q.push_back(inj_pred.pop_front());
    n_arb += $countones(ecu_arb) + int'(ctrl_arb) + int'(ext_arb) + int'(atk_n_lost != n_lost_q);
    if (rx_valid) begin rx_q.push_back(rx_frame); end
    if (rx_crc_err || rx_stuff_err) n_rx_err++;
    if (ovr) n_ovr++;
    if (feat_v && feat_r) begin
      win_k.push_back(rx_q.size() - 1);
      win_d.push_back(feat_d);
    end
  end

  // Prediction of the injector's frames from its configuration: a frame is
  // built in the cycle before 'atk_active' rises, with the mode then in force;
  // a frame cancelled before it started ends without n_sent moving.
  logic [31:0] xs_state = 32'h2545_F491;      // injector's default seed
  logic [31:0] n_sent_q = '0, n_lost_q = '0, n_sent_at_rise = '0;
  logic active_q = 0;
  attack_mode_t mode_q = ATK_OFF;
  can_frame_t inj_pred[$];

  function automatic logic [31:0] xs(logic [31:0] x);
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  always @(posedge clk) if (rst_n) begin
    n_sent_q <= atk_n_sent;
    n_lost_q <= atk_n_lost;
    active_q <= atk_active;
    mode_q   <= atk_mode;
    if (atk_active && !active_q) begin
      n_sent_at_rise <= atk_n_sent;
      unique case (mode_q)
        ATK_DOS:  inj_pred.push_back('{id: 11'h000, rtr: 1'b0, dlc: 4'd8, data: 64'h0});
        ATK_FUZZ: begin
          logic [31:0] a, b, c;
          a = xs(xs_state); b = xs(a); c = xs(b);
          xs_state <= c;
          inj_pred.push_back('{id: a[10:0], rtr: 1'b0, dlc: 4'd8, data: {b, c}});
        end
        ATK_SPOOF: inj_pred.push_back(atk_frame);
        default: check(0, "injector started while off");
      endcase
    end
    if (!atk_active && active_q && atk_n_sent == n_sent_at_rise)
      void'(inj_pred.pop_back());
  end

  // Softmax results against the class of the newest frame of the window.
  always @(posedge clk) if (rst_n) begin
    if (sm_valid) begin
      if (win_k.size() == 0) check(0, "Softmax result without a window");
      else begin
        int k;
        logic [1:0] e;
        k = win_k.pop_front();
        void'(win_d.pop_front());
        e = classify(rx_q[k].id);
        check(sm_cls == e, $sformatf("class %0d exp %0d (id %h)", sm_cls, e, rx_q[k].id));
        check(sm_onehot == (4'b1 << e), "one-hot result");
        check(sm_prob[sm_cls*16 +: 16] > 16'd58982, "winning probability below 0.9");
        n_cls[sm_cls]++;
        if (!in_stall_phase && k < sof_t.size()) begin
          longint expv;
          expv = cyc - sof_t[k];
          // lat_last updates on the edge after sm_valid; compare then.
          fork begin
            @(posedge clk);
            #1;
            check(longint'(lat_last) >= expv - 4 && longint'(lat_last) <= expv + 1,
                  $sformatf("latency %0d, measured here %0d", lat_last, expv));
            check(lat_last < 32'd118400, $sformatf("latency %0d above the line-rate bound", lat_last));
            n_lat++;
          end join_none
        end
      end
    end
  end

  // Window contents: the last four frames received.
  always @(posedge clk) if (rst_n) begin
    if (feat_v && feat_r) begin
      int k;
      logic [319:0] e;
      k = rx_q.size() - 1;
      for (int j = 0; j < 4; j++) e[j*80 +: 80] = feat(rx_q[k - j]);
      check(feat_d == e, $sformatf("window at frame %0d", k));
    end
  end

  // Waits n cycles and steps past the clock edge before the caller drives.
  task automatic wait_cycles(int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  // ECU life-signal traffic.
  for (genvar i = 0; i < 4; i++) begin : g_traffic
    initial begin
      automatic logic [15:0] life = '0;
      ecu_fr[i] = '{id: ECU_ID[i], rtr: 1'b0, dlc: 4'd2, data: 64'h0};
      wait (rst_n);
      wait_cycles(i * 31_000 + 1000);
      forever begin
        ecu_fr[i].data = {life, 48'h0};
        ecu_req[i] = 1;
        do @(posedge clk); while (!ecu_done[i]);
        #1 ecu_req[i] = 0;
        life++;
        wait_cycles(150_000);
      end
    end
  end

  initial begin
    repeat (6_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    atk_frame = '{id: 11'h316, rtr: 1'b0, dlc: 4'd8, data: 64'h0520_FF10_FF00_0043};
    ctrl_fr   = '{id: 11'h316, rtr: 1'b0, dlc: 4'd8, data: 64'h0520_0010_0000_0043};
    ext_fr    = '{id: 11'h0A1, rtr: 1'b0, dlc: 4'd4, data: 64'hCAFE_0001_0000_0000};
    wait_cycles(10);
    rst_n = 1;
    // Capture from the first start of frame.
    cap_trig = 16'h0080;
    cap_arm = 1;
    @(posedge clk);
    #1 cap_arm = 0;

    // Benign traffic, plus two frames from the Pmod side.
    wait_cycles(300_000);
    for (int i = 0; i < 2; i++) begin
      ext_req = 1;
      do @(posedge clk); while (!ext_done);
      #1 ext_req = 0;
      ext_fr.data[47:32] = ext_fr.data[47:32] + 1;
    end
    wait_cycles(200_000);

    // DoS flood.
    atk_mode = ATK_DOS;
    atk_gap = 0;
    wait_cycles(300_000);
    atk_mode = ATK_OFF;
    wait_cycles(200_000);

    // Fuzzing.
    atk_mode = ATK_FUZZ;
    atk_gap = 16'd20;
    wait_cycles(250_000);
    atk_mode = ATK_OFF;
    wait_cycles(150_000);

    // Spoofing: control node, then injector.
    for (int i = 0; i < 2; i++) begin
      ctrl_req = 1;
      do @(posedge clk); while (!ctrl_done);
      #1 ctrl_req = 0;
      wait_cycles(40_000);
    end
    atk_mode = ATK_SPOOF;
    atk_gap = 16'd100;
    wait_cycles(120_000);
    atk_mode = ATK_OFF;
    wait_cycles(150_000);

    // Stalled IDS core: windows pile up and are replaced.
    in_stall_phase = 1;
    stall = 1;
    atk_mode = ATK_FUZZ;
    atk_gap = 16'd0;
    wait_cycles(200_000);
    atk_mode = ATK_OFF;
    wait_cycles(50_000);
    stall = 0;
    wait_cycles(40_000);
    in_stall_phase = 0;
    wait_cycles(200_000);

    // User-defined capture: constant pattern, immediate trigger.
    cap_sel = 1;
    cap_trig = '0;
    cap_arm = 1;
    @(posedge clk);
    #1 cap_arm = 0;
    wait_cycles(20_000);

    // Frames on the bus arrived intact and in order.
    check(rx_q.size() >= sent_q.size() && sent_q.size() > 40,
          $sformatf("frames sent %0d received %0d", sent_q.size(), rx_q.size()));
    for (int i = 0; i < sent_q.size() && i < rx_q.size(); i++) begin
      can_frame_t e;
      e = sent_q[i];
      if (e.rtr) e.data = '0;
      check(rx_q[i] == e, $sformatf("frame %0d: got %h sent %h", i, rx_q[i], e));
    end
    // Mechanisms.
    $display("frames=%0d arb_losses=%0d benign=%0d dos=%0d fuzz=%0d spoof=%0d overruns=%0d ext=%0d cap_frames=%0d log_frames=%0d log_records=%0d latency_checks=%0d max_latency=%0d cycles",
             rx_q.size(), n_arb, n_cls[0], n_cls[1], n_cls[2], n_cls[3], n_ovr, n_ext, n_cap_pkts, n_log_pkts, n_log_recs, n_lat, lat_max);
    check(n_arb > 0, "no arbitration loss");
    check(n_cls[0] > 0, "no benign result");
    check(n_cls[1] > 0, "no DoS detected");
    check(n_cls[2] > 0, "no fuzzing detected");
    check(n_cls[3] > 0, "no spoofing detected");
    check(n_ovr > 0, "no IDS overrun");
    check(n_ext == 2, "Pmod-side frames");
    check(n_cap_pkts == 8 && cap_n_frames == 16'd8, $sformatf("capture frames %0d", n_cap_pkts));
    check(n_log_recs == rx_q.size() && log_n_logged == 32'(rx_q.size()) && log_n_dropped == 0,
          $sformatf("bus log: %0d records for %0d frames", n_log_recs, rx_q.size()));
    check(n_log_pkts > 0 && log_n_frames == 16'(n_log_pkts), $sformatf("bus-log frames %0d", n_log_pkts));
    check(n_lat > 10, "too few latency checks");
    check(stat_n_class[0] == 32'(n_cls[0]) && stat_n_class[1] == 32'(n_cls[1]) &&
          stat_n_class[2] == 32'(n_cls[2]) && stat_n_class[3] == 32'(n_cls[3]),
          $sformatf("IDS statistics %0d/%0d/%0d/%0d", stat_n_class[0], stat_n_class[1], stat_n_class[2], stat_n_class[3]));
    check(stat_n_overrun == 32'(n_ovr) && stat_n_crc_err == 0 && stat_n_stuff_err == 0, "error/overrun statistics");
    check(n_rx_err == 0, "receiver errors");
    check(atk_n_err == 0, "injector errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
