// tb_wave_capture -- self-checking test of the signal capture / packet packer.
//
// The probe is driven with a pseudo-random pattern recorded here every cycle.
// After arming with a trigger mask, the test finds the first triggering cycle
// itself, then receives the byte stream with random back-pressure and checks
// every frame: destination and source MAC, EtherType, sequence number, the
// DEPTH samples in order and big-endian, tlast on the last byte only, and the
// number of frames.  A second capture with trig_mask = 0 starts on the arming
// cycle.  Runs at the default sizes (1024 x 16 bit, 256 samples per frame).
module tb_wave_capture;
  localparam int PW = 16, DEPTH = 1024, PKS = 256, NPKT = DEPTH / PKS;
  localparam logic [47:0] DST = 48'hFFFF_FFFF_FFFF, SRC = 48'h0200_0000_0001;

  logic clk = 0, rst_n = 0;
  logic [PW-1:0] probe = '0, trig_mask = '0;
  logic arm = 0, m_tvalid, m_tready = 0, m_tlast, busy;
  logic [7:0] m_tdata;
  logic [15:0] n_frames;
  int checks = 0, failures = 0;
  logic [PW-1:0] hist[$];
  int trig_idx;

  always #5 clk = ~clk;

  wave_capture dut (.clk, .rst_n, .probe, .arm, .trig_mask, .m_tdata, .m_tvalid,
                    .m_tready, .m_tlast, .busy, .n_frames);

  // Probe pattern and its history (index = cycle since arming).
  always @(posedge clk) begin
    hist.push_back(probe);
    probe <= PW'($urandom) & 16'h7FFF | ((hist.size() == 37) ? 16'h8000 : 16'h0);
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic receive_all(int first);
    byte unsigned b[$];
    int errs;
    for (int p = 0; p < NPKT; p++) begin
      b = {};
      do begin
        @(posedge clk);
        if (m_tvalid && m_tready) begin
          b.push_back(m_tdata);
          if (m_tlast) break;
        end
        #1 m_tready = ($urandom_range(0, 3) != 0);
      end while (1);
      #1 m_tready = ($urandom_range(0, 3) != 0);
      check(b.size() == 16 + PKS * PW / 8, $sformatf("frame %0d length %0d", p, b.size()));
      if (b.size() == 16 + PKS * PW / 8) begin
        errs = 0;
        for (int i = 0; i < 6; i++) if (b[i] != DST[47 - 8*i -: 8]) errs++;
        for (int i = 0; i < 6; i++) if (b[6 + i] != SRC[47 - 8*i -: 8]) errs++;
        check(errs == 0, "MAC addresses");
        check({b[12], b[13]} == 16'h88B5, "EtherType");
        check({b[14], b[15]} == 16'(p), "sequence number");
        errs = 0;
        for (int s = 0; s < PKS; s++)
          if ({b[16 + 2*s], b[17 + 2*s]} != hist[first + p*PKS + s]) begin errs++; $display("  s=%0d got %h exp %h", s, {b[16 + 2*s], b[17 + 2*s]}, hist[first + p*PKS + s]); end
        check(errs == 0, $sformatf("frame %0d: %0d wrong samples", p, errs));
      end
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int arm_idx;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    // Capture 1: trigger on probe bit 15 (set once, 37 cycles in).
    trig_mask = 16'h8000;
    arm = 1;
    @(posedge clk);
    #1 arm = 0;
    check(busy, "busy after arm");
    receive_all(37);
    repeat (5) @(posedge clk);
    check(!busy, "busy after last frame");
    check(n_frames == 16'(NPKT), $sformatf("n_frames %0d", n_frames));
    // Capture 2: no trigger mask, starts at the arming cycle.
    trig_mask = '0;
    @(posedge clk);
    #1 arm = 1;
    arm_idx = hist.size();
    @(posedge clk);
    #1 arm = 0;
    receive_all(arm_idx);
    check(n_frames == 16'(2 * NPKT), "n_frames after second capture");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
