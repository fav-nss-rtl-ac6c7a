// tb_ids_preproc -- self-checking test of the IDS feature pre-processor.
//
// Feeds random frames (random DLC, some remote frames) and keeps its own list
// of the features it expects; every window the block emits is compared with
// the concatenation of the last four expected features.  Checks: no window
// before the fourth frame, one window per frame afterwards, one-cycle latency
// from in_valid to m_tvalid, data held while m_tready is low, and the overrun
// pulse when a window is replaced before it was taken.
module tb_ids_preproc;
  import fav_pkg::*;
  import can_tb_pkg::*;

  localparam int WIN = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, m_tvalid, m_tready = 1, overrun, win_new;
  can_frame_t in_frame = '0;
  logic [WIN*80-1:0] m_tdata;
  int checks = 0, failures = 0;
  logic [79:0] feats[$];

  always #5 clk = ~clk;

  ids_preproc #(.WINDOW(WIN)) dut (.clk, .rst_n, .in_valid, .in_frame, .m_tvalid,
                                   .m_tready, .m_tdata, .overrun, .win_new);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [WIN*80-1:0] exp_window();
    logic [WIN*80-1:0] w;
    for (int k = 0; k < WIN; k++) w[k*80 +: 80] = feats[feats.size() - 1 - k];
    return w;
  endfunction

  task automatic push(can_frame_t f);
    can_frame_t e;
    e = expected_rx(f);
    feats.push_back({5'b0, e.id, e.data});
    in_frame = e;
    in_valid = 1;
    @(posedge clk);
    #1 in_valid = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit seen_ovr;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    #1;
    for (int t = 0; t < 3; t++) begin
      push(rand_frame());
      check(!m_tvalid, $sformatf("window after %0d frames", t + 1));
      repeat (3) @(posedge clk);
      #1;
    end
    for (int t = 0; t < 30; t++) begin
      push(rand_frame());
      check(m_tvalid && win_new, "window not valid one cycle after frame");
      check(m_tdata == exp_window(), $sformatf("window %0d content", t));
      @(posedge clk);
      #1;
      check(!m_tvalid, "valid held after handshake");
      repeat ($urandom_range(0, 3)) @(posedge clk);
      #1;
    end
    // Back-pressure: data held, then replaced with overrun.
    m_tready = 0;
    push(rand_frame());
    repeat (5) @(posedge clk);
    #1;
    check(m_tvalid && m_tdata == exp_window(), "window not held under back-pressure");
    seen_ovr = 0;
    fork
      push(rand_frame());
      begin @(posedge clk); #1 seen_ovr = overrun; end
    join
    check(seen_ovr, "no overrun pulse");
    check(m_tvalid && m_tdata == exp_window(), "newer window not presented");
    m_tready = 1;
    @(posedge clk);
    #1;
    check(!m_tvalid, "valid after final handshake");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
