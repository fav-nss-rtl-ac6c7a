// tb_eth_mux -- self-checking test of the Ethernet packet arbiter.
//
// Two stream sources send numbered packets of random length (each byte
// encodes source, packet number and position) with random gaps, and the sink
// applies random back-pressure.  The test rebuilds the packets from the
// output and checks that no packet is interleaved with another, that every
// packet of each source arrives complete and in order, that the sources
// observe the AXI-stream rule (they hold data until accepted) and that both
// sources were served while both were waiting (round robin).
module tb_eth_mux;
  localparam int NPKT = 60;

  logic clk = 0, rst_n = 0;
  logic [7:0] s_tdata [2];
  logic s_tvalid [2], s_tready [2], s_tlast [2];
  logic [7:0] m_tdata;
  logic m_tvalid, m_tready = 0, m_tlast;
  int checks = 0, failures = 0;
  int got_pkt [2] = '{0, 0};
  int both_waiting_switches = 0;
  int len [2][NPKT];
  byte unsigned cur [$];
  int cur_src = -1;

  always #5 clk = ~clk;

  eth_mux dut (
    .clk, .rst_n,
    .s0_tdata(s_tdata[0]), .s0_tvalid(s_tvalid[0]), .s0_tready(s_tready[0]), .s0_tlast(s_tlast[0]),
    .s1_tdata(s_tdata[1]), .s1_tvalid(s_tvalid[1]), .s1_tready(s_tready[1]), .s1_tlast(s_tlast[1]),
    .m_tdata, .m_tvalid, .m_tready, .m_tlast);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic byte unsigned pat(int src, int p, int i);
    return 8'((src << 7) | ((p * 7 + i) & 8'h7F));
  endfunction

  // Source models: packet p of source s is len[s][p] bytes of pat(s, p, i).
  for (genvar s = 0; s < 2; s++) begin : g_src
    initial begin
      s_tvalid[s] = 0; s_tlast[s] = 0; s_tdata[s] = '0;
      wait (rst_n);
      for (int p = 0; p < NPKT; p++) begin
        repeat ($urandom_range(0, 30)) @(posedge clk);
        for (int i = 0; i < len[s][p]; i++) begin
          #1 s_tvalid[s] = 1;
          s_tdata[s] = pat(s, p, i);
          s_tlast[s] = (i == len[s][p] - 1);
          do @(posedge clk); while (!s_tready[s]);
        end
        #1 s_tvalid[s] = 0;
        s_tlast[s] = 0;
      end
    end
  end

  always @(posedge clk) m_tready <= #1 ($urandom_range(0, 3) != 0);

  // Sink: rebuild packets, identify the source from the first byte.
  always @(posedge clk) if (rst_n && m_tvalid && m_tready) begin
    cur.push_back(m_tdata);
    if (m_tlast) begin
      int src, p;
      bit ok;
      src = cur[0] >> 7;
      p = got_pkt[src];
      ok = (p < NPKT) && (cur.size() == len[src][p]);
      for (int i = 0; i < cur.size() && ok; i++) ok = (cur[i] == pat(src, p, i));
      check(ok, $sformatf("source %0d packet %0d corrupted, interleaved or out of order (%0d bytes)", src, p, cur.size()));
      if (cur_src >= 0 && cur_src != src) both_waiting_switches++;
      cur_src = src;
      got_pkt[src]++;
      cur = {};
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 2; s++)
      for (int p = 0; p < NPKT; p++) len[s][p] = $urandom_range(1, 40);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (got_pkt[0] == NPKT && got_pkt[1] == NPKT);
    repeat (10) @(posedge clk);
    check(got_pkt[0] == NPKT && got_pkt[1] == NPKT, "packet counts");
    check(both_waiting_switches > 10, $sformatf("sources alternated only %0d times", both_waiting_switches));
    $display("packets=%0d/%0d switches=%0d", got_pkt[0], got_pkt[1], both_waiting_switches);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
