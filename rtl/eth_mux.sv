// eth_mux -- packet arbiter in front of the Ethernet MAC.
//
// The bridge node sends two kinds of traffic to the host over one Ethernet
// link: waveform captures and the CAN bus log.  This block merges two AXI
// byte streams into one, a whole frame at a time, so frames from the two
// sources never interleave.  Sharing one link follows the testbed
// description; packet-level round-robin arbitration is a choice of this
// design.
//
// How it works.  While idle, a source with tvalid high is granted on the next
// cycle; if both are waiting, the one not served last wins.  The grant holds
// until the transfer with tlast, then the arbiter is idle for one cycle.
//
// Interface.  Sources s0_* and s1_*, sink m_*, all 8-bit AXI-stream with
// tlast.  Data, valid and last pass through combinationally while granted;
// tready is returned only to the granted source.
module eth_mux (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] s0_tdata,
  input  logic       s0_tvalid,
  output logic       s0_tready,
  input  logic       s0_tlast,
  input  logic [7:0] s1_tdata,
  input  logic       s1_tvalid,
  output logic       s1_tready,
  input  logic       s1_tlast,
  output logic [7:0] m_tdata,
  output logic       m_tvalid,
  input  logic       m_tready,
  output logic       m_tlast
);

  logic busy, sel, last_sel;

  always_comb begin
    m_tdata   = sel ? s1_tdata  : s0_tdata;
    m_tvalid  = busy && (sel ? s1_tvalid : s0_tvalid);
    m_tlast   = sel ? s1_tlast  : s0_tlast;
    s0_tready = busy && !sel && m_tready;
    s1_tready = busy &&  sel && m_tready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      sel      <= 1'b0;
      last_sel <= 1'b1;
    end else if (!busy) begin
      if (s0_tvalid && s1_tvalid) begin
        busy <= 1'b1;
        sel  <= !last_sel;
      end else if (s0_tvalid || s1_tvalid) begin
        busy <= 1'b1;
        sel  <= s1_tvalid;
      end
    end else if (m_tvalid && m_tready && m_tlast) begin
      busy     <= 1'b0;
      last_sel <= sel;
    end
  end

endmodule
