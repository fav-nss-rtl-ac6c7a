// wave_capture -- signal capture and layer-2 Ethernet packer of the bridge node.
//
// Captures a window of internal signals at the full clock rate (for example
// the virtual CAN bus level, node tx lines and IDS handshakes) and ships it to
// the host as raw Ethernet frames, where it is shown as a waveform.  Sampling
// at clock speed and packing into layer-2 packets follow the testbed
// description; the trigger, buffer size and packet layout are choices of this
// design (DEPTH x PROBE_W = 16 kbit fits in half a 36 kbit block RAM).
//
// How it works.  'arm' starts a capture; the first cycle in which
// (probe & trig_mask) != 0 -- or the arming cycle itself if trig_mask is 0 --
// is sample 0, and DEPTH consecutive samples are written to a buffer memory.
// The buffer is then sent as DEPTH/PKT_SAMPLES frames, each
//   DST_MAC(6) SRC_MAC(6) ETHERTYPE(2) sequence number(2) samples,
// every sample PROBE_W/8 bytes, most significant byte first.  The preamble
// and FCS are left to the MAC.  The buffer memory has a one-cycle read
// latency, so a sample costs one fetch cycle plus PROBE_W/8 byte cycles.
//
// Interface.  Byte stream m_tdata/m_tvalid/m_tready/m_tlast towards the MAC
// (AXI-stream rules: data stable while valid and not ready).  busy is high
// from arm to the last byte; n_frames counts frames sent since reset.
module wave_capture #(
  parameter int unsigned PROBE_W     = 16,
  parameter int unsigned DEPTH       = 1024,
  parameter int unsigned PKT_SAMPLES = 256,
  parameter logic [47:0] DST_MAC     = 48'hFFFF_FFFF_FFFF,
  parameter logic [47:0] SRC_MAC     = 48'h0200_0000_0001,
  parameter logic [15:0] ETHERTYPE   = 16'h88B5
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [PROBE_W-1:0] probe,
  input  logic               arm,
  input  logic [PROBE_W-1:0] trig_mask,
  output logic [7:0]         m_tdata,
  output logic               m_tvalid,
  input  logic               m_tready,
  output logic               m_tlast,
  output logic               busy,
  output logic [15:0]        n_frames
);

  localparam int unsigned AW   = $clog2(DEPTH);
  localparam int unsigned BPS  = PROBE_W / 8;            // bytes per sample
  localparam int unsigned NPKT = DEPTH / PKT_SAMPLES;
  localparam int unsigned SW   = $clog2(PKT_SAMPLES);
  localparam int unsigned BW   = (BPS > 1) ? $clog2(BPS) : 1;
  localparam int unsigned HDR  = 16;
  localparam int unsigned PKW  = (NPKT > 1) ? $clog2(NPKT) : 1;

  typedef enum logic [1:0] {C_IDLE, C_ARMED, C_CAPT, C_SEND} state_t;

  state_t             state;
  logic [PROBE_W-1:0] mem [DEPTH];
  logic [AW-1:0]      wr_addr, wr_addr_c;
  logic               wr_en;
  logic [AW-1:0]      rd_addr, rd_addr_q;
  logic [PROBE_W-1:0] rd_data;
  logic [PKW-1:0]     pkt;
  logic [4:0]         hdr_i;
  logic [SW-1:0]      s_i;
  logic [BW-1:0]      b_i;
  logic               in_hdr;
  logic               hit;
  logic [127:0]       hdr_bytes;

  assign hit       = (trig_mask == '0) || ((probe & trig_mask) != '0);
  assign in_hdr    = (hdr_i != 5'(HDR));
  assign rd_addr   = AW'({pkt, s_i});
  assign hdr_bytes = {DST_MAC, SRC_MAC, ETHERTYPE, 16'(pkt)};
  assign busy      = (state != C_IDLE);

  // Sample 0 is written in the triggering cycle, the rest while capturing.
  assign wr_en     = (state == C_CAPT) || (hit && (state == C_ARMED || (state == C_IDLE && arm)));
  assign wr_addr_c = (state == C_CAPT) ? wr_addr : '0;

  // Buffer memory: one write port, one registered read port.
  always_ff @(posedge clk) begin
    if (wr_en)
      mem[wr_addr_c] <= probe;
    rd_data   <= mem[rd_addr];
    rd_addr_q <= rd_addr;
  end

  always_comb begin
    m_tvalid = (state == C_SEND) && (in_hdr || rd_addr_q == rd_addr);
    if (in_hdr) m_tdata = hdr_bytes[127 - 8 * hdr_i[3:0] -: 8];
    else        m_tdata = rd_data[PROBE_W - 1 - 8 * b_i -: 8];
    m_tlast  = !in_hdr && (s_i == SW'(PKT_SAMPLES - 1)) && (b_i == BW'(BPS - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= C_IDLE;
      wr_addr  <= '0;
      pkt      <= '0;
      hdr_i    <= '0;
      s_i      <= '0;
      b_i      <= '0;
      n_frames <= '0;
    end else begin
      unique case (state)
        C_IDLE: if (arm) begin
          state   <= C_ARMED;
          wr_addr <= '0;
          if (hit) begin
            wr_addr <= AW'(1);
            state   <= C_CAPT;
          end
        end
        C_ARMED: if (hit) begin
          wr_addr <= AW'(1);
          state   <= C_CAPT;
        end
        C_CAPT: begin
          wr_addr <= wr_addr + 1'b1;
          if (wr_addr == AW'(DEPTH - 1)) begin
            state <= C_SEND;
            pkt   <= '0;
            hdr_i <= '0;
            s_i   <= '0;
            b_i   <= '0;
          end
        end
        default: if (m_tvalid && m_tready) begin     // C_SEND
          if (in_hdr) begin
            hdr_i <= hdr_i + 1'b1;
          end else if (b_i != BW'(BPS - 1)) begin
            b_i <= b_i + 1'b1;
          end else begin
            b_i <= '0;
            s_i <= s_i + 1'b1;
            if (s_i == SW'(PKT_SAMPLES - 1)) begin
              n_frames <= n_frames + 1'b1;
              hdr_i    <= '0;
              pkt      <= pkt + 1'b1;
              if (pkt == PKW'(NPKT - 1)) state <= C_IDLE;
            end
          end
        end
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata));

endmodule
