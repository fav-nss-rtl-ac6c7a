// bus_logger -- CAN bus log of the bridge node, sent to the host over Ethernet.
//
// Turns every frame received on the virtual bus into a time-stamped record
// and ships the records to the host as raw layer-2 Ethernet frames, so the
// host sees the complete bus traffic with clock-cycle time resolution.  A
// high-resolution bus log over Ethernet is a monitoring function of the
// testbed; the record and packet layout, the FIFO and the drop counting are
// choices of this design.
//
// How it works.  A free-running 32-bit cycle counter is latched at each start
// of frame (sof).  When the receiver delivers the frame (in_valid), one
// 128-bit record is written to a FIFO of DEPTH records:
//   bytes 0-3   SOF time stamp in clock cycles, MSB first
//   bytes 4-5   {rtr, 4'b0, id[10:0]}
//   byte  6     {4'b0, dlc}
//   byte  7     records dropped (FIFO full) just before this one, saturating
//   bytes 8-15  payload byte 0 .. byte 7 (zero beyond DLC)
// Whenever the FIFO holds records and no packet is in progress, a packet is
// started carrying N = min(records held, PKT_RECS) records:
//   DST_MAC(6) SRC_MAC(6) ETHERTYPE(2) sequence number(2) N(1) 0(1) records
// Preamble, padding and FCS are left to the MAC.  The FIFO memory has a
// one-cycle read latency; a record's first byte waits one cycle after the
// read pointer moves.
//
// Interface.  sof / in_valid / in_frame from the CAN receiver; byte stream
// m_tdata/m_tvalid/m_tready/m_tlast towards the MAC (AXI-stream rules).
// n_logged counts records written, n_dropped records lost to a full FIFO,
// n_frames Ethernet frames sent.  At 500 kbit/s a CAN frame takes at least
// ~90 us while a one-record packet takes 34 byte cycles, so drops occur only
// while the MAC side is held off.
module bus_logger
  import fav_pkg::*;
#(
  parameter int unsigned DEPTH     = 16,
  parameter int unsigned PKT_RECS  = 8,
  parameter logic [47:0] DST_MAC   = 48'hFFFF_FFFF_FFFF,
  parameter logic [47:0] SRC_MAC   = 48'h0200_0000_0001,
  parameter logic [15:0] ETHERTYPE = 16'h88B6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sof,
  input  logic        in_valid,
  input  can_frame_t  in_frame,
  output logic [7:0]  m_tdata,
  output logic        m_tvalid,
  input  logic        m_tready,
  output logic        m_tlast,
  output logic [31:0] n_logged,
  output logic [31:0] n_dropped,
  output logic [15:0] n_frames
);

  localparam int unsigned AW  = $clog2(DEPTH);
  localparam int unsigned HDR = 18;

  logic [127:0]  mem [DEPTH];
  logic [AW:0]   wr_ptr, rd_ptr, rd_ptr_q, count;
  logic [127:0]  rd_data;
  logic [31:0]   now, ts;
  logic [7:0]    drops;
  logic          full, sending, in_hdr;
  logic [4:0]    hdr_i;
  logic [3:0]    b_i;
  logic [7:0]    r_i, n_rec;
  logic [143:0]  hdr_bytes;
  logic [127:0]  rec;

  assign count     = wr_ptr - rd_ptr;
  assign full      = (count == (AW + 1)'(DEPTH));
  assign in_hdr    = (hdr_i != 5'(HDR));
  assign hdr_bytes = {DST_MAC, SRC_MAC, ETHERTYPE, n_frames, n_rec, 8'h00};
  assign rec       = {ts, in_frame.rtr, 4'b0, in_frame.id, 4'b0, in_frame.dlc, drops, in_frame.data};

  // Record FIFO: one write port, one registered read port.
  always_ff @(posedge clk) begin
    if (in_valid && !full)
      mem[wr_ptr[AW-1:0]] <= rec;
    rd_data  <= mem[rd_ptr[AW-1:0]];
    rd_ptr_q <= rd_ptr;
  end

  always_comb begin
    m_tvalid = sending && (in_hdr || rd_ptr_q == rd_ptr);
    if (in_hdr) m_tdata = hdr_bytes[143 - 8 * hdr_i -: 8];
    else        m_tdata = rd_data[127 - 8 * b_i -: 8];
    m_tlast  = !in_hdr && (r_i == n_rec - 8'd1) && (b_i == 4'd15);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now       <= '0;
      ts        <= '0;
      wr_ptr    <= '0;
      rd_ptr    <= '0;
      drops     <= '0;
      sending   <= 1'b0;
      hdr_i     <= '0;
      b_i       <= '0;
      r_i       <= '0;
      n_rec     <= '0;
      n_logged  <= '0;
      n_dropped <= '0;
      n_frames  <= '0;
    end else begin
      now <= now + 1'b1;
      if (sof) ts <= now;

      if (in_valid) begin
        if (full) begin
          n_dropped <= n_dropped + 1'b1;
          if (drops != 8'hFF) drops <= drops + 1'b1;
        end else begin
          wr_ptr   <= wr_ptr + 1'b1;
          n_logged <= n_logged + 1'b1;
          drops    <= '0;
        end
      end

      if (!sending) begin
        if (count != '0) begin
          sending <= 1'b1;
          hdr_i   <= '0;
          b_i     <= '0;
          r_i     <= '0;
          n_rec   <= (count > (AW + 1)'(PKT_RECS)) ? 8'(PKT_RECS) : 8'(count);
        end
      end else if (m_tvalid && m_tready) begin
        if (in_hdr) begin
          hdr_i <= hdr_i + 1'b1;
        end else begin
          b_i <= b_i + 1'b1;
          if (b_i == 4'd15) begin
            rd_ptr <= rd_ptr + 1'b1;
            r_i    <= r_i + 1'b1;
            if (r_i == n_rec - 8'd1) begin
              sending  <= 1'b0;
              n_frames <= n_frames + 1'b1;
            end
          end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata));

endmodule
