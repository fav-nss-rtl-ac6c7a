// ids_preproc -- IDS feature pre-processor on the CAN receiver's host side.
//
// Turns received CAN frames into the input vector of the intrusion-detection
// network: identifier and payload are extracted from each frame (feature
// extraction) and the last WINDOW frames are kept in a shift register that
// slides by one frame per message.  The window of four consecutive messages
// and the AXI-stream output follow the testbed description; the feature layout
// and the overrun rule are choices of this design.
//
// Feature of one frame (FEAT_W = 80 bits, byte aligned):
//   {5'b0, id[10:0], payload[63:0]}, payload bytes beyond the DLC set to 0
//   (the receiver already delivers them as 0; remote frames have none).
// Window word: feature of the newest frame in bits 79:0, the oldest in the
// top 80 bits.
//
// Timing.  in_valid is sampled every cycle; the window is updated in the same
// cycle and m_tvalid rises on the next one, so a frame reaches the IDS one
// cycle after can_rx delivers it.  No window is sent before WINDOW frames have
// been seen since reset; after that every frame gives a window.  The word is
// held until m_tready; if a newer frame arrives first the newer window
// replaces it and 'overrun' pulses (a CAN frame lasts ~100 us, so this only
// happens when the IDS core is stalled).  win_new pulses together with the
// rise of m_tvalid for each new window (used by the latency timer).
module ids_preproc
  import fav_pkg::*;
#(
  parameter int unsigned WINDOW = 4,
  localparam int unsigned FEAT_W = 80
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  can_frame_t               in_frame,
  output logic                     m_tvalid,
  input  logic                     m_tready,
  output logic [WINDOW*FEAT_W-1:0] m_tdata,
  output logic                     overrun,
  output logic                     win_new
);

  logic [(WINDOW-1)*FEAT_W-1:0] win;      // the WINDOW-1 previous features
  logic [$clog2(WINDOW+1)-1:0] fill;
  logic [FEAT_W-1:0] feat;

  always_comb feat = {5'b0, in_frame.id, in_frame.rtr ? 64'h0 : in_frame.data};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win      <= '0;
      fill     <= '0;
      m_tvalid <= 1'b0;
      m_tdata  <= '0;
      overrun  <= 1'b0;
      win_new  <= 1'b0;
    end else begin
      overrun <= 1'b0;
      win_new <= 1'b0;
      if (m_tvalid && m_tready) m_tvalid <= 1'b0;
      if (in_valid) begin
        win <= {win[(WINDOW-2)*FEAT_W-1:0], feat};
        if (fill != WINDOW[$bits(fill)-1:0]) fill <= fill + 1'b1;
        if (fill >= WINDOW[$bits(fill)-1:0] - 1'b1) begin
          m_tdata  <= {win, feat};
          m_tvalid <= 1'b1;
          win_new  <= 1'b1;
          if (m_tvalid && !m_tready) overrun <= 1'b1;
        end
      end
    end
  end

  // AXI-stream rule: a word waiting for ready stays valid and unchanged
  // unless a newer window replaces it.
  assert property (@(posedge clk) disable iff (!rst_n)
                   m_tvalid && !m_tready && !in_valid |=> m_tvalid && $stable(m_tdata));

endmodule
