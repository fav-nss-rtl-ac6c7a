// can_tx -- CAN 2.0A (11-bit identifier) frame transmitter.
//
// Used by the hardware attack-injection node to put frames on the virtual CAN
// bus at full line rate.  The testbed reuses an existing open-source CAN
// controller for its ECUs and does not describe it; this is a minimal
// transmitter written from the CAN 2.0A standard, not a copy of that core.
//
// How it works.  One bit lasts BIT_CLKS clock cycles (200 at 100 MHz and
// 500 kbit/s); a new bit is driven at count 0 and the bus is sampled at
// SAMPLE_CLK.  The frame SOF..data is loaded into a shift register when
// transmission starts; CRC-15 is accumulated while it is shifted out and then
// sent, followed by the fixed recessive tail (CRC delimiter, ACK slot, ACK
// delimiter, 7 EOF bits).  After five equal bits between SOF and the end of
// the CRC a complementary stuff bit is inserted.  While the identifier and RTR
// bit are sent, a recessive bit read back as dominant means another node with
// a lower identifier won arbitration: the transmitter releases the bus and
// tries again when the bus is idle.  Any other read-back mismatch (outside the
// ACK slot) is a bit error and is handled the same way.  A recessive ACK slot
// is reported on ack_err; the frame is not repeated.  Error frames, error
// counters and bus-off are not implemented.
//
// Interface.  Hold req high while a frame is pending; frame is captured at
// start of frame.  done pulses once the last EOF bit has been sent; drop or
// renew req then.  A pending node starts either on its own bit boundary once
// the bus has been idle for 11 bits, or, if another node starts first, joins
// that start of frame so both take part in arbitration.  bus_rx is taken
// through a two-flop synchroniser because the ECUs run on independent clocks.
module can_tx
  import fav_pkg::*;
#(
  parameter int unsigned BIT_CLKS   = fav_pkg::CAN_BIT_CLKS,
  parameter int unsigned SAMPLE_CLK = fav_pkg::CAN_SAMPLE_CLK
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req,
  input  can_frame_t frame,
  input  logic       bus_rx,
  output logic       tx,
  output logic       busy,
  output logic       done,
  output logic       arb_lost,
  output logic       bit_err,
  output logic       ack_err
);

  localparam int unsigned CW = $clog2(BIT_CLKS);
  localparam int unsigned SYNC_LAT = 3;   // synchroniser + edge detect delay

  typedef enum logic [1:0] {PH_HDR, PH_CRC, PH_TAIL} phase_t;

  logic [2:0]    bus_sync;
  logic          bus_s, bus_q, fall;
  logic [CW-1:0] cnt;
  logic [3:0]    idle_cnt;
  logic          bus_idle;

  logic          sending;
  phase_t        phase;
  logic [82:0]   hdr_sr;       // SOF, id, rtr, ide, r0, dlc, data
  logic [6:0]    hdr_left;     // unstuffed header/data bits still to send
  logic [6:0]    hdr_pos;      // index of the current header bit
  logic [14:0]   crc;
  logic [3:0]    crc_left;
  logic [3:0]    tail_idx;
  logic          cur_bit, cur_stuff;
  logic          run_val;
  logic [2:0]    run_len;

  assign bus_s    = bus_sync[1];
  assign bus_q    = bus_sync[2];
  assign fall     = bus_q & ~bus_s;
  assign bus_idle = (idle_cnt >= 4'(IDLE_BITS));
  assign busy     = sending;

  // Header bits and length of the frame waiting in 'frame'.
  function automatic logic [82:0] hdr_of(input can_frame_t f);
    hdr_of = {1'b0, f.id, f.rtr, 1'b0, 1'b0, f.dlc, f.data};
  endfunction
  function automatic logic [6:0] hdr_len(input logic rtr, input logic [3:0] dlc);
    hdr_len = 7'd19 + (rtr ? 7'd0 : {dlc_bytes(dlc), 3'b000});
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bus_sync  <= '1;
      cnt       <= '0;
      idle_cnt  <= '0;
      sending   <= 1'b0;
      phase     <= PH_HDR;
      hdr_sr    <= '0;
      hdr_left  <= '0;
      hdr_pos   <= '0;
      crc       <= '0;
      crc_left  <= '0;
      tail_idx  <= '0;
      cur_bit   <= 1'b1;
      cur_stuff <= 1'b0;
      run_val   <= 1'b1;
      run_len   <= '0;
      tx        <= 1'b1;
      done      <= 1'b0;
      arb_lost  <= 1'b0;
      bit_err   <= 1'b0;
      ack_err   <= 1'b0;
    end else begin
      bus_sync <= {bus_sync[1:0], bus_rx};
      done     <= 1'b0;
      arb_lost <= 1'b0;
      bit_err  <= 1'b0;
      ack_err  <= 1'b0;

      // Bit timer; hard synchronisation on bus edges while not sending.
      if (!sending && fall)
        cnt <= CW'(SYNC_LAT);
      else if (cnt == CW'(BIT_CLKS - 1))
        cnt <= '0;
      else
        cnt <= cnt + 1'b1;

      // Idle detector: consecutive recessive bits at the sample point.
      if (cnt == CW'(SAMPLE_CLK)) begin
        if (!bus_s)                    idle_cnt <= '0;
        else if (!bus_idle)            idle_cnt <= idle_cnt + 1'b1;
      end

      if (!sending) begin
        tx <= 1'b1;
        // Start on our own bit boundary, or join a start of frame.
        if (req && bus_idle && (fall || cnt == CW'(BIT_CLKS - 1))) begin
          sending   <= 1'b1;
          phase     <= PH_HDR;
          hdr_sr    <= hdr_of(frame) << 1;
          hdr_left  <= hdr_len(frame.rtr, frame.dlc) - 7'd1;
          hdr_pos   <= '0;
          crc       <= crc15_step(15'h0, 1'b0);
          crc_left  <= 4'd15;
          tail_idx  <= '0;
          cur_bit   <= 1'b0;
          cur_stuff <= 1'b0;
          run_val   <= 1'b0;
          run_len   <= 3'd1;
          tx        <= 1'b0;
          idle_cnt  <= '0;
          if (fall) cnt <= CW'(SYNC_LAT);
          else      cnt <= '0;
        end
      end else begin
        if (cnt == '0)
          tx <= cur_bit;
        if (cnt == CW'(SAMPLE_CLK)) begin
          if (phase == PH_HDR && hdr_pos <= 7'd12 && cur_bit && !bus_s) begin
            // Lost arbitration: release the bus and retry when idle.
            sending  <= 1'b0;
            tx       <= 1'b1;
            arb_lost <= 1'b1;
          end else if (!(phase == PH_TAIL && tail_idx == 4'd1) && (cur_bit != bus_s)) begin
            sending <= 1'b0;
            tx      <= 1'b1;
            bit_err <= 1'b1;
          end else begin
            if (phase == PH_TAIL && tail_idx == 4'd1 && bus_s)
              ack_err <= 1'b1;
            // Choose the next bit.
            if (phase != PH_TAIL && !cur_stuff && run_len == 3'd5) begin
              // run_len counts the bit just sent; five equal bits: stuff.
              cur_bit   <= ~cur_bit;
              cur_stuff <= 1'b1;
              run_val   <= ~cur_bit;
              run_len   <= 3'd1;
            end else if (phase == PH_HDR && hdr_left != '0) begin
              cur_bit   <= hdr_sr[82];
              cur_stuff <= 1'b0;
              hdr_sr    <= hdr_sr << 1;
              hdr_left  <= hdr_left - 1'b1;
              hdr_pos   <= hdr_pos + 1'b1;
              crc       <= crc15_step(crc, hdr_sr[82]);
              run_val   <= hdr_sr[82];
              run_len   <= (hdr_sr[82] == run_val) ? run_len + 1'b1 : 3'd1;
            end else if (phase != PH_TAIL && crc_left != '0) begin
              phase     <= PH_CRC;
              cur_bit   <= crc[14];
              cur_stuff <= 1'b0;
              crc       <= crc << 1;
              crc_left  <= crc_left - 1'b1;
              run_val   <= crc[14];
              run_len   <= (crc[14] == run_val) ? run_len + 1'b1 : 3'd1;
            end else if (phase != PH_TAIL) begin
              phase     <= PH_TAIL;
              tail_idx  <= '0;
              cur_bit   <= 1'b1;
              cur_stuff <= 1'b0;
            end else if (tail_idx != 4'd9) begin
              tail_idx  <= tail_idx + 1'b1;
              cur_bit   <= 1'b1;
            end else begin
              sending <= 1'b0;
              done    <= 1'b1;
            end
          end
        end
      end
    end
  end

  // A stuff bit is never inserted after more than five equal bits.
  assert property (@(posedge clk) disable iff (!rst_n) run_len <= 3'd5);

endmodule
