// can_rx -- CAN 2.0A receiver-only core with a simple host interface.
//
// This is the receiving end of the IDS-enabled CAN controller: it watches the
// virtual bus, recovers each standard-format data or remote frame and hands
// identifier, RTR, DLC and payload to the IDS pre-processor.  The testbed uses
// an existing receive-only core and does not describe its insides; this one is
// written from the CAN 2.0A standard.
//
// How it works.  The bus is taken through a two-flop synchroniser.  A bit
// timer of BIT_CLKS cycles is restarted on every recessive-to-dominant edge
// (hard synchronisation, enough on an on-chip bus with a common clock rate) and
// the bus is sampled at SAMPLE_CLK.  After the bus has been recessive for 11
// bits a falling edge is taken as start of frame.  Stuff bits are removed
// (a sixth equal bit is a stuff error), CRC-15 is computed over SOF..data and
// compared with the received CRC.  With ACK_EN set, a frame with a good CRC
// is acknowledged by driving ack_tx dominant for the ACK slot.  The frame is
// delivered at the sample point of the ACK delimiter.  Extended (29-bit)
// frames are ignored; after any error the core waits for the bus to be idle
// again.  It sends no error frames.
//
// Interface.  sof pulses when a start of frame is seen (used by the latency
// timer); frame_valid pulses for one cycle with 'frame' holding the frame,
// payload byte 0 in data[63:56] and bytes beyond DLC zero.  crc_err and
// stuff_err pulse on the corresponding errors.
module can_rx
  import fav_pkg::*;
#(
  parameter int unsigned BIT_CLKS   = fav_pkg::CAN_BIT_CLKS,
  parameter int unsigned SAMPLE_CLK = fav_pkg::CAN_SAMPLE_CLK,
  parameter bit          ACK_EN     = 1'b1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       bus_rx,
  output logic       ack_tx,
  output logic       sof,
  output logic       frame_valid,
  output can_frame_t frame,
  output logic       crc_err,
  output logic       stuff_err
);

  localparam int unsigned CW = $clog2(BIT_CLKS);
  localparam int unsigned SYNC_LAT = 3;

  typedef enum logic [2:0] {F_HDR, F_DATA, F_CRC, F_CDEL, F_ACK, F_ADEL} field_t;

  logic [2:0]    bus_sync;
  logic          bus_s, fall;
  logic [CW-1:0] cnt;
  logic [3:0]    idle_cnt;
  logic          bus_idle;

  logic          in_frame;
  field_t        field;
  logic [4:0]    pos;          // bit index inside the header field
  logic [6:0]    data_left;
  logic [3:0]    nbytes;
  logic [14:0]   crc_calc, crc_rx;
  logic [3:0]    crc_left;
  logic          stuff_en;
  logic          run_val;
  logic [2:0]    run_len;
  logic [10:0]   id_sr;
  logic          rtr_r;
  logic [3:0]    dlc_r;
  logic [63:0]   data_sr;
  logic          crc_ok;
  logic          ack_arm, ack_on;

  assign bus_s    = bus_sync[1];
  assign fall     = bus_sync[2] & ~bus_sync[1];
  assign bus_idle = (idle_cnt >= 4'(IDLE_BITS));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bus_sync    <= '1;
      cnt         <= '0;
      idle_cnt    <= '0;
      in_frame    <= 1'b0;
      field       <= F_HDR;
      pos         <= '0;
      data_left   <= '0;
      nbytes      <= '0;
      crc_calc    <= '0;
      crc_rx      <= '0;
      crc_left    <= '0;
      stuff_en    <= 1'b0;
      run_val     <= 1'b1;
      run_len     <= '0;
      id_sr       <= '0;
      rtr_r       <= 1'b0;
      dlc_r       <= '0;
      data_sr     <= '0;
      crc_ok      <= 1'b0;
      ack_arm     <= 1'b0;
      ack_on      <= 1'b0;
      ack_tx      <= 1'b1;
      sof         <= 1'b0;
      frame_valid <= 1'b0;
      frame       <= '0;
      crc_err     <= 1'b0;
      stuff_err   <= 1'b0;
    end else begin
      bus_sync    <= {bus_sync[1:0], bus_rx};
      sof         <= 1'b0;
      frame_valid <= 1'b0;
      crc_err     <= 1'b0;
      stuff_err   <= 1'b0;

      if (fall)
        cnt <= CW'(SYNC_LAT);
      else if (cnt == CW'(BIT_CLKS - 1))
        cnt <= '0;
      else
        cnt <= cnt + 1'b1;

      // ACK slot drive, aligned to bit boundaries.
      if (cnt == CW'(BIT_CLKS - 1)) begin
        if (ack_arm) begin
          ack_tx  <= 1'b0;
          ack_arm <= 1'b0;
          ack_on  <= 1'b1;
        end else if (ack_on) begin
          ack_tx <= 1'b1;
          ack_on <= 1'b0;
        end
      end

      if (cnt == CW'(SAMPLE_CLK)) begin
        if (!bus_s)         idle_cnt <= '0;
        else if (!bus_idle) idle_cnt <= idle_cnt + 1'b1;
      end

      if (!in_frame) begin
        if (bus_idle && fall) begin
          in_frame <= 1'b1;
          sof      <= 1'b1;
          field    <= F_HDR;
          pos      <= '0;
          crc_calc <= '0;
          stuff_en <= 1'b1;
          run_val  <= 1'b1;
          run_len  <= '0;
          idle_cnt <= '0;
        end
      end else if (cnt == CW'(SAMPLE_CLK)) begin
        if (stuff_en && run_len == 3'd5) begin
          // Stuff bit: must differ from the run, carries no data.
          if (bus_s == run_val) begin
            in_frame  <= 1'b0;
            stuff_err <= 1'b1;
          end
          run_val <= bus_s;
          run_len <= 3'd1;
        end else begin
          run_val <= bus_s;
          run_len <= (bus_s == run_val) ? run_len + 1'b1 : 3'd1;
          unique case (field)
            F_HDR: begin
              crc_calc <= crc15_step(crc_calc, bus_s);
              pos      <= pos + 1'b1;
              if (pos == 5'd0 && bus_s)                 in_frame <= 1'b0;  // glitch, not SOF
              if (pos >= 5'd1 && pos <= 5'd11)          id_sr    <= {id_sr[9:0], bus_s};
              if (pos == 5'd12)                         rtr_r    <= bus_s;
              if (pos == 5'd13 && bus_s)                in_frame <= 1'b0;  // extended frame: ignore
              if (pos >= 5'd15)                         dlc_r    <= {dlc_r[2:0], bus_s};
              if (pos == 5'd18) begin
                nbytes    <= rtr_r ? 4'd0 : dlc_bytes({dlc_r[2:0], bus_s});
                data_left <= rtr_r ? 7'd0 : {dlc_bytes({dlc_r[2:0], bus_s}), 3'b000};
                data_sr   <= '0;
                crc_left  <= 4'd15;
                field     <= (rtr_r || dlc_bytes({dlc_r[2:0], bus_s}) == 4'd0) ? F_CRC : F_DATA;
              end
            end
            F_DATA: begin
              crc_calc  <= crc15_step(crc_calc, bus_s);
              data_sr   <= {data_sr[62:0], bus_s};
              data_left <= data_left - 1'b1;
              if (data_left == 7'd1) field <= F_CRC;
            end
            F_CRC: begin
              crc_rx   <= {crc_rx[13:0], bus_s};
              crc_left <= crc_left - 1'b1;
              if (crc_left == 4'd1) field <= F_CDEL;
            end
            F_CDEL: begin
              stuff_en <= 1'b0;
              crc_ok   <= (crc_rx == crc_calc);
              if (!bus_s) in_frame <= 1'b0;                 // form error
              else begin
                field <= F_ACK;
                if (ACK_EN && crc_rx == crc_calc) ack_arm <= 1'b1;
              end
            end
            F_ACK: field <= F_ADEL;
            F_ADEL: begin
              in_frame <= 1'b0;
              if (bus_s && crc_ok) begin
                frame_valid <= 1'b1;
                frame.id    <= id_sr;
                frame.rtr   <= rtr_r;
                frame.dlc   <= dlc_r;
                frame.data  <= data_sr << {(4'd8 - nbytes), 3'b000};
              end else if (!crc_ok) begin
                crc_err <= 1'b1;
              end
            end
            default: in_frame <= 1'b0;
          endcase
        end
      end
    end
  end

endmodule
