// attack_injector -- hardware attack-injection node on the virtual CAN bus.
//
// Floods the bus at line rate with attack frames chosen by 'mode':
//   ATK_DOS   identifier 0x000 (the highest CAN priority, as in the flooding
//             DoS attack), 8 zero data bytes: every other node loses
//             arbitration for as long as the attack runs;
//   ATK_FUZZ  random identifier and 8 random payload bytes per frame;
//   ATK_SPOOF repeats the host-written frame 'user_frame' (targeted spoofing);
//   ATK_OFF   sends nothing (a frame already started is completed).
// The attack kinds and the DoS identifier come from the testbed description;
// the frame contents other than the DoS identifier, the random generator and
// the gap control are choices of this design.
//
// How it works.  A small state machine builds the next frame, holds can_tx's
// request until the frame is done, then waits gap_bits bit times before the
// next one (0 = back to back, limited only by the 3-bit intermission).  Random
// numbers come from a 32-bit xorshift generator (x^=x<<13; x^=x>>17;
// x^=x<<5), advanced three times per fuzzing frame: the first value gives the
// identifier (bits 10:0), the next two the payload (high word first).  SEED
// must be non-zero.
//
// Interface.  'mode', 'user_frame' and 'gap_bits' are configuration written by
// the control node.  n_sent counts frames that completed on the bus, n_lost
// arbitration losses, n_err bit errors and missing ACKs.  Timing: gap_bits is
// counted from the last EOF bit and includes the 3-bit intermission, so while
// the bus is free a frame starts every (frame bits + max(3, gap_bits)) bit
// times.
module attack_injector
  import fav_pkg::*;
#(
  parameter int unsigned BIT_CLKS   = fav_pkg::CAN_BIT_CLKS,
  parameter int unsigned SAMPLE_CLK = fav_pkg::CAN_SAMPLE_CLK,
  parameter logic [10:0] DOS_ID     = 11'h000,
  parameter logic [31:0] SEED       = 32'h2545_F491
) (
  input  logic         clk,
  input  logic         rst_n,
  input  attack_mode_t mode,
  input  can_frame_t   user_frame,
  input  logic [15:0]  gap_bits,
  input  logic         bus_rx,
  output logic         tx,
  output logic         active,
  output logic [31:0]  n_sent,
  output logic [31:0]  n_lost,
  output logic [31:0]  n_err
);

  typedef enum logic [1:0] {S_IDLE, S_SEND, S_GAP} state_t;

  state_t      state;
  logic [31:0] rng;
  can_frame_t  cur;
  logic        req, done, arb_lost, busy, bit_err, ack_err;
  logic [31:0] gap_cnt;
  logic [31:0] r1, r2, r3;

  function automatic logic [31:0] xorshift32(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  always_comb begin
    r1 = xorshift32(rng);
    r2 = xorshift32(r1);
    r3 = xorshift32(r2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      rng     <= SEED;
      cur     <= '0;
      req     <= 1'b0;
      gap_cnt <= '0;
      n_sent  <= '0;
      n_lost  <= '0;
      n_err   <= '0;
    end else begin
      if (arb_lost) n_lost <= n_lost + 1'b1;
      if (bit_err || ack_err) n_err <= n_err + 1'b1;
      unique case (state)
        S_IDLE: begin
          if (mode != ATK_OFF) begin
            unique case (mode)
              ATK_DOS:  cur <= '{id: DOS_ID, rtr: 1'b0, dlc: 4'd8, data: 64'h0};
              ATK_FUZZ: begin
                cur <= '{id: r1[10:0], rtr: 1'b0, dlc: 4'd8, data: {r2, r3}};
                rng <= r3;
              end
              default:  cur <= user_frame;
            endcase
            req   <= 1'b1;
            state <= S_SEND;
          end
        end
        S_SEND: begin
          if (done) begin
            req     <= 1'b0;
            n_sent  <= n_sent + 1'b1;
            gap_cnt <= 32'(gap_bits) * 32'(BIT_CLKS);
            state   <= S_GAP;
          end else if (mode == ATK_OFF && !busy) begin
            req   <= 1'b0;          // cancelled before it started
            state <= S_IDLE;
          end
        end
        default: begin            // S_GAP
          if (gap_cnt == '0) state <= S_IDLE;
          else               gap_cnt <= gap_cnt - 1'b1;
        end
      endcase
    end
  end

  assign active = (state != S_IDLE);

  can_tx #(.BIT_CLKS(BIT_CLKS), .SAMPLE_CLK(SAMPLE_CLK)) u_tx (
    .clk, .rst_n, .req, .frame(cur), .bus_rx, .tx, .busy,
    .done, .arb_lost, .bit_err, .ack_err);

endmodule
