// fav_pkg -- types and constants shared by the CAN testbed blocks.
//
// The testbed runs every node from a 100 MHz clock and the virtual CAN bus at
// 500 kbit/s (both values from the evaluation set-up), so one CAN bit lasts
// 200 clock cycles.  A CAN 2.0A (11-bit identifier) frame is carried between
// blocks as the can_frame_t struct.  The attack-mode encoding, the sample
// point and the IDS class order are choices of this design; the class order
// follows the confusion matrix of the evaluation (Benign, DoS, Fuzzing,
// RPM-Spoof).
package fav_pkg;

  localparam int unsigned CLK_HZ   = 100_000_000;
  localparam int unsigned BITRATE  = 500_000;
  localparam int unsigned CAN_BIT_CLKS = CLK_HZ / BITRATE;      // 200 cycles per bit
  localparam int unsigned CAN_SAMPLE_CLK = (CAN_BIT_CLKS * 3) / 4;   // 75 % sample point

  // Consecutive recessive bits after which the bus counts as idle
  // (7 EOF + 3 intermission + ACK delimiter = 11).
  localparam int unsigned IDLE_BITS = 11;

  // CRC-15 generator polynomial of CAN: x^15+x^14+x^10+x^8+x^7+x^4+x^3+1.
  localparam logic [14:0] CRC15_POLY = 15'h4599;

  typedef struct packed {
    logic [10:0] id;
    logic        rtr;
    logic [3:0]  dlc;
    logic [63:0] data;      // byte 0 in bits 63:56, sent first
  } can_frame_t;

  typedef enum logic [1:0] {
    ATK_OFF   = 2'd0,
    ATK_DOS   = 2'd1,
    ATK_FUZZ  = 2'd2,
    ATK_SPOOF = 2'd3
  } attack_mode_t;

  typedef enum logic [1:0] {
    CLS_BENIGN = 2'd0,
    CLS_DOS    = 2'd1,
    CLS_FUZZ   = 2'd2,
    CLS_SPOOF  = 2'd3
  } ids_class_t;

  // One CRC-15 step for one unstuffed bit.
  function automatic logic [14:0] crc15_step(input logic [14:0] crc, input logic b);
    logic fb;
    fb = b ^ crc[14];
    crc15_step = {crc[13:0], 1'b0} ^ (fb ? CRC15_POLY : 15'h0);
  endfunction

  // Data length in bytes for a DLC code (codes 9..15 mean 8 bytes).
  function automatic logic [3:0] dlc_bytes(input logic [3:0] dlc);
    dlc_bytes = (dlc > 4'd8) ? 4'd8 : dlc;
  endfunction

endpackage
