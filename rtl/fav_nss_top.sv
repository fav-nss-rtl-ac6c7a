// fav_nss_top -- FPGA hardware subsystem of the CAN security test bed, with the
// intrusion-detection system integrated as an extension of a CAN controller.
//
// What is inside:
//   * can_vbus        the virtual CAN bus (wired-AND) joining every node, with
//                     a Pmod port to an external transceiver or another FPGA;
//   * attack_injector the hardware DoS / fuzzing / spoofing node;
//   * can_rx          the receive-only CAN core of the IDS-enabled controller;
//   * ids_preproc     feature extraction and 4-frame sliding window, streamed
//                     to the IDS core;
//   * softmax4        hardware Softmax on the IDS scores, giving the class;
//   * latency_timer   start-of-frame to Softmax-done latency instrument;
//   * wave_capture    clock-rate signal capture packed into Ethernet frames;
//   * bus_logger      time-stamped log of every received CAN frame, also
//                     sent as Ethernet frames;
//   * eth_mux         merges capture and bus-log frames onto one MAC stream;
//   * ids_stats       verdict counters per class and error/overrun counters.
// What is outside and reaches the top as ports: the four soft-processor ECUs
// and the control node (only their CAN tx lines matter to the bus), the
// quantised-MLP IDS core (AXI-stream out for features, in for scores), the
// bridge node that reads results and configures the injector and capture, and
// the Ethernet MAC that takes the merged byte stream.
//
// Data path of one frame:  bus -> can_rx (frame at the ACK delimiter)
//   -> ids_preproc (+1 cycle) -> ids_feat_* -> external IDS core
//   -> ids_score_* -> softmax4 (21 cycles) -> sm_* and the latency timer.
//
// The block set and the direction of every connection follow the published
// architecture; node count, bit rate and clock follow its evaluation set-up
// (4 ECUs, 500 kbit/s, 100 MHz).  Probe wiring of the capture unit and all
// widths not given there are choices of this design (see the README).
//
// Capture probe bits (wave_capture): 0 bus, 1 pmod_tx, 2 pmod_rx, 3 AND of
// ECU tx lines, 4 control-node tx, 5 injector tx, 6 IDS receiver ACK,
// 7 start of frame, 8 frame received, 9 feature valid, 10 score valid,
// 11 Softmax done, 15:12 Softmax one-hot class.  With cap_sel high the
// capture records cap_user instead (user-defined bit-level data).
// Ethernet frames carry EtherType 0x88B5 (capture) or 0x88B6 (bus log).
module fav_nss_top
  import fav_pkg::*;
#(
  parameter int unsigned N_ECU      = 4,
  parameter int unsigned BIT_CLKS   = fav_pkg::CAN_BIT_CLKS,
  parameter int unsigned SAMPLE_CLK = fav_pkg::CAN_SAMPLE_CLK,
  parameter int unsigned WINDOW     = 4,
  parameter int unsigned N_CLASS    = 4,
  parameter int unsigned SCORE_W    = 16,
  parameter int unsigned SCORE_FRAC = 4,
  parameter int unsigned CAP_DEPTH  = 1024,
  parameter int unsigned CAP_PKT    = 256,
  localparam int unsigned FEAT_W    = 80,
  localparam int unsigned CLS_W     = (N_CLASS > 1) ? $clog2(N_CLASS) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // CAN nodes outside this module
  input  logic [N_ECU-1:0]            ecu_can_tx,
  input  logic                        ctrl_can_tx,
  output logic                        can_bus,
  input  logic                        pmod_can_rx,
  output logic                        pmod_can_tx,
  // attack injector configuration and status
  input  attack_mode_t                atk_mode,
  input  can_frame_t                  atk_frame,
  input  logic [15:0]                 atk_gap_bits,
  output logic                        atk_active,
  output logic [31:0]                 atk_n_sent,
  output logic [31:0]                 atk_n_lost,
  output logic [31:0]                 atk_n_err,
  // received frames (bus log for the bridge node)
  output logic                        rx_valid,
  output can_frame_t                  rx_frame,
  output logic                        rx_crc_err,
  output logic                        rx_stuff_err,
  // IDS core: feature stream out, score stream in
  output logic                        ids_feat_tvalid,
  input  logic                        ids_feat_tready,
  output logic [WINDOW*FEAT_W-1:0]    ids_feat_tdata,
  output logic                        ids_overrun,
  input  logic                        ids_score_tvalid,
  output logic                        ids_score_tready,
  input  logic [N_CLASS*SCORE_W-1:0]  ids_score_tdata,
  // Softmax result
  output logic                        sm_valid,
  output logic [N_CLASS*16-1:0]       sm_prob,
  output logic [CLS_W-1:0]            sm_cls,
  output logic [N_CLASS-1:0]          sm_onehot,
  // latency instrument
  output logic [31:0]                 lat_last,
  output logic [31:0]                 lat_max,
  output logic [31:0]                 lat_n,
  // wave capture
  input  logic                        cap_arm,
  input  logic [15:0]                 cap_trig_mask,
  input  logic                        cap_sel,
  input  logic [15:0]                 cap_user,
  output logic [7:0]                  eth_tdata,
  output logic                        eth_tvalid,
  input  logic                        eth_tready,
  output logic                        eth_tlast,
  output logic                        cap_busy,
  output logic [15:0]                 cap_n_frames,
  // CAN bus log
  output logic [31:0]                 log_n_logged,
  output logic [31:0]                 log_n_dropped,
  output logic [15:0]                 log_n_frames,
  // IDS statistics
  input  logic                        stat_clear,
  output logic [31:0]                 stat_n_class [N_CLASS],
  output logic [31:0]                 stat_n_crc_err,
  output logic [31:0]                 stat_n_stuff_err,
  output logic [31:0]                 stat_n_overrun
);

  localparam int unsigned N_NODES = N_ECU + 3;

  logic       inj_tx, rx_ack_tx, rx_sof;
  logic       win_new;
  logic [15:0] probe, sys_probe;
  logic [7:0]  cap_tdata, log_tdata;
  logic        cap_tvalid, cap_tready, cap_tlast;
  logic        log_tvalid, log_tready, log_tlast;

  can_vbus #(.N_NODES(N_NODES)) u_vbus (
    .node_tx ({ecu_can_tx, ctrl_can_tx, inj_tx, rx_ack_tx}),
    .pmod_rx (pmod_can_rx),
    .bus     (can_bus),
    .pmod_tx (pmod_can_tx));

  attack_injector #(.BIT_CLKS(BIT_CLKS), .SAMPLE_CLK(SAMPLE_CLK)) u_inj (
    .clk, .rst_n,
    .mode       (atk_mode),
    .user_frame (atk_frame),
    .gap_bits   (atk_gap_bits),
    .bus_rx     (can_bus),
    .tx         (inj_tx),
    .active     (atk_active),
    .n_sent     (atk_n_sent),
    .n_lost     (atk_n_lost),
    .n_err      (atk_n_err));

  can_rx #(.BIT_CLKS(BIT_CLKS), .SAMPLE_CLK(SAMPLE_CLK), .ACK_EN(1'b1)) u_rx (
    .clk, .rst_n,
    .bus_rx      (can_bus),
    .ack_tx      (rx_ack_tx),
    .sof         (rx_sof),
    .frame_valid (rx_valid),
    .frame       (rx_frame),
    .crc_err     (rx_crc_err),
    .stuff_err   (rx_stuff_err));

  ids_preproc #(.WINDOW(WINDOW)) u_pre (
    .clk, .rst_n,
    .in_valid (rx_valid),
    .in_frame (rx_frame),
    .m_tvalid (ids_feat_tvalid),
    .m_tready (ids_feat_tready),
    .m_tdata  (ids_feat_tdata),
    .overrun  (ids_overrun),
    .win_new  (win_new));

  softmax4 #(.N_CLASS(N_CLASS), .IN_W(SCORE_W), .FRAC(SCORE_FRAC), .P_W(16)) u_sm (
    .clk, .rst_n,
    .s_tvalid (ids_score_tvalid),
    .s_tready (ids_score_tready),
    .s_tdata  (ids_score_tdata),
    .m_valid  (sm_valid),
    .prob     (sm_prob),
    .cls      (sm_cls),
    .onehot   (sm_onehot));

  latency_timer #(.CNT_W(32)) u_lat (
    .clk, .rst_n,
    .sof      (rx_sof),
    .win_new  (win_new),
    .result   (sm_valid),
    .last_lat (lat_last),
    .max_lat  (lat_max),
    .n_meas   (lat_n));

  always_comb begin
    sys_probe        = '0;
    sys_probe[0]     = can_bus;
    sys_probe[1]     = pmod_can_tx;
    sys_probe[2]     = pmod_can_rx;
    sys_probe[3]     = &ecu_can_tx;
    sys_probe[4]     = ctrl_can_tx;
    sys_probe[5]     = inj_tx;
    sys_probe[6]     = rx_ack_tx;
    sys_probe[7]     = rx_sof;
    sys_probe[8]     = rx_valid;
    sys_probe[9]     = ids_feat_tvalid;
    sys_probe[10]    = ids_score_tvalid;
    sys_probe[11]    = sm_valid;
    sys_probe[15:12] = 4'(sm_onehot);
  end

  assign probe = cap_sel ? cap_user : sys_probe;

  wave_capture #(.PROBE_W(16), .DEPTH(CAP_DEPTH), .PKT_SAMPLES(CAP_PKT)) u_cap (
    .clk, .rst_n,
    .probe     (probe),
    .arm       (cap_arm),
    .trig_mask (cap_trig_mask),
    .m_tdata   (cap_tdata),
    .m_tvalid  (cap_tvalid),
    .m_tready  (cap_tready),
    .m_tlast   (cap_tlast),
    .busy      (cap_busy),
    .n_frames  (cap_n_frames));

  bus_logger u_log (
    .clk, .rst_n,
    .sof       (rx_sof),
    .in_valid  (rx_valid),
    .in_frame  (rx_frame),
    .m_tdata   (log_tdata),
    .m_tvalid  (log_tvalid),
    .m_tready  (log_tready),
    .m_tlast   (log_tlast),
    .n_logged  (log_n_logged),
    .n_dropped (log_n_dropped),
    .n_frames  (log_n_frames));

  ids_stats #(.N_CLASS(N_CLASS)) u_stats (
    .clk, .rst_n,
    .clear       (stat_clear),
    .result      (sm_valid),
    .cls         (sm_cls),
    .crc_err     (rx_crc_err),
    .stuff_err   (rx_stuff_err),
    .overrun     (ids_overrun),
    .n_class     (stat_n_class),
    .n_crc_err   (stat_n_crc_err),
    .n_stuff_err (stat_n_stuff_err),
    .n_overrun   (stat_n_overrun));

  eth_mux u_eth (
    .clk, .rst_n,
    .s0_tdata  (cap_tdata),
    .s0_tvalid (cap_tvalid),
    .s0_tready (cap_tready),
    .s0_tlast  (cap_tlast),
    .s1_tdata  (log_tdata),
    .s1_tvalid (log_tvalid),
    .s1_tready (log_tready),
    .s1_tlast  (log_tlast),
    .m_tdata   (eth_tdata),
    .m_tvalid  (eth_tvalid),
    .m_tready  (eth_tready),
    .m_tlast   (eth_tlast));

endmodule
