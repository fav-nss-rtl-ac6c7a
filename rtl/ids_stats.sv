// ids_stats -- IDS statistics counters read by the bridge node.
//
// The host's system log reports IDS statistics and high-level errors.  This
// block keeps the numbers behind that report in hardware, so the bridge node
// only has to read them: one counter per IDS class (how many windows were
// classified benign, DoS, fuzzing, spoofing), plus counters of receiver CRC
// errors, receiver stuff errors and IDS input overruns.  Reporting IDS
// statistics follows the testbed description; which events are counted and
// the 32-bit width are choices of this design.
//
// How it works.  Each counter increments by one in the cycle after its event
// pulse and wraps at 2^32.  'clear' zeroes all counters (it wins over an
// event in the same cycle).
//
// Interface.  result/cls from the Softmax (class index of each verdict),
// crc_err/stuff_err from the CAN receiver, overrun from the pre-processor;
// n_class[i] counts verdicts of class i.
module ids_stats #(
  parameter int unsigned N_CLASS = 4,
  localparam int unsigned CLS_W  = (N_CLASS > 1) ? $clog2(N_CLASS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             result,
  input  logic [CLS_W-1:0] cls,
  input  logic             crc_err,
  input  logic             stuff_err,
  input  logic             overrun,
  output logic [31:0]      n_class [N_CLASS],
  output logic [31:0]      n_crc_err,
  output logic [31:0]      n_stuff_err,
  output logic [31:0]      n_overrun
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_class     <= '{default: '0};
      n_crc_err   <= '0;
      n_stuff_err <= '0;
      n_overrun   <= '0;
    end else if (clear) begin
      n_class     <= '{default: '0};
      n_crc_err   <= '0;
      n_stuff_err <= '0;
      n_overrun   <= '0;
    end else begin
      for (int i = 0; i < N_CLASS; i++)
        if (result && cls == CLS_W'(i)) n_class[i] <= n_class[i] + 1'b1;
      if (crc_err)   n_crc_err   <= n_crc_err + 1'b1;
      if (stuff_err) n_stuff_err <= n_stuff_err + 1'b1;
      if (overrun)   n_overrun   <= n_overrun + 1'b1;
    end
  end

endmodule
