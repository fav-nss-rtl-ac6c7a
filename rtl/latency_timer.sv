// latency_timer -- detection-latency instrument for the CAN-coupled IDS.
//
// Measures, in clock cycles, the time from the start of a CAN frame on the
// bus to the completion of the Softmax for the window that frame completed,
// which is how the testbed characterises detection latency.  Keeps the last
// and the largest value and the number of measurements for the bridge node to
// read.  Multiply by the clock period (10 ns at 100 MHz) for time.
//
// How it works.  A free-running cycle counter is copied at every start of
// frame (sof).  When the pre-processor loads a new window (win_new, a few
// cycles after the end of that frame) the copy becomes the pending start
// time; the next Softmax result (result) closes the measurement.  A window
// that is replaced before its result arrives replaces the pending start time
// as well, matching the pre-processor's overrun rule.  Results with no
// pending start are ignored.  This bookkeeping is a choice of this design.
//
// Timing: counters update one cycle after the pulse that causes them.
module latency_timer #(
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             sof,
  input  logic             win_new,
  input  logic             result,
  output logic [CNT_W-1:0] last_lat,
  output logic [CNT_W-1:0] max_lat,
  output logic [CNT_W-1:0] n_meas
);

  logic [CNT_W-1:0] now, ts_sof, ts_pend;
  logic             pend;
  logic [CNT_W-1:0] lat;

  assign lat = now - ts_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now      <= '0;
      ts_sof   <= '0;
      ts_pend  <= '0;
      pend     <= 1'b0;
      last_lat <= '0;
      max_lat  <= '0;
      n_meas   <= '0;
    end else begin
      now <= now + 1'b1;
      if (sof) ts_sof <= now;
      if (result && pend) begin
        last_lat <= lat;
        if (lat > max_lat) max_lat <= lat;
        n_meas   <= n_meas + 1'b1;
      end
      if (win_new) begin
        ts_pend <= ts_sof;
        pend    <= 1'b1;
      end else if (result) begin
        pend <= 1'b0;
      end
    end
  end

endmodule
