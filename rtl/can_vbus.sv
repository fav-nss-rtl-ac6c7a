// can_vbus -- the virtual CAN bus that joins all on-chip CAN nodes.
//
// A physical CAN bus is a wired-AND: any node driving dominant (0) pulls the
// line low, and the line is recessive (1) only when every node releases it.
// Inside the FPGA each node's tx line is "released" when it is 1, so the bus
// is the AND of all tx lines.  That keeps arbitration, ACK and error signalling
// working exactly as on a real bus.
//
// The bus is also taken out to a Pmod connector so that it can be watched on a
// scope, joined to a physical transceiver or chained to another FPGA.  To avoid
// a latch-up loop through an external transceiver (which echoes what it is
// sent), the Pmod output carries the AND of the local nodes only, and the
// Pmod input is ANDed into the bus seen by the local nodes.  Tie pmod_rx to 1
// when nothing is connected.  This split is a choice of this design.
//
// Timing: purely combinational, zero cycles.
module can_vbus #(
  parameter int unsigned N_NODES = 7
) (
  input  logic [N_NODES-1:0] node_tx,   // per-node tx, 0 = dominant
  input  logic               pmod_rx,   // level from the external side
  output logic               bus,       // resolved level for every node rx
  output logic               pmod_tx    // local level to the external side
);

  always_comb begin
    pmod_tx = &node_tx;
    bus     = pmod_tx & pmod_rx;
  end

endmodule
