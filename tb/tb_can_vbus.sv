// tb_can_vbus -- exhaustive test of the virtual CAN bus.
//
// Walks through every combination of the node tx lines and the Pmod input
// and checks the wired-AND rule: the bus is recessive only when every node
// and the external side are recessive, and the Pmod output reflects the local
// nodes only.
module tb_can_vbus;
  localparam int N = 7;
  logic [N-1:0] node_tx;
  logic pmod_rx, bus, pmod_tx;
  int checks = 0, failures = 0;

  can_vbus #(.N_NODES(N)) dut (.node_tx, .pmod_rx, .bus, .pmod_tx);

  initial begin
    for (int v = 0; v < (1 << (N + 1)); v++) begin
      logic all_local;
      {pmod_rx, node_tx} = (N + 1)'(v);
      #1;
      all_local = 1'b1;
      for (int i = 0; i < N; i++) if (node_tx[i] == 1'b0) all_local = 1'b0;
      checks++;
      if (pmod_tx !== all_local) begin failures++; $display("FAIL: pmod_tx for %b", v); end
      checks++;
      if (bus !== (all_local && pmod_rx)) begin failures++; $display("FAIL: bus for %b", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
