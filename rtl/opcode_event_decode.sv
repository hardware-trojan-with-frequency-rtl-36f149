// opcode_event_decode -- turns the attacked processor's opcode stream into trigger events.
//
// The Trojan is triggered by a particular string of operation codes issued by the host
// processor. This block raises ev[i] in a cycle in which the processor issues opcode
// OPCODES[i] (opcode_valid high); ev[0] is event alpha, ev[1] beta, and so on. It is purely
// combinational; event_sync registers the events. Each opcode is an ordinary instruction
// of the processor, so each comparator is exercised by normal functional tests.
//
// The idea (events are specific opcodes) is the original's; the opcode width, the
// default opcode values and the valid strobe are this design's assumptions.
module opcode_event_decode #(
  parameter int unsigned                   OPC_W   = 8,
  parameter int unsigned                   N_EV    = 4,
  parameter logic [N_EV-1:0][OPC_W-1:0]    OPCODES = {8'h4C, 8'h2A, 8'hB3, 8'h17}
) (
  input  logic [OPC_W-1:0]  opcode,
  input  logic              opcode_valid,
  output logic [N_EV-1:0]   ev
);

  always_comb begin
    for (int i = 0; i < N_EV; i++)
      ev[i] = opcode_valid && (opcode == OPCODES[i]);
  end

endmodule
