// event_sync -- event synchronisation for the trigger sequence.
//
// Event i (i = 0 for alpha, 1 for beta, ...) passes through a chain of N_EV - i flip-flops
// (4, 3, 2, 1 for the four events), so if the events occur one per cycle in the order
// alpha, beta, gamma, delta, all outputs ev_sync[0..N_EV-1] (A, B, C, D) are high together
// in the cycle after the last flip-flop captures delta: alpha in cycle c gives A high in
// cycle c + N_EV, delta in cycle c + N_EV - 1 gives D high in the same cycle. Any other
// order or spacing does not line them up.
//
// The flip-flops are reset-type with synchronous reset and always enabled. The chain
// lengths follow the original design; the event count parameter is this design's.
module event_sync #(
  parameter int unsigned N_EV = 4
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [N_EV-1:0]   ev,
  output logic [N_EV-1:0]   ev_sync
);

  for (genvar i = 0; i < N_EV; i++) begin : g_chain
    localparam int unsigned LEN = N_EV - i;
    logic [LEN-1:0] q;

    always_ff @(posedge clk) begin
      if (rst) q <= '0;
      else     q <= LEN'({q, ev[i]});   // shift towards the output
    end

    assign ev_sync[i] = q[LEN-1];
  end

endmodule
