// fm_sync_gen -- SYNC generator of the FM logic family (ring CSR_0).
//
// A circular shift register of N stages that holds a single '1'. Synchronous reset
// places the '1' in the middle stage (stage 4 of 8; the only set-type flip-flop of the
// ring, the others are reset-type), and every clock moves each stage's value to the next
// stage, the last stage feeding the first. SYNC is the middle stage's output, so it is
// high for one cycle in every N, first in the cycle right after reset. Every FM ring of
// the design writes its new data bit in a SYNC cycle.
//
// Interface: clk, rst (synchronous, active high, as the FDRE/FDSE primitives of the
// original), sync, and stage[N:1] (the ring contents, stage 1 = bit 1) for observation.
// The ring structure, reset value and SYNC tap follow the original design; the
// parameterised length N is this design's generalisation (default 8).
module fm_sync_gen
  import fm_pkg::*;
#(
  parameter int unsigned N = CSR_LEN
) (
  input  logic         clk,
  input  logic         rst,
  output logic         sync,
  output logic [N:1]   stage
);

  localparam int unsigned SYNC_STAGE = data_stage(N);

  always_ff @(posedge clk) begin
    if (rst) stage <= N'(1) << (SYNC_STAGE - 1);
    else     stage <= {stage[N-1:1], stage[N]};
  end

  assign sync = stage[SYNC_STAGE];

  // The ring is a one-hot token ring.
  a_onehot: assert property (@(posedge clk) disable iff (rst) $onehot(stage));

endmodule
