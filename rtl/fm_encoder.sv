// fm_encoder -- one FM ring: converts a standard logic value to an FM signal
// (rings CSR_1, CSR_2 and CSR_3 of the FM gate).
//
// A circular shift register of N stages. Each clock every stage passes its value to the
// next one and the last stage feeds the first, except at the input of stage N/2+1
// (stage 5 of 8), where a 2:1 multiplexer selected by SYNC chooses between the previous
// stage (SYNC = 0) and the new value d (SYNC = 1). The last stage holds a permanent frame
// marker, the middle stage (4 of 8) the data bit, so the ring runs at f_CLK/N for a '0'
// and at 2*f_CLK/N for a '1'. The FM output is the middle stage's output: in a SYNC cycle
// it equals the stored bit, which is how a following FM gate reads it.
//
// Timing: d is sampled on the clock edge that ends a SYNC cycle and appears on fm_out in
// the next SYNC cycle, N cycles later (the gate latency of one full turn).
//
// ce is the clock enable of all the ring's flip-flops; the synchronous reset overrides it.
// INVERT = 1 makes a "swapped" ring that stores the bitwise complement of the ordinary one
// (reset value and written value inverted), as used for power concealment. RESET_ONE
// selects the data bit loaded by reset ('0' in the original's reset table, '1' for the
// dual replica). Ring, multiplexer position, marker and reset follow the original design;
// ce as a freeze control, INVERT and RESET_ONE are this design's parameterisation.
module fm_encoder
  import fm_pkg::*;
#(
  parameter int unsigned N         = CSR_LEN,
  parameter bit          RESET_ONE = 1'b0,
  parameter bit          INVERT    = 1'b0
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         ce,
  input  logic         sync,
  input  logic         d,
  output logic         fm_out,
  output logic [N:1]   stage
);

  localparam int unsigned DS = data_stage(N);
  localparam int unsigned MS = marker_stage(N);

  // Reset contents: marker in the last stage, RESET_ONE in the data stage.
  function automatic logic [N:1] reset_value();
    logic [N:1] v;
    v        = '0;
    v[MS]    = 1'b1;
    v[DS]    = RESET_ONE;
    return INVERT ? ~v : v;
  endfunction

  logic [N:1] nxt;

  always_comb begin
    nxt        = {stage[N-1:1], stage[N]};
    nxt[DS+1]  = sync ? (d ^ INVERT) : stage[DS];
  end

  always_ff @(posedge clk) begin
    if (rst)     stage <= reset_value();
    else if (ce) stage <= nxt;
  end

  assign fm_out = stage[DS];

endmodule
