// fm_lock_and -- locking AND gate with frequency modulation.
//
// X is the AND of the FM inputs, Y = X | S4, where S4 is the gate's own data stage (the
// middle stage of its ring), and the SYNC multiplexer writes Y into stage 5 in a SYNC
// cycle and S4 otherwise. While the stored bit is '0', a SYNC cycle in which all inputs
// carry '1' writes a '1'; from then on Y is '1' at every SYNC and the gate holds FM '1'
// whatever its inputs do, until reset. X and Y still toggle with the inputs' FM pulses,
// so neither is constant. N_IN = 2 is the original's example; the top level uses four.
//
// Timing as fm_gate: the AND of the inputs' data bits in SYNC cycle t is visible on
// fm_out in SYNC cycle t + N, and stays.
//
// The X/Y/multiplexer structure follows the original design; the number of inputs and
// the concealed ring cell (as in fm_gate) are this design's choices.
module fm_lock_and
  import fm_pkg::*;
#(
  parameter int unsigned N    = CSR_LEN,
  parameter int unsigned N_IN = 2
) (
  input  logic                               clk,
  input  logic                               rst,
  input  logic                               sync,
  input  logic [N_IN-1:0]                    in_fm,
  input  logic                               active,
  input  payload_scen_e                      scen,
  output logic                               fm_out,
  output logic [CONCEAL_RINGS-1:0][N:1]      rings
);

  logic x, y;

  always_comb begin
    x = &in_fm;
    y = x | fm_out;   // fm_out is S4 of ring (a)
  end

  fm_conceal #(.N(N)) u_cell (
    .clk, .rst, .sync, .f(y), .active, .scen, .fm_out, .rings);

  // Once a '1' is stored it is written back at every SYNC.
  a_locked: assert property (@(posedge clk) disable iff (rst) (sync && fm_out) |-> y);

endmodule
