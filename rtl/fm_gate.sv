// fm_gate -- logic gate with frequency modulation (standard gate + FM ring CSR_3).
//
// The N_IN inputs are FM signals (fm_out of other FM rings). A standard logic function FN
// (AND, NAND, OR, NOR, XOR, XNOR, or BUF of input 0) is applied to them; in a SYNC cycle
// every input carries its data bit, so the function's value is the gate's result, and it
// is written into the data slot of a power-concealed FM cell (fm_conceal). Outside SYNC
// cycles the function's output is meaningless but never constant, which is the point of
// the logic family. The gate and the SYNC multiplexer fit one FPGA LUT.
//
// Timing: result of the inputs' data bits in SYNC cycle t appears on fm_out in SYNC cycle
// t + N. A standard value converted by fm_encoder and then passed through one fm_gate
// therefore reaches the gate output 2*N cycles after it was sampled (8 + 8 for N = 8).
//
// The structure and latency follow the original design; the list of functions and the
// concealed output ring (the original's augmentation applied to every FM ring) are this
// design's packaging.
module fm_gate
  import fm_pkg::*;
#(
  parameter int unsigned N    = CSR_LEN,
  parameter int unsigned N_IN = 2,
  parameter gate_fn_e    FN   = FN_OR
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

  logic f;

  always_comb begin
    unique case (FN)
      FN_BUF:  f =  in_fm[0];
      FN_AND:  f =  (&in_fm);
      FN_NAND: f = !(&in_fm);
      FN_OR:   f =  (|in_fm);
      FN_NOR:  f = !(|in_fm);
      FN_XOR:  f =  (^in_fm);
      FN_XNOR: f = !(^in_fm);
      default: f =  in_fm[0];
    endcase
  end

  fm_conceal #(.N(N)) u_cell (
    .clk, .rst, .sync, .f, .active, .scen, .fm_out, .rings);

endmodule
