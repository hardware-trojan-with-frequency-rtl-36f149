// fm_conceal -- power-concealed FM cell: one FM ring and its three replicas.
//
// Ring (a) stores the value f in FM form. Ring (b), the dual, stores its complement ~f,
// so that between them one ring always runs at f_CLK/8 and the other at f_CLK/4. Rings (c)
// and (d) are swapped copies of (a) and (b): they hold the bitwise complement of every
// stage. Together the four rings always hold as many 1s as 0s (16 of 32 for N = 8),
// which hides the static (leakage) power, and every clock makes six 0->1 and six 1->0
// flip-flop transitions whatever f is, which hides the dynamic power; both frequencies
// are always present in the spectrum. Reset contents (N = 8):
//   (a) 00000001  (b) 00010001  (c) 11111110  (d) 11101110   (stages 1..8)
//
// Payload: when `active` is high the replicas stop hiding the data.
//   SCEN_SINGLE  (b), (c) and (d) are frozen, only (a) switches: power follows f.
//   SCEN_DOUBLE  (c) and (d) are frozen and (b) is written with f instead of ~f, so from
//                the next SYNC on (a) and (b) hold the same value: twice the dependence.
// "Frozen" means the ring's clock enable is low. `active` must change only on the clock
// edge that ends a SYNC cycle; a frozen ring then always misses a whole number of turns
// and is still in step with SYNC when it is enabled again.
//
// Interface: f is sampled on the edge that ends a SYNC cycle (as in fm_encoder);
// fm_out is ring (a)'s FM signal; rings[0..3] are the stage contents of (a)..(d).
// The four rings, their contents and the two payload scenarios follow the original
// design; freezing by clock enable and the exact switch-over timing are this design's
// choices.
module fm_conceal
  import fm_pkg::*;
#(
  parameter int unsigned N = CSR_LEN
) (
  input  logic                               clk,
  input  logic                               rst,
  input  logic                               sync,
  input  logic                               f,
  input  logic                               active,
  input  payload_scen_e                      scen,
  output logic                               fm_out,
  output logic [CONCEAL_RINGS-1:0][N:1]      rings
);

  logic ce_b, ce_cd, d_b;

  always_comb begin
    ce_b  = !(active && scen == SCEN_SINGLE);
    ce_cd = !active;
    d_b   = (active && scen == SCEN_DOUBLE) ? f : !f;
  end

  // (a) FM value of f
  fm_encoder #(.N(N), .RESET_ONE(1'b0), .INVERT(1'b0)) u_a (
    .clk, .rst, .ce(1'b1), .sync, .d(f),   .fm_out(fm_out), .stage(rings[0]));
  // (b) dual: FM value of ~f (of f in SCEN_DOUBLE after activation)
  fm_encoder #(.N(N), .RESET_ONE(1'b1), .INVERT(1'b0)) u_b (
    .clk, .rst, .ce(ce_b), .sync, .d(d_b), .fm_out(), .stage(rings[1]));
  // (c) swapped copy of (a)
  fm_encoder #(.N(N), .RESET_ONE(1'b0), .INVERT(1'b1)) u_c (
    .clk, .rst, .ce(ce_cd), .sync, .d(f),  .fm_out(), .stage(rings[2]));
  // (d) swapped copy of (b)
  fm_encoder #(.N(N), .RESET_ONE(1'b1), .INVERT(1'b1)) u_d (
    .clk, .rst, .ce(ce_cd), .sync, .d(!f), .fm_out(), .stage(rings[3]));

  // `active` may only change on the edge that ends a SYNC cycle, or frozen replicas
  // would fall out of step with SYNC.
  a_active_at_sync: assert property (@(posedge clk) disable iff (rst)
    $changed(active) |-> $past(sync));

endmodule
