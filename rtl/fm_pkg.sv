// fm_pkg -- constants and types shared by the frequency-modulated (FM) logic blocks.
//
// In FM logic a bit is carried by the frequency of a pulse train that circulates in a
// circular shift register (CSR) of CSR_LEN stages (8 by default). Every FM ring holds a
// frame marker in its last stage and the data bit in the middle stage (stage 4 of 8). A
// logic '0' is therefore one pulse per turn (f_CLK/8) and a logic '1' two pulses per turn
// (f_CLK/4). A separate ring (the SYNC generator) holds a single '1' in the middle stage;
// SYNC is high in exactly the cycle in which every FM ring has its data bit in the middle
// stage, and new values are written into the stage after it. Stage numbers here count
// from 1, as in the stage tables of the original description; the general placement
// (data/SYNC stage = CSR_LEN/2, marker = CSR_LEN) reproduces the 8-stage numbers and the
// 4-stage minimum ring (25 % / 50 % activity) and is otherwise this design's choice.
package fm_pkg;

  // Ring length; the original design uses eight stages and notes four as the minimum.
  localparam int unsigned CSR_LEN = 8;

  // Stage that holds the data bit, and whose output is the FM signal (stage 4 of 8).
  function automatic int unsigned data_stage(int unsigned n);
    return n / 2;
  endfunction

  // Stage that holds the frame marker (stage 8 of 8).
  function automatic int unsigned marker_stage(int unsigned n);
    return n;
  endfunction

  // Standard logic function placed in front of an FM ring (the "standard logic gate").
  typedef enum logic [2:0] {
    FN_BUF  = 3'd0,   // identity of input 0 (plain standard-to-FM conversion)
    FN_AND  = 3'd1,
    FN_NAND = 3'd2,
    FN_OR   = 3'd3,
    FN_NOR  = 3'd4,
    FN_XOR  = 3'd5,
    FN_XNOR = 3'd6
  } gate_fn_e;

  // What the payload does to the concealment replicas once the Trojan is active.
  //   SCEN_SINGLE: replicas (b), (c), (d) are frozen; only ring (a) switches.
  //   SCEN_DOUBLE: replicas (c), (d) are frozen; (b) holds the same value as (a).
  typedef enum logic {
    SCEN_SINGLE = 1'b0,
    SCEN_DOUBLE = 1'b1
  } payload_scen_e;

  // Number of rings in one power-concealed FM cell: (a), (b), (c), (d).
  localparam int unsigned CONCEAL_RINGS = 4;

endpackage
