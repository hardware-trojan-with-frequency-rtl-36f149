// tb_fm_gate -- self-checking testbench for the FM logic gate.
// Part 1: one two-input gate per function (BUF, AND, NAND, OR, NOR, XOR, XNOR) and a
// four-input AND, fed with FM waveforms made by the testbench (data bit in the SYNC cycle,
// frame marker four cycles later). In every SYNC cycle each gate's FM output must carry
// the function of the bits its inputs carried one frame (8 cycles) earlier, and in the
// other cycles it must show only the frame marker (phase 4), i.e. one or two pulses per
// frame. Part 2 is the circuit of the original figure: SYNC ring, two converters for
// standard inputs A and B and an FM OR gate; the gate output's data bit must equal
// A | B sampled 16 cycles earlier (8 per ring).
module tb_fm_gate;
  import fm_pkg::*;
  localparam int N = 8;
  localparam int NF = 7;
  logic clk = 1'b0, rst = 1'b1;
  logic sync;
  logic [3:0] bits, in_fm;
  logic [NF:0] fm;
  int checks = 0, failures = 0;
  int cnt;

  localparam gate_fn_e FNS [NF] = '{FN_BUF, FN_AND, FN_NAND, FN_OR, FN_NOR, FN_XOR, FN_XNOR};

  for (genvar g = 0; g < NF; g++) begin : g_dut
    fm_gate #(.N(N), .N_IN(2), .FN(FNS[g])) dut (
      .clk, .rst, .sync, .in_fm(in_fm[1:0]), .active(1'b0), .scen(SCEN_SINGLE),
      .fm_out(fm[g]), .rings());
  end
  fm_gate #(.N(N), .N_IN(4), .FN(FN_AND)) dut_and4 (
    .clk, .rst, .sync, .in_fm, .active(1'b0), .scen(SCEN_SINGLE), .fm_out(fm[NF]), .rings());

  // Figure circuit: SYNC ring, converters for A and B, OR gate.
  logic sync_ring, a, b, a_fm, b_fm, f_fm;
  logic [N:1] s0, s1, s2;
  fm_sync_gen #(.N(N)) u_sync (.clk, .rst, .sync(sync_ring), .stage(s0));
  fm_encoder #(.N(N)) u_a (.clk, .rst, .ce(1'b1), .sync(sync_ring), .d(a), .fm_out(a_fm), .stage(s1));
  fm_encoder #(.N(N)) u_b (.clk, .rst, .ce(1'b1), .sync(sync_ring), .d(b), .fm_out(b_fm), .stage(s2));
  fm_gate #(.N(N), .N_IN(2), .FN(FN_OR)) u_or (
    .clk, .rst, .sync(sync_ring), .in_fm({b_fm, a_fm}), .active(1'b0), .scen(SCEN_SINGLE),
    .fm_out(f_fm), .rings());

  always #5 clk = ~clk;

  assign sync = (cnt % N == 0);
  always_comb for (int j = 0; j < 4; j++) in_fm[j] = sync ? bits[j] : (cnt % N == N / 2);

  always @(posedge clk) cnt <= rst ? 0 : cnt + 1;

  function automatic logic ref_fn(int g, logic [3:0] v);
    case (g)
      0: return v[0];
      1: return v[0] & v[1];
      2: return !(v[0] & v[1]);
      3: return v[0] | v[1];
      4: return !(v[0] | v[1]);
      5: return v[0] ^ v[1];
      6: return !(v[0] ^ v[1]);
      default: return &v;
    endcase
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] ab_hist [3];   // A,B sampled at the last three SYNC edges
    bits = '0; a = 1'b0; b = 1'b0;
    for (int i = 0; i < 3; i++) ab_hist[i] = '0;
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    for (int k = 0; k < 80 * N; k++) begin
      @(negedge clk);
      checks++;
      if (sync_ring !== sync) begin
        failures++;
        $display("cnt %0d: SYNC ring out of step", cnt);
      end
      for (int g = 0; g <= NF; g++) begin
        logic exp;
        if (sync) exp = (cnt == 0) ? 1'b0 : ref_fn(g, bits);
        else      exp = (cnt % N == N / 2);
        checks++;
        if (fm[g] !== exp) begin
          failures++;
          $display("cnt %0d gate %0d: fm_out %b expected %b (inputs %b)", cnt, g, fm[g], exp, bits);
        end
      end
      if (sync) begin
        // F data now = A | B written two frames (16 cycles) ago.
        checks++;
        if (f_fm !== (ab_hist[1][0] | ab_hist[1][1])) begin
          failures++;
          $display("cnt %0d: OR chain gives %b, expected %b", cnt, f_fm, ab_hist[1][0] | ab_hist[1][1]);
        end
        bits = 4'($urandom);
        if (k % 64 < 32) bits = 4'hF;     // make the 4-input AND see '1' too
        a = 1'($urandom); b = 1'($urandom);
        ab_hist[1] = ab_hist[0];
        ab_hist[0] = {b, a};
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
