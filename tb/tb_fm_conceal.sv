// tb_fm_conceal -- self-checking testbench for the power-concealed FM cell.
// SYNC comes from a counter in the testbench. A phase model predicts all four rings every
// cycle (frame marker in stage ((7 + p) mod 8) + 1, data bit in stage ((3 + p) mod 8) + 1,
// swapped rings inverted), with the replica freezing and the dual ring's input taken from
// the payload rules: SINGLE freezes (b),(c),(d); DOUBLE freezes (c),(d) and writes f into (b).
// Power proxies are checked too: while concealment is on, every cycle the cell must hold
// 16 ones and make 6 rising and 6 falling transitions, whatever f is; once active, the
// number of transitions must reveal f (2 or 4 per cycle in SINGLE, 4 or 8 in DOUBLE).
module tb_fm_conceal;
  import fm_pkg::*;
  localparam int N = 8;
  logic clk = 1'b0, rst = 1'b1;
  logic sync, f, active;
  payload_scen_e scen;
  logic fm_out;
  logic [3:0][N:1] rings;
  int checks = 0, failures = 0;

  fm_conceal #(.N(N)) dut (.clk, .rst, .sync, .f, .active, .scen, .fm_out, .rings);

  always #5 clk = ~clk;

  int cnt;                 // cycles since reset
  int ph [4];              // model phase of each ring
  logic [3:0] wr;          // model data bit of each ring (before inversion)
  logic [3:0] ce_m, d_m;
  assign sync = (cnt % N == 0);

  function automatic logic [N:1] pat(int p, logic dat);
    logic [N:1] v = '0;
    v[((N - 1 + p) % N) + 1] = 1'b1;
    v[((N / 2 - 1 + p) % N) + 1] = dat;
    return v;
  endfunction

  always_comb begin
    ce_m[0] = 1'b1;
    ce_m[1] = !(active && scen == SCEN_SINGLE);
    ce_m[2] = !active;
    ce_m[3] = !active;
    d_m[0]  = f;
    d_m[1]  = (active && scen == SCEN_DOUBLE) ? f : !f;
    d_m[2]  = f;
    d_m[3]  = !f;
  end

  always @(posedge clk) begin
    if (rst) begin
      cnt <= 0;
      wr  <= 4'b1010;
      for (int r = 0; r < 4; r++) ph[r] <= 0;
    end else begin
      cnt <= cnt + 1;
      for (int r = 0; r < 4; r++) if (ce_m[r]) begin
        ph[r] <= ph[r] + 1;
        if (sync) wr[r] <= d_m[r];
      end
    end
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [3:0][N:1] prev;
  int up, down, ones;
  int settle;              // cycles to skip before power checks after a change

  task automatic check_cycle(input int mode, input int exp_toggles);
    // mode 0: concealment on; mode 1: leak check with the given toggle count
    logic [N:1] exp;
    for (int r = 0; r < 4; r++) begin
      exp = pat(ph[r], wr[r]);
      if (r >= 2) exp = ~exp;
      checks++;
      if (rings[r] !== exp) begin
        failures++;
        $display("cnt %0d ring %0d: %b expected %b", cnt, r, rings[r], exp);
      end
    end
    up = 0; down = 0; ones = 0;
    for (int r = 0; r < 4; r++)
      for (int s = 1; s <= N; s++) begin
        ones += int'(rings[r][s]);
        up   += int'(rings[r][s] && !prev[r][s]);
        down += int'(!rings[r][s] && prev[r][s]);
      end
    if (settle > 0) settle--;
    else if (mode == 0) begin
      checks++;
      if (ones != 16 || up != 6 || down != 6) begin
        failures++;
        $display("cnt %0d: concealment broken: ones %0d up %0d down %0d", cnt, ones, up, down);
      end
    end else begin
      checks++;
      if (up + down != exp_toggles) begin
        failures++;
        $display("cnt %0d: %0d transitions, expected %0d", cnt, up + down, exp_toggles);
      end
    end
    prev = rings;
  endtask

  // Run `frames` frames; f is redrawn (random, or fixed_f if >= 0) before each SYNC edge.
  task automatic run(input int frames, input int mode, input int fixed_f, input int exp_toggles);
    for (int k = 0; k < frames * N; k++) begin
      @(negedge clk);
      if (sync) f = (fixed_f < 0) ? 1'($urandom) : 1'(fixed_f);
      check_cycle(mode, exp_toggles);
    end
  endtask

  // Change `active` right after the edge that ends a SYNC cycle.
  task automatic set_active(input logic a, input payload_scen_e s);
    do @(negedge clk); while (cnt % N != 1);
    active = a;
    scen   = s;
    check_cycle(a ? 1 : 0, 0);
  endtask

  initial begin
    f = 1'b0; active = 1'b0; scen = SCEN_SINGLE;
    settle = 1;
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    @(negedge clk);
    prev = rings;
    run(30, 0, -1, 0);                       // concealed, random data
    // Payload scenario 1: only (a) switches.
    settle = 100;
    set_active(1'b1, SCEN_SINGLE);
    settle = 15; run(3, 1, 1, 4);            // f = 1 -> 4 transitions per cycle
    settle = 8;  run(3, 1, 0, 2);            // f = 0 -> 2 transitions per cycle
    settle = 100;
    set_active(1'b0, SCEN_SINGLE);
    settle = 2 * N; run(10, 0, -1, 0);       // concealment restored after one write
    // Payload scenario 2: (a) and (b) hold the same value.
    settle = 100;
    set_active(1'b1, SCEN_DOUBLE);
    settle = 15; run(3, 1, 1, 8);
    checks++;
    if (rings[1] !== rings[0]) begin
      failures++;
      $display("DOUBLE: ring (b) %b differs from (a) %b", rings[1], rings[0]);
    end
    settle = 8;  run(3, 1, 0, 4);
    settle = 100;
    set_active(1'b0, SCEN_SINGLE);
    settle = 2 * N; run(10, 0, -1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
