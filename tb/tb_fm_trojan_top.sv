// tb_fm_trojan_top -- end-to-end testbench of the FM Trojan at its default parameters
// (8-stage rings, four trigger events, locking trigger gate, one secret bit).
//
// The ring contents exported by the top stand in for the power side channel: per cycle
// the testbench counts the 1s held (static power) and the 0->1 and 1->0 transitions
// (dynamic power). It checks, in order:
//   1. while random opcodes run, the side channel is constant every cycle
//      (97 ones, 37 rising, 37 falling) and the trigger never fires;
//   2. the trigger string issued one cycle off SYNC, or in the wrong order, is ignored;
//   3. the string issued in step with SYNC fires the trigger: the trigger gate's data bit
//      is '1' exactly 16 cycles after the SYNC cycle in which A..D were high together
//      (8 cycles through the input rings, 8 through the trigger gate's ring);
//   4. payload scenario 1 (only rings (a) switch): per frame the transition count with
//      secret = 1 exceeds that with secret = 0 by 16;
//   5. the trigger stays locked while opcodes keep running;
//   6. payload scenario 2 (rings (a) and (b) hold the same value): the difference is 32;
//   7. after a reset the side channel is constant again.
// Each mechanism is counted and a failure is counted for one that never happened.
module tb_fm_trojan_top;
  import fm_pkg::*;
  localparam int N = 8;
  localparam int N_RINGS = 25;
  localparam logic [7:0] OPC [4] = '{8'h17, 8'hB3, 8'h2A, 8'h4C};

  logic clk = 1'b0, rst = 1'b1;
  logic [7:0] opcode;
  logic opcode_valid;
  logic [0:0] secret;
  payload_scen_e scen;
  logic sync, fm_trigger;
  logic [N_RINGS-1:0][N:1] ring_state;
  int checks = 0, failures = 0;

  fm_trojan_top dut (.clk, .rst, .opcode, .opcode_valid, .secret, .scen,
                     .sync, .fm_trigger, .ring_state);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- per-cycle side-channel proxy -------------------------------------------------
  int cyc = 0;
  int ones, up, down;
  logic [N_RINGS-1:0][N:1] prev;
  bit check_conceal = 1'b0;
  bit noise = 1'b0;
  int first_trigger = -1;        // cycle of the first SYNC with the trigger bit '1'
  int n_conceal = 0, n_reject = 0, n_trigger = 0, n_leak1 = 0, n_lock = 0, n_leak2 = 0;

  task automatic tick();
    @(negedge clk);
    cyc++;
    ones = 0; up = 0; down = 0;
    for (int r = 0; r < N_RINGS; r++)
      for (int s = 1; s <= N; s++) begin
        ones += int'(ring_state[r][s]);
        up   += int'(ring_state[r][s] && !prev[r][s]);
        down += int'(!ring_state[r][s] && prev[r][s]);
      end
    prev = ring_state;
    if (check_conceal) begin
      checks++;
      if (ones != 97 || up != 37 || down != 37) begin
        failures++;
        $display("cycle %0d: side channel not constant: ones %0d up %0d down %0d", cyc, ones, up, down);
      end else n_conceal++;
    end
    if (sync && fm_trigger && first_trigger < 0) first_trigger = cyc;
    if (noise) begin
      opcode = 8'($urandom);
      opcode_valid = 1'($urandom);
      secret = 1'($urandom);
    end
  endtask

  // Issue alpha..delta on consecutive cycles so that A..D are high `shift` cycles after
  // a SYNC cycle (shift = 0: in step). `swap` exchanges beta and gamma. Returns the SYNC
  // cycle in which A..D are high when shift = 0.
  task automatic issue(input int shift, input bit swap, output int t_sync);
    int c0;
    do tick(); while (!sync);
    c0 = cyc;
    for (int k = 1; k <= 8 + shift; k++) begin
      tick();
      opcode_valid = 1'b0;
      for (int e = 0; e < 4; e++)
        if (k == 4 + shift + e) begin
          opcode = OPC[swap && e == 1 ? 2 : swap && e == 2 ? 1 : e];
          opcode_valid = 1'b1;
        end
    end
    t_sync = c0 + 8;
  endtask

  // Transitions summed over `frames` whole frames, starting at a SYNC cycle.
  task automatic frame_toggles(input int frames, output int total);
    total = 0;
    do tick(); while (!sync);
    for (int k = 0; k < frames * N; k++) begin
      total += up + down;
      tick();
    end
  endtask

  task automatic idle(input int n);
    for (int k = 0; k < n; k++) tick();
  endtask

  initial begin
    int t, tg0, tg1, d1, d2;
    opcode = '0; opcode_valid = 1'b0; secret = '0; scen = SCEN_SINGLE;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    prev = ring_state;
    idle(1);
    // 1. random opcode stream, concealment on
    check_conceal = 1'b1;
    noise = 1'b1;
    idle(400);
    noise = 1'b0;
    opcode_valid = 1'b0;
    // 2. misaligned and misordered strings
    issue(1, 1'b0, t);
    idle(40);
    issue(0, 1'b1, t);
    idle(40);
    issue(-1, 1'b0, t);
    idle(40);
    checks++;
    if (first_trigger >= 0) begin
      failures++;
      $display("trigger fired on a wrong string at cycle %0d", first_trigger);
    end else n_reject += 3;
    // 3. string in step with SYNC
    secret = 1'b1;
    issue(0, 1'b0, t);
    idle(16);                 // concealment holds up to the SYNC cycle of activation
    check_conceal = 1'b0;
    idle(8);
    checks++;
    if (first_trigger != t + 16) begin
      failures++;
      $display("trigger bit seen at cycle %0d, expected %0d", first_trigger, t + 16);
    end else n_trigger++;
    // 4. scenario 1: leak through transition count
    idle(16);
    frame_toggles(2, tg1);
    secret = 1'b0;
    idle(24);
    frame_toggles(2, tg0);
    d1 = tg1 - tg0;
    checks++;
    if (d1 != 2 * 16) begin
      failures++;
      $display("SINGLE: toggles over two frames %0d (secret 1) vs %0d (secret 0)", tg1, tg0);
    end else n_leak1++;
    // 5. lock holds with traffic
    noise = 1'b1;
    for (int fr = 0; fr < 10; fr++) begin
      do tick(); while (!sync);
      checks++;
      if (!fm_trigger) begin
        failures++;
        $display("cycle %0d: trigger lost its lock", cyc);
      end else n_lock++;
    end
    noise = 1'b0;
    opcode_valid = 1'b0;
    // 6. scenario 2
    scen = SCEN_DOUBLE;
    secret = 1'b1;
    idle(32);
    frame_toggles(2, tg1);
    secret = 1'b0;
    idle(24);
    frame_toggles(2, tg0);
    d2 = tg1 - tg0;
    checks++;
    if (d2 != 2 * 32) begin
      failures++;
      $display("DOUBLE: toggles over two frames %0d (secret 1) vs %0d (secret 0)", tg1, tg0);
    end else n_leak2++;
    // 7. reset returns to concealment
    rst = 1'b1;
    idle(2);
    rst = 1'b0;
    idle(1);
    check_conceal = 1'b1;
    noise = 1'b1;
    idle(100);
    // every mechanism must have happened
    checks++;
    if (n_conceal == 0 || n_reject == 0 || n_trigger == 0 || n_leak1 == 0 || n_lock == 0 || n_leak2 == 0) begin
      failures++;
      $display("mechanism missing");
    end
    $display("mechanisms: concealed cycles %0d, strings rejected %0d, triggers %0d, SINGLE leaks %0d, locked frames %0d, DOUBLE leaks %0d",
             n_conceal, n_reject, n_trigger, n_leak1, n_lock, n_leak2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
