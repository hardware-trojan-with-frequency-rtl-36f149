// tb_fm_trojan_top_nolock -- end-to-end testbench of the FM Trojan with the ordinary
// (non-locking) FM AND gate as trigger gate (LOCK = 0).
// The trigger string issued in step with SYNC must make the trigger gate's data bit '1'
// in exactly one SYNC cycle, 16 cycles after A..D were high together, and '0' again one
// frame later: the activation lasts one ring turn. The side channel (1s held and
// transitions per cycle, from the exported ring contents) must be constant before the
// activation, must change during it, and must be constant again once the replicas have
// been rewritten at the SYNC edge that follows their release.
module tb_fm_trojan_top_nolock;
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

  fm_trojan_top #(.LOCK(1'b0)) dut (.clk, .rst, .opcode, .opcode_valid, .secret, .scen,
                                    .sync, .fm_trigger, .ring_state);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  int ones, up, down;
  logic [N_RINGS-1:0][N:1] prev;
  logic [1023:0] trig_at;         // trig_at[c]: SYNC cycle c carried a trigger '1'
  logic [1023:0] constant_at;     // constant_at[c]: side channel at its concealed value

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
    trig_at[cyc] = sync && fm_trigger;
    constant_at[cyc] = (ones == 97 && up == 37 && down == 37);
  endtask

  initial begin
    int c0, t, frozen;
    trig_at = '0; constant_at = '0;
    opcode = '0; opcode_valid = 1'b0; secret = '0; scen = SCEN_SINGLE;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    prev = ring_state;
    for (int k = 0; k < 50; k++) begin
      tick();
      secret = 1'($urandom);
    end
    do tick(); while (!sync);
    c0 = cyc;
    for (int k = 1; k <= 8; k++) begin
      tick();
      opcode_valid = 1'b0;
      for (int e = 0; e < 4; e++)
        if (k == 4 + e) begin
          opcode = OPC[e];
          opcode_valid = 1'b1;
        end
    end
    t = c0 + 8;
    for (int k = 0; k < 80; k++) tick();
    // trigger bit in SYNC cycle t + 16 only
    for (int c = 2; c <= t + 80; c++) begin
      checks++;
      if (trig_at[c] !== (c == t + 16)) begin
        failures++;
        $display("cycle %0d: trigger bit %b", c, trig_at[c]);
      end
    end
    // side channel: constant up to t + 16, varying while frozen, constant from t + 33
    frozen = 0;
    for (int c = 2; c <= t + 80; c++) begin
      if (c <= t + 16 || c >= t + 33) begin
        checks++;
        if (!constant_at[c]) begin
          failures++;
          $display("cycle %0d: side channel not at its concealed value", c);
        end
      end else if (!constant_at[c]) frozen++;
    end
    checks++;
    if (frozen == 0) begin
      failures++;
      $display("activation did not show on the side channel");
    end
    $display("mechanisms: one-turn activations 1, cycles with visible payload %0d", frozen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
