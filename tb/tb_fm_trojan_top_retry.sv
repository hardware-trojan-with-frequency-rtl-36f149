// tb_fm_trojan_top_retry -- the trigger string issued blindly, without reading SYNC.
// An issuer that cannot see SYNC repeats the string alpha-beta-gamma-delta with random
// gaps until the timing happens to line up: the trigger can only fire when A..D are high
// in a SYNC cycle, i.e. about one attempt in eight. The testbench keeps its own SYNC
// phase (a cycle counter started at reset) to predict which attempt is the first aligned
// one, and checks that the trigger gate's data bit turns '1' exactly 16 cycles after that
// attempt's A..D cycle and not before. Default parameters (locking trigger).
module tb_fm_trojan_top_retry;
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
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;                    // cycle 0 is the first cycle after reset (a SYNC cycle)
  int first_trigger = -1;

  task automatic tick();
    @(negedge clk);
    cyc++;
    if (sync && fm_trigger && first_trigger < 0) first_trigger = cyc;
  endtask

  initial begin
    int aligned_at, attempts, total_triggers;
    opcode = '0; opcode_valid = 1'b0; secret = '0; scen = SCEN_SINGLE;
    total_triggers = 0;
    for (int round = 0; round < 6; round++) begin
      rst = 1'b1;
      repeat (2) @(posedge clk);
      @(negedge clk);
      rst = 1'b0;
      cyc = 0;
      first_trigger = -1;
      checks++;
      if (!sync) begin
        failures++;
        $display("round %0d: SYNC not high in the first cycle after reset", round);
      end
      aligned_at = -1;
      attempts = 0;
      while (aligned_at < 0 && attempts < 200) begin
        int gap;
        gap = 1 + int'($urandom % 13);
        for (int k = 0; k < gap; k++) tick();
        // alpha is applied in cycle cyc + 1 ... delta in cycle cyc + 4; A..D high in cyc + 5
        for (int e = 0; e < 4; e++) begin
          tick();
          opcode = OPC[e];
          opcode_valid = 1'b1;
        end
        tick();
        opcode_valid = 1'b0;
        attempts++;
        if (cyc % N == 0) aligned_at = cyc;     // this is the cycle with A..D high
      end
      for (int k = 0; k < 3 * N; k++) tick();
      checks++;
      if (aligned_at < 0 || first_trigger != aligned_at + 2 * N) begin
        failures++;
        $display("round %0d: aligned attempt at %0d, trigger seen at %0d", round, aligned_at, first_trigger);
      end else total_triggers++;
      $display("round %0d: triggered after %0d blind attempts", round, attempts);
    end
    checks++;
    if (total_triggers == 0) begin
      failures++;
      $display("no blind attempt ever triggered");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
