// tb_fm_sync_gen -- self-checking testbench for the SYNC generator.
// Checks after reset that the ring holds exactly one '1', that it sits in stage 4 in the
// first cycle and advances one stage per clock, and that SYNC is high once every 8 cycles
// (8 pulses in 64 cycles), comparing against a cycle counter kept by the testbench.
module tb_fm_sync_gen;
  localparam int N = 8;
  logic clk = 1'b0, rst = 1'b1;
  logic sync;
  logic [N:1] stage;
  int checks = 0, failures = 0;

  fm_sync_gen #(.N(N)) dut (.clk, .rst, .sync, .stage);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pulses;
    logic [N:1] exp;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    pulses = 0;
    // Cycle k after reset (k = 0 is the first): the '1' is in stage ((3 + k) mod 8) + 1.
    for (int k = 0; k < 64; k++) begin
      @(negedge clk);
      exp = '0;
      exp[((3 + k) % N) + 1] = 1'b1;
      checks++;
      if (stage !== exp) begin
        failures++;
        $display("cycle %0d: stage %b expected %b", k, stage, exp);
      end
      checks++;
      if (sync !== (k % N == 0)) begin
        failures++;
        $display("cycle %0d: sync %b", k, sync);
      end
      if (sync) pulses++;
    end
    checks++;
    if (pulses != 8) begin
      failures++;
      $display("SYNC pulses in 64 cycles: %0d, expected 8", pulses);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
