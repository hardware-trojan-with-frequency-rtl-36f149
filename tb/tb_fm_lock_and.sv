// tb_fm_lock_and -- self-checking testbench for the locking FM AND gate.
// FM inputs are made by the testbench (data bit in the SYNC cycle, marker four cycles
// later). The gate's data bit, read in each SYNC cycle, must be the running OR over
// frames of (A & B), one frame late: '0' while the inputs are never both '1', '1' one
// frame after they first are, and '1' from then on whatever the inputs do, until reset.
// Random input pairs exercise it over several reset rounds; X and Y are checked to keep
// toggling (never constant) while the gate is locked.
module tb_fm_lock_and;
  import fm_pkg::*;
  localparam int N = 8;
  logic clk = 1'b0, rst = 1'b1;
  logic sync, fm_out;
  logic [1:0] bits, in_fm;
  logic [3:0][N:1] rings;
  int checks = 0, failures = 0;
  int cnt;

  fm_lock_and #(.N(N), .N_IN(2)) dut (
    .clk, .rst, .sync, .in_fm, .active(1'b0), .scen(SCEN_SINGLE), .fm_out, .rings);

  always #5 clk = ~clk;
  assign sync = (cnt % N == 0);
  always_comb for (int j = 0; j < 2; j++) in_fm[j] = sync ? bits[j] : (cnt % N == N / 2);
  always @(posedge clk) cnt <= rst ? 0 : cnt + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic locked_m;
    int locks, y_rises;
    logic y_prev;
    locks = 0;
    for (int round = 0; round < 8; round++) begin
      rst = 1'b1; bits = '0;
      repeat (2) @(posedge clk);
      @(negedge clk) rst = 1'b0;
      locked_m = 1'b0;
      y_rises = 0; y_prev = 1'b0;
      for (int fr = 0; fr < 40; fr++) begin
        for (int p = 0; p < N; p++) begin
          if (p != 0) @(negedge clk);
          if (dut.y && !y_prev) y_rises++;
          y_prev = dut.y;
          if (sync) begin
            checks++;
            if (fm_out !== locked_m) begin
              failures++;
              $display("round %0d frame %0d: stored %b expected %b", round, fr, fm_out, locked_m);
            end
            // Inputs for this SYNC: rarely both '1' in the early frames.
            bits = 2'($urandom);
            if (fr < 10 + 3 * round && bits == 2'b11) bits = 2'b01;
            if (bits == 2'b11 && !locked_m) locks++;
            locked_m = locked_m | (&bits);
          end
        end
        @(negedge clk);
      end
      // 40 frames: Y has pulses in every frame (marker of S4 or of the inputs).
      checks++;
      if (y_rises < 20) begin
        failures++;
        $display("round %0d: Y rose only %0d times", round, y_rises);
      end
    end
    checks++;
    if (locks == 0) begin
      failures++;
      $display("the gate never locked");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
