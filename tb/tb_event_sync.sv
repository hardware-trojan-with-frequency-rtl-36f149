// tb_event_sync -- self-checking testbench for the event synchronisation chains.
// Random event strobes are applied; each output must equal its event delayed by
// 4, 3, 2 and 1 cycles (alpha..delta), taken from a history kept by the testbench.
// Then the string alpha, beta, gamma, delta on consecutive cycles must make all four
// outputs high in one cycle, exactly 4 cycles after alpha, while the same events in the
// wrong order or with a gap must not.
module tb_event_sync;
  localparam int N_EV = 4;
  logic clk = 1'b0, rst = 1'b1;
  logic [N_EV-1:0] ev, ev_sync;
  int checks = 0, failures = 0;

  event_sync #(.N_EV(N_EV)) dut (.clk, .rst, .ev, .ev_sync);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N_EV-1:0] hist [0:N_EV];   // hist[k] = ev applied k cycles ago

  // Apply one event vector for one cycle; return whether all outputs were high in
  // that cycle (before the edge).
  task automatic step(input logic [N_EV-1:0] v, output logic all_high);
    ev = v;
    @(posedge clk);
    #1;
    for (int k = N_EV; k > 0; k--) hist[k] = hist[k-1];
    hist[0] = v;
    all_high = &ev_sync;
    for (int i = 0; i < N_EV; i++) begin
      checks++;
      if (ev_sync[i] !== hist[N_EV - 1 - i][i]) begin
        failures++;
        $display("%0t: out %0d = %b, event %0d cycles ago = %b", $time, i, ev_sync[i],
                 N_EV - i, hist[N_EV - 1 - i][i]);
      end
    end
  endtask

  task automatic sequence_test(input int order [4], input int gap_at, input logic expect_hit);
    logic h, hit;
    hit = 1'b0;
    for (int s = 0; s < 4; s++) begin
      if (s == gap_at) step('0, h);
      step(N_EV'(1) << order[s], h);
      hit |= h;
    end
    for (int s = 0; s < 6; s++) begin
      step('0, h);
      hit |= h;
    end
    checks++;
    if (hit !== expect_hit) begin
      failures++;
      $display("sequence %p gap %0d: all-high %b expected %b", order, gap_at, hit, expect_hit);
    end
  endtask

  initial begin
    logic h;
    ev = '0;
    for (int k = 0; k <= N_EV; k++) hist[k] = '0;
    repeat (2) @(posedge clk);
    rst = 1'b0;
    for (int k = 0; k < 500; k++) step(N_EV'($urandom), h);
    for (int k = 0; k < 6; k++) step('0, h);
    sequence_test('{0, 1, 2, 3}, -1, 1'b1);
    sequence_test('{1, 0, 2, 3}, -1, 1'b0);
    sequence_test('{0, 1, 3, 2}, -1, 1'b0);
    sequence_test('{0, 1, 2, 3},  2, 1'b0);
    sequence_test('{3, 2, 1, 0}, -1, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
