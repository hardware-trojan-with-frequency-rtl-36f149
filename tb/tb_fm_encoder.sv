// tb_fm_encoder -- self-checking testbench for the FM ring (standard-to-FM converter).
// SYNC comes from a counter in the testbench. Four rings are tested side by side: plain
// (reset '0'), dual (reset '1'), and the two swapped (inverted) variants. A phase model
// predicts every ring's contents: in the cycle p after a SYNC the frame marker sits in
// stage ((7 + p) mod 8) + 1 and the data bit in stage ((3 + p) mod 8) + 1, the data bit
// being the last value written. Random inputs are written at every SYNC; the FM output is
// checked to equal the input sampled 8 cycles earlier (the one-turn latency), the pulse
// count per frame is checked (1 for '0', 2 for '1'), and the clock enable is tested by
// freezing the rings for exactly one frame and checking that they resume in step.
module tb_fm_encoder;
  localparam int N = 8;
  logic clk = 1'b0, rst = 1'b1;
  logic sync, ce;
  logic [3:0] d, fm;
  logic [3:0][N:1] st;
  int checks = 0, failures = 0;
  int cyc;

  fm_encoder #(.N(N), .RESET_ONE(1'b0), .INVERT(1'b0)) u0 (.clk, .rst, .ce, .sync, .d(d[0]), .fm_out(fm[0]), .stage(st[0]));
  fm_encoder #(.N(N), .RESET_ONE(1'b1), .INVERT(1'b0)) u1 (.clk, .rst, .ce, .sync, .d(d[1]), .fm_out(fm[1]), .stage(st[1]));
  fm_encoder #(.N(N), .RESET_ONE(1'b0), .INVERT(1'b1)) u2 (.clk, .rst, .ce, .sync, .d(d[2]), .fm_out(fm[2]), .stage(st[2]));
  fm_encoder #(.N(N), .RESET_ONE(1'b1), .INVERT(1'b1)) u3 (.clk, .rst, .ce, .sync, .d(d[3]), .fm_out(fm[3]), .stage(st[3]));

  always #5 clk = ~clk;

  // Ring phase as the model sees it: advances only with ce.
  int ph;
  logic [3:0] wr;          // last value written into each ring's data slot
  logic [3:0] d_hist;      // input sampled at the previous SYNC write
  assign sync = (ph % N == 0);

  function automatic logic [N:1] pat(int p, logic dat);
    logic [N:1] v = '0;
    v[((N - 1 + p) % N) + 1] = 1'b1;
    v[((N / 2 - 1 + p) % N) + 1] = dat;
    return v;
  endfunction

  always @(posedge clk) begin
    if (rst) begin
      ph <= 0;
      wr <= 4'b1010;         // reset data: u1 and u3 reset to '1'
    end else if (ce) begin
      ph <= ph + 1;
      if (sync) wr <= d;
    end
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rises [4];
    logic [3:0] fm_prev;
    logic [N:1] exp;
    ce = 1'b1;
    d = '0;
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    fm_prev = '0;
    for (int i = 0; i < 4; i++) rises[i] = 0;
    for (cyc = 0; cyc < 400; cyc++) begin
      @(negedge clk);
      // Freeze for one whole frame, starting right after a SYNC edge.
      if (cyc >= 200 && cyc < 208) begin
        if (ce) ce = 1'b0;
      end else ce = 1'b1;
      for (int r = 0; r < 4; r++) begin
        exp = pat(ph, wr[r]);
        if (r >= 2) exp = ~exp;
        checks++;
        if (st[r] !== exp) begin
          failures++;
          $display("cycle %0d ring %0d: %b expected %b", cyc, r, st[r], exp);
        end
      end
      if (ce) begin
        for (int r = 0; r < 4; r++) if (fm[r] && !fm_prev[r]) rises[r]++;
        fm_prev = fm;
      end
      if (sync && ce) begin
        // one-turn latency: the data bit on fm_out equals the input of the last write
        if (cyc >= 16) begin
          for (int r = 0; r < 4; r++) begin
            checks++;
            if ((fm[r] ^ (r >= 2)) !== d_hist[r]) begin
              failures++;
              $display("cycle %0d ring %0d: fm_out %b, input 8 cycles earlier %b", cyc, r, fm[r], d_hist[r]);
            end
          end
          // frequency: rising edges of the plain ring over the last frame
          checks++;
          if (rises[0] != (d_hist[0] ? 2 : 1)) begin
            failures++;
            $display("cycle %0d: %0d pulses in a frame for bit %b", cyc, rises[0], d_hist[0]);
          end
        end
        for (int i = 0; i < 4; i++) rises[i] = 0;
        d = 4'($urandom);
        d_hist = d;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
