// tb_opcode_event_decode -- self-checking testbench for the opcode-to-event decoder.
// Every opcode value is applied with opcode_valid low and high; exactly the event whose
// opcode matches (alpha 0x17, beta 0xB3, gamma 0x2A, delta 0x4C by default) must be raised,
// and only while opcode_valid is high.
module tb_opcode_event_decode;
  localparam logic [7:0] OPC [4] = '{8'h17, 8'hB3, 8'h2A, 8'h4C};
  logic [7:0] opcode;
  logic opcode_valid;
  logic [3:0] ev;
  int checks = 0, failures = 0;

  opcode_event_decode dut (.opcode, .opcode_valid, .ev);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] exp;
    for (int v = 0; v < 2; v++)
      for (int o = 0; o < 256; o++) begin
        opcode = 8'(o);
        opcode_valid = 1'(v);
        #1;
        for (int i = 0; i < 4; i++) exp[i] = (v == 1) && (OPC[i] == 8'(o));
        checks++;
        if (ev !== exp) begin
          failures++;
          $display("opcode %h valid %0d: ev %b expected %b", o, v, ev, exp);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
