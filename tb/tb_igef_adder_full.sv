// tb_igef_adder_full -- the adder at its default size (nine bits, all bits
// arriving together, the tree of Fig. 2(b)), driven with every one of the
// 2^18 operand pairs; {cout, s} is compared with the integer sum a + b, and
// the elaborated carry depth with the two operator levels of Fig. 2(b).
module tb_igef_adder_full;
  int checks = 0;
  int failures = 0;

  logic [8:0] a, b, s;
  logic       cout;
  logic [9:0] e;

  igef_adder dut (.a(a), .b(b), .s(s), .cout(cout));

  initial begin
    checks++;
    if (dut.u_carry.CARRY_DEPTH != 2) begin
      failures++;
      $display("FAIL carry depth %0d, expected 2", dut.u_carry.CARRY_DEPTH);
    end
    for (int x = 0; x < 512; x++)
      for (int y = 0; y < 512; y++) begin
        a = 9'(x);
        b = 9'(y);
        #1;
        e = {1'b0, a} + {1'b0, b};
        checks++;
        if ({cout, s} !== e) begin
          failures++;
          if (failures < 10) $display("FAIL a=%h b=%h got %h expected %h", a, b, {cout, s}, e);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
