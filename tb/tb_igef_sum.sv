// tb_igef_sum -- self-checking test of the sum stage.
// Random p and c vectors; expects s_0 = p_0, s_i = p_i ^ c_(i-1) and
// cout = c_(N-1), worked out bit by bit.
module tb_igef_sum;
  int checks = 0;
  int failures = 0;

  localparam int unsigned N = 9;
  logic [N-1:0] p, c, s;
  logic         cout;
  logic         e;

  igef_sum #(.N(N)) dut (.p(p), .c(c), .s(s), .cout(cout));

  initial begin
    for (int k = 0; k < 500; k++) begin
      p = N'($urandom);
      c = N'($urandom);
      #1;
      for (int i = 0; i < N; i++) begin
        e = (i == 0) ? p[0] : (p[i] ^ c[i-1]);
        checks++;
        if (s[i] !== e) begin
          failures++;
          $display("FAIL p=%b c=%b bit %0d s=%b", p, c, i, s[i]);
        end
      end
      checks++;
      if (cout !== c[N-1]) begin
        failures++;
        $display("FAIL cout p=%b c=%b", p, c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
