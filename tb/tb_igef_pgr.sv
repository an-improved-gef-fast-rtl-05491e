// tb_igef_pgr -- self-checking test of the bit-level p/g/r setup.
// Drives every value of two 4-bit operands and random 9-bit operands and
// compares p, g and r with a bit-by-bit reference.
module tb_igef_pgr;
  import igef_pkg::*;

  int checks = 0;
  int failures = 0;

  localparam int unsigned N = 9;
  logic [N-1:0] a, b, p;
  gr_t          gr [N];

  igef_pgr #(.N(N)) dut (.a(a), .b(b), .p(p), .gr(gr));

  task automatic check_now();
    #1;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (p[i] !== (a[i] != b[i]) || gr[i].g !== (a[i] && b[i]) || gr[i].r !== (a[i] || b[i])) begin
        failures++;
        $display("FAIL a=%b b=%b bit %0d p=%b g=%b r=%b", a, b, i, p[i], gr[i].g, gr[i].r);
      end
    end
  endtask

  initial begin
    for (int x = 0; x < 16; x++)
      for (int y = 0; y < 16; y++) begin
        a = N'(x);
        b = N'(y);
        check_now();
      end
    for (int k = 0; k < 200; k++) begin
      a = N'($urandom);
      b = N'($urandom);
      check_now();
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
