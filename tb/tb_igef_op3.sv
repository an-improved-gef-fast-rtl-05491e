// tb_igef_op3 -- self-checking test of one carry-tree circle.
// Applies all 64 combinations of three (g, r) terms and compares the output
// with the block generate/transmit written out as a sum of products:
//   G = g_hi | r_hi & g_mid | r_hi & r_mid & g_lo,  R = r_lo & r_mid & r_hi.
// Also checks that the identity term on hi leaves a two-term merge intact.
module tb_igef_op3;
  import igef_pkg::*;

  int checks = 0;
  int failures = 0;

  gr_t lo, mid, hi, y;
  logic eg, er;

  igef_op3 dut (.lo(lo), .mid(mid), .hi(hi), .y(y));

  initial begin
    for (int v = 0; v < 64; v++) begin
      {lo, mid, hi} = 6'(v);
      #1;
      eg = hi.g | (hi.r & mid.g) | (hi.r & mid.r & lo.g);
      er = lo.r & mid.r & hi.r;
      checks++;
      if (y.g !== eg || y.r !== er) begin
        failures++;
        $display("FAIL lo=%b mid=%b hi=%b y=%b expected %b%b", lo, mid, hi, y, eg, er);
      end
    end
    for (int v = 0; v < 16; v++) begin
      {lo, mid} = 4'(v);
      hi = GR_IDENT;
      #1;
      eg = mid.g | (mid.r & lo.g);
      er = lo.r & mid.r;
      checks++;
      if (y.g !== eg || y.r !== er) begin
        failures++;
        $display("FAIL two-term lo=%b mid=%b y=%b", lo, mid, y);
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
