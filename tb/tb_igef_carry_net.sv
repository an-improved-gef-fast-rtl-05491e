// tb_igef_carry_net -- self-checking test of the carry tree.
// Two instances: the default nine-bit tree with all bits arriving together
// (Fig. 2(b) of the paper) and the twelve-bit example with delay profile
// 0,1,2,2,3,3,4,5,4,3,2,1 (Table 2 of the paper).  For random operands every
// carry c_i is compared with bit i+1 of the integer sum a[i:0] + b[i:0].
// The elaborated carry times are compared with the numbers printed in the
// paper: Fig. 2(b) marks C2 at level 1 and C3..C8 at level 2; Table 2 shows
// c1 at 2, c3 at 3, c4 and c5 at 4, c6 at 5 and the last carry at 6.
module tb_igef_carry_net;
  import igef_pkg::*;

  int checks = 0;
  int failures = 0;

  localparam int unsigned N9  = 9;
  localparam int unsigned N12 = 12;
  localparam int unsigned DP12 [N12] = '{0, 1, 2, 2, 3, 3, 4, 5, 4, 3, 2, 1};

  logic [N9-1:0]  a9, b9, c9;
  logic [N12-1:0] a12, b12, c12;
  gr_t            gr9 [N9];
  gr_t            gr12 [N12];

  igef_carry_net #(.N(N9))                dut9  (.gr(gr9),  .c(c9));
  igef_carry_net #(.N(N12), .DP(DP12))    dut12 (.gr(gr12), .c(c12));

  always_comb begin
    for (int i = 0; i < N9; i++)  gr9[i]  = '{g: a9[i] & b9[i],   r: a9[i] | b9[i]};
    for (int i = 0; i < N12; i++) gr12[i] = '{g: a12[i] & b12[i], r: a12[i] | b12[i]};
  end

  function automatic logic ref_carry(input logic [31:0] a, input logic [31:0] b, input int i);
    logic [32:0] m, sum;
    m   = (33'd1 << (i + 1)) - 33'd1;
    sum = ({1'b0, a} & m) + ({1'b0, b} & m);
    return sum[i + 1];
  endfunction

  task automatic expect_time(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s time %0d, expected %0d", what, got, exp);
    end
  endtask

  initial begin
    // Timing of the elaborated trees.
    expect_time("fig2b c0", int'(dut9.PLAN.ctm[0]), 0);
    expect_time("fig2b c1", int'(dut9.PLAN.ctm[1]), 1);
    expect_time("fig2b c2", int'(dut9.PLAN.ctm[2]), 1);
    for (int i = 3; i < 9; i++) expect_time($sformatf("fig2b c%0d", i), int'(dut9.PLAN.ctm[i]), 2);
    expect_time("fig2b depth", dut9.CARRY_DEPTH, 2);
    expect_time("table2 c1", int'(dut12.PLAN.ctm[1]), 2);
    expect_time("table2 c3", int'(dut12.PLAN.ctm[3]), 3);
    expect_time("table2 c4", int'(dut12.PLAN.ctm[4]), 4);
    expect_time("table2 c5", int'(dut12.PLAN.ctm[5]), 4);
    expect_time("table2 c6", int'(dut12.PLAN.ctm[6]), 5);
    expect_time("table2 c11", int'(dut12.PLAN.ctm[11]), 6);
    expect_time("table2 depth", dut12.CARRY_DEPTH, 6);

    // Function: exhaustive for nine bits, random for twelve.
    for (int x = 0; x < (1 << N9); x++)
      for (int y = 0; y < (1 << N9); y += 7) begin
        a9 = N9'(x);
        b9 = N9'(y);
        #1;
        for (int i = 0; i < N9; i++) begin
          checks++;
          if (c9[i] !== ref_carry(32'(a9), 32'(b9), i)) begin
            failures++;
            if (failures < 10) $display("FAIL N=9 a=%h b=%h c%0d=%b", a9, b9, i, c9[i]);
          end
        end
      end
    for (int k = 0; k < 20000; k++) begin
      a12 = N12'($urandom);
      b12 = N12'($urandom);
      #1;
      for (int i = 0; i < N12; i++) begin
        checks++;
        if (c12[i] !== ref_carry(32'(a12), 32'(b12), i)) begin
          failures++;
          if (failures < 10) $display("FAIL N=12 a=%h b=%h c%0d=%b", a12, b12, i, c12[i]);
        end
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
