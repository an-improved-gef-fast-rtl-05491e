// tb_igef_adder -- end-to-end test of the IGEF adder on the two examples the
// paper works through.
//   * Fig. 2(b): nine bits, all arriving at once (the default parameters).
//   * Table 2:   twelve bits with delay profile 0,1,2,2,3,3,4,5,4,3,2,1.
// Every result {cout, s} is compared with the integer sum a + b.  The
// nine-bit adder is driven with every operand pair, the twelve-bit one with
// random pairs plus the corner cases.  The test also counts how often each
// mechanism of the design occurs and fails if one never does:
//   structural, from the elaborated trees: three-term circles, two-term
//   circles, intermediate terms (blocks not starting at bit 0, merged away
//   from the LSB), and circles whose inputs arrive at different times
//   (an early term waiting for a late neighbour);
//   at run time: a carry generated at bit 0 and propagated to the carry out,
//   a carry out from a generate above bit 0, and results with no carry.
module tb_igef_adder;
  import igef_pkg::*;

  int checks = 0;
  int failures = 0;

  localparam int unsigned N12 = 12;
  localparam int unsigned DP12 [N12] = '{0, 1, 2, 2, 3, 3, 4, 5, 4, 3, 2, 1};

  logic [8:0]     a9, b9, s9;
  logic           co9;
  logic [N12-1:0] a12, b12, s12;
  logic           co12;

  igef_adder                          dut9  (.a(a9),  .b(b9),  .s(s9),  .cout(co9));
  igef_adder #(.N(N12), .DP(DP12))    dut12 (.a(a12), .b(b12), .s(s12), .cout(co12));

  int n_three, n_two, n_inter, n_wait;
  int n_ripple_all, n_gen_high, n_nocarry;

  task automatic count_tree9();
    for (int k = 0; k < dut9.u_carry.NNODES; k++) begin
      if (dut9.u_carry.PLAN.node[k].nin == 3) n_three++; else n_two++;
      if (dut9.u_carry.PLAN.node[k].lo != 0) n_inter++;
    end
  endtask

  task automatic count_tree12();
    int t0, t1, t2;
    for (int k = 0; k < dut12.u_carry.NNODES; k++) begin
      if (dut12.u_carry.PLAN.node[k].nin == 3) n_three++; else n_two++;
      if (dut12.u_carry.PLAN.node[k].lo != 0) n_inter++;
      t0 = time_of12(dut12.u_carry.PLAN.node[k].in0);
      t1 = time_of12(dut12.u_carry.PLAN.node[k].in1);
      t2 = (dut12.u_carry.PLAN.node[k].nin == 3) ? time_of12(dut12.u_carry.PLAN.node[k].in2) : t1;
      if (t0 != t1 || t1 != t2) n_wait++;
    end
  endtask

  function automatic int time_of12(input int id);
    if (id < int'(N12)) return int'(DP12[id]);
    return dut12.u_carry.PLAN.node[id - N12].tm;
  endfunction

  task automatic check12();
    logic [N12:0] e;
    #1;
    e = {1'b0, a12} + {1'b0, b12};
    checks++;
    if ({co12, s12} !== e) begin
      failures++;
      if (failures < 10) $display("FAIL N=12 a=%h b=%h got %h expected %h", a12, b12, {co12, s12}, e);
    end
    if (e[N12] && (a12 ^ b12) == {N12{1'b1}} >> 1 << 1 && a12[0] && b12[0]) n_ripple_all++;
    if (e[N12] && !(a12[0] & b12[0])) n_gen_high++;
    if ((a12 & b12) == '0) n_nocarry++;
  endtask

  initial begin
    count_tree9();
    count_tree12();
    checks++;
    if (dut9.u_carry.CARRY_DEPTH != 2) begin
      failures++;
      $display("FAIL nine-bit carry depth %0d, expected 2", dut9.u_carry.CARRY_DEPTH);
    end
    checks++;
    if (dut12.u_carry.CARRY_DEPTH != 6) begin
      failures++;
      $display("FAIL Table 2 carry depth %0d, expected 6", dut12.u_carry.CARRY_DEPTH);
    end

    // Fig. 2(b) workload: every operand pair.
    for (int x = 0; x < 512; x++)
      for (int y = 0; y < 512; y++) begin
        logic [9:0] e;
        a9 = 9'(x);
        b9 = 9'(y);
        #1;
        e = {1'b0, a9} + {1'b0, b9};
        checks++;
        if ({co9, s9} !== e) begin
          failures++;
          if (failures < 10) $display("FAIL N=9 a=%h b=%h got %h expected %h", a9, b9, {co9, s9}, e);
        end
        if (e[9] && (a9 ^ b9) == 9'h1fe && a9[0] && b9[0]) n_ripple_all++;
        if (e[9] && !(a9[0] & b9[0])) n_gen_high++;
        if ((a9 & b9) == '0) n_nocarry++;
      end

    // Table 2 workload: corners, then random pairs.
    a12 = '1;          b12 = 12'd1;       check12();
    a12 = 12'hffe;     b12 = 12'd1;       check12();
    a12 = 12'h800;     b12 = 12'h800;     check12();
    a12 = '0;          b12 = '0;          check12();
    for (int k = 0; k < 100000; k++) begin
      a12 = N12'($urandom);
      b12 = N12'($urandom);
      check12();
    end

    $display("mechanisms: three-term circles %0d, two-term circles %0d, intermediate terms %0d, waiting terms %0d",
             n_three, n_two, n_inter, n_wait);
    $display("mechanisms: full-length carry ripple %0d, high carry out %0d, no-carry sums %0d",
             n_ripple_all, n_gen_high, n_nocarry);
    if (n_three == 0)      begin failures++; $display("FAIL no three-term circle"); end
    if (n_two == 0)        begin failures++; $display("FAIL no two-term circle"); end
    if (n_inter == 0)      begin failures++; $display("FAIL no intermediate term"); end
    if (n_wait == 0)       begin failures++; $display("FAIL no waiting term"); end
    if (n_ripple_all == 0) begin failures++; $display("FAIL no full-length ripple"); end
    if (n_gen_high == 0)   begin failures++; $display("FAIL no high carry out"); end
    if (n_nocarry == 0)    begin failures++; $display("FAIL no carry-free sum"); end
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
