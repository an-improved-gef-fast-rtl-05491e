// tb_igef_profile_case -- one case of tb_igef_profiles: an N-bit IGEF adder
// built for delay profile kind K (0 ramp, 1 hump, 2 valley, 3 scattered).
// When start rises it checks every carry time against its lower bound
// (the latest arrival at or below bit i, plus one circle for i > 0, and no
// later than the carry out), then drives 2000 operand pairs (the first is
// all ones plus one) and compares {cout, s} with integer addition.  It adds
// its counts to checks and failures and raises done.
module tb_igef_profile_case #(
  parameter int unsigned N = 8,
  parameter int          K = 0
) (
  input  logic start,
  output int   checks,
  output int   failures,
  output logic done
);

  typedef int unsigned dp_t [N];

  function automatic int unsigned prof(input int i);
    int n = int'(N);
    case (K)
      0:       return i / 2;
      1:       return (i < n / 2) ? i / 2 : (n - 1 - i) / 2;
      2:       return (i < n / 2) ? (n / 2 - i) / 2 : (i - n / 2) / 2;
      default: return ((i * 7 + n * 3) ^ (i >> 1)) % 5;
    endcase
  endfunction

  function automatic dp_t mk();
    dp_t d;
    for (int i = 0; i < int'(N); i++) d[i] = prof(i);
    return d;
  endfunction

  localparam dp_t DPK = mk();

  logic [N-1:0] a, b, s;
  logic         cout;
  logic [N:0]   e;
  int unsigned  lb;

  igef_adder #(.N(N), .DP(DPK)) dut (.a(a), .b(b), .s(s), .cout(cout));

  initial begin
    checks   = 0;
    failures = 0;
    done     = 1'b0;
    a        = '0;
    b        = '0;
    wait (start);
    lb = 0;
    for (int i = 0; i < int'(N); i++) begin
      if (DPK[i] > lb) lb = DPK[i];
      checks++;
      if (dut.u_carry.PLAN.ctm[i] < lb + ((i > 0) ? 1 : 0) ||
          dut.u_carry.PLAN.ctm[i] > dut.u_carry.PLAN.ctm[N-1]) begin
        failures++;
        $display("FAIL N=%0d profile %0d c%0d time %0d", N, K, i, dut.u_carry.PLAN.ctm[i]);
      end
    end
    for (int v = 0; v < 2000; v++) begin
      a = N'({$urandom, $urandom});
      b = N'({$urandom, $urandom});
      if (v == 0) begin
        a = '1;
        b = N'(1);
      end
      #1;
      e = {1'b0, a} + {1'b0, b};
      checks++;
      if ({cout, s} !== e) begin
        failures++;
        if (failures < 5) $display("FAIL N=%0d profile %0d a=%h b=%h", N, K, a, b);
      end
    end
    done = 1'b1;
  end
endmodule
