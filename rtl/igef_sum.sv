// igef_sum -- sum stage of the IGEF adder.
//
// s_0 = p_0 and s_i = p_i ^ c_(i-1) for i > 0; the carry out is c_(N-1).
// The paper takes the initial carry as c_0 = g_0, so the adder has no carry
// input.  One XOR level after the carries settle.  Interface: propagate
// bits p and carries c of N bits in, sum s of N bits and cout out.
module igef_sum #(
  parameter int unsigned N = 9
) (
  input  logic [N-1:0] p,
  input  logic [N-1:0] c,
  output logic [N-1:0] s,
  output logic         cout
);

  always_comb begin
    s    = p ^ {c[N-2:0], 1'b0};
    cout = c[N-1];
  end

endmodule
