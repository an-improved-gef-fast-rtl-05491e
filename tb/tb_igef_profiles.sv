// tb_igef_profiles -- the IGEF tree under delay profiles other than the
// paper's two examples.  Builds adders of 2, 5, 16, 27 and 32 bits, each
// under a ramp, a hump, a valley and a scattered profile (20 trees, see
// tb_igef_profile_case), runs them one after another and sums their
// checks and failures.
module tb_igef_profiles;
  localparam int NW = 5;
  localparam int NP = 4;
  localparam int NC = NW * NP;
  localparam int unsigned WIDTHS [NW] = '{2, 5, 16, 27, 32};

  int   checks = 0;
  int   failures = 0;
  logic start [NC];
  logic done  [NC];
  int   c_checks [NC];
  int   c_fail  [NC];

  for (genvar w = 0; w < NW; w++) begin : g_w
    for (genvar k = 0; k < NP; k++) begin : g_k
      tb_igef_profile_case #(.N(WIDTHS[w]), .K(k)) u_case (
        .start   (start[w * NP + k]),
        .checks  (c_checks[w * NP + k]),
        .failures(c_fail[w * NP + k]),
        .done    (done[w * NP + k])
      );
    end
  end

  initial begin
    for (int j = 0; j < NC; j++) start[j] = 1'b0;
    #1;
    for (int j = 0; j < NC; j++) begin
      start[j] = 1'b1;
      wait (done[j]);
      checks   += c_checks[j];
      failures += c_fail[j];
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
