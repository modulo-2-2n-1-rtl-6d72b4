// tb_workloads: runs the complex-residue adder and multiplier, with forward
// and reverse conversion, at every channel width for which results are
// reported: n = 3 to 10 (the width sweep), which includes the moduli
// 8 +- j, 16 +- j, 32 +- j and 64 +- j used in the moduli-set comparisons.
// Each width gets 20000 random operand pairs checked against integer
// arithmetic modulo 2^(2n)+1.
module tb_workloads;
  localparam int NW = 8;
  logic [NW-1:0] done;
  int            chk [NW];
  int            fl  [NW];
  int checks = 0, failures = 0;

  for (genvar g = 0; g < NW; g++) begin : g_w
    wl_check #(.N(g + 3)) u_chk (.done(done[g]), .checks(chk[g]), .failures(fl[g]));
  end

  initial begin : watchdog
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (&done);
    for (int g = 0; g < NW; g++) begin
      $display("n=%0d: checks=%0d failures=%0d", g + 3, chk[g], fl[g]);
      checks   += chk[g];
      failures += fl[g];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
