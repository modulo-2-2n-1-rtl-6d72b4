// tb_cplx_rns_top: end-to-end self-checking testbench of the
// modulo-(2^(2n)+1) channel at its default size (n = 5, modulus 1025).
//
// Random 5n-bit operand pairs are presented with random gaps (in_valid low)
// and random accumulator clears. Operands are biased so that residues 0
// (zero flag set) and 2^(2n) (all-ones real and imaginary parts) occur often.
// After each accepted operand the testbench checks, one clock later, that
// out_valid is high, that prod = z_a * z_b mod 1025 and that sum equals the
// running sum mod 1025; out_valid must be low in the cycle after an idle
// one. It counts how often each mechanism occurs (accumulator clear, idle
// hold, zero operand in adder and multiplier, LUT 1 overflow, stored borrow
// and stored carry in the adder and multiplier outputs) and fails if one
// never does. A watchdog ends the run if it stalls.
module tb_cplx_rns_top;
  localparam int unsigned N = cplx_pkg::N_PAPER;
  localparam longint M = (64'd1 << (2*N)) + 64'd1;
  localparam longint ZMAX = (64'd1 << (5*N)) - 1;
  localparam int unsigned NOPS = 200000;

  logic           clk = 1'b0;
  logic           rst_n, in_valid, acc_clr;
  logic [5*N-1:0] z_a, z_b;
  logic           out_valid;
  logic [2*N:0]   sum, prod;
  logic [N-1:0]   sum_re, sum_im, prod_re, prod_im;
  logic           sum_b, sum_c, prod_b, prod_c;

  int checks = 0, failures = 0;
  int n_clr = 0, n_idle = 0, n_zero_add = 0, n_zero_mul = 0, n_lut1c = 0;
  int n_sum_b = 0, n_sum_c = 0, n_prod_b = 0, n_prod_c = 0;
  longint cycles = 0;

  cplx_rns_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin : watchdog
    repeat (4 * NOPS + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint pick_z();
    longint r, k;
    case ($urandom_range(0, 7))
      0:       r = 0;
      1:       r = M - 1;
      2:       r = $urandom_range(0, 3);
      default: r = longint'($urandom_range(0, int'(M - 1)));
    endcase
    k = longint'($urandom) % ((ZMAX - r) / M + 1);
    return k * M + r;
  endfunction

  function automatic void expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%0d exp=%0d at cycle %0d", what, got, exp, cycles);
    end
  endfunction

  initial begin
    longint acc, za, zb, exp_prod;
    logic   was_valid;
    rst_n = 1'b0; in_valid = 1'b0; acc_clr = 1'b0; z_a = '0; z_b = '0;
    acc = 0; was_valid = 1'b0; exp_prod = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    expect_eq("sum after reset", longint'(sum), 0);
    for (int unsigned op = 0; op < NOPS; ) begin
      // Drive the next cycle.
      in_valid = ($urandom_range(0, 3) != 0);
      acc_clr  = in_valid && ($urandom_range(0, 15) == 0);
      za = pick_z(); zb = pick_z();
      z_a = (5*N)'(za); z_b = (5*N)'(zb);
      @(posedge clk);
      #1;
      if (in_valid) begin
        if (dut.xa[2*N]) n_zero_add++;
        if (dut.xa[2*N] || dut.xb[2*N]) n_zero_mul++;
        if (dut.u_mul.c_rr) n_lut1c++;
        if (acc_clr) n_clr++;
        acc      = ((acc_clr ? 0 : acc) + za) % M;
        exp_prod = ((za % M) * (zb % M)) % M;
        op++;
      end else begin
        n_idle++;
      end
      @(negedge clk);
      expect_eq("out_valid", longint'(out_valid), longint'(in_valid));
      expect_eq("sum", longint'(sum), acc);
      if (in_valid) begin
        expect_eq("prod", longint'(prod), exp_prod);
        if (sum_b)  n_sum_b++;
        if (sum_c)  n_sum_c++;
        if (prod_b) n_prod_b++;
        if (prod_c) n_prod_c++;
      end
    end
    $display("clear=%0d idle=%0d zero_add=%0d zero_mul=%0d lut1_c=%0d sum_b=%0d sum_c=%0d prod_b=%0d prod_c=%0d",
             n_clr, n_idle, n_zero_add, n_zero_mul, n_lut1c, n_sum_b, n_sum_c, n_prod_b, n_prod_c);
    checks++;
    if (n_clr == 0 || n_idle == 0 || n_zero_add == 0 || n_zero_mul == 0 || n_lut1c == 0 ||
        n_sum_b == 0 || n_sum_c == 0 || n_prod_b == 0 || n_prod_c == 0) begin
      failures++;
      $display("FAIL some mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
