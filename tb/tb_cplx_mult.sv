// tb_cplx_mult: exhaustive self-checking testbench of the complex multiplier.
// Every pair X, Y in [0, 2^(2n)] (coded as the forward converter codes them)
// is multiplied; the product's value P_R - b_P + 2^n (P_I + c_P) must equal
// X * Y mod 2^(2n)+1. The testbench also counts how often the LUT 1 overflow
// bit c and the output bits b_P and c_P are set, and fails if one never is.
module tb_cplx_mult;
  localparam int unsigned N = 5;
  localparam longint M = (64'd1 << (2*N)) + 64'd1;

  logic [N-1:0] x_r, x_i, y_r, y_i, p_r, p_i;
  logic         x2n, y2n, b_p, c_p;
  int checks = 0, failures = 0;
  int n_c = 0, n_b = 0, n_cp = 0, n_zero = 0;

  cplx_mult #(.N(N)) dut (.*);

  function automatic longint cval(longint r, longint i, longint b, longint c);
    longint v;
    v = r - b + (longint'(1) << N) * (i + c);
    return ((v % M) + M) % M;
  endfunction

  function automatic logic [2*N:0] code(longint v);
    return (v == 0) ? (2*N+1)'(1) << (2*N) : (2*N+1)'(v - 1);
  endfunction

  initial begin : watchdog
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint got, exp;
    for (longint xv = 0; xv < M; xv++) begin
      {x2n, x_i, x_r} = code(xv);
      for (longint yv = 0; yv < M; yv++) begin
        {y2n, y_i, y_r} = code(yv);
        #1;
        got = cval(longint'(p_r), longint'(p_i), longint'(b_p), longint'(c_p));
        exp = (xv * yv) % M;
        checks++;
        if (dut.c_rr) n_c++;
        if (b_p) n_b++;
        if (c_p) n_cp++;
        if (x2n || y2n) n_zero++;
        if (got != exp) begin
          failures++;
          if (failures < 10) $display("FAIL X=%0d Y=%0d P=(%0d,%0d,b%0d,c%0d) got=%0d exp=%0d",
                                      xv, yv, p_r, p_i, b_p, c_p, got, exp);
        end
      end
    end
    $display("LUT1 overflow c=%0d  b_P=%0d  c_P=%0d  zero operand=%0d", n_c, n_b, n_cp, n_zero);
    checks++;
    if (n_c == 0 || n_b == 0 || n_cp == 0 || n_zero == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
