// tb_cplx_adder: exhaustive self-checking testbench of the complex adder.
// Every X in [0, 2^(2n)] (as the forward converter codes it) is added to every
// Y operand in stored-borrow / stored-carry form (all Y_R, Y_I, b_y, c_y).
// The sum's value R - b + 2^n (I + c) must equal X + Y mod 2^(2n)+1, and
// when X = 0 the stored bits must pass through unchanged.
module tb_cplx_adder;
  localparam int unsigned N = 5;
  localparam longint M = (64'd1 << (2*N)) + 64'd1;

  logic [N-1:0] x_r, x_i, y_r, y_i, s_r, s_i;
  logic         x2n, b_y, c_y, b_s, c_s;
  int checks = 0, failures = 0;

  cplx_adder #(.N(N)) dut (.*);

  function automatic longint cval(longint r, longint i, longint b, longint c);
    longint v;
    v = r - b + (longint'(1) << N) * (i + c);
    return ((v % M) + M) % M;
  endfunction

  initial begin : watchdog
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint code, got, exp;
    for (longint xv = 0; xv < M; xv++) begin
      code = (xv == 0) ? (longint'(1) << (2*N)) : xv - 1;
      {x2n, x_i, x_r} = (2*N+1)'(code);
      for (int yv = 0; yv < (1 << (2*N+2)); yv++) begin
        {c_y, b_y, y_i, y_r} = (2*N+2)'(yv);
        #1;
        got = cval(longint'(s_r), longint'(s_i), longint'(b_s), longint'(c_s));
        exp = (xv + cval(longint'(y_r), longint'(y_i), longint'(b_y), longint'(c_y))) % M;
        checks++;
        if (got != exp || (x2n && (b_s != b_y || c_s != c_y))) begin
          failures++;
          if (failures < 10)
            $display("FAIL X=%0d Y=(%0d,%0d,b%0d,c%0d) S=(%0d,%0d,b%0d,c%0d) got=%0d exp=%0d",
                     xv, y_r, y_i, b_y, c_y, s_r, s_i, b_s, c_s, got, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
