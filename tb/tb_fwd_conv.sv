// tb_fwd_conv: self-checking testbench of the forward converter.
// Drives edge cases (0, multiples of the modulus, all-ones fields, the value
// 2^(2n)) and 200000 random 5n-bit numbers, and checks that the output code
// decodes to Z mod (2^(2n)+1) and that the zero flag comes only with a zero
// word. The reference is plain integer arithmetic.
module tb_fwd_conv;
  localparam int unsigned N = 5;
  localparam longint unsigned M = (64'd1 << (2*N)) + 64'd1;

  logic [5*N-1:0] z;
  logic [2*N:0]   x;
  int checks = 0, failures = 0;

  fwd_conv #(.N(N)) dut (.z(z), .x(x));

  initial begin : watchdog
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input longint unsigned zv);
    longint unsigned got, exp;
    z = (5*N)'(zv);
    #1;
    got = longint'(x[2*N-1:0]) + longint'(!x[2*N]);
    exp = zv % M;
    checks++;
    if (got != exp || (x[2*N] && x[2*N-1:0] != '0)) begin
      failures++;
      if (failures < 10) $display("FAIL z=%0d x=%h got=%0d exp=%0d", zv, x, got, exp);
    end
  endtask

  initial begin
    longint unsigned zmax;
    zmax = (64'd1 << (5*N)) - 1;
    check(0);
    check(zmax);
    for (longint unsigned k = 1; k * M <= zmax && k < 2000; k++) begin
      check(k * M);
      check(k * M - 1);
      check(k * M + 1);
    end
    check(M - 1);
    check(64'd1 << (2*N));
    check(64'd1 << (4*N));
    for (int i = 0; i < 200000; i++)
      check({$urandom, $urandom} & zmax);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
