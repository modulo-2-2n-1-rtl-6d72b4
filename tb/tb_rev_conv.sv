// tb_rev_conv: exhaustive self-checking testbench of the reverse converter.
// Every (S_R, S_I, b_s, c_s) combination must give the value
// S_R - b_s + 2^n (S_I + c_s) reduced into [0, 2^(2n)].
module tb_rev_conv;
  localparam int unsigned N = 5;
  localparam longint M = (64'd1 << (2*N)) + 64'd1;

  logic [N-1:0] s_r, s_i;
  logic         b_s, c_s;
  logic [2*N:0] s;
  int checks = 0, failures = 0;

  rev_conv #(.N(N)) dut (.*);

  initial begin : watchdog
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint v, exp;
    for (int k = 0; k < (1 << (2*N+2)); k++) begin
      {c_s, b_s, s_i, s_r} = (2*N+2)'(k);
      #1;
      v   = longint'(s_r) - longint'(b_s) + (longint'(1) << N) * (longint'(s_i) + longint'(c_s));
      exp = ((v % M) + M) % M;
      checks++;
      if (longint'(s) != exp) begin
        failures++;
        if (failures < 10) $display("FAIL S=(%0d,%0d,b%0d,c%0d) got=%0d exp=%0d",
                                    s_r, s_i, b_s, c_s, s, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
