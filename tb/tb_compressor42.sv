// tb_compressor42: self-checking testbench of the n-bit (4;2) compressor.
// Checks a + b + c + d + cin = u + 2 v + 2^n cout on all-zero, all-one and
// 100000 random operand sets.
module tb_compressor42;
  localparam int unsigned N = 5;

  logic [N-1:0] a, b, c, d, u, v;
  logic         cin, cout;
  int checks = 0, failures = 0;

  compressor42 #(.N(N)) dut (.*);

  initial begin : watchdog
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    longint lhs, rhs;
    #1;
    lhs = longint'(a) + longint'(b) + longint'(c) + longint'(d) + longint'(cin);
    rhs = longint'(u) + 2 * longint'(v) + (longint'(cout) << N);
    checks++;
    if (lhs != rhs) begin
      failures++;
      if (failures < 10) $display("FAIL a=%0d b=%0d c=%0d d=%0d cin=%0d -> u=%0d v=%0d cout=%0d",
                                  a, b, c, d, cin, u, v, cout);
    end
  endtask

  initial begin
    {a, b, c, d, cin} = '0;          check();
    {a, b, c, d, cin} = '1;          check();
    for (int i = 0; i < 100000; i++) begin
      a = N'($urandom); b = N'($urandom); c = N'($urandom); d = N'($urandom);
      cin = 1'($urandom);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
