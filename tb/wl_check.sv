// wl_check: checker used by tb_workloads for one channel width N.
// Builds the chain forward converter -> multiplier / adder -> reverse
// converter and feeds it random 5N-bit operands (the adder's second operand
// is a random stored-borrow / stored-carry pair), comparing both results
// with integer arithmetic modulo 2^(2N)+1. Operands congruent to 0 and to
// 2^(2N) are forced now and then. Reports its counts through ports and
// raises done when finished.
module wl_check #(
  parameter int unsigned N     = 5,
  parameter int unsigned COUNT = 20000
) (
  output logic done,
  output int   checks,
  output int   failures
);
  localparam longint M    = (64'd1 << (2*N)) + 64'd1;
  localparam longint ZMAX = (64'd1 << (5*N)) - 1;

  logic [5*N-1:0] za, zb;
  logic [2*N:0]   xa, xb, prod, sum;
  logic [N-1:0]   p_r, p_i, s_r, s_i, y_r, y_i;
  logic           b_p, c_p, b_s, c_s, b_y, c_y;

  fwd_conv   #(.N(N)) u_fa  (.z(za), .x(xa));
  fwd_conv   #(.N(N)) u_fb  (.z(zb), .x(xb));
  cplx_mult  #(.N(N)) u_mul (.x_r(xa[N-1:0]), .x_i(xa[2*N-1:N]), .x2n(xa[2*N]),
                             .y_r(xb[N-1:0]), .y_i(xb[2*N-1:N]), .y2n(xb[2*N]),
                             .p_r(p_r), .p_i(p_i), .b_p(b_p), .c_p(c_p));
  cplx_adder #(.N(N)) u_add (.x_r(xa[N-1:0]), .x_i(xa[2*N-1:N]), .x2n(xa[2*N]),
                             .y_r(y_r), .y_i(y_i), .b_y(b_y), .c_y(c_y),
                             .s_r(s_r), .s_i(s_i), .b_s(b_s), .c_s(c_s));
  rev_conv   #(.N(N)) u_rp  (.s_r(p_r), .s_i(p_i), .b_s(b_p), .c_s(c_p), .s(prod));
  rev_conv   #(.N(N)) u_rs  (.s_r(s_r), .s_i(s_i), .b_s(b_s), .c_s(c_s), .s(sum));

  function automatic longint rnd_z();
    longint z;
    z = longint'({$urandom, $urandom}) & ZMAX;
    case ($urandom_range(0, 9))
      0:       z = z - (z % M);                       // residue 0
      1:       z = (z >= M) ? z - (z % M) - 1 : M - 1; // residue 2^(2N)
      default: ;
    endcase
    return z;
  endfunction

  initial begin
    longint a, b, yv, ev;
    done = 1'b0; checks = 0; failures = 0;
    za = '0; zb = '0; y_r = '0; y_i = '0; b_y = 1'b0; c_y = 1'b0;
    for (int unsigned k = 0; k < COUNT; k++) begin
      a = rnd_z(); b = rnd_z();
      za = (5*N)'(a); zb = (5*N)'(b);
      {c_y, b_y, y_i, y_r} = (2*N+2)'({$urandom, $urandom});
      #1;
      yv = longint'(y_r) - longint'(b_y) + (longint'(1) << N) * (longint'(y_i) + longint'(c_y));
      yv = ((yv % M) + M) % M;
      ev = ((a % M) * (b % M)) % M;
      checks += 2;
      if (longint'(prod) != ev) begin
        failures++;
        if (failures < 5) $display("FAIL N=%0d prod: za=%0d zb=%0d got=%0d exp=%0d", N, a, b, prod, ev);
      end
      if (longint'(sum) != (a % M + yv) % M) begin
        failures++;
        if (failures < 5) $display("FAIL N=%0d sum: za=%0d got=%0d exp=%0d", N, a, sum, (a % M + yv) % M);
      end
    end
    done = 1'b1;
  end
endmodule
