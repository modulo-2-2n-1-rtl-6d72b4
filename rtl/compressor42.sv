// compressor42: n-bit (4;2) compressor.
//
// Reduces four n-bit operands a, b, c, d and a carry-in bit at position 0 to
// a sum word u, a carry word v and a carry-out, with
//     a + b + c + d + cin = u + 2 v + 2^n cout,
// so v[k] carries weight 2^(k+1) and v[n-1] (the paper's v_n) weight 2^n.
// Each bit slice is the usual pair of chained full adders: the first adds
// a, b, c and passes its carry sideways to the next slice; the second adds
// that sum, d and the sideways carry from the slice below. The sideways
// carry never depends on the slice's own sideways input, so there is no
// ripple. The multiplier uses two of these (one for the real and one for the
// imaginary part). The paper names the compressor but not its cell; this is
// the standard one.
//
// Interface: combinational.
module compressor42 #(
  parameter int unsigned N = cplx_pkg::N_PAPER
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  input  logic [N-1:0] c,
  input  logic [N-1:0] d,
  input  logic         cin,
  output logic [N-1:0] u,
  output logic [N-1:0] v,
  output logic         cout
);

  logic [N-1:0] s1, side;
  logic [N:0]   side_in;

  always_comb begin
    s1         = a ^ b ^ c;
    side       = (a & b) | (a & c) | (b & c);
    side_in    = {side, cin};
    u          = s1 ^ d ^ side_in[N-1:0];
    v          = (s1 & d) | (s1 & side_in[N-1:0]) | (d & side_in[N-1:0]);
    cout       = side_in[N];
  end

endmodule
