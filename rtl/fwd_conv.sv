// fwd_conv: forward converter from a 5n-bit binary number Z to its residue
// modulo 2^(2n)+1, delivered in the form the complex-residue units consume.
//
// How it works: Z is split into Z2 (n bits), Z1 (2n bits) and Z0 (2n bits),
// Z = 2^(4n) Z2 + 2^(2n) Z1 + Z0. Since 2^(2n) = -1 and 2^(4n) = 1 modulo
// 2^(2n)+1, |Z| = |Z2 - Z1 + Z0| = |Z2 + ~Z1 + Z0 + 2|. A 2n-bit carry-save
// adder reduces Z2 + ~Z1 + Z0 + 1 to two words U and V; the carry leaving the
// top position has weight 2^(2n) = -1, so it is re-entered inverted at bit 0
// of V, which absorbs the "+1". A modulo-(2^(2n)+1) adder then forms
// x = |U + V| in [0, 2^(2n)]. The remaining "+1" is never added: x is the
// diminished-one code of X, so that
//     X = x[2n-1:0] + ~x[2n],   and x[2n] = 1 only when x[2n-1:0] = 0 (X = 0).
// The complex residues need no further logic: X_R = x[n-1:0] is the real part,
// X_I = x[2n-1:n] the imaginary part and x[2n] the zero flag.
//
// The CSA with inverted end-around carry follows the paper's appendix. The
// paper does not say how the final modulo adder is built; here it is a plain
// (2n+1)-bit addition followed by one conditional subtraction of 2^(2n)+1.
//
// Interface: z (5N bits) in, x (2N+1 bits) out. Purely combinational.
module fwd_conv #(
  parameter int unsigned N = cplx_pkg::N_PAPER
) (
  input  logic [5*N-1:0] z,
  output logic [cplx_pkg::mod_width(N)-1:0] x
);

  localparam logic [2*N+1:0] MODULUS = (2*N+2)'(1) << (2*N) | (2*N+2)'(1);

  logic [2*N-1:0] z0, z1_n, z2;
  logic [2*N-1:0] u, cy, v;
  logic [2*N+1:0] sum;

  always_comb begin
    z0   = z[2*N-1:0];
    z1_n = ~z[4*N-1:2*N];
    z2   = {{N{1'b0}}, z[5*N-1:4*N]};

    // Carry-save adder: cy[i] has weight 2^(i+1).
    u  = z2 ^ z1_n ^ z0;
    cy = (z2 & z1_n) | (z2 & z0) | (z1_n & z0);
    // Inverted end-around carry at bit 0 of V.
    v  = {cy[2*N-2:0], ~cy[2*N-1]};

    // Modulo-(2^(2n)+1) adder: |U + V|, U + V < 2 (2^(2n)+1).
    sum = {2'b00, u} + {2'b00, v};
    if (sum >= MODULUS) sum = sum - MODULUS;
    x = sum[2*N:0];
  end

endmodule
