// cplx_adder: unified moduli-(2^n +- j) adder.
//
// Adds two residues of the modulus 2^(2n)+1 held as complex pairs. Operand X
// comes straight from the forward converter:
//     |X| = X_R + ~x2n  -+ j X_I              (value X_R + ~x2n + 2^n X_I)
// and operand Y, normally the accumulated sum fed back from this adder's own
// output, is in stored-borrow (real) / stored-carry (imaginary) form:
//     |Y| = Y_R - b_y  -+ j (Y_I + c_y)      (value Y_R - b_y + 2^n (Y_I + c_y))
// The result has Y's form, so it can be fed back unchanged.
//
// How it works: two independent n-bit additions, one per part,
//     2^n c_n  + S_R = X_R + Y_R + ~b_y & ~x2n
//     2^n c'_n + S_I = X_I + Y_I +  c_y & ~x2n
// A carry out of the real part has weight 2^n, i.e. it is a unit of the
// imaginary part; a carry out of the imaginary part has weight 2^(2n) = -1,
// i.e. a borrow of the real part. Hence
//     b_s = c'_n | (b_y & x2n),   c_s = c_n | (c_y & x2n).
// When x2n = 1 (X = 0) both carries are 0 and the stored bits pass through.
// This is the structure of the paper's adder figure (two n+1-bit LUT adders,
// two AND-OR pairs); the LUTs are written here as ordinary additions.
//
// Interface: all inputs and outputs are plain bit vectors; combinational.
module cplx_adder #(
  parameter int unsigned N = cplx_pkg::N_PAPER
) (
  input  logic [N-1:0] x_r,   // X_R
  input  logic [N-1:0] x_i,   // X_I
  input  logic         x2n,   // zero flag of X (x[2n])
  input  logic [N-1:0] y_r,   // Y_R
  input  logic [N-1:0] y_i,   // Y_I
  input  logic         b_y,   // stored borrow of Y's real part
  input  logic         c_y,   // stored carry of Y's imaginary part
  output logic [N-1:0] s_r,   // S_R
  output logic [N-1:0] s_i,   // S_I
  output logic         b_s,   // stored borrow of S's real part
  output logic         c_s    // stored carry of S's imaginary part
);

  logic [N:0] lut_r, lut_i;   // {c_n, S_R} and {c'_n, S_I}
  logic       cin_r, cin_i;

  always_comb begin
    cin_r = ~b_y & ~x2n;
    cin_i = c_y & ~x2n;
    lut_r = {1'b0, x_r} + {1'b0, y_r} + (N+1)'(cin_r);
    lut_i = {1'b0, x_i} + {1'b0, y_i} + (N+1)'(cin_i);
    s_r   = lut_r[N-1:0];
    s_i   = lut_i[N-1:0];
    b_s   = lut_i[N] | (b_y & x2n);
    c_s   = lut_r[N] | (c_y & x2n);
  end

endmodule
