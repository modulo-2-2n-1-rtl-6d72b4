// rev_conv: reverse converter from a complex residue pair to the plain
// modulo-(2^(2n)+1) value.
//
// Input is a result of the adder or the multiplier in stored-borrow /
// stored-carry form, value S = 2^n (S_I + c_s) + S_R - b_s. Adding the
// modulus 2^(2n)+1 turns the borrow into a positive bit:
//     S = | (2^(2n) + 2^n S_I + S_R) + (2^n c_s + ~b_s) |  mod 2^(2n)+1,
// a (2n+1)-bit main operand plus a sparse operand with only two bits, at
// positions 0 and n. The output is the clean value in [0, 2^(2n)].
//
// The main-plus-sparse formulation is the paper's; the paper does not give
// the insides of the sparse modulo adder, so here it is a (2n+2)-bit
// addition followed by subtraction of 0, 1 or 2 times the modulus (the sum
// lies in [2^(2n), 2^(2n+1) + 2^n], below three times the modulus). When a
// later converter can take the unreduced form, S_I, c_s, S_R and b_s can be
// used directly and this block is not needed.
//
// Interface: combinational.
module rev_conv #(
  parameter int unsigned N = cplx_pkg::N_PAPER
) (
  input  logic [N-1:0] s_r,
  input  logic [N-1:0] s_i,
  input  logic         b_s,
  input  logic         c_s,
  output logic [cplx_pkg::mod_width(N)-1:0] s  // value in [0, 2^(2n)]
);

  localparam logic [2*N+1:0] MODULUS  = (2*N+2)'(1) << (2*N) | (2*N+2)'(1);
  localparam logic [2*N+1:0] MODULUS2 = MODULUS << 1;

  logic [2*N+1:0] main_op, sparse_op, sum;
  logic           nb_s;

  always_comb begin
    nb_s      = ~b_s;
    main_op   = {2'b01, s_i, s_r};
    sparse_op = ((2*N+2)'(c_s) << N) | (2*N+2)'(nb_s);
    sum       = main_op + sparse_op;
    if (sum >= MODULUS2)     sum = sum - MODULUS2;
    else if (sum >= MODULUS) sum = sum - MODULUS;
    s = sum[2*N:0];
  end

endmodule
