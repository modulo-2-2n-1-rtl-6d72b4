// cplx_rns_top: modulo-(2^(2n)+1) residue channel built from two n-bit
// complex residue channels (moduli 2^n + j and 2^n - j).
//
// Two 5n-bit binary operands z_a and z_b enter each cycle that in_valid is
// high. Each goes through a forward converter; the resulting complex
// residues feed
//   * the multiplier, which forms z_a * z_b modulo 2^(2n)+1, and
//   * the adder, whose second operand is the accumulated sum held in
//     stored-borrow / stored-carry form in this module's accumulator
//     registers; acc_clr with in_valid starts a new sum (acc = z_a).
// The product and the accumulator are registered; reverse converters turn
// both into plain (2n+1)-bit values in [0, 2^(2n)], and the unreduced complex
// pairs are also brought out, since a following RNS reverse converter can use
// them without the final modulo reduction.
//
// Timing: results for the operands presented with in_valid appear one clock
// later, with out_valid high. sum holds the accumulated value after that
// operand; the accumulator keeps its value while in_valid is low. Reset
// (active-low, synchronous) clears the accumulator to zero.
//
// What follows the paper: the forward converter, the complex adder fed by the
// accumulated sum, the multiplier and the reverse converter. This design's
// own choices: the register stage, the valid/clear controls and the pairing
// of one accumulator with one multiplier in a single unit.
module cplx_rns_top #(
  parameter int unsigned N = cplx_pkg::N_PAPER
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic           acc_clr,
  input  logic [5*N-1:0] z_a,
  input  logic [5*N-1:0] z_b,
  output logic           out_valid,
  output logic [2*N:0]   sum,      // accumulated sum mod 2^(2n)+1
  output logic [2*N:0]   prod,     // z_a * z_b mod 2^(2n)+1
  output logic [N-1:0]   sum_re,   // accumulator, complex form
  output logic [N-1:0]   sum_im,
  output logic           sum_b,
  output logic           sum_c,
  output logic [N-1:0]   prod_re,  // product, complex form
  output logic [N-1:0]   prod_im,
  output logic           prod_b,
  output logic           prod_c
);

  // Forward conversion.
  logic [2*N:0] xa, xb;

  fwd_conv #(.N(N)) u_fwd_a (.z(z_a), .x(xa));
  fwd_conv #(.N(N)) u_fwd_b (.z(z_b), .x(xb));

  // Adder with the accumulator as its Y operand.
  logic [N-1:0] acc_r, acc_i, y_r, y_i, s_r, s_i;
  logic         acc_b, acc_c, b_y, c_y, b_s, c_s;

  always_comb begin
    y_r = acc_clr ? '0   : acc_r;
    y_i = acc_clr ? '0   : acc_i;
    b_y = acc_clr ? 1'b0 : acc_b;
    c_y = acc_clr ? 1'b0 : acc_c;
  end

  cplx_adder #(.N(N)) u_add (
    .x_r(xa[N-1:0]), .x_i(xa[2*N-1:N]), .x2n(xa[2*N]),
    .y_r(y_r), .y_i(y_i), .b_y(b_y), .c_y(c_y),
    .s_r(s_r), .s_i(s_i), .b_s(b_s), .c_s(c_s)
  );

  // Multiplier.
  logic [N-1:0] p_r, p_i;
  logic         b_p, c_p;

  cplx_mult #(.N(N)) u_mul (
    .x_r(xa[N-1:0]), .x_i(xa[2*N-1:N]), .x2n(xa[2*N]),
    .y_r(xb[N-1:0]), .y_i(xb[2*N-1:N]), .y2n(xb[2*N]),
    .p_r(p_r), .p_i(p_i), .b_p(b_p), .c_p(c_p)
  );

  // Registers.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_r     <= '0;
      acc_i     <= '0;
      acc_b     <= 1'b0;
      acc_c     <= 1'b0;
      prod_re   <= '0;
      prod_im   <= '0;
      prod_b    <= 1'b0;
      prod_c    <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        acc_r   <= s_r;
        acc_i   <= s_i;
        acc_b   <= b_s;
        acc_c   <= c_s;
        prod_re <= p_r;
        prod_im <= p_i;
        prod_b  <= b_p;
        prod_c  <= c_p;
      end
    end
  end

  assign sum_re = acc_r;
  assign sum_im = acc_i;
  assign sum_b  = acc_b;
  assign sum_c  = acc_c;

  // Reverse conversion.
  rev_conv #(.N(N)) u_rev_sum (
    .s_r(acc_r), .s_i(acc_i), .b_s(acc_b), .c_s(acc_c), .s(sum)
  );

  rev_conv #(.N(N)) u_rev_prod (
    .s_r(prod_re), .s_i(prod_im), .b_s(prod_b), .c_s(prod_c), .s(prod)
  );

  // The forward converter's zero flag may be set only with a zero word.
  a_fwd_code: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (!xa[2*N] || xa[2*N-1:0] == '0) && (!xb[2*N] || xb[2*N-1:0] == '0))
    else $error("forward converter produced an invalid diminished-one code");

endmodule
