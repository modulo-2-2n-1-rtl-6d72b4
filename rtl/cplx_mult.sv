// cplx_mult: unified moduli-(2^n +- j) multiplier.
//
// Multiplies two residues of 2^(2n)+1 that come from the forward converter,
//     X = ~x2n (1 + X_R + 2^n X_I),   Y = ~y2n (1 + Y_R + 2^n Y_I),
// and returns the product in stored-borrow / stored-carry form,
//     |P| = P_R - b_P  -+ j (P_I + c_P)    (value P_R - b_P + 2^n (P_I + c_P)),
// the same form the adder's Y operand and output use.
//
// How it works (all reductions use 2^(2n) = -1):
//  1. Four partial products ("LUT 1..4"):
//       (1+X_R)(1+Y_R) = 2^(2n) c + 2^n H_RR + L_RR
//       (1+X_R) Y_I    = 2^n H_RI + L_RI
//       X_I (1+Y_R)    = 2^n H_IR + L_IR
//       X_I Y_I        = 2^n H_II + L_II
//     The product is then R + 2^n I with
//       R = L_RR + ~L_II + ~H_RI + ~H_IR + ~c + 3
//       I = H_RR + L_RI  +  L_IR + ~H_II - 2.
//  2. Real (4;2) compressor: L_RR, ~L_II, ~H_RI, ~H_IR with carry-in ~c gives
//     U, V (V's bit 0 free) and the two top carries v_n, c_n, which are units
//     of the imaginary part.
//  3. Imaginary (4;2) compressor: H_RR, L_RI, L_IR, ~H_II with carry-in c_n and
//     v_n placed in the free bit 0 of its carry word gives U', V' and the top
//     carries v'_n, c'_n; these have weight 2^(2n) = -1 and re-enter the real
//     part inverted.
//  4. Real carry-save adder: U, V with ~v'_n at bit 0, and ~c'_n; imaginary
//     carry-save adder: U', V' and the constant 2^n - 2. Each CSA's top carry
//     moves to the other part: the real one (weight 2^n) as bit 0 of Z', the
//     imaginary one (weight -1) inverted as bit 0 of Z.
//  5. Final n-bit adders ("LUT P_R", "LUT P_I"):
//       2^n c_P + P_R = W + Z + 1,    2^n b_P + P_I = W' + Z'.
//  6. If either operand is zero (x2n or y2n set) the product is forced to 0.
//
// Steps 1-5 follow the paper's multiplier figure and its compressor table;
// the paper's LUTs are written as ordinary products and sums. Where the
// paper's figure leaves the placement of the carries between the two halves
// open, the placement above is the one that makes the sum exact. The zero
// gating in step 6 is the factor ~x2n ~y2n of the paper's product formula;
// how it is gated is this design's choice.
//
// Interface: combinational; N >= 2.
module cplx_mult #(
  parameter int unsigned N = cplx_pkg::N_PAPER
) (
  input  logic [N-1:0] x_r,
  input  logic [N-1:0] x_i,
  input  logic         x2n,
  input  logic [N-1:0] y_r,
  input  logic [N-1:0] y_i,
  input  logic         y2n,
  output logic [N-1:0] p_r,   // P_R
  output logic [N-1:0] p_i,   // P_I
  output logic         b_p,   // stored borrow of the real part
  output logic         c_p    // stored carry of the imaginary part
);

  if (N < 2) begin : g_bad_n
    $error("cplx_mult needs N >= 2");
  end

  // Partial products.
  logic [N:0]     xr1, yr1;
  logic [2*N:0]   pp_rr;
  logic [2*N-1:0] pp_ri, pp_ir, pp_ii;
  logic           c_rr;
  logic [N-1:0]   h_rr, l_rr, h_ri, l_ri, h_ir, l_ir, h_ii, l_ii;

  always_comb begin
    xr1   = {1'b0, x_r} + (N+1)'(1);
    yr1   = {1'b0, y_r} + (N+1)'(1);
    pp_rr = (2*N+1)'(xr1) * (2*N+1)'(yr1);
    pp_ri = (2*N)'(xr1) * (2*N)'(y_i);
    pp_ir = (2*N)'(x_i) * (2*N)'(yr1);
    pp_ii = (2*N)'(x_i) * (2*N)'(y_i);
    c_rr  = pp_rr[2*N];
    {h_rr, l_rr} = pp_rr[2*N-1:0];
    {h_ri, l_ri} = pp_ri;
    {h_ir, l_ir} = pp_ir;
    {h_ii, l_ii} = pp_ii;
  end

  // (4;2) compressors.
  logic [N-1:0] u1, v1, u2, v2;
  logic         co1, co2;

  compressor42 #(.N(N)) u_comp_re (
    .a(l_rr), .b(~l_ii), .c(~h_ri), .d(~h_ir), .cin(~c_rr),
    .u(u1), .v(v1), .cout(co1)
  );

  compressor42 #(.N(N)) u_comp_im (
    .a(h_rr), .b(l_ri), .c(l_ir), .d(~h_ii), .cin(co1),
    .u(u2), .v(v2), .cout(co2)
  );

  // Carry-save adders and final adders.
  logic [N-1:0] csa_b_re, csa_c_re, csa_b_im, csa_c_im;
  logic [N-1:0] w_re, zc_re, w_im, zc_im;
  logic [N-1:0] z_re, z_im;
  logic [N:0]   fin_re, fin_im;
  logic         zero;

  always_comb begin
    // Real CSA: U + (V with ~v'_n at bit 0) + ~c'_n.
    csa_b_re = {v1[N-2:0], ~v2[N-1]};
    csa_c_re = {{(N-1){1'b0}}, ~co2};
    w_re     = u1 ^ csa_b_re ^ csa_c_re;
    zc_re    = (u1 & csa_b_re) | (u1 & csa_c_re) | (csa_b_re & csa_c_re);

    // Imaginary CSA: U' + (V' with v_n at bit 0) + (2^n - 2).
    csa_b_im = {v2[N-2:0], v1[N-1]};
    csa_c_im = {{(N-1){1'b1}}, 1'b0};
    w_im     = u2 ^ csa_b_im ^ csa_c_im;
    zc_im    = (u2 & csa_b_im) | (u2 & csa_c_im) | (csa_b_im & csa_c_im);

    // Cross-over of the CSA top carries.
    z_re = {zc_re[N-2:0], ~zc_im[N-1]};
    z_im = {zc_im[N-2:0],  zc_re[N-1]};

    fin_re = {1'b0, w_re} + {1'b0, z_re} + (N+1)'(1);
    fin_im = {1'b0, w_im} + {1'b0, z_im};

    zero = x2n | y2n;
    p_r  = zero ? '0   : fin_re[N-1:0];
    c_p  = zero ? 1'b0 : fin_re[N];
    p_i  = zero ? '0   : fin_im[N-1:0];
    b_p  = zero ? 1'b0 : fin_im[N];
  end

endmodule
