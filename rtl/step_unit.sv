// step_unit: gradient step and projection of SANDMAN (step 8) for one UE.
//
//   R = S~_D(k,n) - 2 tau grad(k,n) = S~_D(k,n) + 2 tau G(k,n),  S~_D(k,n) = prox(R)
//
// where G = -grad = H^H Q arrives from the column adder of PE column k.
// The step size 2*tau is an unsigned TAU_W-bit input with TAU_F fraction
// bits. Combinational: the caller registers the result into the S FF array.
//
// The update rule follows the algorithm outline; carrying it out at the
// output of each column adder (rather than inside a PE as drawn for step 8)
// and the fixed-point format of tau are this design's choices.
module step_unit
  import sandman_pkg::*;
(
  input  ccs_t              g,      // -grad(k,n), FRAC fraction bits
  input  cs_t               s_old,  // S~_D(k,n)
  input  logic [TAU_W-1:0]  tau2,   // 2*tau
  output cs_t               s_new
);
  localparam int R_W = CS_W + TAU_W + 2;
  logic signed [R_W-1:0] pr, pi;
  logic signed [ACC_W+1:0] rr, ri;

  always_comb begin
    pr = R_W'(g.re) * R_W'($signed({1'b0, tau2}));
    pi = R_W'(g.im) * R_W'($signed({1'b0, tau2}));
    rr = (ACC_W+2)'(sat(64'(pr >>> TAU_F) + 64'(s_old.re), ACC_W + 2));
    ri = (ACC_W+2)'(sat(64'(pi >>> TAU_F) + 64'(s_old.im), ACC_W + 2));
  end

  prox #(.IN_W(ACC_W + 2)) u_prox (.r_re(rr), .r_im(ri), .s(s_new));
endmodule
