// grad_unit: one backward LIF lane of the BP engine.
//
// With du_next the membrane-potential gradient of the following time step,
//   fire'  = (th_l <= u_t <= th_r) ? beta : 0                 (surrogate)
//   grad_s = -alpha * du_next * u_t + Conv_BP_t               (spike gradient)
//   du_t   = (s_t ? 0 : alpha * du_next) + grad_s * fire'     (potential gradient)
// alpha*du_next is formed once and used twice. pool_sel passes Conv_BP only to
// positions chosen by the max-pooling selector (tie it to 1 when the layer has
// no pooling). The window bounds are inclusive, as in the training equations;
// beta is a register whose reset value 1.0 gives the plain rectangular
// surrogate. fire_d reports fire' != 0 for the sparse gating of the BP array.
// Interface: purely combinational; the BP engine registers around it.
module grad_unit
  import snn_pkg::*;
(
  input  fp16_t conv,
  input  fp16_t u,
  input  logic  s,
  input  fp16_t du_next,
  input  logic  pool_sel,
  input  fp16_t alpha,
  input  fp16_t beta,
  input  fp16_t th_l,
  input  fp16_t th_r,
  output fp16_t du,
  output logic  fire_d
);

  fp16_t a_du, a_du_u, ds, fd, g, keep, conv_sel;

  assign fire_d   = fp16_ge(u, th_l) && fp16_le(u, th_r);
  assign fd       = fire_d ? beta : 16'h0000;
  assign conv_sel = pool_sel ? conv : 16'h0000;

  fp16_mul u_m1 (.a(alpha), .b(du_next), .y(a_du));
  fp16_mul u_m2 (.a(a_du),  .b(u),       .y(a_du_u));
  fp16_add u_a1 (.a(conv_sel), .b(a_du_u ^ 16'h8000), .y(ds));
  fp16_mul u_m3 (.a(ds),    .b(fd),      .y(g));
  assign keep = s ? 16'h0000 : a_du;
  fp16_add u_a2 (.a(keep),  .b(g),       .y(du));

endmodule
