// soma_unit: one leaky integrate-and-fire lane of the FP engine.
//
// Forward membrane update and firing:
//   u_t = (s_{t-1} ? 0 : alpha * u_{t-1}) + Conv_FP_t,   s_t = (u_t >= th_f).
// The previous potential is multiplied by the leak alpha; a selector driven by
// the previous spike replaces the product by 0 (reset after a spike); an adder
// adds this step's convolution result; the fire comparator produces the spike.
// The u_t output is the value before any reset, which is what the backward
// pass needs; the reset takes effect through s_t at the next step.
// Interface: purely combinational; the FP engine registers inputs and outputs.
module soma_unit
  import snn_pkg::*;
(
  input  fp16_t conv,
  input  fp16_t u_prev,
  input  logic  s_prev,
  input  fp16_t alpha,
  input  fp16_t th,
  output fp16_t u,
  output logic  s
);

  fp16_t leak, kept;

  fp16_mul u_mul (.a(alpha), .b(u_prev), .y(leak));
  assign kept = s_prev ? 16'h0000 : leak;
  fp16_add u_add (.a(kept), .b(conv), .y(u));
  assign s = fp16_ge(u, th);

endmodule
