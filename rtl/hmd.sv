// Hardware of the master device (HMD).
//
// Sits between the master haptic device and the network. Each sampling
// instant (sample = 1) it takes the master joint angles b(n) = theta^MD and
// the force q(n) = F^HMD received over the backwards channel, and
//   - FK-HMD turns b(n) into the tool position c(n) = (x, y, z) to send
//     over the forward channel (three values instead of one per joint);
//   - KFF-HMD turns q(n) into the joint torques p(n) = tau^HMD for the
//     master device, using the Jacobian at b(n).
// Both modules run side by side; each output is registered, so c(n) and
// p(n) appear one clock after the sample with their valid flags. The
// prediction/detection blocks the source places here (CPD-HMD, JPD-HMD)
// are not part of the design: q(n) goes to KFF-HMD directly.
module hmd
  import tactile_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    sample,
  input  joints_t b,
  input  vec3_t   q,
  output logic    c_valid,
  output vec3_t   c,
  output logic    p_valid,
  output joints_t p
);

  fk u_fk_hmd (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (sample),
    .theta     (b),
    .out_valid (c_valid),
    .pos       (c)
  );

  kff_hmd u_kff_hmd (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (sample),
    .theta     (b),
    .force_in  (q),
    .out_valid (p_valid),
    .tau       (p)
  );

endmodule
