// Hardware of the slave device (HSD).
//
// Sits between the network and the slave haptic device. Each sampling
// instant (sample = 1) it takes the position v(n) received over the forward
// channel and the slave device's report g(n) = [theta^SD, s^OBJ], which is
// split into its two parts (plain wiring), and
//   - IK-HSD turns v(n) into the joint reference theta^HSD(n) for the
//     slave's joint controller (one clock);
//   - FK-HSD turns theta^SD(n) into the slave tool position l(n) (one clock);
//   - FBF-HSD forms the contact force h(n) = h_k (s^OBJ - l) from l(n) and
//     the object position, which is held in a register for the clock FK-HSD
//     takes, so both belong to the same instant n (two clocks in all).
// The joint controller (FCS) and the prediction/detection blocks (CPD-HSD,
// JPD-HSD) are outside this design: theta^HSD is an output.
module hsd
  import tactile_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    sample,
  input  vec3_t   v,
  input  joints_t g_theta,
  input  vec3_t   g_obj,
  input  vec3_t   hcoef,
  output logic    theta_ref_valid,
  output joints_t theta_ref,
  output logic    l_valid,
  output vec3_t   l,
  output logic    h_valid,
  output vec3_t   h
);

  vec3_t obj_d, hcoef_d;

  ik u_ik_hsd (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (sample),
    .pos       (v),
    .out_valid (theta_ref_valid),
    .theta     (theta_ref)
  );

  fk u_fk_hsd (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (sample),
    .theta     (g_theta),
    .out_valid (l_valid),
    .pos       (l)
  );

  // align s^OBJ(n) and h_k(n) with l(n)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      obj_d   <= '0;
      hcoef_d <= '0;
    end else if (sample) begin
      obj_d   <= g_obj;
      hcoef_d <= hcoef;
    end
  end

  fbf u_fbf_hsd (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (l_valid),
    .p_obj     (obj_d),
    .p_env     (l),
    .hcoef     (hcoef_d),
    .out_valid (h_valid),
    .force_out (h)
  );

endmodule
