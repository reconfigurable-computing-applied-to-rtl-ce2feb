// Top level: master-side (HMD) and slave-side (HSD) hardware of a bilateral
// tactile-internet link for two 3-DoF PHANToM Omni arms, on one device.
//
// Forward path:  theta^MD --FK-HMD--> c(n) ==network==> v(n) --IK-HSD--> theta^HSD
// Backward path: theta^SD --FK-HSD--> l(n), s^OBJ --FBF-HSD--> h(n)
//                ==network==> q(n) --KFF-HMD (with theta^MD)--> tau^HMD
// The network, both devices and the slave joint controller are outside the
// design; their signals are ports: c and h leave towards the network, v and
// q come back from it, theta_ref goes to the slave controller, tau to the
// master device. The two sides are independent and have their own sample
// strobes. Latencies: c, tau and theta_ref one clock after their sample,
// h two clocks. Every block takes a new sample each clock.
module tactile_system
  import tactile_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  // master side
  input  logic    hmd_sample,
  input  joints_t theta_md,      // b(n)
  input  vec3_t   force_hmd,     // q(n), from the backwards channel
  output logic    c_valid,
  output vec3_t   pos_hmd,       // c(n), to the forward channel
  output logic    tau_valid,
  output joints_t tau_hmd,       // p(n), to the master device
  // slave side
  input  logic    hsd_sample,
  input  vec3_t   pos_hsd,       // v(n), from the forward channel
  input  joints_t theta_sd,      // theta^SD(n), part of g(n)
  input  vec3_t   pos_obj,       // s^OBJ(n), part of g(n)
  input  vec3_t   hcoef,         // elasticity h_x, h_y, h_z
  output logic    theta_ref_valid,
  output joints_t theta_ref,     // theta^HSD(n), to the slave controller
  output logic    pos_env_valid,
  output vec3_t   pos_env,       // l(n)
  output logic    force_valid,
  output vec3_t   force_hsd      // h(n), to the backwards channel
);

  hmd u_hmd (
    .clk     (clk),
    .rst_n   (rst_n),
    .sample  (hmd_sample),
    .b       (theta_md),
    .q       (force_hmd),
    .c_valid (c_valid),
    .c       (pos_hmd),
    .p_valid (tau_valid),
    .p       (tau_hmd)
  );

  hsd u_hsd (
    .clk             (clk),
    .rst_n           (rst_n),
    .sample          (hsd_sample),
    .v               (pos_hsd),
    .g_theta         (theta_sd),
    .g_obj           (pos_obj),
    .hcoef           (hcoef),
    .theta_ref_valid (theta_ref_valid),
    .theta_ref       (theta_ref),
    .l_valid         (pos_env_valid),
    .l               (pos_env),
    .h_valid         (force_valid),
    .h               (force_hsd)
  );

endmodule
