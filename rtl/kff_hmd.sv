// Kinesthetic feedback force module of the master side (KFF-HMD).
//
// Turns the force received from the slave side, F^HMD = q(n), into the
// torques tau^HMD = p(n) to apply to the master device's joints:
// tau = J(theta^MD)^T F. The JM sub-circuit computes the Jacobian from the
// master joint angles, the KFF sub-circuit forms J^T F; both are
// combinational and run in parallel with everything else.
// Timing: one output register; latency one clock, one sample per clock
// (70 ns path reported on a Virtex-6). The register and valid flag are this
// design's choice.
module kff_hmd
  import tactile_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  joints_t theta,
  input  vec3_t   force_in,
  output logic    out_valid,
  output joints_t tau
);

  jacobian_t j;
  joints_t   t;

  jm  u_jm  (.theta(theta), .j(j));
  kff u_kff (.j(j), .force_in(force_in), .tau(t));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      tau       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) tau <= t;
    end
  end

endmodule
