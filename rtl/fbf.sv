// Feedback force module of the slave side (FBF-HSD).
//
// Synthesises the contact force from the distance between the nearest object
// surface and the slave tool, one axis per circuit:
//   F_k = h_k (k_obj - k_env),  k = x, y, z
// one subtractor and one multiplier per axis, F32. The elasticity
// coefficients h_x, h_y, h_z are inputs, since the source treats them as
// time-dependent values of the object.
// Timing: one output register; latency one clock, one sample per clock
// (21 ns path reported on a Virtex-6). The register is this design's choice.
module fbf
  import tactile_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  vec3_t p_obj,
  input  vec3_t p_env,
  input  vec3_t hcoef,
  output logic  out_valid,
  output vec3_t force_out
);

  vec3_t d, f;

  fp_add u_dx (.a(p_obj.x), .b(p_env.x), .sub(1'b1), .y(d.x));
  fp_add u_dy (.a(p_obj.y), .b(p_env.y), .sub(1'b1), .y(d.y));
  fp_add u_dz (.a(p_obj.z), .b(p_env.z), .sub(1'b1), .y(d.z));
  fp_mul u_mx (.a(d.x), .b(hcoef.x), .y(f.x));
  fp_mul u_my (.a(d.y), .b(hcoef.y), .y(f.y));
  fp_mul u_mz (.a(d.z), .b(hcoef.z), .y(f.z));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      force_out <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) force_out <= f;
    end
  end

endmodule
