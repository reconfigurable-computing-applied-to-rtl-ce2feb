// Shared types and constants of the tactile-internet kinematics datapath.
//
// All datapath signals between blocks are IEEE-754 single-precision words
// (f32_t). Only the trigonometric function block works internally in signed
// fixed point [sV.N] = [s16.13]: 16 bits, 13 of them fractional, range (-4, 4).
// The arm constants are those of the PHANToM Omni: L1 = L2 = 0.135,
// L3 = 0.025, L4 = L1 + A with A = 0.035 (the values are used in the same
// length unit as the tool coordinates). Constants that the circuit diagrams
// print with a minus sign (-L1, -L2, -L3, -L4, -pi/2) are stored negated, as
// the diagrams show them. The bit patterns are the round-to-nearest F32
// encodings of those decimal values.
package tactile_pkg;

  typedef logic [31:0] f32_t;

  // Fixed-point format of the CORDIC ([s16.13])
  localparam int unsigned FIX_V = 16;
  localparam int unsigned FIX_N = 13;

  // Three-element vectors of F32: joint angles, positions, forces, torques
  typedef struct packed {
    f32_t x;
    f32_t y;
    f32_t z;
  } vec3_t;

  typedef struct packed {
    f32_t t1;
    f32_t t2;
    f32_t t3;
  } joints_t;

  // Jacobian matrix elements, J21 included (it is the constant 0)
  typedef struct packed {
    f32_t j11, j21, j31;
    f32_t j12, j22, j32;
    f32_t j13, j23, j33;
  } jacobian_t;

  // Functions a trigonometric function block can evaluate
  typedef enum logic [1:0] {
    TFB_SIN   = 2'd0,
    TFB_COS   = 2'd1,
    TFB_ATAN2 = 2'd2,
    TFB_ACOS  = 2'd3
  } tfb_func_e;

  // F32 constants
  localparam f32_t F32_ZERO     = 32'h0000_0000;
  localparam f32_t F32_TWO      = 32'h4000_0000;
  localparam f32_t F32_L1       = 32'h3e0a_3d71;  //  0.135
  localparam f32_t F32_L2       = 32'h3e0a_3d71;  //  0.135 (L2 = L1)
  localparam f32_t F32_L3       = 32'h3ccc_cccd;  //  0.025
  localparam f32_t F32_L4       = 32'h3e2e_147b;  //  0.170 (L1 + 0.035)
  localparam f32_t F32_NEG_L1   = 32'hbe0a_3d71;  // -0.135
  localparam f32_t F32_NEG_L2   = 32'hbe0a_3d71;  // -0.135
  localparam f32_t F32_NEG_L3   = 32'hbccc_cccd;  // -0.025
  localparam f32_t F32_NEG_L4   = 32'hbe2e_147b;  // -0.170
  localparam f32_t F32_NEG_HPI  = 32'hbfc9_0fdb;  // -pi/2

  // Sign inversion (the "-1" triangles of the diagrams)
  function automatic f32_t f32_neg(f32_t a);
    return {~a[31], a[30:0]};
  endfunction

endpackage
