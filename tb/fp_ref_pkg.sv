// Reference arithmetic for the testbenches, in double precision.
//
// f2r / r2f convert between IEEE-754 single-precision bit patterns and real
// (r2f rounds to nearest even, flushes subnormals to zero), ulp_diff gives the
// distance of two F32 words in units in the last place, and the *_ref tasks
// evaluate the kinematic equations of the PHANToM Omni independently of the
// RTL (arm constants L1 = L2 = 0.135, L3 = 0.025, L4 = 0.170).
package fp_ref_pkg;

  localparam real L1 = 0.135;
  localparam real L2 = 0.135;
  localparam real L3 = 0.025;
  localparam real L4 = 0.170;
  localparam real PI = 3.14159265358979323846;

  function automatic real f2r(logic [31:0] f);
    real m;
    int  e;
    if (f[30:23] == 8'd0) return 0.0;
    e = int'(f[30:23]) - 127;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    m = m * (2.0 ** e);
    return f[31] ? -m : m;
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    int          e;
    logic [24:0] m;
    logic        g, s;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {2'b01, d[51:29]};
    g = d[28];
    s = |d[27:0];
    if (g && (s || m[0])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e <= 0) return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  // distance in ULPs between two finite F32 words (sign-magnitude order)
  function automatic longint ulp_diff(logic [31:0] a, logic [31:0] b);
    longint ia, ib, d;
    ia = a[31] ? -longint'(a[30:0]) : longint'(a[30:0]);
    ib = b[31] ? -longint'(b[30:0]) : longint'(b[30:0]);
    d  = ia - ib;
    return (d < 0) ? -d : d;
  endfunction

  function automatic real rabs(real r);
    return (r < 0.0) ? -r : r;
  endfunction

  task automatic fk_ref(input real t1, t2, t3, output real x, y, z);
    x = -$sin(t1) * (L2 * $sin(t3) + L1 * $cos(t2));
    y = -L2 * $cos(t3) + L1 * $sin(t2) + L3;
    z = L2 * $cos(t1) * $sin(t3) + L1 * $cos(t1) * $cos(t2) - L4;
  endtask

  function automatic real clamp1(real a);
    return (a > 1.0) ? 1.0 : ((a < -1.0) ? -1.0 : a);
  endfunction

  task automatic ik_ref(input real x, y, z, output real t1, t2, t3);
    real bigr, r, gamma, beta, alpha;
    t1    = -$atan2(x, z + L4);
    bigr  = $sqrt(x * x + (z + L4) * (z + L4));
    r     = $sqrt(x * x + (z + L4) * (z + L4) + (y - L3) * (y - L3));
    gamma = $acos(clamp1((L1 * L1 - L2 * L2 + r * r) / (2.0 * L1 * r)));
    beta  = $atan2(y - L3, bigr);
    alpha = $acos(clamp1((L1 * L1 + L2 * L2 - r * r) / (2.0 * L1 * L2)));
    t2    = gamma + beta;
    t3    = t2 + alpha - PI / 2.0;
  endtask

  // Jacobian, row-major j[row*3+col] for J(row+1)(col+1)
  task automatic jm_ref(input real t1, t2, t3, output real j[9]);
    j[0] = -$cos(t1) * (L2 * $sin(t3) + L1 * $cos(t2));     // J11
    j[1] = L1 * $sin(t1) * $sin(t2);                         // J12
    j[2] = -L2 * $sin(t1) * $cos(t3);                        // J13
    j[3] = 0.0;                                              // J21
    j[4] = L1 * $cos(t2);                                    // J22
    j[5] = L2 * $sin(t3);                                    // J23
    j[6] = -L1 * $cos(t2) * $sin(t1) - L2 * $sin(t3) * $sin(t1); // J31
    j[7] = -L1 * $sin(t2) * $cos(t1);                        // J32
    j[8] = L2 * $cos(t3) * $cos(t1);                         // J33
  endtask

  task automatic kff_ref(input real j[9], input real fx, fy, fz,
                         output real tau1, tau2, tau3);
    tau1 = j[0] * fx + j[3] * fy + j[6] * fz;
    tau2 = j[1] * fx + j[4] * fy + j[7] * fz;
    tau3 = j[2] * fx + j[5] * fy + j[8] * fz;
  endtask

  // random real in [lo, hi)
  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * (real'($urandom) / 4294967296.0);
  endfunction

endpackage
