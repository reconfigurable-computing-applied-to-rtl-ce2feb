// End-to-end testbench of tactile_system: one bilateral teleoperation run.
//
// The operator trajectory is the validation path of the source: starting at
// all joints 0, joint 1 turns to pi/2, then joint 2 to pi/4, then joint 3 to
// pi/4, 400 samples per joint (4 s at 100 samples/s), 1200 samples in all
// (linear ramps: the profile within each segment is not specified).
// Around the design the testbench models:
//   - the network: each direction delays every value by DF (forward) or DB
//     (backwards) samples and adds small zero-mean noise (sum of uniforms);
//   - the slave device with an ideal joint controller: theta^SD(n) is the
//     joint reference theta^HSD produced for the previous sample;
//   - the environment: a fixed object surface point and elasticities.
// A new sample is taken every SP clocks on both sides. Checked for every
// sample, against double-precision equations on the block's own inputs:
// c(n), theta^HSD(n), l(n), h(n), tau(n), with their latencies (1, 1, 1, 2
// and 1 clocks), and the mean squared error of each signal group against
// a bound near the levels the source reports. The round trip
// theta^MD(n - DF) -> FK -> network -> IK -> theta^HSD(n) is checked too.
// Mechanisms counted (each must occur): motion of each joint, delayed
// samples crossing each channel, non-zero contact force fed back, non-zero
// torques on the master.
module tb_tactile_system;
  import fp_ref_pkg::*;
  import tactile_pkg::*;

  localparam int Q  = 1200;    // samples of the trajectory
  localparam int SEG = Q / 3;  // samples per joint movement
  localparam int DF = 3;       // forward channel delay, samples
  localparam int DB = 2;       // backwards channel delay, samples
  localparam int SP = 4;       // clocks per sample
  localparam real NOISE = 1e-5;

  logic clk = 0, rst_n = 0;
  logic hmd_sample = 0, hsd_sample = 0;
  joints_t theta_md, tau_hmd, theta_sd, theta_ref;
  vec3_t   force_hmd, pos_hmd, pos_hsd, pos_obj, hcoef, pos_env, force_hsd;
  logic    c_valid, tau_valid, theta_ref_valid, pos_env_valid, force_valid;
  always #5 clk = ~clk;

  tactile_system dut (.*);

  int checks = 0, failures = 0;
  int n_move1 = 0, n_move2 = 0, n_move3 = 0, n_fdelay = 0, n_bdelay = 0, n_force = 0, n_torque = 0;

  initial begin : watchdog
    repeat (Q * SP + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // network channel storage
  vec3_t fwd_q [$];
  vec3_t bwd_q [$];
  joints_t md_hist [$];

  real se_c = 0, se_ik = 0, se_rt = 0, se_l = 0, se_h = 0, se_tau = 0;
  int  n_se = 0;

  function automatic real noise();
    real s = 0.0;
    for (int k = 0; k < 12; k++) s += real'($urandom) / 4294967296.0;
    return (s - 6.0) * NOISE;
  endfunction

  function automatic vec3_t add_noise(vec3_t a);
    vec3_t r;
    r.x = r2f(f2r(a.x) + noise());
    r.y = r2f(f2r(a.y) + noise());
    r.z = r2f(f2r(a.z) + noise());
    return r;
  endfunction

  task automatic chk(f32_t got, real expv, real tol, inout real se, input string what);
    real e;
    e = f2r(got) - expv;
    se += e * e;
    checks++;
    if (rabs(e) > tol) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %f expected %f", what, f2r(got), expv);
    end
  endtask

  initial begin
    real t1, t2, t3, x, y, z, r[9], a1, a2, a3;
    joints_t prev_ref;
    vec3_t   c_now, h_now, v_now, q_now, obj_now, hc_now;
    theta_md = '0; force_hmd = '0; pos_hsd = '0; theta_sd = '0;
    pos_obj.x = r2f(-0.10); pos_obj.y = r2f(-0.05); pos_obj.z = r2f(-0.12);
    hcoef.x = r2f(60.0); hcoef.y = r2f(60.0); hcoef.z = r2f(60.0);
    prev_ref = '0;
    for (int k = 0; k < DF; k++) fwd_q.push_back('0);
    for (int k = 0; k < DB; k++) bwd_q.push_back('0);
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int n = 0; n < Q; n++) begin
      // operator trajectory -> master angles b(n)
      t1 = (PI / 2.0) * ((n < SEG) ? real'(n + 1) / SEG : 1.0);
      t2 = (PI / 4.0) * ((n < SEG) ? 0.0 : ((n < 2 * SEG) ? real'(n + 1 - SEG) / SEG : 1.0));
      t3 = (PI / 4.0) * ((n < 2 * SEG) ? 0.0 : real'(n + 1 - 2 * SEG) / SEG);
      if (n < SEG) n_move1++; else if (n < 2 * SEG) n_move2++; else n_move3++;

      @(negedge clk);
      theta_md.t1 = r2f(t1); theta_md.t2 = r2f(t2); theta_md.t3 = r2f(t3);
      md_hist.push_back(theta_md);
      q_now     = bwd_q.pop_front();          // q(n) = h(n - DB) + noise
      force_hmd = q_now;
      v_now     = fwd_q.pop_front();          // v(n) = c(n - DF) + noise
      pos_hsd   = v_now;
      theta_sd  = prev_ref;                   // ideal slave tracking
      obj_now   = pos_obj;
      hc_now    = hcoef;
      hmd_sample = 1;
      hsd_sample = 1;

      // clock 1: c, tau, theta_ref, l
      @(posedge clk); #1;
      hmd_sample = 0;
      hsd_sample = 0;
      checks++;
      if (!(c_valid && tau_valid && theta_ref_valid && pos_env_valid) || force_valid) begin
        failures++;
        $display("FAIL latency at sample %0d", n);
      end
      fk_ref(f2r(theta_md.t1), f2r(theta_md.t2), f2r(theta_md.t3), x, y, z);
      chk(pos_hmd.x, x, 5e-4, se_c, "c.x"); chk(pos_hmd.y, y, 5e-4, se_c, "c.y"); chk(pos_hmd.z, z, 5e-4, se_c, "c.z");
      c_now = pos_hmd;
      fwd_q.push_back(add_noise(c_now));

      jm_ref(f2r(theta_md.t1), f2r(theta_md.t2), f2r(theta_md.t3), r);
      kff_ref(r, f2r(q_now.x), f2r(q_now.y), f2r(q_now.z), a1, a2, a3);
      chk(tau_hmd.t1, a1, 5e-3, se_tau, "tau1"); chk(tau_hmd.t2, a2, 5e-3, se_tau, "tau2"); chk(tau_hmd.t3, a3, 5e-3, se_tau, "tau3");
      if (f2r(tau_hmd.t1) != 0.0 || f2r(tau_hmd.t2) != 0.0) n_torque++;

      ik_ref(f2r(v_now.x), f2r(v_now.y), f2r(v_now.z), a1, a2, a3);
      chk(theta_ref.t1, a1, 3e-2, se_ik, "thref1"); chk(theta_ref.t2, a2, 3e-2, se_ik, "thref2"); chk(theta_ref.t3, a3, 3e-2, se_ik, "thref3");
      if (n >= DF) begin
        n_fdelay++;
        chk(theta_ref.t1, f2r(md_hist[n - DF].t1), 3e-2, se_rt, "round trip t1");
        chk(theta_ref.t2, f2r(md_hist[n - DF].t2), 3e-2, se_rt, "round trip t2");
        chk(theta_ref.t3, f2r(md_hist[n - DF].t3), 3e-2, se_rt, "round trip t3");
      end
      if (n >= DB + 2 && (f2r(q_now.x) != 0.0)) n_bdelay++;
      prev_ref = theta_ref;

      fk_ref(f2r(theta_sd.t1), f2r(theta_sd.t2), f2r(theta_sd.t3), a1, a2, a3);
      chk(pos_env.x, a1, 5e-4, se_l, "l.x"); chk(pos_env.y, a2, 5e-4, se_l, "l.y"); chk(pos_env.z, a3, 5e-4, se_l, "l.z");

      // clock 2: h
      @(posedge clk); #1;
      checks++;
      if (!force_valid) begin
        failures++;
        $display("FAIL force latency at sample %0d", n);
      end
      chk(force_hsd.x, f2r(hc_now.x) * (f2r(obj_now.x) - f2r(pos_env.x)), 1e-5, se_h, "Fx");
      chk(force_hsd.y, f2r(hc_now.y) * (f2r(obj_now.y) - f2r(pos_env.y)), 1e-5, se_h, "Fy");
      chk(force_hsd.z, f2r(hc_now.z) * (f2r(obj_now.z) - f2r(pos_env.z)), 1e-5, se_h, "Fz");
      h_now = force_hsd;
      if (f2r(h_now.x) != 0.0) n_force++;
      bwd_q.push_back(add_noise(h_now));
      n_se++;
      repeat (SP - 2) @(posedge clk);
      if (n == 0 || n == SEG - 1 || n == 2 * SEG - 1 || n == Q - 1)
        $display("n=%4d  x=%8.4f y=%8.4f z=%8.4f  theta_ref=(%6.3f %6.3f %6.3f)  F=(%7.3f %7.3f %7.3f)",
                 n, f2r(c_now.x), f2r(c_now.y), f2r(c_now.z),
                 f2r(theta_ref.t1), f2r(theta_ref.t2), f2r(theta_ref.t3),
                 f2r(h_now.x), f2r(h_now.y), f2r(h_now.z));
    end

    // mean squared errors, per scalar signal
    se_c /= 3 * n_se; se_ik /= 3 * n_se; se_rt /= 3 * (n_se - DF); se_l /= 3 * n_se; se_h /= 3 * n_se; se_tau /= 3 * n_se;
    $display("MSE  FK-HMD %e  IK-HSD %e  round-trip %e  FK-HSD %e  FBF-HSD %e  KFF-HMD %e",
             se_c, se_ik, se_rt, se_l, se_h, se_tau);
    checks++; if (se_c > 1e-7)   begin failures++; $display("FAIL FK-HMD MSE"); end
    checks++; if (se_l > 1e-7)   begin failures++; $display("FAIL FK-HSD MSE"); end
    checks++; if (se_ik > 1e-5)  begin failures++; $display("FAIL IK-HSD MSE"); end
    checks++; if (se_rt > 1e-5)  begin failures++; $display("FAIL round-trip MSE"); end
    checks++; if (se_h > 1e-12)  begin failures++; $display("FAIL FBF-HSD MSE"); end
    checks++; if (se_tau > 1e-6) begin failures++; $display("FAIL KFF-HMD MSE"); end
    $display("mechanisms: joint1 %0d joint2 %0d joint3 %0d fwd-delayed %0d bwd-delayed %0d force %0d torque %0d",
             n_move1, n_move2, n_move3, n_fdelay, n_bdelay, n_force, n_torque);
    checks++; if (n_move1 == 0 || n_move2 == 0 || n_move3 == 0) failures++;
    checks++; if (n_fdelay == 0 || n_bdelay == 0) failures++;
    checks++; if (n_force == 0 || n_torque == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
