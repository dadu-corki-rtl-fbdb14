// corki_ref_pkg: floating-point reference model used by the testbenches.
//
// An independent, real-valued implementation of the same arm model (modified
// DH table of a Panda-like 7-joint arm, point-mass links, armature inertia,
// gravity) and of the control law, written directly from the equations
// rather than from the RTL's structure: forward kinematics, Jacobian,
// Newton-Euler bias torque, joint and task-space mass matrices by dense
// Gauss-Jordan, bias force and computed torque. Also the ACE probability.
package corki_ref_pkg;
  typedef real v3_t [3];
  typedef real pt_t [8][3];
  typedef real zt_t [7][3];
  typedef real jm_t [3][7];
  typedef real mm_t [7][7];
  typedef real m3_t [3][3];
  typedef real jv_t [7];

  localparam real A_[8] = '{0.0, 0.0, 0.0, 0.0825, -0.0825, 0.0, 0.088, 0.0};
  localparam real D_[8] = '{0.333, 0.0, 0.316, 0.0, 0.384, 0.0, 0.0, 0.107};
  localparam real AL[8] = '{0.0, -1.5707963267949, 1.5707963267949, 1.5707963267949,
                            -1.5707963267949, 1.5707963267949, 1.5707963267949, 0.0};
  localparam real MASS[7] = '{4.970684, 0.646926, 3.228604, 3.587895, 1.225946, 1.666555, 0.735522};
  localparam real ARM = 0.1;
  localparam real G   = 9.81;

  function automatic real fx2r(logic signed [31:0] v);
    return real'(v) / 65536.0;
  endfunction
  function automatic logic signed [31:0] r2fx(real r);
    return $rtoi(r * 65536.0 + ((r >= 0.0) ? 0.5 : -0.5));
  endfunction

  function automatic v3_t rcross(v3_t a, v3_t b);
    v3_t c;
    c[0] = a[1]*b[2] - a[2]*b[1];
    c[1] = a[2]*b[0] - a[0]*b[2];
    c[2] = a[0]*b[1] - a[1]*b[0];
    return c;
  endfunction
  function automatic real rdot(v3_t a, v3_t b);
    return a[0]*b[0] + a[1]*b[1] + a[2]*b[2];
  endfunction

  // Forward kinematics with full 4x4 matrix products.
  task automatic fk(input jv_t th, output zt_t z, output pt_t p);
    real T[4][4], S[4][4], R[4][4];
    real ca, sa, ct, st;
    for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) T[r][c] = (r == c) ? 1.0 : 0.0;
    for (int i = 0; i < 8; i++) begin
      ca = $cos(AL[i]); sa = $sin(AL[i]);
      ct = (i < 7) ? $cos(th[i]) : 1.0; st = (i < 7) ? $sin(th[i]) : 0.0;
      // Craig: RotX(alpha) TransX(a) RotZ(theta) TransZ(d)
      S = '{'{ct, -st, 0.0, A_[i]},
            '{st*ca, ct*ca, -sa, -sa*D_[i]},
            '{st*sa, ct*sa, ca, ca*D_[i]},
            '{0.0, 0.0, 0.0, 1.0}};
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) begin
        R[r][c] = 0.0;
        for (int k = 0; k < 4; k++) R[r][c] += T[r][k] * S[k][c];
      end
      T = R;
      for (int k = 0; k < 3; k++) begin
        p[i][k] = T[k][3];
        if (i < 7) z[i][k] = T[k][2];
      end
    end
  endtask

  // Linear Jacobian of point q.
  task automatic jac_of(input zt_t z, input pt_t p, input v3_t q, input int upto, output jm_t J);
    v3_t d, c;
    for (int j = 0; j < 7; j++) begin
      for (int k = 0; k < 3; k++) d[k] = q[k] - p[j][k];
      c = rcross(z[j], d);
      for (int k = 0; k < 3; k++) J[k][j] = (j <= upto) ? c[k] : 0.0;
    end
  endtask

  // Bias torque h = C qd + g by finite-free analytic sum: h = sum_i Jv_i^T m_i (Jdot_i qd + g_up)
  // computed here through numerical differentiation-free recursion in world frame.
  task automatic bias(input zt_t z, input pt_t p, input jv_t qd,
                      output jv_t h, output v3_t xdot, output v3_t jdqd);
    v3_t w, wp, al, v, a, r, zq, t1, t2;
    v3_t F[7];
    v3_t f, n;
    w = '{0.0, 0.0, 0.0}; al = '{0.0, 0.0, 0.0}; v = '{0.0, 0.0, 0.0}; a = '{0.0, 0.0, G};
    for (int i = 0; i < 7; i++) begin
      for (int k = 0; k < 3; k++) begin r[k] = p[i+1][k] - p[i][k]; zq[k] = z[i][k] * qd[i]; end
      wp = w;
      for (int k = 0; k < 3; k++) w[k] = wp[k] + zq[k];
      t1 = rcross(wp, zq);
      for (int k = 0; k < 3; k++) al[k] = al[k] + t1[k];
      t1 = rcross(w, r);
      for (int k = 0; k < 3; k++) v[k] = v[k] + t1[k];
      t2 = rcross(w, t1);
      t1 = rcross(al, r);
      for (int k = 0; k < 3; k++) begin a[k] = a[k] + t1[k] + t2[k]; F[i][k] = MASS[i] * a[k]; end
    end
    xdot = v;
    jdqd = '{a[0], a[1], a[2] - G};
    // joint torque of joint i = z_i . sum_{k>=i} (p_{k+1} - p_i) x F_k
    for (int i = 0; i < 7; i++) begin
      n = '{0.0, 0.0, 0.0};
      for (int k = i; k < 7; k++) begin
        for (int c = 0; c < 3; c++) r[c] = p[k+1][c] - p[i][c];
        t1 = rcross(r, F[k]);
        for (int c = 0; c < 3; c++) n[c] += t1[c];
      end
      h[i] = rdot(z[i], n);
    end
  endtask

  task automatic mass(input zt_t z, input pt_t p, output mm_t M);
    jm_t Ji;
    v3_t q;
    for (int a = 0; a < 7; a++) for (int b = 0; b < 7; b++) M[a][b] = (a == b) ? ARM : 0.0;
    for (int i = 0; i < 7; i++) begin
      q = '{p[i+1][0], p[i+1][1], p[i+1][2]};
      jac_of(z, p, q, i, Ji);
      for (int a = 0; a < 7; a++) for (int b = 0; b < 7; b++)
        for (int k = 0; k < 3; k++) M[a][b] += MASS[i] * Ji[k][a] * Ji[k][b];
    end
  endtask

  task automatic inv7(input mm_t M, output mm_t X);
    real Aug[7][14];
    real pv, f;
    for (int r = 0; r < 7; r++) for (int c = 0; c < 14; c++)
      Aug[r][c] = (c < 7) ? M[r][c] : ((c - 7 == r) ? 1.0 : 0.0);
    for (int k = 0; k < 7; k++) begin
      pv = Aug[k][k];
      for (int c = 0; c < 14; c++) Aug[k][c] /= pv;
      for (int r = 0; r < 7; r++) if (r != k) begin
        f = Aug[r][k];
        for (int c = 0; c < 14; c++) Aug[r][c] -= f * Aug[k][c];
      end
    end
    for (int r = 0; r < 7; r++) for (int c = 0; c < 7; c++) X[r][c] = Aug[r][c+7];
  endtask

  task automatic inv3(input m3_t M, output m3_t X);
    real det;
    det = M[0][0]*(M[1][1]*M[2][2]-M[1][2]*M[2][1]) - M[0][1]*(M[1][0]*M[2][2]-M[1][2]*M[2][0])
        + M[0][2]*(M[1][0]*M[2][1]-M[1][1]*M[2][0]);
    X[0][0] =  (M[1][1]*M[2][2]-M[1][2]*M[2][1])/det;
    X[0][1] = -(M[0][1]*M[2][2]-M[0][2]*M[2][1])/det;
    X[0][2] =  (M[0][1]*M[1][2]-M[0][2]*M[1][1])/det;
    X[1][0] = -(M[1][0]*M[2][2]-M[1][2]*M[2][0])/det;
    X[1][1] =  (M[0][0]*M[2][2]-M[0][2]*M[2][0])/det;
    X[1][2] = -(M[0][0]*M[1][2]-M[0][2]*M[1][0])/det;
    X[2][0] =  (M[1][0]*M[2][1]-M[1][1]*M[2][0])/det;
    X[2][1] = -(M[0][0]*M[2][1]-M[0][1]*M[2][0])/det;
    X[2][2] =  (M[0][0]*M[1][1]-M[0][1]*M[1][0])/det;
  endtask

  // Task-space quantities from the poses at which the mass matrix was built.
  task automatic task_mass(input zt_t z, input pt_t p, output m3_t L, output jm_t JMi);
    mm_t M, Mi;
    jm_t J;
    m3_t Li;
    v3_t q;
    q = '{p[7][0], p[7][1], p[7][2]};
    jac_of(z, p, q, 6, J);
    mass(z, p, M);
    inv7(M, Mi);
    for (int d = 0; d < 3; d++) for (int c = 0; c < 7; c++) begin
      JMi[d][c] = 0.0;
      for (int a = 0; a < 7; a++) JMi[d][c] += J[d][a] * Mi[a][c];
    end
    for (int d = 0; d < 3; d++) for (int e = 0; e < 3; e++) begin
      Li[d][e] = 0.0;
      for (int a = 0; a < 7; a++) Li[d][e] += JMi[d][a] * J[e][a];
    end
    inv3(Li, L);
  endtask

  // Full control law. th_p: angles of the poses in use, th_m: angles of the
  // mass matrix in use.
  task automatic control(input jv_t th_p, input jv_t th_m, input jv_t qd,
                         input v3_t xd, input v3_t xdd, input v3_t xddd,
                         input v3_t kp, input v3_t kv, output jv_t tau);
    zt_t z, zm; pt_t p, pm; jm_t J, JMi; m3_t L;
    jv_t h; v3_t xdot, jdqd, u, acc, F, q, hx;
    fk(th_p, z, p);
    fk(th_m, zm, pm);
    q = '{p[7][0], p[7][1], p[7][2]};
    jac_of(z, p, q, 6, J);
    bias(z, p, qd, h, xdot, jdqd);
    task_mass(zm, pm, L, JMi);
    for (int d = 0; d < 3; d++) begin
      u[d] = -jdqd[d];
      for (int a = 0; a < 7; a++) u[d] += JMi[d][a] * h[a];
      acc[d] = xddd[d] + kp[d] * (xd[d] - p[7][d]) + kv[d] * (xdd[d] - xdot[d]);
    end
    for (int d = 0; d < 3; d++) begin
      hx[d] = 0.0; F[d] = 0.0;
      for (int e = 0; e < 3; e++) begin hx[d] += L[d][e] * u[e]; F[d] += L[d][e] * acc[e]; end
      F[d] += hx[d];
    end
    for (int a = 0; a < 7; a++) begin
      tau[a] = 0.0;
      for (int d = 0; d < 3; d++) tau[a] += J[d][a] * F[d];
    end
  endtask

  function automatic real ace_prob(jv_t th, jv_t rf, jv_t w);
    real s;
    s = 0.0;
    for (int i = 0; i < 7; i++) s += w[i] * ((th[i] > rf[i]) ? th[i] - rf[i] : rf[i] - th[i]);
    return (s > 1.0) ? 1.0 : s;
  endfunction
endpackage
