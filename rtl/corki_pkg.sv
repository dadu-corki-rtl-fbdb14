// corki_pkg: types, fixed-point arithmetic and robot constants shared by the
// task-space computed-torque control (TS-CTC) accelerator.
//
// Every quantity is a signed Q16.16 number (32 bits, 16 fraction bits):
// range about +/-32768, resolution 1.5e-5. A product is formed at 64 bits and
// shifted back (truncation toward minus infinity). Vectors are 3-D structs in
// the robot base frame.
//
// Robot model: a 7-joint arm with the kinematic layout of the Franka Emika
// Panda, in modified Denavit-Hartenberg form (Craig): frame i is reached from
// frame i-1 by RotX(alpha_{i-1}), TransX(a_{i-1}), RotZ(theta_i), TransZ(d_i).
// The arm's name and its seven joints follow the paper; the numeric table
// and the link masses are public Franka data, and the point-mass link model
// (link i's mass sits at the origin of frame i+1, frame 8 is the flange)
// plus a joint armature inertia are this design's own simplifications,
// because the paper gives no inertial model.
package corki_pkg;

  localparam int unsigned NJ   = 7;   // joints
  localparam int unsigned ND   = 3;   // task-space dimensions (position)
  localparam int unsigned FRAC = 16;  // fraction bits

  typedef logic signed [31:0] fx_t;
  typedef logic [2:0]         lidx_t;  // link index 0..6

  typedef struct packed {
    fx_t x;
    fx_t y;
    fx_t z;
  } vec3_t;

  // Twist of alpha_{i-1}: only 0 and +/-90 degrees occur, so RotX is a
  // signed permutation and needs no multiplier.
  typedef enum logic [1:0] {ALPHA_0 = 2'd0, ALPHA_P90 = 2'd1, ALPHA_M90 = 2'd2} alpha_e;

  // Link record handed from the pose unit to the velocity unit:
  // joint axis z_i and link vector r_i = p_{i+1} - p_i (base frame).
  typedef struct packed {
    lidx_t idx;
    vec3_t z;
    vec3_t r;
  } pose_rec_t;

  // Velocity unit -> acceleration unit.
  typedef struct packed {
    lidx_t idx;
    vec3_t z;
    vec3_t r;
    vec3_t w_prev;  // angular velocity of link i-1
    vec3_t w;       // angular velocity of link i
    vec3_t zqd;     // z_i * qd_i
  } vel_rec_t;

  // Acceleration unit -> force unit.
  typedef struct packed {
    lidx_t idx;
    vec3_t z;
    vec3_t r;
    vec3_t a;       // linear acceleration of link i's mass point (incl. gravity)
  } acc_rec_t;

  // Force unit -> line buffer -> torque unit.
  typedef struct packed {
    lidx_t idx;
    vec3_t z;
    vec3_t r;
    vec3_t f;       // inertial force of link i's mass point
  } frc_rec_t;

  typedef fx_t [NJ-1:0]          jvec_t;   // one value per joint
  typedef fx_t [ND-1:0][NJ-1:0]  jmat_t;   // J[d][j], task row d, joint column j
  typedef vec3_t [NJ-1:0]        jtmat_t;  // J^T[j] = column j of J
  typedef vec3_t [ND-1:0]        mat3_t;   // 3x3 matrix, row-major

  // One control cycle's inputs, as held by the input buffer.
  typedef struct packed {
    jvec_t theta;   // joint angles (rad)
    jvec_t thetad;  // joint velocities (rad/s)
    vec3_t ca;      // cubic trajectory r(t) = ca t^3 + cb t^2 + cc t + cd, per task dim
    vec3_t cb;
    vec3_t cc;
    vec3_t cd;
    fx_t   t;       // time within the trajectory (s)
    vec3_t kp;      // diagonal position gain
    vec3_t kv;      // diagonal velocity gain
  } ctrl_in_t;

  // Input buffer register map (word addresses).
  localparam int unsigned ADDR_THETA  = 0;   // 0..6
  localparam int unsigned ADDR_THETAD = 7;   // 7..13
  localparam int unsigned ADDR_COEF   = 14;  // 14 + 3*k + d, k = 0:a 1:b 2:c 3:d
  localparam int unsigned ADDR_T      = 26;
  localparam int unsigned ADDR_KP     = 27;  // 27..29
  localparam int unsigned ADDR_KV     = 30;  // 30..32

  // ---------------------------------------------------------------- arithmetic
  function automatic fx_t to_fx(real r);
    return fx_t'($rtoi(r * 65536.0 + ((r >= 0.0) ? 0.5 : -0.5)));
  endfunction

  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return p[47:16];
  endfunction

  function automatic fx_t fx_abs(fx_t a);
    return (a < 0) ? -a : a;
  endfunction

  function automatic vec3_t v_add(vec3_t a, vec3_t b);
    return '{x: a.x + b.x, y: a.y + b.y, z: a.z + b.z};
  endfunction

  function automatic vec3_t v_sub(vec3_t a, vec3_t b);
    return '{x: a.x - b.x, y: a.y - b.y, z: a.z - b.z};
  endfunction

  function automatic vec3_t v_neg(vec3_t a);
    return '{x: -a.x, y: -a.y, z: -a.z};
  endfunction

  function automatic vec3_t v_scale(fx_t s, vec3_t a);
    return '{x: fx_mul(s, a.x), y: fx_mul(s, a.y), z: fx_mul(s, a.z)};
  endfunction

  function automatic vec3_t v_cross(vec3_t a, vec3_t b);
    return '{x: fx_mul(a.y, b.z) - fx_mul(a.z, b.y),
             y: fx_mul(a.z, b.x) - fx_mul(a.x, b.z),
             z: fx_mul(a.x, b.y) - fx_mul(a.y, b.x)};
  endfunction

  function automatic fx_t v_dot(vec3_t a, vec3_t b);
    return fx_mul(a.x, b.x) + fx_mul(a.y, b.y) + fx_mul(a.z, b.z);
  endfunction

  function automatic fx_t v_get(vec3_t a, int unsigned k);
    return (k == 0) ? a.x : (k == 1) ? a.y : a.z;
  endfunction

  // ------------------------------------------------------------ robot model
  // Row i (0-based joint index) holds a_{i-1}, d_i and alpha_{i-1}; row 7 is
  // the flange (fixed, theta = 0).
  localparam fx_t DH_A [NJ+1] = '{to_fx(0.0), to_fx(0.0), to_fx(0.0), to_fx(0.0825),
                                  to_fx(-0.0825), to_fx(0.0), to_fx(0.088), to_fx(0.0)};
  localparam fx_t DH_D [NJ+1] = '{to_fx(0.333), to_fx(0.0), to_fx(0.316), to_fx(0.0),
                                  to_fx(0.384), to_fx(0.0), to_fx(0.0), to_fx(0.107)};
  localparam alpha_e DH_ALPHA [NJ+1] = '{ALPHA_0, ALPHA_M90, ALPHA_P90, ALPHA_P90,
                                         ALPHA_M90, ALPHA_P90, ALPHA_P90, ALPHA_0};
  // Link masses in kg.
  localparam fx_t LINK_MASS [NJ] = '{to_fx(4.970684), to_fx(0.646926), to_fx(3.228604),
                                     to_fx(3.587895), to_fx(1.225946), to_fx(1.666555),
                                     to_fx(0.735522)};
  // Reflected rotor inertia added on the diagonal of M (kg m^2).
  localparam fx_t ARMATURE = to_fx(0.1);
  // Gravity, applied as an upward base acceleration in the Newton-Euler pass.
  localparam fx_t GRAVITY  = to_fx(9.81);

endpackage
