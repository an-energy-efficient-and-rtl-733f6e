// slam_pkg -- number format, small vector types and arithmetic helpers shared
// by every block of the localization accelerator.
//
// All datapath values are 32-bit signed fixed point, Q16.16 (16 integer bits
// including sign, 16 fraction bits).  The 32-bit word follows from the size
// of the dense S matrix (150 x 150 words = 720 kb); the Q16.16 split is this
// design's own choice, the format itself is not stated for the accelerator.
// Multiplication and division are full-precision and truncate towards minus
// infinity; division by zero saturates.  fx_sqrt is a bit-serial integer
// square root unrolled into combinational logic.
package slam_pkg;

  localparam int FW = 32;           // word width
  localparam int FRAC = 16;         // fraction bits
  typedef logic signed [FW-1:0] fx_t;

  localparam fx_t FX_ONE  = fx_t'(32'sd1 <<< FRAC);
  localparam fx_t FX_MAX  = fx_t'(32'sh7fff_ffff);
  localparam fx_t FX_MIN  = fx_t'(32'sh8000_0000);

  // sliding window: keyframes and states per keyframe (p, q, v, ba, bg)
  localparam int STATE_DIM = 15;

  typedef struct packed { fx_t w; fx_t x; fx_t y; fx_t z; } quat_t;
  typedef struct packed { fx_t x; fx_t y; fx_t z; } vec3_t;
  // rotation matrix, stored row by row
  typedef struct packed { vec3_t r0; vec3_t r1; vec3_t r2; } rot_t;

  // compact IMU Jacobian & residual record (one per keyframe pair)
  typedef struct packed {
    rot_t  rt;     // R_i^T; the Jacobian blocks are -rt, -rt*dt and +rt
    fx_t   dt;     // pre-integration interval
    vec3_t rp;     // position residual
    vec3_t rv;     // velocity residual
    vec3_t rq;     // attitude residual
    quat_t qerr;   // attitude error quaternion
  } imu_rec_t;

  // targets of the accumulate port of the normal-equation RAMs
  typedef enum logic [2:0] {TGT_V, TGT_BV, TGT_U, TGT_BU, TGT_W} schur_tgt_e;

  // targets of the operand load port of the marginalization block
  typedef enum logic [2:0] {MT_M11, MT_M12, MT_Z, MT_A, MT_BM, MT_BA} marg_tgt_e;

  // one row of the runtime-reconfiguration lookup table
  typedef struct packed {
    logic [15:0] bound;    // applies to feature counts below this bound
    logic [3:0]  iters;    // NLS iterations
    logic [7:0]  n_schur;  // active Schur elimination blocks
    logic [7:0]  n_upd;    // active Cholesky update modules
  } lut_row_t;

  // commands accepted by the accelerator's input buffer
  typedef enum logic [3:0] {
    CMD_KF_Q,     // a = keyframe, d0..d3 = orientation quaternion (w, x, y, z)
    CMD_KF_P,     // a = keyframe, d0..d2 = position
    CMD_KF_V,     // a = keyframe, d0..d2 = velocity
    CMD_FEAT,     // a = feature, b = host keyframe, d0 = u, d1 = v, d2 = inverse depth
    CMD_OBS,      // a = feature, b = slot, d0 = keyframe (integer), d1 = u, d2 = v
    CMD_IMU_DP,   // a = pair, d0..d2 = pre-integrated dp, d3 = dt
    CMD_IMU_DV,   // a = pair, d0..d2 = pre-integrated dv
    CMD_IMU_DQ,   // a = pair, d0..d3 = pre-integrated dq
    CMD_EXT_Q,    // d0..d3 = camera-to-IMU rotation quaternion
    CMD_EXT_T,    // d0..d2 = camera-to-IMU translation
    CMD_PRIOR_H,  // a = row, b = col (b <= a), d0 = prior Hessian entry
    CMD_PRIOR_R,  // a = row, d0 = prior right-hand side entry
    CMD_LUT,      // a = table row, {d1[3:0], d0} = lut_row_t
    CMD_CFG,      // a = number of features in use, d0 = LM damping
    CMD_RUN       // solve the window, then marginalize the oldest keyframe
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e     op;
    logic [15:0] a;
    logic [15:0] b;
    fx_t         d0;
    fx_t         d1;
    fx_t         d2;
    fx_t         d3;
  } cmd_t;

  // words delivered by the output buffer
  typedef enum logic [1:0] {OUT_POS, OUT_LAMBDA, OUT_HP, OUT_RP} out_tag_e;

  typedef struct packed {
    out_tag_e    tag;
    logic [15:0] i;     // keyframe * 3 + axis, feature, or matrix row
    logic [15:0] j;     // matrix column
    fx_t         val;
  } out_t;

  localparam rot_t ROT_I = '{r0: '{x: FX_ONE, y: '0, z: '0},
                             r1: '{x: '0, y: FX_ONE, z: '0},
                             r2: '{x: '0, y: '0, z: FX_ONE}};

  function automatic fx_t fx_sat(input logic signed [63:0] v);
    if (v > 64'sh7fff_ffff)       return FX_MAX;
    else if (v < -64'sh8000_0000) return FX_MIN;
    else                          return fx_t'(v);
  endfunction

  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return fx_sat(p >>> FRAC);
  endfunction

  function automatic fx_t fx_div(input fx_t a, input fx_t b);
    logic signed [63:0] n;
    if (b == '0) return (a < 0) ? FX_MIN : FX_MAX;
    n = 64'(a) <<< FRAC;
    return fx_sat(n / 64'(b));
  endfunction

  // square root of a non-negative Q16.16 value (negative input gives 0)
  function automatic fx_t fx_sqrt(input fx_t a);
    logic [63:0] rem, root, bitv;
    if (a <= 0) return '0;
    rem  = 64'(a) << FRAC;
    root = '0;
    bitv = 64'd1 << 62;
    for (int k = 0; k < 32; k++) begin
      if (bitv > rem) bitv = bitv >> 2;
    end
    for (int k = 0; k < 32; k++) begin
      if (bitv != 0) begin
        if (rem >= root + bitv) begin
          rem  = rem - (root + bitv);
          root = (root >> 1) + bitv;
        end else begin
          root = root >> 1;
        end
        bitv = bitv >> 2;
      end
    end
    return fx_t'(root[31:0]);
  endfunction

  // Hamilton product q = a (x) b
  function automatic quat_t q_mul(input quat_t a, input quat_t b);
    quat_t r;
    r.w = fx_mul(a.w,b.w) - fx_mul(a.x,b.x) - fx_mul(a.y,b.y) - fx_mul(a.z,b.z);
    r.x = fx_mul(a.w,b.x) + fx_mul(a.x,b.w) + fx_mul(a.y,b.z) - fx_mul(a.z,b.y);
    r.y = fx_mul(a.w,b.y) - fx_mul(a.x,b.z) + fx_mul(a.y,b.w) + fx_mul(a.z,b.x);
    r.z = fx_mul(a.w,b.z) + fx_mul(a.x,b.y) - fx_mul(a.y,b.x) + fx_mul(a.z,b.w);
    return r;
  endfunction

  function automatic quat_t q_conj(input quat_t a);
    quat_t r;
    r.w = a.w; r.x = -a.x; r.y = -a.y; r.z = -a.z;
    return r;
  endfunction

  function automatic vec3_t v_sub(input vec3_t a, input vec3_t b);
    vec3_t r;
    r.x = a.x - b.x; r.y = a.y - b.y; r.z = a.z - b.z;
    return r;
  endfunction

  function automatic vec3_t v_add(input vec3_t a, input vec3_t b);
    vec3_t r;
    r.x = a.x + b.x; r.y = a.y + b.y; r.z = a.z + b.z;
    return r;
  endfunction

  function automatic vec3_t v_scale(input vec3_t a, input fx_t s);
    vec3_t r;
    r.x = fx_mul(a.x,s); r.y = fx_mul(a.y,s); r.z = fx_mul(a.z,s);
    return r;
  endfunction

  function automatic fx_t v_get(input vec3_t a, input int i);
    return (i == 0) ? a.x : (i == 1) ? a.y : a.z;
  endfunction

  function automatic fx_t dot3(input vec3_t a, input vec3_t b);
    return fx_mul(a.x,b.x) + fx_mul(a.y,b.y) + fx_mul(a.z,b.z);
  endfunction

  function automatic rot_t rot_transpose(input rot_t r);
    rot_t t;
    t.r0 = '{x: r.r0.x, y: r.r1.x, z: r.r2.x};
    t.r1 = '{x: r.r0.y, y: r.r1.y, z: r.r2.y};
    t.r2 = '{x: r.r0.z, y: r.r1.z, z: r.r2.z};
    return t;
  endfunction

  function automatic vec3_t rot_apply(input rot_t r, input vec3_t v);
    vec3_t o;
    o.x = dot3(r.r0, v); o.y = dot3(r.r1, v); o.z = dot3(r.r2, v);
    return o;
  endfunction

  // rotation matrix of a unit quaternion
  function automatic rot_t quat_rot(input quat_t q);
    rot_t r;
    fx_t xx, yy, zz, xy, xz, yz, wx, wy, wz;
    xx = fx_mul(q.x,q.x); yy = fx_mul(q.y,q.y); zz = fx_mul(q.z,q.z);
    xy = fx_mul(q.x,q.y); xz = fx_mul(q.x,q.z); yz = fx_mul(q.y,q.z);
    wx = fx_mul(q.w,q.x); wy = fx_mul(q.w,q.y); wz = fx_mul(q.w,q.z);
    r.r0 = '{x: FX_ONE - 2*(yy+zz), y: 2*(xy-wz),          z: 2*(xz+wy)};
    r.r1 = '{x: 2*(xy+wz),          y: FX_ONE - 2*(xx+zz), z: 2*(yz-wx)};
    r.r2 = '{x: 2*(xz-wy),          y: 2*(yz+wx),          z: FX_ONE - 2*(xx+yy)};
    return r;
  endfunction

  // index of element (i, j) of a symmetric matrix kept as its lower triangle
  function automatic int tri_idx(input int i, input int j);
    return (i >= j) ? (i*(i+1))/2 + j : (j*(j+1))/2 + i;
  endfunction

endpackage
