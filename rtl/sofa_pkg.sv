// sofa_pkg: types, constants and small helper functions shared by the SOFA
// blocks.
//
// Log-domain operand code. The DLZS predictor replaces a multiplication x*y by
// a shift of x by (W - LZ(y)), where LZ(y) is the leading-zero count of |y| in a
// W-bit field (the paper's Eq. 1-3 with the mantissa of y dropped). Every
// nonzero |y| (clamped to 2^(W-1)-1) has at least one leading zero, so the code
// stores lz_m1 = LZ-1. Two storage formats exist:
//   * 4-bit weight code  {sign, lz_m1[2:0]}  for 8-bit W_k, 3'b111 = zero
//   * 5-bit query code   {sign, lz_m1[3:0]}  for 16-bit Q,  4'hF  = zero
// The paper gives the 4-bit and 5-bit widths; the exact bit layout and the
// zero encoding are this design's choice. Inside the shift array both are
// unpacked into lz_code_t, which carries an explicit zero flag.
package sofa_pkg;

  // unpacked log-domain code used inside the shift array
  typedef struct packed {
    logic       sign;   // 1: the original operand was negative
    logic       zero;   // 1: the original operand was zero
    logic [3:0] lz_m1;  // leading-zero count minus one
  } lz_code_t;

  // DLZS operating phase (paper Sec. III-A: key prediction 1.1, attention
  // prediction 1.2)
  typedef enum logic {
    PH_KEST = 1'b0,  // K-hat = X * W_k : 8-bit tokens shifted by 4-bit weight codes
    PH_AEST = 1'b1   // A-hat = Q * K-hat^T : 16-bit K-hat shifted by 5-bit Q codes
  } dlzs_phase_e;

  // SU-FA auxiliary-process mode (paper Sec. IV-D: mode 0 computation,
  // mode 1 max update)
  typedef enum logic {
    AP_COMPUTE = 1'b0,
    AP_MAXUPD  = 1'b1
  } ap_mode_e;

  // one operand travelling through the DLZS shift array: either a linear
  // value (lin) or a log-domain code (code), depending on the phase and side
  typedef struct packed {
    logic               vld;   // a step of the inner-product stream
    logic               nz;    // operand nonzero (set by the zero eliminator)
    logic signed [15:0] lin;   // linear operand
    lz_code_t           code;  // log-domain operand
  } dlzs_op_t;

  // SU-FA sequencer phase, broadcast to every SU-FA line
  typedef enum logic [2:0] {
    SF_IDLE = 3'd0,
    SF_SA1  = 3'd1,   // s = Q . K for the two keys of a pair
    SF_AP   = 3'd2,   // auxiliary process: max update / assurance, Exp
    SF_SA2  = 3'd3,   // o = alpha*o + p0*V0 + p1*V1
    SF_DIV  = 3'd4    // O = o / l (tile synchronisation and output)
  } sufa_phase_e;

  // control word broadcast from the SU-FA sequencer to its lines
  typedef struct packed {
    sufa_phase_e phase;
    logic [7:0]  d;        // element index in SA-1 / SA-2 / DIV
    logic        first;    // first cycle of the phase
    logic [2:0]  ap_step;  // 0..4 inside SF_AP
    ap_mode_e    mode;     // AP mode for this pair
    logic        div_go;   // start dividing element d
    logic        init;     // clear running max, l and o (new query block)
  } sufa_ctl_t;

  localparam int unsigned SCORE_W = 16;  // predicted-score width fed to SADS
  localparam int unsigned IDX_W   = 16;  // key index width inside SADS

  // one candidate inside the SADS sorter
  typedef struct packed {
    logic               valid;  // 0: clipped or empty slot, loses every compare
    logic [SCORE_W-1:0] val;    // signed score
    logic [IDX_W-1:0]   idx;    // key index carried along (index reordering)
  } cand_t;

  // a beats b: valid first, then the larger signed value; ties keep a
  function automatic logic cand_ge(input cand_t a, input cand_t b);
    if (a.valid != b.valid) return a.valid;
    return $signed(a.val) >= $signed(b.val);
  endfunction

  function automatic lz_code_t unpack_w4(input logic [3:0] c);
    lz_code_t r;
    r.sign  = c[3];
    r.zero  = (c[2:0] == 3'b111);
    r.lz_m1 = {1'b0, c[2:0]};
    return r;
  endfunction

  function automatic lz_code_t unpack_q5(input logic [4:0] c);
    lz_code_t r;
    r.sign  = c[4];
    r.zero  = (c[3:0] == 4'hF);
    r.lz_m1 = c[3:0];
    return r;
  endfunction

  // saturate a wide signed value to 16 bits
  function automatic logic signed [15:0] sat16(input logic signed [47:0] v);
    if (v > 48'sd32767) return 16'sd32767;
    if (v < -48'sd32768) return -16'sd32768;
    return v[15:0];
  endfunction

endpackage
