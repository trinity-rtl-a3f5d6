// trinity_pkg: types and modular arithmetic shared by every Trinity datapath unit.
//
// All datapaths carry 36-bit words (the accelerator's word size). Arithmetic is done
// modulo an RNS prime q that the schedule supplies with each operation, together with
// its Barrett constant mu = floor(2^72 / q). q must lie in (2^35, 2^36); operands must
// already be reduced (< q). mod_mul forms the 72-bit product and reduces it with
// Barrett's method (at most two final subtractions). The reduction method and the
// range of q are this design's choice; the word size is the paper's.
package trinity_pkg;

  localparam int unsigned WORD = 36;
  localparam int unsigned MUW  = WORD + 1;     // width of the Barrett constant

  typedef logic [WORD-1:0] word_t;
  typedef logic [MUW-1:0]  mu_t;

  // Modulus of one RNS limb and its Barrett constant.
  typedef struct packed {
    word_t q;
    mu_t   mu;
  } modq_t;

  // Compute pattern of a CU processing element.
  typedef enum logic [1:0] {
    PE_NTT  = 2'd0,
    PE_INTT = 2'd1,
    PE_MAC  = 2'd2
  } pe_mode_e;

  // Element-wise engine operations.
  typedef enum logic [1:0] {
    EW_ADD = 2'd0,
    EW_SUB = 2'd1,
    EW_MUL = 2'd2,
    EW_MAC = 2'd3
  } ewe_op_e;

  // Rotator operations.
  typedef enum logic {
    ROT_ROTATE  = 1'b0,   // multiply by X^r (negacyclic)
    ROT_EXTRACT = 1'b1    // SampleExtract of coefficient idx
  } rot_op_e;

  // Vector processing unit operations.
  typedef enum logic [1:0] {
    VPU_MODSW = 2'd0,     // round(2N * x / q)
    VPU_LOAD  = 2'd1,     // acc <- x
    VPU_KSMAC = 2'd2      // acc <- acc - digit_j(a) * ksk
  } vpu_op_e;

  function automatic word_t mod_add(word_t a, word_t b, word_t q);
    logic [WORD:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, q}) s = s - {1'b0, q};
    return s[WORD-1:0];
  endfunction

  function automatic word_t mod_sub(word_t a, word_t b, word_t q);
    logic [WORD:0] d;
    d = {1'b0, a} - {1'b0, b};
    if (a < b) d = d + {1'b0, q};
    return d[WORD-1:0];
  endfunction

  function automatic word_t mod_neg(word_t a, word_t q);
    return (a == '0) ? '0 : word_t'(q - a);
  endfunction

  // Barrett reduction of x < q^2 < 2^72.
  function automatic word_t mod_red(logic [2*WORD-1:0] x, word_t q, mu_t mu);
    logic [WORD:0]       q1;   // x >> 35, 37 bits
    logic [2*WORD+1:0]   q2;   // q1 * mu, 74 bits
    logic [WORD:0]       q3;   // q2 >> 37
    logic [WORD+1:0]     r;    // x - q3*q, < 3q < 2^38
    q1 = x[2*WORD-1:WORD-1];
    q2 = q1 * mu;
    q3 = q2[2*WORD+1:WORD+1];
    r  = x[WORD+1:0] - (WORD+2)'(q3 * q);
    if (r >= {2'b0, q}) r = r - {2'b0, q};
    if (r >= {2'b0, q}) r = r - {2'b0, q};
    return r[WORD-1:0];
  endfunction

  function automatic word_t mod_mul(word_t a, word_t b, word_t q, mu_t mu);
    return mod_red((2*WORD)'(a) * (2*WORD)'(b), q, mu);
  endfunction

  // ---------------------------------------------------------------------------
  // Cluster control word. The cluster network is a crossbar of source vectors; every
  // unit input, local-buffer bank and scratchpad bank names the source it takes.
  // ---------------------------------------------------------------------------
  typedef logic [5:0] sel_t;

  localparam int unsigned SRC_LB0  = 0;    // + bank 0..4, group 0 local buffer
  localparam int unsigned SRC_LB1  = 5;    // + bank, group 1 local buffer
  localparam int unsigned SRC_LB2  = 10;   // + bank, group 2 local buffer
  localparam int unsigned SRC_SPM  = 15;   // + bank 0..3
  localparam int unsigned SRC_NTTU = 19;   // + unit 0..1
  localparam int unsigned SRC_TP   = 21;   // + unit 0..1
  localparam int unsigned SRC_CU   = 23;   // + unit 0..5 (CU-1, 4 x CU-2, CU-3)
  localparam int unsigned SRC_ROT  = 29;
  localparam int unsigned SRC_AUTO = 30;
  localparam int unsigned SRC_EWE  = 31;   // + half 0..1
  localparam int unsigned SRC_VPU  = 33;
  localparam int unsigned SRC_NOC  = 34;   // from the inter-cluster network
  localparam int unsigned SRC_HBM  = 35;   // from the HBM port
  localparam int unsigned NSRC     = 36;

  localparam int unsigned N_LB_BANK  = 5;
  localparam int unsigned N_SPM_BANK = 4;
  localparam int unsigned N_CU       = 6;

  typedef struct packed {
    logic        en;
    logic        we;
    logic [15:0] addr;
    sel_t        wsrc;
  } mem_ctl_t;

  typedef struct packed {
    logic       en;
    sel_t       src;
    logic       inv;
    logic       bypass;       // TW stage bypassed (plain 2M-point NTT)
    logic       tw_we;        // load one stage of BU twiddles ...
    logic [2:0] tw_stage;
    sel_t       tw_src;       // ... from this source
    logic       ts_we;        // load OF-Twist seeds
    sel_t       ts_first_src;
    sel_t       ts_ratio_src;
  } nttu_ctl_t;

  typedef struct packed {
    logic       en;
    sel_t       src;
    logic [4:0] log_n2;
  } tp_ctl_t;

  typedef struct packed {
    logic       en;
    sel_t       src;
    pe_mode_e   mode;
    logic [4:0] log_g;
    logic       out_acc;
    sel_t [2:0] c_src;        // per column: source of the c operands (lanes 0..NR-1)
  } cu_ctl_t;

  typedef struct packed {
    logic        ld_en;
    logic        ld_first;
    sel_t        src;
    logic        start;
    rot_op_e     op;
    logic [4:0]  log_n;
    logic [16:0] amount;
  } rot_ctl_t;

  typedef struct packed {
    logic        en;
    sel_t        src;
    logic [4:0]  log_n;
    logic [16:0] k;
  } auto_ctl_t;

  typedef struct packed {
    logic       en;
    ewe_op_e    op;
    sel_t [5:0] src;          // x_lo, x_hi, y_lo, y_hi, z_lo, z_hi
  } ewe_ctl_t;

  typedef struct packed {
    logic       en;
    vpu_op_e    op;
    sel_t       x_src;
    sel_t       ksk_src;
    sel_t       a_src;        // scalar a = lane a_lane of this source
    logic [7:0] a_lane;
    logic [4:0] log_n;
    logic [4:0] base_log;
    logic [2:0] dig;
  } vpu_ctl_t;

  typedef struct packed {
    modq_t                         modq;
    nttu_ctl_t [1:0]               nttu;
    tp_ctl_t   [1:0]               tp;
    cu_ctl_t   [N_CU-1:0]          cu;
    rot_ctl_t                      rot;
    auto_ctl_t                     autou;
    ewe_ctl_t                      ewe;
    vpu_ctl_t                      vpu;
    mem_ctl_t  [3*N_LB_BANK-1:0]   lb;     // group g bank b at index g*5+b
    mem_ctl_t  [N_SPM_BANK-1:0]    spm;
    logic                          noc_en;
    sel_t                          noc_src;
    logic                          hbm_en;
    sel_t                          hbm_src;
  } cluster_ctl_t;

endpackage
