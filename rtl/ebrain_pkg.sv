// ebrain_pkg: types and constants shared by the BCPNN accelerator.
//
// Sizes follow the human-scale configuration: an HCU (hypercolumn unit) has
// 100 MCUs (minicolumns, the j index) and 10,000 incoming rows (the i index);
// one synaptic cell is 192 bits, six single-precision words
// {Zi2, Zj2, Eij, Pij, Tij, Wij}. A spike is 80 bits with the field widths
// PRJ 6, source MCU 8, source HCU 21, delay 10, destination row 14,
// destination HCU 21. The i-vector entry {Zi, Ei, Pi, Ti} and the j-vector
// entry {Zj, Ej, Pj, bj, epsc} are the paper's. Placing the i-entry in a
// 192-bit word with 64 zero bits, the field order inside a word, and the
// constant sets passed to the FPU sets are this design's own choices.
//
// The real-number helpers at the end are used only by the behavioural FPU
// model (fpu_op); fp_gt and int_to_fp are plain synthesizable logic.
package ebrain_pkg;

  // ---------------- dimensions ----------------
  localparam int unsigned N_MCU      = 100;    // columns per HCU
  localparam int unsigned N_ROWS     = 10000;  // incoming connections per HCU
  localparam int unsigned CELL_W     = 192;    // one synaptic cell
  localparam int unsigned FP_W       = 32;     // single precision
  localparam int unsigned P_HCU      = 4;      // HCUs per H-Cube
  localparam int unsigned M_HCUBE    = 32;     // H-Cubes per BCU
  localparam int unsigned ROWMERGE_X = 10;     // row-merge group/block size
  localparam int unsigned ACTQ_DEPTH = 36;     // worst-case spikes per ms
  localparam int unsigned DLYQ_DEPTH = 144;    // 4 x active queue (4 ms average delay)
  localparam int unsigned FANOUT     = 100;    // destinations per output spike
  localparam int unsigned CLK_PER_MS = 200000; // 200 MHz logic clock

  typedef logic [FP_W-1:0] fp_t;
  typedef logic [31:0]     ms_t;

  localparam fp_t FP_ZERO = 32'h0000_0000;
  localparam fp_t FP_ONE  = 32'h3f80_0000;

  // ---------------- spike (80 bits) ----------------
  typedef struct packed {
    logic [5:0]  prj;
    logic [7:0]  src_mcu;
    logic [20:0] src_hcu;
    logic [9:0]  delay;
    logic [13:0] dst_row;
    logic [20:0] dst_hcu;
  } spike_t;

  // ---------------- storage words ----------------
  typedef struct packed {
    fp_t zi2;   // Zi at the last update of this cell
    fp_t zj2;   // Zj at the last update of this cell
    fp_t eij;
    fp_t pij;
    ms_t tij;   // time stamp in ms (integer)
    fp_t wij;
  } cell_t;

  typedef struct packed {
    fp_t zi;
    fp_t ei;
    fp_t pi;
    ms_t ti;
    logic [63:0] pad;
  } ientry_t;

  typedef struct packed {
    fp_t zj;
    fp_t ej;
    fp_t pj;
    fp_t bj;
    fp_t epsc;  // sum of weights of the spikes received this ms
  } jentry_t;

  // Constants of the lazy-evaluation equations (Fig. 2(b)); the negated
  // rate constants are stored so that each exponent is one multiply.
  typedef struct packed {
    fp_t nkzi;  // -kzi
    fp_t nkzj;  // -kzj
    fp_t nke;   // -kE  (decay of Eij)
    fp_t nkf;   // -kf  (= -(kzi+kzj))
    fp_t nkp;   // -kp
    fp_t nke2;  // -ke  (second term of Pij)
    fp_t nk4;   // -k4
    fp_t kn;
    fp_t k1;
    fp_t k2;
    fp_t k3;
    fp_t wgain;
    fp_t eps;
    fp_t eps2;
  } cell_const_t;

  // Constants of the periodic (1 ms) j-vector update.
  typedef struct packed {
    fp_t dz;    // exp(-1ms/tau_z)
    fp_t ae;    // 1ms/tau_e
    fp_t ap;    // kappa*1ms/tau_p
    fp_t eps;
    fp_t thr;   // firing threshold on the support
    fp_t pinit; // Pj written into the j-vector at initialisation
  } jvec_const_t;

  // Jobs of the update FSM.
  typedef enum logic [1:0] {
    JOB_INIT = 2'd0,   // initialise the j-vector (after reset)
    JOB_PER  = 2'd1,   // periodic support update and winner-take-all
    JOB_ROW  = 2'd2,   // row update from a ping-pong buffer
    JOB_COL  = 2'd3    // column-fragment update from a ping-pong buffer
  } job_e;

  // ---------------- DRAM request between partition, scheduler, ASMC ----------------
  typedef enum logic [1:0] {
    REQ_ROW    = 2'd0,   // the 100 cells of row i          -> buffer words 0..99
    REQ_IENTRY = 2'd1,   // the i-vector entry of row i     -> buffer word 100
    REQ_COLFRG = 2'd2,   // 100 cells (i=100f..100f+99, j)  -> buffer words 0..99
    REQ_IFRAG  = 2'd3    // i-entries i=100f..100f+99       -> buffer words 100..199
  } req_kind_e;

  typedef struct packed {
    logic        we;     // 1: write buffer to DRAM, 0: read DRAM into buffer
    logic        buf_sel;// ping-pong buffer 0 or 1
    req_kind_e   kind;
    logic [13:0] index;  // row i, or fragment f (0..99) for column requests
    logic [6:0]  col;    // column j for REQ_COLFRG
  } mem_req_t;

  localparam int unsigned BUF_DEPTH = 200;
  localparam int unsigned BUF_AW    = 8;

  typedef enum logic [2:0] {
    DCMD_NOP = 3'd0, DCMD_ACT = 3'd1, DCMD_RD = 3'd2, DCMD_WR = 3'd3, DCMD_PRE = 3'd4
  } dram_cmd_e;

  // ---------------- synthesizable helpers ----------------
  // a > b for IEEE single precision (no NaN handling).
  function automatic logic fp_gt(fp_t a, fp_t b);
    logic [31:0] ka, kb;
    ka = a[31] ? ~a : (a | 32'h8000_0000);
    kb = b[31] ? ~b : (b | 32'h8000_0000);
    return ka > kb;
  endfunction

  // Unsigned integer to single precision (truncating).
  function automatic fp_t int_to_fp(logic [31:0] v);
    int msb;
    logic [31:0] sh;
    msb = -1;
    for (int k = 0; k < 32; k++) if (v[k]) msb = k;
    if (msb < 0) return FP_ZERO;
    sh = v << (31 - msb);
    return {1'b0, 8'(127 + msb), sh[30:8]};
  endfunction

  // ---------------- behavioural helpers (simulation models only) ----------------
  function automatic real fp_to_real(fp_t f);
    real m;
    int  e;
    e = int'(f[30:23]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    m = m * (2.0 ** (e - 127));
    return f[31] ? -m : m;
  endfunction

  function automatic fp_t real_to_fp(real r);
    logic [63:0] d;
    int  e;
    logic [23:0] m;
    d = $realtobits(r);
    e = int'(d[62:52]) - 1023 + 127;
    if (d[62:52] == 11'd0 || e <= 0) return {d[63], 31'd0};
    if (d[62:52] == 11'h7ff) return {d[63], 8'hff, (d[51:0] != 0) ? 23'h40_0000 : 23'd0};
    m = {1'b0, d[51:29]} + 24'(d[28]);        // round half up
    if (m[23]) begin m = 24'd0; e = e + 1; end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

endpackage
