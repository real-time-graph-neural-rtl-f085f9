// gnn_pkg -- types and constants shared by the GNN calorimeter trigger.
//
// The trigger turns the 576 trigger cells (TCs) of the calorimeter into a
// graph of at most 32 nodes every 125 ns data window and runs a two-block
// GravNet network followed by object-condensation clustering on it. All
// numbers below that come from the published design are marked "paper";
// the remaining encodings (input stream layout, TC word widths, the
// configuration bus, table identifiers) are choices of this implementation.
//
// Fixed-point convention: activations travel in a 16-bit signed container
// with ACT_F = 10 fractional bits (Q6.10). Network inputs are Q4.12 (paper).
// Layers the paper quantises to Q3.5 are floored and saturated onto the
// Q3.5 grid inside the same container, so every layer can be concatenated
// without realignment.
package gnn_pkg;

  // ---------------- event geometry (paper) ----------------
  localparam int unsigned N_TC      = 576;  // trigger cells in the calorimeter
  localparam int unsigned N_MAX     = 32;   // graph nodes per event
  localparam int unsigned P_PAR     = 2;    // nodes per beat (parallelism factor)
  // initiation interval I_init = N_MAX / P_PAR = 16 cycles per event
  // ---------------- input stream layout (assumed) ----------------
  localparam int unsigned IN_LANES  = 36;   // TCs per input beat
  localparam int unsigned IN_BEATS  = 16;   // beats per data window (36*16 = 576)

  localparam int unsigned TC_ID_W   = 10;   // 0..575
  localparam int unsigned TC_E_W    = 16;   // TC energy, MeV (assumed unit)
  localparam int unsigned TC_T_W    = 8;    // TC time, ns, signed (assumed)

  // ---------------- network shape (paper, Table 2) ----------------
  localparam int unsigned F_IN      = 5;    // x, y, z, E/8, t
  localparam int unsigned DL1_W     = 16;
  localparam int unsigned DLOUT_W   = 32;
  localparam int unsigned S_DIM     = 6;
  localparam int unsigned FLR_DIM   = 8;
  localparam int unsigned DL2_W     = 16;
  localparam int unsigned N_LS      = 3;
  localparam int unsigned K_NN      = 8;
  localparam int unsigned F_EXP     = 10;
  localparam int unsigned CAT_W     = F_IN + 2*DLOUT_W;   // 69 skip concatenation

  // ---------------- fixed point ----------------
  localparam int unsigned ACT_W     = 16;
  localparam int unsigned ACT_F     = 10;   // Q6.10 container
  localparam int unsigned IN_F      = 12;   // Q4.12 network inputs (paper)
  localparam int unsigned WGT_W     = 16;
  localparam int unsigned WGT_F     = 10;
  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [WGT_W-1:0] wgt_t;

  // thresholds of the condensation point selection (paper values, Q6.10)
  localparam int T_BETA = 41;    // 0.04
  localparam int T_D    = 307;   // 0.3

  // ---------------- TC records ----------------
  typedef struct packed {
    logic                     hit;
    logic [TC_E_W-1:0]        e;   // energy, MeV
    logic signed [TC_T_W-1:0] t;   // time, ns
  } tc_raw_t;

  typedef struct packed {
    logic [TC_ID_W-1:0]       id;
    logic                     hit;
    logic [TC_E_W-1:0]        e;
    logic signed [TC_T_W-1:0] t;
  } tc_t;

  // cluster parameters of one node after the network
  typedef struct packed {
    act_t e;        // cluster energy, GeV, Q6.10
    act_t x, y, z;  // position (network output units), Q6.10
    act_t sig;      // signal probability, Q6.10
  } clu_par_t;

  // one record of the postprocessing output (coordinate-offset format)
  typedef struct packed {
    logic               valid;   // node holds a TC
    logic [TC_ID_W-1:0] id;
    logic [TC_E_W-1:0]  tc_e;
    logic signed [TC_T_W-1:0] tc_t;
    logic               is_cp;   // node is a condensation point (cluster)
    clu_par_t           par;
  } out_rec_t;

  // ---------------- slow-control write bus (assumed) ----------------
  localparam int unsigned CFG_TGT_W  = 6;
  localparam int unsigned CFG_ADDR_W = 12;
  typedef struct packed {
    logic                   we;
    logic [CFG_TGT_W-1:0]   tgt;    // which layer / table / register
    logic [CFG_ADDR_W-1:0]  addr;
    logic [15:0]            data;
  } cfg_bus_t;

  // target identifiers
  localparam logic [CFG_TGT_W-1:0] TGT_POS_LUT = 6'd1;   // TC position table
  localparam logic [CFG_TGT_W-1:0] TGT_B2L     = 6'd2;   // Belle2Link delays
  localparam logic [CFG_TGT_W-1:0] TGT_B1_DL1  = 6'd8;
  localparam logic [CFG_TGT_W-1:0] TGT_B1_S    = 6'd9;
  localparam logic [CFG_TGT_W-1:0] TGT_B1_F    = 6'd10;
  localparam logic [CFG_TGT_W-1:0] TGT_B1_OUT  = 6'd11;
  localparam logic [CFG_TGT_W-1:0] TGT_B2_DL1  = 6'd12;
  localparam logic [CFG_TGT_W-1:0] TGT_B2_S    = 6'd13;
  localparam logic [CFG_TGT_W-1:0] TGT_B2_F    = 6'd14;
  localparam logic [CFG_TGT_W-1:0] TGT_B2_OUT  = 6'd15;
  localparam logic [CFG_TGT_W-1:0] TGT_SCALE   = 6'd16;  // skip scaling layer
  localparam logic [CFG_TGT_W-1:0] TGT_DL2     = 6'd17;
  localparam logic [CFG_TGT_W-1:0] TGT_O_E     = 6'd18;  // energy scale factor
  localparam logic [CFG_TGT_W-1:0] TGT_O_POS   = 6'd19;
  localparam logic [CFG_TGT_W-1:0] TGT_O_SIG   = 6'd20;
  localparam logic [CFG_TGT_W-1:0] TGT_O_CC    = 6'd21;
  localparam logic [CFG_TGT_W-1:0] TGT_O_BETA  = 6'd22;

  // floor a value with FRAC_IN fractional bits onto the grid of a Q(QI).(QF)
  // number, saturate, and return it in the Q6.10 container
  function automatic act_t requant(input logic signed [63:0] v, input int frac_in,
                                   input int qi, input int qf);
    logic signed [63:0] q, lo, hi;
    q  = v >>> (frac_in - qf);                       // floor (frac_in >= qf)
    hi = (64'sd1 <<< (qi + qf - 1)) - 1;
    lo = -(64'sd1 <<< (qi + qf - 1));
    if (q > hi) q = hi;
    if (q < lo) q = lo;
    return act_t'(q <<< (ACT_F - qf));
  endfunction

endpackage
