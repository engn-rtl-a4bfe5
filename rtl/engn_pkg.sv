// engn_pkg: sizes, data types and instruction format shared by the EnGN
// graph-neural-network accelerator.
//
// The array size (128 x 16 PEs), the 32-bit fixed-point data type and the
// 32 VPU lanes follow the published configuration. The Q16.16 split of the
// fixed-point word, the DST register-file depth, the bank depths and the
// whole instruction format are this design's own choices.
package engn_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned DATA_W      = 32;     // fixed-point word
  localparam int unsigned FRAC_W      = 16;     // fraction bits (Q16.16)
  localparam int unsigned PE_ROWS     = 128;    // vertices processed in parallel
  localparam int unsigned PE_COLS     = 16;     // output dimensions in parallel
  localparam int unsigned DST_SLOTS   = 4;      // destination vertices per PE row
  localparam int unsigned SLOT_W      = 4;      // slot index width (up to 16 slots)
  localparam int unsigned VPU_LANES   = 32;     // VPU PE units
  localparam int unsigned PROP_DEPTH  = 1024;   // 1024 x 128 x 4 B = 512 KB
  localparam int unsigned W_DEPTH     = 1024;   // 1024 x  16 x 4 B =  64 KB
  localparam int unsigned EDGE_DEPTH  = 512;    // 128 x 512 x 4 B  = 256 KB
  localparam int unsigned RES_DEPTH   = 11264;  // 11264 x 16 x 4 B = 704 KB
  localparam int unsigned DAVC_LINES  = 1024;   // 1024 x 16 x 4 B  =  64 KB
  localparam int unsigned INSTR_DEPTH = 256;
  localparam int unsigned ADDR_W      = 16;     // every bank address fits
  localparam int unsigned VID_W       = 16;     // vertex id = result-bank line

  typedef logic signed [DATA_W-1:0] data_t;

  // --------------------------------------------------------- edge entry
  // {valid, src, dst}: src is the row (0..PE_ROWS-1) of the source vertex
  // inside the current source batch, dst is the destination vertex inside
  // the current destination window (row = dst % PE_ROWS, slot = dst / PE_ROWS).
  // An entry with valid = 0 ends the edge list of a bank.
  typedef struct packed {
    logic        valid;
    logic [14:0] src;
    logic [15:0] dst;
  } edge_t;

  // --------------------------------------------------------- functions
  typedef enum logic [1:0] {
    AGG_SUM = 2'd0,
    AGG_MAX = 2'd1,
    AGG_MIN = 2'd2
  } agg_op_e;

  typedef enum logic [1:0] {
    ACT_NONE    = 2'd0,
    ACT_RELU    = 2'd1,
    ACT_SIGMOID = 2'd2
  } act_e;

  typedef enum logic [3:0] {
    VPU_ADD  = 4'd0,
    VPU_SUB  = 4'd1,
    VPU_MUL  = 4'd2,
    VPU_MAX  = 4'd3,
    VPU_MIN  = 4'd4,
    VPU_RELU = 4'd5,
    VPU_SIGM = 4'd6,
    VPU_TANH = 4'd7
  } vpu_op_e;

  // --------------------------------------------------------- PE control
  // One control word drives every PE of the array in the same cycle; only
  // the aggregate enable and DST slot differ per row (from the edge parser)
  // and the DST write select differs per row (from the controller).
  typedef struct packed {
    logic      mac_clr;     // clear the MAC accumulator
    logic      mac_en;      // acc += prop_in * w_in
    logic      src_latch;   // SRC RF <= accumulator
    logic      ring_load;   // shadow SRC <= SRC RF (tick 0 of a batch)
    logic      ring_shift;  // shadow SRC <= south neighbour
    agg_op_e   agg_op;      // aggregate operator
    logic      drain_load;  // shadow DST <= XPE(DST[drain_slot])
    logic      drain_shift; // shadow DST <= south neighbour
    logic [SLOT_W-1:0] drain_slot;
    act_e      act;         // XPE activation
    logic [4:0] shift;      // XPE rounding shift
  } pe_ctrl_t;

  // --------------------------------------------------------- instructions
  typedef enum logic [3:0] {
    OP_END      = 4'd0,  // stop, raise done
    OP_LOAD_DST = 4'd1,  // fill DST RFs of a window: clear, or from DAVC / result bank
    OP_FEATURE  = 4'd2,  // GPA feature extraction of one batch into SRC RF
    OP_AGG      = 4'd3,  // ring-edge-reduce of one batch into DST RF
    OP_UPDATE   = 4'd4,  // XPE + drain of the window to the result bank
    OP_VPU      = 4'd5   // element-wise op on result-bank lines
  } opcode_e;

  // Field use per opcode:
  //   LOAD_DST : a = first vertex id of the window, func[0] = clear,
  //              func[3:2] = aggregate operator (sets the clear value)
  //   FEATURE  : a = property-bank base, b = weight-bank base, len = input dim F,
  //              func[0] = keep accumulating (next chunk of a long property)
  //   AGG      : a = edge-bank base, func[1:0] = aggregate operator
  //   UPDATE   : a = first vertex id of the window, b = weight-bank line of the
  //              bias, func[1:0] = activation, shift = rounding shift
  //   VPU      : a, b = source lines, c = destination line, len = line pairs,
  //              func = vpu_op_e (lanes 0..15 from line x, 16..31 from x+1)
  typedef struct packed {
    opcode_e           op;
    logic [3:0]        func;
    logic [4:0]        shift;
    logic [ADDR_W-1:0] a;
    logic [ADDR_W-1:0] b;
    logic [ADDR_W-1:0] c;
    logic [ADDR_W-1:0] len;
  } instr_t;

  // ---------------------------------------------------- fixed-point helpers
  function automatic data_t fx_mul(data_t x, data_t y);
    logic signed [2*DATA_W-1:0] p;
    p = x * y;
    return data_t'(p >>> FRAC_W);
  endfunction

  function automatic data_t fx_max(data_t x, data_t y);
    return (x > y) ? x : y;
  endfunction

  function automatic data_t fx_min(data_t x, data_t y);
    return (x < y) ? x : y;
  endfunction

  localparam data_t FX_ONE  = data_t'(1) <<< FRAC_W;
  localparam data_t FX_HALF = data_t'(1) <<< (FRAC_W - 1);

  // Piecewise-linear sigmoid: clip(x/4 + 1/2, 0, 1).
  function automatic data_t fx_hsigmoid(data_t x);
    data_t t;
    t = (x >>> 2) + FX_HALF;
    if (t < 0)      return '0;
    if (t > FX_ONE) return FX_ONE;
    return t;
  endfunction

  // Piecewise-linear tanh: clip(x, -1, 1).
  function automatic data_t fx_htanh(data_t x);
    if (x < -FX_ONE) return -FX_ONE;
    if (x >  FX_ONE) return FX_ONE;
    return x;
  endfunction

  // Initial DST value of an aggregate: identity element of the operator.
  function automatic data_t agg_identity(agg_op_e op);
    case (op)
      AGG_MAX: return {1'b1, {(DATA_W-1){1'b0}}};
      AGG_MIN: return {1'b0, {(DATA_W-1){1'b1}}};
      default: return '0;
    endcase
  endfunction

  function automatic data_t agg_apply(agg_op_e op, data_t acc, data_t v);
    case (op)
      AGG_MAX: return fx_max(acc, v);
      AGG_MIN: return fx_min(acc, v);
      default: return acc + v;
    endcase
  endfunction

endpackage
