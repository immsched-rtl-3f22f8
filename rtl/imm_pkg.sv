// imm_pkg: types and constants shared by the IMMSched scheduling hardware.
//
// The scheduler reuses a DNN engine's PE array to run one particle of a
// particle-swarm search for a subgraph isomorphism (query DAG Q, n vertices,
// into target DAG G, m vertices). Matrices of the relaxed mapping S are held
// one element per PE, quantised to 8-bit unsigned (255 stands for 1.0), with
// 32-bit accumulation, as the paper states. Everything else here (the PE
// instruction word, register numbering, fitness width) is this design's own.
package imm_pkg;

  // PE operand width: S, masks and Q are 0..255, velocities are signed.
  localparam int unsigned DW = 16;
  // PE accumulator (oBuffer) width: int32 accumulation as in the paper.
  localparam int unsigned AW = 32;
  // Width of the reconfigurable reciprocal that replaces division.
  localparam int unsigned RW = 24;
  // Fitness / tree accumulation width.
  localparam int unsigned FW = 48;

  typedef logic signed [FW-1:0] fit_t;
  localparam fit_t FIT_MIN = {1'b1, {(FW-1){1'b0}}};

  // PE operations. Product path: MUL, MAC, RECIP. Bypass path: ADD, SUB, LDA.
  typedef enum logic [3:0] {
    PE_NOP   = 4'd0,
    PE_MUL   = 4'd1,  // acc = x*y
    PE_MAC   = 4'd2,  // acc = acc + x*y
    PE_ADD   = 4'd3,  // acc = x + y
    PE_SUB   = 4'd4,  // acc = x - y
    PE_LDA   = 4'd5,  // acc = x
    PE_RECIP = 4'd6,  // acc = (acc * recip) >>> shift   (replaces a divider)
    PE_WB    = 4'd7,  // RF[rd] = saturate(acc >>> shift)
    PE_LDR   = 4'd8,  // RF[rd] = x
    PE_COPY  = 4'd9   // RF[rd] = RF[ra]
  } pe_op_e;

  // Operand sources: the PE's own register file, the row bus (left buffer)
  // or the column bus (top buffer).
  typedef enum logic [1:0] {
    SRC_REG = 2'd0,
    SRC_ROW = 2'd1,
    SRC_COL = 2'd2
  } pe_src_e;

  // PE register file (iBuffer) numbering.
  localparam int unsigned NREG = 8;
  typedef enum logic [2:0] {
    R_S    = 3'd0,  // relaxed mapping S (particle position)
    R_V    = 3'd1,  // velocity V
    R_SL   = 3'd2,  // particle-local best S_local
    R_SG   = 3'd3,  // global best S*
    R_SC   = 3'd4,  // consensus S-bar
    R_MASK = 3'd5,  // compatibility mask (0/1)
    R_Q    = 3'd6,  // query adjacency, scaled to 0/255
    R_T    = 3'd7   // temporary (also the projected 0/1 mapping M)
  } reg_e;

  typedef struct packed {
    pe_op_e  op;
    pe_src_e sa;     // source of operand a
    pe_src_e sb;     // source of operand b
    reg_e    ra;
    reg_e    rb;
    reg_e    rd;
    logic    swap;   // crossbar: exchange a and b before the datapath
    logic    sat8;   // PE_WB: clamp to 0..255 instead of the int16 range
    logic [5:0] shift;
  } pe_instr_t;

  localparam pe_instr_t PE_IDLE = '{op: PE_NOP, sa: SRC_REG, sb: SRC_REG,
                                    ra: R_S, rb: R_S, rd: R_S,
                                    swap: 1'b0, sat8: 1'b0, shift: 6'd0};

  // Commands from the global controller to every engine.
  typedef enum logic [1:0] {
    CMD_NONE  = 2'd0,
    CMD_INIT  = 2'd1,  // new random particle, V = 0, f_local = -inf
    CMD_STEP  = 2'd2,  // one inner PSO step (velocity .. local best)
    CMD_FINAL = 2'd3   // projection + Ullmann feasibility check
  } cmd_e;

  // Global controller states (shared so that testbenches can observe them).
  typedef enum logic [3:0] {
    G_IDLE, G_INIT, G_INIT_W, G_STEP, G_STEP_W, G_SREAD, G_FIN, G_FIN_W, G_DONE
  } gst_e;

endpackage
