// acortex_pkg: sizes, instruction formats and enumerations shared by the
// 3D-aCortex processor RTL.
//
// The array sizes are the processor's main configuration: K = 64 (words per
// buffer and inputs/outputs per processing element), M = 32 PE rows, 2N = 16
// PE columns (N = 8), 64-layer 3D-NAND blocks, 4-bit activations, 6-bit TDC
// accumulators, a 1 MB main memory and a 4 KB instruction memory.  Timing is
// counted in cycles of the 1 GHz clock: 16-cycle input window (T_int), 18-cycle
// output window (T_out) and 20-cycle layer-select time (T_LS).
//
// The instruction set is this design's own: the processor is described at the
// level of its controller sub-units (main controller, loader, operator,
// collector, router), not of an instruction encoding.  Every instruction is
// 64 bits wide with the opcode in bits [63:60]; the packed structs below give
// the field layout of each opcode.
//
// Lint note: a block compiled on its own uses only a few of these
// constants, so lint lists the others as unused parameters.
package acortex_pkg;

  // ---- array sizes (main configuration) ----
  localparam int K_DEF        = 64;     // words per buffer, rows/pairs per PE
  localparam int M_DEF        = 32;     // PE rows (one IDU per row)
  localparam int N_DEF        = 8;      // PE columns = 2*N
  localparam int LAYERS_DEF   = 64;     // 3D-NAND layers per block
  localparam int P_DEF        = 4;      // activation / input precision (bits)
  localparam int WBITS_DEF    = 4;      // cell current levels per weight cell
  localparam int ACC_BITS_DEF = 6;      // TDC accumulator magnitude bits
  localparam int FOLD_DEF     = 4;      // buffers folded into one column
  localparam int MM_LINES_DEF = 32768;  // 1 MB / (K*P/8 = 32 bytes per line)
  localparam int IM_DEPTH_DEF = 512;    // 4 KB / 8 bytes per instruction
  localparam int T_LS_DEF     = 20;     // layer select time, cycles
  localparam int T_OUT_DEF    = 18;     // phase-II output window, cycles
  localparam int SWEEP_LAYER  = 0;      // top layer, carries the sweep current

  localparam int INSTR_W = 64;

  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_HALT  = 4'd1,
    OP_LOAD  = 4'd2,   // loader: MM -> buffers / AUX
    OP_VMM   = 4'd3,   // operator: multi-step VMM
    OP_STORE = 4'd4,   // collector: IDUs / AUX -> MM
    OP_LOOP  = 4'd5,   // hardware loop
    OP_SYNC  = 4'd6    // wait for sub-units to go idle
  } opcode_e;

  typedef enum logic [1:0] {
    ACT_LINEAR  = 2'd0,
    ACT_RELU    = 2'd1,
    ACT_TANH    = 2'd2,
    ACT_SIGMOID = 2'd3
  } act_e;

  typedef enum logic [1:0] {
    AUX_COPY = 2'd0,
    AUX_MAX  = 2'd1,
    AUX_ADD  = 2'd2,
    AUX_MUL  = 2'd3
  } aux_op_e;

  // LOAD: count lines from mm_addr (step mm_stride) into buffer chain positions
  // buf_idx, buf_idx+buf_stride, ... or, with shift, each line pushed into the
  // chain end chain_len-1; with to_aux the lines go to the AUX unit instead.
  // cont: start where the previous LOAD stopped (mm_addr ignored).
  typedef struct packed {
    opcode_e     op;
    logic        shift;
    logic        to_aux;
    logic        cont;
    aux_op_e     aux_op;
    logic [14:0] mm_addr;
    logic [7:0]  mm_stride;
    logic [6:0]  count;
    logic [5:0]  buf_idx;
    logic [5:0]  buf_stride;
    logic [6:0]  chain_len;
    logic [5:0]  pad;
  } load_instr_t;

  // VMM: enable PE rows row_lo..row_hi and columns col_lo..col_hi, run steps
  // elementary operations on layers layer, layer+1, ... with buffer folds
  // fold_base, fold_base+1, ..., accumulate in the TDCs, then shift and apply
  // the activation function.
  typedef struct packed {
    opcode_e     op;
    logic [4:0]  row_lo;
    logic [4:0]  row_hi;
    logic [3:0]  col_lo;
    logic [3:0]  col_hi;
    logic [5:0]  layer;
    logic [2:0]  steps;
    logic [1:0]  fold_base;
    logic [2:0]  shift;
    act_e        act;
    logic [25:0] pad;
  } vmm_instr_t;

  // STORE: count lines, from IDU rows row_lo, row_lo+1, ... (or the AUX
  // register), to mm_addr, mm_addr+mm_stride, ...  cont as for LOAD.
  typedef struct packed {
    opcode_e     op;
    logic        from_aux;
    logic        cont;
    logic [14:0] mm_addr;
    logic [7:0]  mm_stride;
    logic [4:0]  row_lo;
    logic [5:0]  count;
    logic [23:0] pad;
  } store_instr_t;

  // LOOP: jump back to target until the block has run count times.
  typedef struct packed {
    opcode_e     op;
    logic [8:0]  target;
    logic [15:0] count;
    logic [34:0] pad;
  } loop_instr_t;

  // SYNC: wait until the selected sub-units are idle.
  typedef struct packed {
    opcode_e     op;
    logic        wait_load;
    logic        wait_vmm;
    logic        wait_store;
    logic [56:0] pad;
  } sync_instr_t;

  // Decoded commands handed to the sub-units.
  typedef struct packed {
    logic        shift;
    logic        to_aux;
    logic        cont;
    aux_op_e     aux_op;
    logic [14:0] mm_addr;
    logic [7:0]  mm_stride;
    logic [6:0]  count;
    logic [5:0]  buf_idx;
    logic [5:0]  buf_stride;
    logic [6:0]  chain_len;
  } load_cmd_t;

  typedef struct packed {
    logic [4:0]  row_lo;
    logic [4:0]  row_hi;
    logic [3:0]  col_lo;
    logic [3:0]  col_hi;
    logic [5:0]  layer;
    logic [2:0]  steps;
    logic [1:0]  fold_base;
    logic [2:0]  shift;
    act_e        act;
  } vmm_cmd_t;

  typedef struct packed {
    logic        from_aux;
    logic        cont;
    logic [14:0] mm_addr;
    logic [7:0]  mm_stride;
    logic [4:0]  row_lo;
    logic [5:0]  count;
  } store_cmd_t;

endpackage
