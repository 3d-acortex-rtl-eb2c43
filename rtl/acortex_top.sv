// acortex_top: the 3D-aCortex neuromorphic inference processor.
//
// A single large analog VMM operator built from an M x 2N array of processing
// elements (PEs), each a 64-layer 3D-NAND block of K x 2K cells, fed from a
// folded chain of digital input buffers and read out by one
// integrate-digitalize unit (IDU) per PE row, with a main memory for the
// layer-by-layer intermediate data and a multi-unit controller.
//
// Data path of one VMM:
//   main memory --L-Bus--> loader --> folded_buffer (N2 columns x FOLD)
//     --> one DTC per PE column --I-Bus (time-domain, vertical)--> PEs
//     --O-Bus (shared bit lines, horizontal)--> bitline_cap (one per row)
//     --> IDU (neuron, TDC, barrel shifter, activation) --> collector
//     --S-Bus--> main memory
// The AUX unit takes lines from the loader and is read by the collector.
// The router shares the memory ports with the host processor (host_* ports).
// Flash programming is not part of the RTL: the PE models take weights
// through the prog_* port, which addresses one PE (prog_pe_row, prog_pe_col).
//
// Sizes default to the main configuration (K = 64, M = 32, N = 8, 64
// layers, 4-bit data, 6-bit TDCs, 1 MB MM, 4 KB IM); one VMM step can use
// up to 2N*K = 1024 inputs and produce M*K = 2048 outputs.
//
// Usage: write the program into the IM (im_we), the data into the MM
// (host_wr_*) and the weights (prog_*), pulse start, wait for halted.
//
// Following the paper: the block set, the bus structure above, the M x 2N
// PE array with CS/RS/VMM_OP control, one IDU per row and the sizes.  This
// design's choices: the host and programming ports, the instruction set,
// the arbitration and the one-cycle memory latencies.
//
// The status signals dtc_busy (per DTC) and layer_ready (per PE) are read
// only by the assertions below: the operator's fixed T_LS wait already
// covers the layer settling, so no logic needs them.  stall (controller
// waiting on a busy sub-unit) is brought out as a status output.
//
// Lint note: rst_n is both the asynchronous reset of the flip-flops and the
// 'disable iff' of the assertions, which lint reports as a signal used both
// synchronously and asynchronously (SYNCASYNCNET); this is intended.
module acortex_top
  import acortex_pkg::*;
#(
  parameter int K        = acortex_pkg::K_DEF,
  parameter int M        = acortex_pkg::M_DEF,
  parameter int N        = acortex_pkg::N_DEF,
  parameter int LAYERS   = acortex_pkg::LAYERS_DEF,
  parameter int P        = acortex_pkg::P_DEF,
  parameter int WBITS    = acortex_pkg::WBITS_DEF,
  parameter int ACC_BITS = acortex_pkg::ACC_BITS_DEF,
  parameter int FOLD     = acortex_pkg::FOLD_DEF,
  parameter int MM_LINES = acortex_pkg::MM_LINES_DEF,
  parameter int IM_DEPTH = acortex_pkg::IM_DEPTH_DEF,
  parameter int T_LS     = acortex_pkg::T_LS_DEF,
  parameter int T_OUT    = acortex_pkg::T_OUT_DEF,
  localparam int N2      = 2 * N,
  localparam int W       = K * P,
  localparam int AW      = $clog2(MM_LINES),
  localparam int PCW     = $clog2(IM_DEPTH),
  localparam int LW      = $clog2(LAYERS),
  localparam int KW      = $clog2(K),
  localparam int RW      = $clog2(M),
  localparam int CW      = $clog2(N2),
  localparam int IDXW    = $clog2(N2 * FOLD),
  localparam int FW      = (FOLD > 1) ? $clog2(FOLD) : 1,
  localparam int IMAX    = (1 << WBITS) - 1,
  localparam int CUR_W   = $clog2(K * IMAX + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                halted,
  output logic                running,
  output logic                stall,       // controller waiting on a busy unit
  // host: instruction memory
  input  logic                im_we,
  input  logic [PCW-1:0]      im_waddr,
  input  logic [INSTR_W-1:0]  im_wdata,
  // host: main memory
  input  logic                host_rd_req,
  input  logic [AW-1:0]       host_rd_addr,
  output logic                host_rd_gnt,
  output logic                host_rvalid,
  output logic [W-1:0]        host_rdata,
  input  logic                host_wr_req,
  input  logic [AW-1:0]       host_wr_addr,
  input  logic [W-1:0]        host_wr_data,
  output logic                host_wr_gnt,
  // weight programming (stands in for the flash programming circuitry)
  input  logic                prog_en,
  input  logic [RW-1:0]       prog_pe_row,
  input  logic [CW-1:0]       prog_pe_col,
  input  logic [LW-1:0]       prog_layer,
  input  logic [KW-1:0]       prog_row,
  input  logic [KW:0]         prog_col,
  input  logic [WBITS-1:0]    prog_w
);
  // ---------------- controller ----------------
  logic                im_rd_en;
  logic [PCW-1:0]      im_rd_addr;
  logic [INSTR_W-1:0]  im_rd_data;
  logic                ld_valid, ld_ready, ld_busy;
  load_cmd_t           ld_cmd;
  logic                vmm_valid, vmm_ready, vmm_busy;
  vmm_cmd_t            vmm_cmd;
  logic                st_valid, st_ready, st_busy;
  store_cmd_t          st_cmd;

  instr_mem #(.DEPTH(IM_DEPTH)) u_im (
    .clk, .wr_en(im_we), .wr_addr(im_waddr), .wr_data(im_wdata),
    .rd_en(im_rd_en), .rd_addr(im_rd_addr), .rd_data(im_rd_data)
  );

  main_controller #(.IM_DEPTH(IM_DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .halted, .running, .stall,
    .im_rd_en, .im_rd_addr, .im_rd_data,
    .ld_valid, .ld_cmd, .ld_ready, .ld_busy,
    .vmm_valid, .vmm_cmd, .vmm_ready, .vmm_busy,
    .st_valid, .st_cmd, .st_ready, .st_busy
  );

  // ---------------- memory and router ----------------
  logic            ld_req, ld_gnt, ld_rvalid;
  logic [AW-1:0]   ld_addr;
  logic            col_req, col_gnt;
  logic [AW-1:0]   col_addr;
  logic [W-1:0]    col_data;
  logic            mm_rd_en, mm_rd_valid, mm_wr_en;
  logic [AW-1:0]   mm_rd_addr, mm_wr_addr;
  logic [W-1:0]    mm_rd_data, mm_wr_data, rdata;

  main_memory #(.LINES(MM_LINES), .W(W)) u_mm (
    .clk, .rst_n, .rd_en(mm_rd_en), .rd_addr(mm_rd_addr), .rd_data(mm_rd_data),
    .rd_valid(mm_rd_valid), .wr_en(mm_wr_en), .wr_addr(mm_wr_addr), .wr_data(mm_wr_data)
  );

  router #(.AW(AW), .W(W)) u_router (
    .clk, .rst_n,
    .ld_req, .ld_addr, .ld_gnt, .ld_rvalid,
    .host_rd_req, .host_rd_addr, .host_rd_gnt, .host_rvalid, .rdata,
    .col_req, .col_addr, .col_data, .col_gnt,
    .host_wr_req, .host_wr_addr, .host_wr_data, .host_wr_gnt,
    .mm_rd_en, .mm_rd_addr, .mm_rd_data, .mm_rd_valid,
    .mm_wr_en, .mm_wr_addr, .mm_wr_data
  );
  assign host_rdata = rdata;

  // ---------------- loader, buffers, AUX ----------------
  logic            buf_wr, buf_shift, aux_valid;
  logic [IDXW-1:0] buf_idx;
  logic [IDXW:0]   chain_len;
  aux_op_e         aux_op;
  logic [K-1:0][P-1:0]         aux_r;
  logic [N2-1:0][K-1:0][P-1:0] col_words;
  logic [FW-1:0]   fold_sel;

  loader #(.AW(AW), .IDXW(IDXW)) u_loader (
    .clk, .rst_n, .cmd_valid(ld_valid), .cmd(ld_cmd), .cmd_ready(ld_ready), .busy(ld_busy),
    .rd_req(ld_req), .rd_addr(ld_addr), .rd_gnt(ld_gnt), .rd_rvalid(ld_rvalid),
    .buf_wr, .buf_shift, .buf_idx, .chain_len, .aux_valid, .aux_op
  );

  folded_buffer #(.K(K), .P(P), .N2(N2), .FOLD(FOLD)) u_buf (
    .clk, .rst_n, .wr_en(buf_wr), .wr_shift(buf_shift), .wr_idx(buf_idx),
    .chain_len, .wr_data(rdata), .fold_sel, .col_data(col_words)
  );

  aux_unit #(.K(K), .P(P)) u_aux (
    .clk, .rst_n, .in_valid(aux_valid), .op(aux_op), .in_data(rdata), .r(aux_r)
  );

  // ---------------- operator ----------------
  logic [N2-1:0]   cs;
  logic [M-1:0]    rs;
  logic            vmm_op, sweep, dtc_start, nrn_reset, tdc_clear, tdc_en, out_latch;
  logic [LW-1:0]   layer_sel;
  logic [2:0]      shift;
  act_e            act;

  vmm_operator #(.M(M), .N2(N2), .LAYERS(LAYERS), .P(P), .FOLD(FOLD),
                 .T_LS(T_LS), .T_OUT(T_OUT)) u_op (
    .clk, .rst_n, .cmd_valid(vmm_valid), .cmd(vmm_cmd), .cmd_ready(vmm_ready), .busy(vmm_busy),
    .cs, .rs, .vmm_op, .layer_sel, .sweep, .dtc_start, .fold_sel,
    .nrn_reset, .tdc_clear, .tdc_en, .out_latch, .shift, .act
  );

  // ---------------- DTCs and I-Bus ----------------
  logic [N2-1:0][K-1:0] ibus;
  for (genvar c = 0; c < N2; c++) begin : g_dtc
    logic dtc_busy;
    dtc #(.K(K), .P(P)) u_dtc (
      .clk, .rst_n, .start(dtc_start), .en(cs[c]), .din(col_words[c]),
      .pulse(ibus[c]), .busy(dtc_busy)
    );
    // a new input window never starts while the previous one is running
    assert property (@(posedge clk) disable iff (!rst_n) !(dtc_start && cs[c] && dtc_busy));
  end

  // ---------------- PE array, O-Bus rows, IDUs ----------------
  logic [M-1:0][K-1:0][P-1:0] idu_out;

  for (genvar r = 0; r < M; r++) begin : g_row
    logic [N2-1:0][2*K-1:0][CUR_W-1:0] cur;
    logic [N2-1:0]                     cap_on;
    logic [N2-1:0]                     ready;
    logic [2*K-1:0]                    bl_high;

    for (genvar c = 0; c < N2; c++) begin : g_pe
      pe_nand #(.K(K), .LAYERS(LAYERS), .WBITS(WBITS), .T_LS(T_LS)) u_pe (
        .clk, .rst_n, .cs(cs[c]), .rs(rs[r]), .vmm_op, .layer_sel, .sweep,
        .ibus(ibus[c]), .obus_cur(cur[c]), .cap_on(cap_on[c]), .layer_ready(ready[c]),
        .prog_en(prog_en && (int'(prog_pe_row) == r) && (int'(prog_pe_col) == c)),
        .prog_layer, .prog_row, .prog_col, .prog_w
      );
      // the operator's fixed T_LS wait must cover the word-line settling:
      // an enabled PE is on its layer whenever its caps are on the bit lines
      // in phase I, and on the sweep layer in phase II
      assert property (@(posedge clk) disable iff (!rst_n)
        (cap_on[c] && (sweep || int'(layer_sel) != SWEEP_LAYER)) |-> ready[c]);
    end

    bitline_cap #(.K(K), .N2(N2), .WBITS(WBITS), .T_OUT(T_OUT), .P(P)) u_bl (
      .clk, .rst_n, .vmm_op, .cap_on, .cur, .bl_high
    );

    idu #(.K(K), .P(P), .ACC_BITS(ACC_BITS)) u_idu (
      .clk, .rst_n, .bl_high, .nrn_reset, .tdc_clear, .tdc_en,
      .shift(shift[$clog2(ACC_BITS+1)-1:0]), .act, .out_latch, .out_word(idu_out[r])
    );
  end

  // ---------------- collector and S-Bus ----------------
  logic [4:0] row_sel;

  collector #(.AW(AW), .W(W)) u_col (
    .clk, .rst_n, .cmd_valid(st_valid), .cmd(st_cmd), .cmd_ready(st_ready), .busy(st_busy),
    .row_sel, .row_data(idu_out[RW'(row_sel)]), .aux_data(aux_r),
    .wr_req(col_req), .wr_addr(col_addr), .wr_data(col_data), .wr_gnt(col_gnt)
  );
endmodule
