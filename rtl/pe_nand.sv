// pe_nand: behavioural model of one processing element (PE) - a 64-layer
// 3D-NAND flash block of K strings-rows by 2K bit lines with its peripheral
// circuits.  This is a behavioural model, not synthesizable logic: the flash
// cells, level shifters and load capacitors are analog parts.
//
// What is modelled:
//  * Control gates: the PE is enabled when its column-select (cs) and
//    row-select (rs) lines are both high; the enable gates its word-line (WL)
//    and bit-select-line (BSL) drivers.  Its K load capacitors are switched
//    onto the shared bit lines (rather than to Vreset) when it is enabled and
//    VMM_OP is high (cap_on).
//  * WL decoder and level shifters: layer_sel selects one layer (read
//    voltage), all others pass.  A new selection needs T_LS cycles to settle;
//    a layer that has not settled conducts no current.
//  * BSL level shifters: string i conducts when its time-domain input ibus[i]
//    is high, or, in phase II, when sweep turns on all BSLs.
//  * Cells: cell (layer, i, j) holds a current level w in 0..IMAX (IMAX =
//    2**WBITS-1, the cell's maximum current).  Bit line j then carries, each
//    cycle, the sum of w over the conducting strings of the selected layer -
//    the charge the PE delivers to the bit line in that cycle.  Bit lines
//    2k and 2k+1 are the positive and negative column of output k.
//  * The top layer (SWEEP_LAYER) provides the phase-II sweep current: its
//    cells are taken to be programmed to IMAX, so with all BSLs on every bit
//    line gets K*IMAX.  That layer is therefore not used for weights, and
//    writes to it are ignored.  Cells never written hold unknown values.
//  * Weights are written through a model-only port (prog_*), standing in for
//    the flash programming circuitry, which is not modelled.
// Device non-idealities (DIBL, coupling, noise) are not modelled.
//
// Timing: obus_cur is combinational from ibus/sweep and the settled layer.
// Following the paper: the K x 2K 64-layer block, CS/RS/VMM_OP gating, WL
// and BSL drivers, sweep through the top layer, differential columns and the
// T_LS layer-select time.  This design's choices: integer current levels
// per cycle, WBITS = 4 levels and the programming port.
module pe_nand #(
  parameter int K      = acortex_pkg::K_DEF,
  parameter int LAYERS = acortex_pkg::LAYERS_DEF,
  parameter int WBITS  = acortex_pkg::WBITS_DEF,
  parameter int T_LS   = acortex_pkg::T_LS_DEF,
  localparam int LW    = $clog2(LAYERS),
  localparam int KW    = $clog2(K),
  localparam int IMAX  = (1 << WBITS) - 1,
  localparam int CUR_W = $clog2(K * IMAX + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          cs,
  input  logic                          rs,
  input  logic                          vmm_op,
  input  logic [LW-1:0]                 layer_sel,
  input  logic                          sweep,
  input  logic [K-1:0]                  ibus,
  output logic [2*K-1:0][CUR_W-1:0]     obus_cur,
  output logic                          cap_on,
  output logic                          layer_ready,
  // model-only weight write port
  input  logic                          prog_en,
  input  logic [LW-1:0]                 prog_layer,
  input  logic [KW-1:0]                 prog_row,
  input  logic [KW:0]                   prog_col,
  input  logic [WBITS-1:0]              prog_w
);
  logic [WBITS-1:0] wcell [LAYERS][K][2*K];

  logic en;
  assign en     = cs & rs;
  assign cap_on = en & vmm_op;

  // WL settling: count cycles since the effective selection last changed
  logic [LW:0]  sel_q;
  logic [7:0]   settle;
  logic [LW:0]  sel_now;
  assign sel_now     = {en, layer_sel};
  assign layer_ready = en && (sel_now == sel_q) && (settle >= 8'(T_LS));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_q  <= '0;
      settle <= '0;
    end else begin
      sel_q <= sel_now;
      if (sel_now != sel_q)       settle <= 8'd1;
      else if (settle != 8'hff)   settle <= settle + 8'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (prog_en && int'(prog_layer) != acortex_pkg::SWEEP_LAYER && int'(prog_col) < 2*K)
      wcell[prog_layer][prog_row][prog_col] <= prog_w;
  end

  always_comb begin
    for (int j = 0; j < 2*K; j++) obus_cur[j] = '0;
    if (layer_ready) begin
      for (int i = 0; i < K; i++) begin
        if (ibus[i] || sweep) begin
          for (int j = 0; j < 2*K; j++)
            obus_cur[j] = obus_cur[j] + ((int'(layer_sel) == acortex_pkg::SWEEP_LAYER)
                                         ? CUR_W'(IMAX) : CUR_W'(wcell[layer_sel][i][j]));
        end
      end
    end
  end
endmodule
