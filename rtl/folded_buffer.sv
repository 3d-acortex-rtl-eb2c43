// folded_buffer: the input buffer chain of the processor, folded into columns.
//
// The chain holds N2*FOLD buffers of K P-bit words.  Chain position b sits in
// column b % N2 at fold level b / N2, so a chain that would run across
// N2*FOLD PE columns in a flat array is folded onto N2 columns, FOLD buffers
// high; the step selector (fold_sel) picks, for every column, the buffer of
// one fold level to drive that column's DTC in the current VMM step.
//
// Writes (one K-word line per cycle):
//   wr_en & !wr_shift : individual load of position wr_idx;
//   wr_en &  wr_shift : load & shift - positions 0..chain_len-2 take the word
//                       of the next position and position chain_len-1 takes
//                       the new word (the configurable chain size).
// col_data is combinational from the stored words and fold_sel.
// The buffers, their load and load&shift modes, the configurable chain and
// the folding with a step selector follow the paper; the position numbering
// and the mapping of chain positions to fold levels are this design's own.
module folded_buffer #(
  parameter int K    = acortex_pkg::K_DEF,
  parameter int P    = acortex_pkg::P_DEF,
  parameter int N2   = 2 * acortex_pkg::N_DEF,
  parameter int FOLD = acortex_pkg::FOLD_DEF,
  localparam int NB   = N2 * FOLD,
  localparam int IDXW = $clog2(NB),
  localparam int FW   = (FOLD > 1) ? $clog2(FOLD) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         wr_en,
  input  logic                         wr_shift,
  input  logic [IDXW-1:0]              wr_idx,
  input  logic [IDXW:0]                chain_len,
  input  logic [K-1:0][P-1:0]          wr_data,
  input  logic [FW-1:0]                fold_sel,
  output logic [N2-1:0][K-1:0][P-1:0]  col_data
);
  logic [NB-1:0][K-1:0][P-1:0] buf_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NB; b++) buf_q[b] <= '0;
    end else if (wr_en) begin
      if (wr_shift) begin
        for (int b = 0; b < NB; b++) begin
          if (b + 1 < int'(chain_len))       buf_q[b] <= buf_q[b+1];
          else if (b + 1 == int'(chain_len)) buf_q[b] <= wr_data;
        end
      end else begin
        buf_q[wr_idx] <= wr_data;
      end
    end
  end

  always_comb begin
    for (int c = 0; c < N2; c++) col_data[c] = buf_q[int'(fold_sel) * N2 + c];
  end
endmodule
