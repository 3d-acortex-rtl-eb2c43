// main_controller: fetches and decodes the program in the instruction memory
// and hands commands to the loader, the operator and the collector.
//
// Each instruction is fetched in two cycles (IM read, then decode).  LOAD,
// VMM and STORE are issued to their sub-unit with a valid/ready handshake; if
// that unit is still busy the controller stalls on the instruction, so that
// e.g. the loader can fetch the next VMM's inputs and the collector write the
// previous results while the operator runs the current VMM.  SYNC waits until
// the chosen sub-units are idle (the program's way to order dependent
// commands).  LOOP repeats the block from target to the LOOP instruction
// count times in hardware (one level of loop).  HALT stops and raises halted
// until the next start.
// The split into main controller, loader, operator, collector and router is
// the paper's; the instruction set is this design's.
// Lint note: the per-opcode struct views of the fetched word do not read
// their opcode field (decoded once from bits [63:60]) or their pad bits, so
// those bits are reported unused.
// The command fields handed to the loader, operator and collector are wired
// straight from the fetched instruction word (no extra register).
module main_controller
  import acortex_pkg::*;
#(
  parameter int IM_DEPTH = acortex_pkg::IM_DEPTH_DEF,
  localparam int PCW     = $clog2(IM_DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                halted,
  output logic                running,
  output logic                stall,
  // instruction memory
  output logic                im_rd_en,
  output logic [PCW-1:0]      im_rd_addr,
  input  logic [INSTR_W-1:0]  im_rd_data,
  // sub-units
  output logic                ld_valid,
  output load_cmd_t           ld_cmd,
  input  logic                ld_ready,
  input  logic                ld_busy,
  output logic                vmm_valid,
  output vmm_cmd_t            vmm_cmd,
  input  logic                vmm_ready,
  input  logic                vmm_busy,
  output logic                st_valid,
  output store_cmd_t          st_cmd,
  input  logic                st_ready,
  input  logic                st_busy
);
  typedef enum logic [1:0] {C_IDLE, C_FETCH, C_EXEC, C_HALT} cstate_e;

  cstate_e      state;
  logic [PCW-1:0] pc;
  logic [15:0]  loop_left;
  logic         loop_active;

  load_instr_t  li;
  vmm_instr_t   vi;
  store_instr_t si;
  loop_instr_t  lpi;
  sync_instr_t  syi;
  opcode_e      op;
  logic         advance;     // instruction done, go to pc+1
  logic         jump;

  assign li  = load_instr_t'(im_rd_data);
  assign vi  = vmm_instr_t'(im_rd_data);
  assign si  = store_instr_t'(im_rd_data);
  assign lpi = loop_instr_t'(im_rd_data);
  assign syi = sync_instr_t'(im_rd_data);
  assign op  = opcode_e'(im_rd_data[INSTR_W-1 -: 4]);

  assign ld_cmd  = '{shift: li.shift, to_aux: li.to_aux, cont: li.cont, aux_op: li.aux_op,
                     mm_addr: li.mm_addr, mm_stride: li.mm_stride, count: li.count,
                     buf_idx: li.buf_idx, buf_stride: li.buf_stride, chain_len: li.chain_len};
  assign vmm_cmd = '{row_lo: vi.row_lo, row_hi: vi.row_hi, col_lo: vi.col_lo, col_hi: vi.col_hi,
                     layer: vi.layer, steps: vi.steps, fold_base: vi.fold_base,
                     shift: vi.shift, act: vi.act};
  assign st_cmd  = '{from_aux: si.from_aux, cont: si.cont, mm_addr: si.mm_addr,
                     mm_stride: si.mm_stride, row_lo: si.row_lo, count: si.count};

  assign halted     = (state == C_HALT);
  assign running    = (state == C_FETCH) || (state == C_EXEC);
  assign im_rd_en   = (state == C_FETCH);
  assign im_rd_addr = pc;

  always_comb begin
    ld_valid  = 1'b0;
    vmm_valid = 1'b0;
    st_valid  = 1'b0;
    advance   = 1'b0;
    jump      = 1'b0;
    stall     = 1'b0;
    if (state == C_EXEC) begin
      unique case (op)
        OP_LOAD:  begin ld_valid  = 1'b1; advance = ld_ready;  stall = !ld_ready;  end
        OP_VMM:   begin vmm_valid = 1'b1; advance = vmm_ready; stall = !vmm_ready; end
        OP_STORE: begin st_valid  = 1'b1; advance = st_ready;  stall = !st_ready;  end
        OP_SYNC:  begin
          advance = !((syi.wait_load && ld_busy) || (syi.wait_vmm && vmm_busy) ||
                      (syi.wait_store && st_busy));
          stall   = !advance;
        end
        OP_LOOP:  begin
          jump    = loop_active ? (loop_left > 16'd1) : (lpi.count > 16'd1);
          advance = !jump;
        end
        OP_HALT:  ;
        default:  advance = 1'b1;   // NOP and unused opcodes
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= C_IDLE;
      pc          <= '0;
      loop_left   <= '0;
      loop_active <= 1'b0;
    end else begin
      unique case (state)
        C_IDLE, C_HALT: if (start) begin
          pc          <= '0;
          loop_active <= 1'b0;
          state       <= C_FETCH;
        end
        C_FETCH: state <= C_EXEC;
        C_EXEC: begin
          if (op == OP_HALT) begin
            state <= C_HALT;
          end else if (jump) begin
            pc          <= PCW'(lpi.target);
            loop_active <= 1'b1;
            loop_left   <= loop_active ? loop_left - 16'd1 : lpi.count - 16'd1;
            state       <= C_FETCH;
          end else if (advance) begin
            if (op == OP_LOOP) loop_active <= 1'b0;
            pc    <= pc + 1'b1;
            state <= C_FETCH;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
