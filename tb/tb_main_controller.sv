// tb_main_controller: runs a small program from a reference instruction
// memory against model sub-units that stay busy for a few cycles after each
// command.  Checks the exact sequence of issued commands (including a LOOP
// body repeated 3 times), that the controller stalls on a busy unit and at
// SYNC, and that HALT stops it.
//
// Timing: a free-running clock with a 10-time-unit period; stimulus is
// driven away from the rising edge (mostly on the falling edge) and outputs
// are compared with the reference between edges.  A watchdog ends the run
// with a failure if it hangs.  The expected behaviour is this
// design's reading of the paper (sub-unit split from the paper; the instruction set is this design's).
module tb_main_controller;
  import acortex_pkg::*;
  localparam int DEPTH = 32;
  logic clk = 0, rst_n = 0, start = 0, halted, running, stall;
  logic im_rd_en;
  logic [4:0] im_rd_addr;
  logic [63:0] im_rd_data;
  logic ld_valid, ld_ready, ld_busy, vmm_valid, vmm_ready, vmm_busy, st_valid, st_ready, st_busy;
  load_cmd_t ld_cmd;
  vmm_cmd_t vmm_cmd;
  store_cmd_t st_cmd;
  logic [63:0] prog [DEPTH];
  int ld_left = 0, vmm_left = 0, st_left = 0;
  string issued = "";
  int checks = 0, failures = 0, stalls = 0;

  main_controller #(.IM_DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (im_rd_en) im_rd_data <= prog[im_rd_addr];
  assign ld_busy = ld_left != 0;   assign ld_ready = !ld_busy;
  assign vmm_busy = vmm_left != 0; assign vmm_ready = !vmm_busy;
  assign st_busy = st_left != 0;   assign st_ready = !st_busy;

  always @(posedge clk) begin
    if (ld_left != 0) ld_left <= ld_left - 1;
    if (vmm_left != 0) vmm_left <= vmm_left - 1;
    if (st_left != 0) st_left <= st_left - 1;
    if (ld_valid && ld_ready) begin ld_left <= 3; issued = {issued, $sformatf("L%0d ", ld_cmd.mm_addr)}; end
    if (vmm_valid && vmm_ready) begin vmm_left <= 10; issued = {issued, $sformatf("V%0d ", vmm_cmd.layer)}; end
    if (st_valid && st_ready) begin st_left <= 4; issued = {issued, $sformatf("S%0d ", st_cmd.mm_addr)}; end
    stalls <= stalls + int'(stall);
  end

  function automatic logic [63:0] ld(int a);
    load_instr_t i; i = '0; i.op = OP_LOAD; i.mm_addr = 15'(a); i.count = 7'd1; return 64'(i);
  endfunction
  function automatic logic [63:0] vm(int l);
    vmm_instr_t i; i = '0; i.op = OP_VMM; i.layer = 6'(l); i.steps = 3'd1; return 64'(i);
  endfunction
  function automatic logic [63:0] st(int a);
    store_instr_t i; i = '0; i.op = OP_STORE; i.mm_addr = 15'(a); i.count = 6'd1; return 64'(i);
  endfunction
  function automatic logic [63:0] sy(logic l, logic v, logic s);
    sync_instr_t i; i = '0; i.op = OP_SYNC; i.wait_load = l; i.wait_vmm = v; i.wait_store = s; return 64'(i);
  endfunction
  function automatic logic [63:0] lp(int target, int count);
    loop_instr_t i; i = '0; i.op = OP_LOOP; i.target = 9'(target); i.count = 16'(count); return 64'(i);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int cyc;
    for (int a = 0; a < DEPTH; a++) prog[a] = {OP_HALT, 60'd0};
    prog[0] = ld(1);
    prog[1] = ld(2);                 // loader busy: stall
    prog[2] = sy(1, 0, 0);
    prog[3] = vm(5);
    prog[4] = ld(3);                 // overlaps the VMM
    prog[5] = sy(0, 1, 0);
    prog[6] = st(7);
    prog[7] = lp(3, 3);              // repeat 3..7 three times
    prog[8] = {OP_NOP, 60'd0};
    prog[9] = sy(1, 1, 1);
    prog[10] = {OP_HALT, 60'd0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!halted && cyc < 5000) begin @(negedge clk); cyc++; end
    checks++;
    if (!halted) begin failures++; $display("did not halt"); end
    checks++;
    if (issued != "L1 L2 V5 L3 S7 V5 L3 S7 V5 L3 S7 ") begin
      failures++; $display("issued '%s'", issued);
    end
    checks++;
    if (stalls == 0) begin failures++; $display("no stall seen"); end
    checks++;
    if (ld_busy || vmm_busy || st_busy) begin failures++; $display("halted with units busy"); end
    // halted stays until restarted
    repeat (5) @(negedge clk);
    checks++; if (!halted || running) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
