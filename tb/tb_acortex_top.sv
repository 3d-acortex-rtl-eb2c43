// tb_acortex_top: end-to-end test of the processor at reduced size (K = 8, 4 x 4 PEs, 8 layers).
//
// The host writes input lines into the main memory, programs the weights of
// the PEs used and loads a program into the instruction memory; the program
// runs multi-step VMMs with all four activation functions, AUX operations,
// a hardware loop of load&shift / VMM / store (the convolution pattern) and
// stores every result.  A reference model in this testbench (buffer chain,
// time-domain VMM with per-step truncation, differential TDC, shift,
// saturation, activation) predicts every stored line; the host reads them
// back through the router and compares.  It also counts how often each
// mechanism occurred: controller stalls, loader/operator overlap, loop
// jumps, load&shift, AUX operations, multi-step accumulation, negative
// (differential) outputs, host accesses; one that never occurs is a failure.
//
// Timing: 10-time-unit clock; host writes and reads use the router's
// req/gnt handshake; the program is started with a one-cycle start pulse and
// the run ends at halted (a watchdog fails a hang).  The reference model
// follows the paper's time-domain arithmetic (floor(Q/S) per column, 2N*K
// inputs, M*K outputs); the program and instruction set are this design's.
module tb_acortex_top;
  import acortex_pkg::*;
  localparam int K = 8, M = 4, N = 2, LAYERS = 8, FOLD = 4, P = 4;
  localparam int N2 = 2 * N, W = K * P, MM_LINES = 256, IM_DEPTH = 64;
  localparam int AW = $clog2(MM_LINES), PCW = $clog2(IM_DEPTH), LW = $clog2(LAYERS);
  localparam int KW = $clog2(K), RW = $clog2(M), CW = $clog2(N2), IMAX = 15, T_OUT = 18;
  localparam int NR = 4;    // PE rows used by the program (rows 0..NR-1)
  localparam int NC = 4;    // PE columns used (0..NC-1)
  localparam int NB = N2 * FOLD;        // buffer chain positions
  localparam int NDATA = NB + 8;        // input lines written by the host
  localparam int RES = NDATA + 4;       // first result line
  localparam int NRES = 4 * NR + 8;     // result lines

  logic clk = 0, rst_n = 0, start = 0, halted, running, stall;
  logic im_we = 0;
  logic [PCW-1:0] im_waddr = 0;
  logic [63:0] im_wdata = 0;
  logic host_rd_req = 0, host_rd_gnt, host_rvalid, host_wr_req = 0, host_wr_gnt;
  logic [AW-1:0] host_rd_addr = 0, host_wr_addr = 0;
  logic [W-1:0] host_rdata, host_wr_data = 0;
  logic prog_en = 0;
  logic [RW-1:0] prog_pe_row = 0;
  logic [CW-1:0] prog_pe_col = 0;
  logic [LW-1:0] prog_layer = 0;
  logic [KW-1:0] prog_row = 0;
  logic [KW:0] prog_col = 0;
  logic [3:0] prog_w = 0;

  acortex_top #(.K(K), .M(M), .N(N), .LAYERS(LAYERS), .MM_LINES(MM_LINES), .IM_DEPTH(IM_DEPTH)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  byte unsigned wt [NR][NC][LAYERS][K][2*K];
  logic [W-1:0] mem_ref [MM_LINES];
  logic [W-1:0] bufm [N2*FOLD];
  logic [W-1:0] aux_ref;
  logic [W-1:0] idu_ref [M];
  logic [63:0] prog [$];
  int ld_ptr = 0, st_ptr = 0;
  // mechanism counters
  int n_stall = 0, n_overlap = 0, n_jump = 0, n_shift = 0, n_aux = 0, n_multistep = 0;
  int n_negout = 0, n_host_rd = 0, n_host_wr = 0, n_act [4];

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    n_stall   += int'(stall);
    n_overlap += int'(dut.ld_busy && dut.vmm_busy);
    n_jump    += int'(dut.u_ctrl.jump);
    n_shift   += int'(dut.buf_wr && dut.buf_shift);
    n_aux     += int'(dut.aux_valid);
    n_negout  += int'(dut.g_row[0].u_idu.neg != '0);
  end

  // ---------------- reference model ----------------
  function automatic int act_ref(int v, act_e a);
    real r;
    unique case (a)
      ACT_RELU:    return (v < 0) ? 0 : v;
      ACT_LINEAR:  return ((v < -8) ? -8 : (v > 7) ? 7 : v) + 8;
      ACT_SIGMOID: begin r = 15.0 / (1.0 + $exp(-v / 4.0)); return int'($floor(r + 0.5)); end
      default:     begin r = 7.5 * (1.0 + $tanh(v / 4.0)); return int'($floor(r + 0.5)); end
    endcase
  endfunction

  function automatic int word(logic [W-1:0] line, int k);
    return int'(line[k*P +: P]);
  endfunction

  task automatic ref_vmm(vmm_instr_t vi);
    int ncols, steps;
    ncols = int'(vi.col_hi) - int'(vi.col_lo) + 1;
    steps = (vi.steps == 0) ? 1 : int'(vi.steps);
    if (steps > 1) n_multistep++;
    n_act[int'(vi.act)]++;
    for (int r = 0; r < M; r++) begin
      for (int k = 0; k < K; k++) begin
        int acc, v;
        acc = 0;
        if (r >= int'(vi.row_lo) && r <= int'(vi.row_hi)) begin
          for (int s = 0; s < steps; s++) begin
            int qp, qn, l, f;
            qp = 0; qn = 0; l = int'(vi.layer) + s; f = int'(vi.fold_base) + s;
            for (int c = int'(vi.col_lo); c <= int'(vi.col_hi); c++)
              for (int i = 0; i < K; i++) begin
                int x;
                x = word(bufm[f * N2 + c], i);
                qp += x * int'(wt[r][c][l][i][2*k]);
                qn += x * int'(wt[r][c][l][i][2*k+1]);
              end
            acc += qp / (ncols * K * IMAX) - qn / (ncols * K * IMAX);
          end
        end
        v = (acc >= 0) ? (acc >> vi.shift) : -((-acc + (1 << vi.shift) - 1) >> vi.shift);
        if (v > 15) v = 15;
        if (v < -15) v = -15;
        idu_ref[r][k*P +: P] = P'(act_ref(v, vi.act));
      end
    end
  endtask

  task automatic ref_load(load_instr_t li);
    int a;
    a = li.cont ? ld_ptr : int'(li.mm_addr);
    for (int n = 0; n < int'(li.count); n++) begin
      logic [W-1:0] d;
      d = mem_ref[(a + n * int'(li.mm_stride)) % MM_LINES];
      if (li.to_aux) begin
        for (int k = 0; k < K; k++) begin
          int x, y, z;
          x = word(aux_ref, k); y = word(d, k);
          unique case (li.aux_op)
            AUX_COPY: z = y;
            AUX_MAX:  z = (y > x) ? y : x;
            AUX_ADD:  z = (x + y > 15) ? 15 : x + y;
            default:  z = (x * y) / 16;
          endcase
          aux_ref[k*P +: P] = P'(z);
        end
      end else if (li.shift) begin
        for (int b = 0; b < int'(li.chain_len) - 1; b++) bufm[b] = bufm[b+1];
        bufm[int'(li.chain_len) - 1] = d;
      end else begin
        bufm[(int'(li.buf_idx) + n * int'(li.buf_stride)) % (N2 * FOLD)] = d;
      end
    end
    ld_ptr = (a + int'(li.count) * int'(li.mm_stride)) % MM_LINES;
  endtask

  task automatic ref_store(store_instr_t si);
    int a;
    a = si.cont ? st_ptr : int'(si.mm_addr);
    for (int n = 0; n < int'(si.count); n++)
      mem_ref[(a + n * int'(si.mm_stride)) % MM_LINES] = si.from_aux ? aux_ref : idu_ref[int'(si.row_lo) + n];
    st_ptr = (a + int'(si.count) * int'(si.mm_stride)) % MM_LINES;
  endtask

  // ---------------- program builders ----------------
  function automatic load_instr_t mk_ld(int a, int cnt, int bi, int shift, int to_aux, int auxop, int cont);
    load_instr_t i;
    i = '0; i.op = OP_LOAD; i.mm_addr = 15'(a); i.mm_stride = 8'd1; i.count = 7'(cnt);
    i.buf_idx = 6'(bi); i.buf_stride = 6'd1; i.shift = 1'(shift); i.to_aux = 1'(to_aux);
    i.aux_op = aux_op_e'(auxop); i.cont = 1'(cont); i.chain_len = 7'(N2 * FOLD);
    return i;
  endfunction
  function automatic vmm_instr_t mk_vmm(int r0, int r1, int c0, int c1, int l, int st, int fb, int sh, act_e a);
    vmm_instr_t i;
    i = '0; i.op = OP_VMM; i.row_lo = 5'(r0); i.row_hi = 5'(r1); i.col_lo = 4'(c0); i.col_hi = 4'(c1);
    i.layer = 6'(l); i.steps = 3'(st); i.fold_base = 2'(fb); i.shift = 3'(sh); i.act = a;
    return i;
  endfunction
  function automatic store_instr_t mk_st(int a, int r0, int cnt, int from_aux, int cont);
    store_instr_t i;
    i = '0; i.op = OP_STORE; i.mm_addr = 15'(a); i.mm_stride = 8'd1; i.row_lo = 5'(r0);
    i.count = 6'(cnt); i.from_aux = 1'(from_aux); i.cont = 1'(cont);
    return i;
  endfunction
  function automatic logic [63:0] mk_sync(int l, int v, int s);
    sync_instr_t i;
    i = '0; i.op = OP_SYNC; i.wait_load = 1'(l); i.wait_vmm = 1'(v); i.wait_store = 1'(s);
    return 64'(i);
  endfunction
  function automatic logic [63:0] mk_loop(int target, int cnt);
    loop_instr_t i;
    i = '0; i.op = OP_LOOP; i.target = 9'(target); i.count = 16'(cnt);
    return 64'(i);
  endfunction

  // Runs the program on the reference model (same semantics as the
  // controller: in-order issue; SYNCs in the program make it race-free).
  task automatic run_ref();
    int pc, loop_left;
    logic loop_active;
    pc = 0; loop_active = 0; loop_left = 0;
    while (pc < prog.size()) begin
      opcode_e op;
      op = opcode_e'(prog[pc][63:60]);
      if (op == OP_HALT) break;
      unique case (op)
        OP_LOAD:  ref_load(load_instr_t'(prog[pc]));
        OP_VMM:   ref_vmm(vmm_instr_t'(prog[pc]));
        OP_STORE: ref_store(store_instr_t'(prog[pc]));
        OP_LOOP: begin
          loop_instr_t li;
          li = loop_instr_t'(prog[pc]);
          if (!loop_active && li.count > 1) begin loop_active = 1; loop_left = int'(li.count) - 1; pc = int'(li.target); continue; end
          if (loop_active && loop_left > 1) begin loop_left--; pc = int'(li.target); continue; end
          loop_active = 0;
        end
        default: ;
      endcase
      pc++;
    end
  endtask

  // ---------------- host tasks ----------------
  task automatic host_write(int a, logic [W-1:0] d);
    @(negedge clk); host_wr_req = 1; host_wr_addr = AW'(a); host_wr_data = d;
    @(posedge clk); while (!host_wr_gnt) @(posedge clk);
    @(negedge clk); host_wr_req = 0; n_host_wr++;
  endtask

  task automatic host_read(int a, output logic [W-1:0] d);
    @(negedge clk); host_rd_req = 1; host_rd_addr = AW'(a);
    #1; while (!host_rd_gnt) begin @(negedge clk); #1; end
    @(negedge clk); host_rd_req = 0;
    checks++;
    if (!host_rvalid) begin failures++; $display("host read not returned"); end
    d = host_rdata; n_host_rd++;
  endtask

  initial begin
    int cyc;
    for (int i = 0; i < 4; i++) n_act[i] = 0;
    aux_ref = '0;
    for (int b = 0; b < N2 * FOLD; b++) bufm[b] = '0;
    for (int r = 0; r < M; r++) idu_ref[r] = '0;
    for (int a = 0; a < MM_LINES; a++) mem_ref[a] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // input data: lines 0..NDATA-1
    for (int a = 0; a < NDATA; a++) begin
      logic [W-1:0] d;
      for (int k = 0; k < K; k++) d[k*P +: P] = P'($urandom_range(0, 15));
      mem_ref[a] = d;
      host_write(a, d);
    end
    // result area cleared
    for (int a = RES; a < RES + NRES; a++) host_write(a, '0);

    // weights of the PEs and layers the program uses
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < NC; c++)
        for (int l = 1; l < 8; l++)
          for (int i = 0; i < K; i++)
            for (int j = 0; j < 2*K; j++) begin
              wt[r][c][l][i][j] = byte'($urandom_range(0, 15));
              @(negedge clk);
              prog_en = 1; prog_pe_row = RW'(r); prog_pe_col = CW'(c); prog_layer = LW'(l);
              prog_row = KW'(i); prog_col = (KW+1)'(j); prog_w = 4'(wt[r][c][l][i][j]);
            end
    @(negedge clk); prog_en = 0;

    // the program
    prog.push_back(64'(mk_ld(0, NB, 0, 0, 0, 0, 0)));          // fill all buffers
    prog.push_back(mk_sync(1, 0, 0));
    prog.push_back(64'(mk_vmm(0, NR-1, 0, NC-1, 1, 4, 0, 2, ACT_LINEAR)));  // 4-step VMM
    prog.push_back(64'(mk_ld(NB, 1, 0, 0, 1, 0, 0)));          // AUX copy, overlaps the VMM
    prog.push_back(64'(mk_ld(NB + 1, 1, 0, 0, 1, 1, 0)));          // AUX max
    prog.push_back(64'(mk_ld(NB + 2, 1, 0, 0, 1, 2, 0)));          // AUX add
    prog.push_back(mk_sync(0, 1, 0));
    prog.push_back(64'(mk_st(RES, 0, NR, 0, 0)));
    prog.push_back(64'(mk_st(RES + NR, 0, 1, 1, 0)));           // AUX result; collector busy: stall
    prog.push_back(mk_sync(1, 1, 1));
    // loop: load&shift one line, VMM on the chain end, store (cont)
    prog.push_back(64'(mk_ld(0, 1, 0, 1, 0, 0, 1)));           // pc 10
    prog.push_back(mk_sync(1, 0, 0));
    prog.push_back(64'(mk_vmm(0, 1, 1, 2, 5, 1, 3, 0, ACT_SIGMOID)));
    prog.push_back(mk_sync(0, 1, 0));
    prog.push_back(64'(mk_st(0, 0, 2, 0, 1)));
    prog.push_back(mk_loop(10, 3));
    prog.push_back(mk_sync(1, 1, 1));
    prog.push_back(64'(mk_vmm(0, NR-1, 0, NC-1, 6, 2, 1, 1, ACT_RELU)));
    prog.push_back(mk_sync(0, 1, 0));
    prog.push_back(64'(mk_st(RES + NR + 7, 0, NR, 0, 0)));
    prog.push_back(64'(mk_ld(NB + 3, 1, 0, 0, 1, 3, 0)));          // AUX multiply
    prog.push_back(64'(mk_vmm(0, NR-1, 0, NC-1, 7, 1, 0, 0, ACT_TANH)));
    prog.push_back(mk_sync(1, 1, 1));
    prog.push_back(64'(mk_st(RES + 2 * NR + 7, 0, NR, 0, 0)));
    prog.push_back(64'(mk_st(RES + 3 * NR + 7, 0, 1, 1, 0)));
    prog.push_back(mk_sync(1, 1, 1));
    prog.push_back({OP_HALT, 60'd0});
    foreach (prog[a]) begin
      @(negedge clk); im_we = 1; im_waddr = PCW'(a); im_wdata = prog[a];
    end
    @(negedge clk); im_we = 0;
    run_ref();

    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!halted) begin @(negedge clk); cyc++; end
    $display("program ran %0d cycles", cyc);

    for (int a = 0; a < RES + NRES; a++) begin
      logic [W-1:0] d;
      if (a >= NDATA && a < RES) continue;   // never written
      host_read(a, d);
      checks++;
      if (d !== mem_ref[a]) begin
        failures++; $display("MM[%0d] = %h, expected %h", a, d, mem_ref[a]);
      end
    end

    $display("mechanisms: stall=%0d overlap=%0d loop_jumps=%0d shift_loads=%0d aux_ops=%0d multistep_vmm=%0d neg_out_cycles=%0d host_rd=%0d host_wr=%0d act(lin,relu,tanh,sig)=%0d,%0d,%0d,%0d",
             n_stall, n_overlap, n_jump, n_shift, n_aux, n_multistep, n_negout, n_host_rd, n_host_wr,
             n_act[0], n_act[1], n_act[2], n_act[3]);
    checks++; if (n_stall == 0)     begin failures++; $display("no controller stall"); end
    checks++; if (n_overlap == 0)   begin failures++; $display("no load/VMM overlap"); end
    checks++; if (n_jump == 0)      begin failures++; $display("no loop jump"); end
    checks++; if (n_shift == 0)     begin failures++; $display("no load&shift"); end
    checks++; if (n_aux == 0)       begin failures++; $display("no AUX operation"); end
    checks++; if (n_multistep == 0) begin failures++; $display("no multi-step VMM"); end
    checks++; if (n_negout == 0)    begin failures++; $display("no negative output pulse"); end
    checks++; if (n_host_rd == 0 || n_host_wr == 0) begin failures++; $display("no host access"); end
    for (int i = 0; i < 4; i++) begin checks++; if (n_act[i] == 0) begin failures++; $display("activation %0d unused", i); end end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
