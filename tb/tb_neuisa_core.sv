// tb_neuisa_core: end-to-end test of the NPU core front end at its default
// parameters (4 MEs, 4 VEs, 4 vNPU contexts, 256-cycle ME context save,
// 1024-cycle temporal-sharing slice).
//
// The testbench plays host and engines. As host it writes NeuISA programs,
// execution tables, segment tables and context registers through the
// register port, launches vNPUs and polls their status. Each ME is modelled
// as taking one push or pop every 8 cycles (the paper's pop of an 8x128
// result vector); VEs take an operation every cycle.
//
// Phase 1, spatial-isolated, two vNPUs with 2 MEs + 2 VEs each:
//   vNPU0: one group of four ME uTOps, each a 60-iteration push/pop loop
//          with a VE load and add per iteration. It can only use four MEs
//          by harvesting those vNPU1 leaves idle.
//   vNPU1: group 0 = one short ME uTOp + a VE uTOp issuing 4 VE operations
//          per instruction (more than its 2 VEs: VE harvesting);
//          group 1 = two ME uTOps (needs its 2 MEs back: reclaim by
//          preemption, 256-cycle save, later resume of vNPU0's uTOp).
//          uTOp 0 of group 1 keeps a counter in scalar SRAM and executes
//          uTop.nextGroup back to group 1 once, then to group 3 (null row,
//          end), skipping group 2, which would page-fault.
// Phase 2: vNPU2 loads from an unmapped SRAM segment (page fault, error);
//   vNPU3's two uTOps name different nextGroup targets (exception); DMA
//   translations through the HBM segment table, one of them faulting.
// Phase 3, temporal-sharing: vNPU0 fills the four MEs, vNPU1 with a higher
//   priority arrives later and gets MEs by preemption.
// Phase 4, spatial-isolated again: the paper's loop example (three groups
//   repeated through uTop.group, a scalar Count and uTop.nextGroup %r0).
//
// Checks: exact ME and VE operation counts per vNPU (a lost or repeated
// operation around a preemption shows), every SRAM address leaving on a VE
// port lies in the issuing vNPU's physical segment, every context save lasts
// 256 cycles, no operation reaches an ME while it saves, status, interrupt
// and fault bits, scalar SRAM contents, HBM translations. Each mechanism is
// counted; one that never happens is a failure.
module tb_neuisa_core;
  import neu_pkg::*;
  import tb_asm_pkg::*;

  localparam int ME_LAT = 8;
  localparam int SAVE_LAT = 256;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  int checks = 0, failures = 0;

  logic mmio_wr;
  logic [15:0] mmio_addr;
  logic [31:0] mmio_wdata, mmio_rdata;
  logic [NUM_VNPU-1:0] irq;
  logic [NX-1:0] me_valid, me_ready, me_ctx_save;
  me_slot_t [NX-1:0] me_op;
  logic [NX-1:0][VID_W-1:0] me_vnpu;
  logic [NY-1:0] ve_valid;
  ve_slot_t [NY-1:0] ve_op;
  logic [NY-1:0][VID_W-1:0] ve_vnpu;
  logic [VID_W-1:0] dma_vnpu;
  logic [HBM_VA_W-1:0] dma_vaddr, dma_paddr;
  logic dma_fault;
  logic harvest_evt, reclaim_evt, ts_preempt_evt, ve_harvest_evt;
  logic [NUM_VNPU-1:0] fault_evt;
  logic [NUM_VNPU-1:0][3:0] ve_given;

  neuisa_core dut (.*);

  // ---------------------------------------------------------------- engine models and monitors
  int me_busy [NX];
  int save_len [NX];
  int me_ops [NUM_VNPU];
  int ve_ops [NUM_VNPU];
  int n_harvest, n_reclaim, n_ts, n_veh, n_fault, n_save, n_ng, max_ve1, bad_addr, bad_save;

  always_comb for (int q = 0; q < NX; q++) me_ready[q] = (me_busy[q] == 0) && !me_ctx_save[q];

  function automatic int pseg_of(int v);
    return 8 + v;     // vseg 0 of vNPU v maps to physical segment 8 + v
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      for (int q = 0; q < NX; q++) begin me_busy[q] <= 0; save_len[q] <= 0; end
      for (int v = 0; v < NUM_VNPU; v++) begin me_ops[v] <= 0; ve_ops[v] <= 0; end
      n_harvest <= 0; n_reclaim <= 0; n_ts <= 0; n_veh <= 0; n_fault <= 0; n_save <= 0;
      n_ng <= 0; max_ve1 <= 0; bad_addr <= 0; bad_save <= 0;
    end else begin
      automatic int ba = 0, bs = 0, ns = 0, ng = 0;
      automatic int mo [NUM_VNPU] = '{default: 0};
      automatic int vo [NUM_VNPU] = '{default: 0};
      for (int q = 0; q < NX; q++) begin
        if (me_valid[q] && me_ready[q]) begin
          me_busy[q] <= ME_LAT - 1;
          mo[me_vnpu[q]]++;
        end else if (me_busy[q] > 0) me_busy[q] <= me_busy[q] - 1;
        if (me_ctx_save[q]) save_len[q] <= save_len[q] + 1;
        else if (save_len[q] != 0) begin
          ns++;
          if (save_len[q] != SAVE_LAT) bs++;
          save_len[q] <= 0;
        end
        if (me_ctx_save[q] && me_valid[q]) bs++;
      end
      for (int p = 0; p < NY; p++)
        if (ve_valid[p]) begin
          vo[ve_vnpu[p]]++;
          if ((ve_op[p].op == VE_LOAD || ve_op[p].op == VE_STORE) &&
              int'(ve_op[p].arg[SRAM_VA_W-1:SRAM_OFF_W]) != pseg_of(int'(ve_vnpu[p]))) ba++;
        end
      for (int q = 0; q < NQ; q++) if (dut.q_ng[q]) ng++;
      for (int v = 0; v < NUM_VNPU; v++) begin
        me_ops[v] <= me_ops[v] + mo[v];
        ve_ops[v] <= ve_ops[v] + vo[v];
      end
      bad_addr <= bad_addr + ba;
      bad_save <= bad_save + bs;
      n_save   <= n_save + ns;
      n_ng     <= n_ng + ng;
      n_harvest <= n_harvest + int'(harvest_evt);
      n_reclaim <= n_reclaim + int'(reclaim_evt);
      n_ts      <= n_ts + int'(ts_preempt_evt);
      n_veh     <= n_veh + int'(ve_harvest_evt);
      n_fault   <= n_fault + int'(fault_evt != '0);
      if (int'(ve_given[1]) > max_ve1) max_ve1 <= int'(ve_given[1]);
    end
  end

  // ---------------------------------------------------------------- host helpers
  task automatic wr(int addr, int data);
    @(negedge clk);
    mmio_wr = 1'b1; mmio_addr = 16'(addr); mmio_wdata = data;
    @(negedge clk);
    mmio_wr = 1'b0;
  endtask

  task automatic rd(int addr, output logic [31:0] data);
    @(negedge clk);
    mmio_addr = 16'(addr);
    #1 data = mmio_rdata;
  endtask

  task automatic put(int v, int pc, instr_t i);
    logic [INSTR_WORDS*32-1:0] w;
    w = (INSTR_WORDS*32)'(i);
    for (int k = 0; k < INSTR_WORDS; k++) wr(32'h8000 | (v << 11) | (pc << 3) | k, w[k*32 +: 32]);
  endtask

  task automatic tbl(int v, int g, int e, int valid, int pc);
    wr(32'h1000 | (v << 9) | (g << 3) | e, (valid << PC_W) | pc);
  endtask

  // The execution table is not reset: every program ends with a null row.
  task automatic null_row(int v, int g);
    for (int e = 0; e < NENT; e++) tbl(v, g, e, 0, 0);
  endtask

  task automatic ctx(int v, int r, int data);
    wr((v << 8) | r, data);
  endtask

  function automatic int va(int vseg, int off);
    return (vseg << SRAM_OFF_W) | off;
  endfunction

  // ME uTOp loop body: li r5,n; push+load; pop+add; addi r5,-1; bne r5,r0,-3
  task automatic me_loop(int v, int base, int n, int vseg);
    put(v, base + 0, i_misc(MI_LI, 5, 0, n));
    put(v, base + 1, with_ve(with_me(i_nop(), ME_PUSH, 1), 0, VE_LOAD, 1, va(vseg, 5)));
    put(v, base + 2, with_ve(with_me(i_nop(), ME_POP, 2), 0, VE_ADD, 3, 'h21));
    put(v, base + 3, i_misc(MI_ADDI, 5, 5, -1));
    put(v, base + 4, i_misc(MI_BNE, 5, 0, -3));
  endtask

  task automatic wait_state(int v, int limit, output logic [31:0] st);
    int n = 0;
    do begin
      rd(v << 8 | 4, st);
      n++;
    end while (!(st[2:0] == 3'(VS_DONE) || st[2:0] == 3'(VS_ERROR)) && n < limit);
  endtask

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- test
  logic [31:0] st, d;
  initial begin
    rst_n = 1'b0; mmio_wr = 1'b0; mmio_addr = '0; mmio_wdata = '0;
    dma_vnpu = '0; dma_vaddr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // segment tables: vseg 0 of every vNPU, except vNPU2's vseg 3
    for (int v = 0; v < NUM_VNPU; v++) wr(32'h2000 | (v << SEG_W), (1 << SEG_W) | pseg_of(v));
    wr(32'h3000 | (0 << SEG_W) | 1, (1 << SEG_W) | 33);   // HBM: vNPU0 vseg1 -> pseg 33

    for (int v = 0; v < NUM_VNPU; v++) for (int g = 0; g < 4; g++) null_row(v, g);

    // vNPU0: four ME uTOps sharing one code snippet at pc 0
    me_loop(0, 0, 60, 0);
    put(0, 5, i_misc(MI_FINISH, 0, 0, 0));
    for (int e = 0; e < NX; e++) tbl(0, 0, e, 1, 0);
    null_row(0, 1);

    // vNPU1 group 0: ME uTOp (pc 0, 5 iterations) and VE uTOp (pc 20)
    me_loop(1, 0, 5, 0);
    put(1, 5, i_misc(MI_FINISH, 0, 0, 0));
    put(1, 20, i_misc(MI_LI, 5, 0, 20));
    begin
      instr_t i = i_nop();
      for (int s = 0; s < NY; s++) i = with_ve(i, s, VE_MUL, 4 + s, 'h11 * s);
      put(1, 21, i);
    end
    put(1, 22, i_misc(MI_ADDI, 5, 5, -1));
    put(1, 23, i_misc(MI_BNE, 5, 0, -2));
    put(1, 24, i_misc(MI_FINISH, 0, 0, 0));
    tbl(1, 0, 0, 1, 0);
    tbl(1, 0, NX, 1, 20);
    // vNPU1 group 1: uTOp 0 at pc 40 (loop + counter + nextGroup), uTOp 1 at pc 60
    me_loop(1, 40, 20, 0);
    put(1, 45, i_misc(MI_SLD, 2, 0, 0));
    put(1, 46, i_misc(MI_ADDI, 2, 2, 1));
    put(1, 47, i_misc(MI_SST, 0, 2, 0));
    put(1, 48, i_misc(MI_LI, 3, 0, 2));
    put(1, 49, i_misc(MI_LI, 4, 0, 1));
    put(1, 50, i_misc(MI_BLT, 2, 3, 2));
    put(1, 51, i_misc(MI_LI, 4, 0, 3));
    put(1, 52, i_misc(MI_NEXTGROUP, 0, 4, 0));
    put(1, 53, i_misc(MI_FINISH, 0, 0, 0));
    me_loop(1, 60, 20, 0);
    put(1, 65, i_misc(MI_FINISH, 0, 0, 0));
    tbl(1, 1, 0, 1, 40);
    tbl(1, 1, 1, 1, 60);
    // vNPU1 group 2 (skipped by nextGroup): would fault
    put(1, 70, with_ve(with_me(i_nop(), ME_PUSH, 1), 0, VE_LOAD, 1, va(5, 0)));
    put(1, 71, i_misc(MI_FINISH, 0, 0, 0));
    tbl(1, 2, 0, 1, 70);
    null_row(1, 3);

    for (int v = 0; v < 2; v++) begin ctx(v, 1, 2); ctx(v, 2, 2); ctx(v, 3, 1); end
    ctx(15, 0, 0);                 // spatial-isolated
    ctx(0, 0, 1);
    ctx(1, 0, 1);
    wait_state(1, 20000, st);
    check(st[2:0] == 3'(VS_DONE), "vNPU1 done");
    wait_state(0, 20000, st);
    check(st[2:0] == 3'(VS_DONE), "vNPU0 done");
    check(st[4] == 1'b1 && irq[0] == 1'b1, "vNPU0 completion interrupt");
    check(irq[1] == 1'b1, "vNPU1 completion interrupt");
    ctx(0, 0, 2);
    check(irq[0] == 1'b0, "interrupt cleared");
    repeat (5) @(negedge clk);
    check(me_ops[0] == 4 * 60 * 2, $sformatf("vNPU0 ME ops %0d", me_ops[0]));
    check(me_ops[1] == 5 * 2 + 2 * 2 * 20 * 2, $sformatf("vNPU1 ME ops %0d", me_ops[1]));
    check(ve_ops[0] == 4 * 60 * 2, $sformatf("vNPU0 VE ops %0d", ve_ops[0]));
    check(ve_ops[1] == 5 * 2 + 20 * 4 + 2 * 2 * 20 * 2, $sformatf("vNPU1 VE ops %0d", ve_ops[1]));
    rd(32'h4000 | (1 << SS_AW), d);
    check(d == 2, "group-1 loop counter in scalar SRAM");
    check(n_ng == 2, $sformatf("nextGroup events %0d", n_ng));
    check(n_fault == 0, "skipped group did not run");
    check(n_harvest > 0, "ME harvesting");
    check(n_reclaim > 0, "ME reclaim by preemption");
    check(n_veh > 0 && max_ve1 > 2, "VE harvesting");
    check(n_save > 0, "context save happened");

    // Phase 2: page fault and nextGroup exception.
    put(2, 0, with_ve(with_me(i_nop(), ME_PUSH, 1), 0, VE_LOAD, 1, va(3, 7)));
    put(2, 1, i_misc(MI_FINISH, 0, 0, 0));
    tbl(2, 0, 0, 1, 0);
    null_row(2, 1);
    put(3, 0, i_misc(MI_LI, 1, 0, 1));
    put(3, 1, i_misc(MI_NEXTGROUP, 0, 1, 0));
    put(3, 2, i_misc(MI_FINISH, 0, 0, 0));
    put(3, 10, i_misc(MI_LI, 1, 0, 2));
    put(3, 11, i_misc(MI_NEXTGROUP, 0, 1, 0));
    put(3, 12, i_misc(MI_FINISH, 0, 0, 0));
    tbl(3, 0, 0, 1, 0);
    tbl(3, 0, 1, 1, 10);
    null_row(3, 1); null_row(3, 2);
    for (int v = 2; v < 4; v++) begin ctx(v, 1, 2); ctx(v, 2, 1); ctx(v, 0, 1); end
    wait_state(2, 5000, st);
    check(st[2:0] == 3'(VS_ERROR) && st[5], "page fault ends vNPU2 in error");
    check(n_fault > 0, "page fault event");
    wait_state(3, 5000, st);
    check(st[2:0] == 3'(VS_ERROR) && st[6] && !st[5], "nextGroup conflict ends vNPU3 in error");
    @(negedge clk);
    dma_vnpu = 0; dma_vaddr = {6'd1, 30'h0123_4567};
    #1 check(!dma_fault && dma_paddr == {6'd33, 30'h0123_4567}, "HBM translation");
    dma_vnpu = 1;
    #1 check(dma_fault, "HBM fault for another vNPU's segment");

    // Phase 3: temporal sharing, vNPU1 has priority 4.
    tbl(1, 0, NX, 0, 0);
    for (int e = 0; e < NX; e++) tbl(1, 0, e, 1, 80);
    null_row(1, 1);
    me_loop(1, 80, 30, 0);
    put(1, 85, i_misc(MI_FINISH, 0, 0, 0));
    ctx(1, 3, 4);
    ctx(0, 5, 0); ctx(1, 5, 0);
    ctx(15, 0, 1);                 // temporal-sharing
    begin
      int m0, m1, t0;
      m0 = me_ops[0]; m1 = me_ops[1]; t0 = n_ts;
      ctx(0, 0, 1);
      repeat (300) @(negedge clk);
      ctx(1, 0, 1);
      wait_state(1, 20000, st);
      check(st[2:0] == 3'(VS_DONE), "temporal: vNPU1 done");
      wait_state(0, 20000, st);
      check(st[2:0] == 3'(VS_DONE), "temporal: vNPU0 done");
      repeat (5) @(negedge clk);
      check(me_ops[0] - m0 == 4 * 60 * 2, $sformatf("temporal: vNPU0 ME ops %0d", me_ops[0] - m0));
      check(me_ops[1] - m1 == 4 * 30 * 2, $sformatf("temporal: vNPU1 ME ops %0d", me_ops[1] - m1));
      check(n_ts > t0, "temporal-sharing preemption");
      rd(0 << 8 | 5, d);
      check(d > 0, "active-cycle counter");
    end
    // Phase 4: the loop of the paper's program-structure example on vNPU2.
    // Groups 0-2 form the loop body; uTOps 0 and 1 of group 0 share one
    // snippet. Group 2's snippet reads its group index and, while group == 2
    // and Count < 4, executes nextGroup %r0 back to group 0; it then
    // increments Count (scalar word 0). Expected: 5 passes, Count = 5.
    ctx(15, 0, 0);
    for (int b = 0; b < 3; b++) begin
      me_loop(2, 10 * b, 2, 0);
      put(2, 10 * b + 5, i_misc(MI_FINISH, 0, 0, 0));
    end
    put(2, 30, i_misc(MI_GROUP, 1, 0, 0));
    put(2, 31, i_misc(MI_LI, 2, 0, 2));
    put(2, 32, i_misc(MI_SLD, 3, 0, 0));
    put(2, 33, i_misc(MI_LI, 4, 0, 4));
    put(2, 34, i_misc(MI_BNE, 1, 2, 4));        // group != 2: skip to 38
    put(2, 35, i_misc(MI_BLT, 3, 4, 2));        // Count < 4: to 37
    put(2, 36, i_misc(MI_BEQ, 0, 0, 2));        // else to 38
    put(2, 37, i_misc(MI_NEXTGROUP, 0, 0, 0));  // nextGroup %r0 (= group 0)
    put(2, 38, i_misc(MI_ADDI, 3, 3, 1));
    put(2, 39, i_misc(MI_SST, 0, 3, 0));
    put(2, 40, i_misc(MI_FINISH, 0, 0, 0));
    null_row(2, 0); null_row(2, 1); null_row(2, 2); null_row(2, 3);
    tbl(2, 0, 0, 1, 0);  tbl(2, 0, 1, 1, 0);
    tbl(2, 1, 0, 1, 10); tbl(2, 1, 1, 1, 20);
    tbl(2, 2, 0, 1, 30);
    wr(32'h4000 | (2 << SS_AW), 0);
    begin
      int m2, ng0;
      m2 = me_ops[2]; ng0 = n_ng;
      ctx(2, 0, 3);                 // clear flags and launch
      wait_state(2, 20000, st);
      check(st[2:0] == 3'(VS_DONE) && !st[5] && !st[6], "loop example: vNPU2 done");
      repeat (5) @(negedge clk);
      rd(32'h4000 | (2 << SS_AW), d);
      check(d == 5, $sformatf("loop example: Count %0d", d));
      check(n_ng - ng0 == 4, $sformatf("loop example: nextGroup %0d", n_ng - ng0));
      check(me_ops[2] - m2 == 5 * 4 * 2 * 2, $sformatf("loop example: ME ops %0d", me_ops[2] - m2));
    end

    check(bad_addr == 0, "SRAM isolation of VE addresses");
    check(bad_save == 0, "context save lasts 256 cycles, no ME issue while saving");

    $display("mechanisms: harvest=%0d reclaim=%0d ts_preempt=%0d ve_harvest=%0d page_fault=%0d saves=%0d nextGroup=%0d",
             n_harvest, n_reclaim, n_ts, n_veh, n_fault, n_save, n_ng);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
