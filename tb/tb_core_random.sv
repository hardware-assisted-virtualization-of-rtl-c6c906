// tb_core_random: randomised rounds of the whole core at its default
// parameters. Each round picks 2 to 4 vNPUs, ME and VE allocations that fit
// the core, a scheduling mode and priorities, and for each vNPU 1 to 3
// groups with 1 to 4 random ME uTOps (push/pop loops of 1 to 12 iterations,
// 40 to 120 in temporal-sharing rounds so that the 1024-cycle slice matters,
// with or without VE operations) and possibly a VE uTOp (1 to 4 VE
// operations per instruction). Each ME takes 1 to 10 cycles per operation,
// chosen at random per operation. The vNPUs are launched at random times.
// Every round must end with all vNPUs DONE, with exactly the expected number
// of ME and VE operations per vNPU (no operation lost or repeated across
// harvesting, reclaim and temporal preemption), with every context save
// lasting 256 cycles and no ME operation during a save, and with every VE
// SRAM address inside the issuing vNPU's physical segment.
module tb_core_random;
  import neu_pkg::*;
  import tb_asm_pkg::*;

  localparam int ROUNDS = 16;

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

  int me_busy [NX];
  int save_len [NX];
  int me_ops [NUM_VNPU];
  int ve_ops [NUM_VNPU];
  int bad_addr, bad_save, n_harvest, n_reclaim, n_ts, n_veh;
  always_comb for (int q = 0; q < NX; q++) me_ready[q] = (me_busy[q] == 0) && !me_ctx_save[q];

  always @(posedge clk) begin
    if (!rst_n) begin
      for (int q = 0; q < NX; q++) begin me_busy[q] <= 0; save_len[q] <= 0; end
      for (int v = 0; v < NUM_VNPU; v++) begin me_ops[v] <= 0; ve_ops[v] <= 0; end
      bad_addr <= 0; bad_save <= 0; n_harvest <= 0; n_reclaim <= 0; n_ts <= 0; n_veh <= 0;
    end else begin
      automatic int mo [NUM_VNPU] = '{default: 0};
      automatic int vo [NUM_VNPU] = '{default: 0};
      automatic int ba = 0, bs = 0;
      for (int q = 0; q < NX; q++) begin
        if (me_valid[q] && me_ready[q]) begin
          me_busy[q] <= int'($urandom_range(9, 0));
          mo[me_vnpu[q]]++;
        end else if (me_busy[q] > 0) me_busy[q] <= me_busy[q] - 1;
        if (me_ctx_save[q]) save_len[q] <= save_len[q] + 1;
        else if (save_len[q] != 0) begin
          if (save_len[q] != 256) bs++;
          save_len[q] <= 0;
        end
        if (me_ctx_save[q] && me_valid[q]) bs++;
      end
      for (int p = 0; p < NY; p++)
        if (ve_valid[p]) begin
          vo[ve_vnpu[p]]++;
          if ((ve_op[p].op == VE_LOAD || ve_op[p].op == VE_STORE) &&
              int'(ve_op[p].arg[SRAM_VA_W-1:SRAM_OFF_W]) != 8 + int'(ve_vnpu[p])) ba++;
        end
      for (int v = 0; v < NUM_VNPU; v++) begin
        me_ops[v] <= me_ops[v] + mo[v];
        ve_ops[v] <= ve_ops[v] + vo[v];
      end
      bad_addr <= bad_addr + ba;
      bad_save <= bad_save + bs;
      n_harvest <= n_harvest + int'(harvest_evt);
      n_reclaim <= n_reclaim + int'(reclaim_evt);
      n_ts <= n_ts + int'(ts_preempt_evt);
      n_veh <= n_veh + int'(ve_harvest_evt);
    end
  end

  task automatic wr(int addr, int data);
    @(negedge clk);
    mmio_wr = 1'b1; mmio_addr = 16'(addr); mmio_wdata = data;
    @(negedge clk);
    mmio_wr = 1'b0;
  endtask

  task automatic put(int v, int pc, instr_t i);
    logic [INSTR_WORDS*32-1:0] w;
    w = (INSTR_WORDS*32)'(i);
    for (int k = 0; k < INSTR_WORDS; k++) wr(32'h8000 | (v << 11) | (pc << 3) | k, w[k*32 +: 32]);
  endtask

  task automatic tbl(int v, int g, int e, int valid, int pc);
    wr(32'h1000 | (v << 9) | (g << 3) | e, (valid << PC_W) | pc);
  endtask

  task automatic ctx(int v, int r, int data);
    wr((v << 8) | r, data);
  endtask

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ME uTOp snippet; returns its ME and VE operation counts
  task automatic me_snippet(int v, int base, int n, bit with_ve_ops, output int mops, output int vops);
    instr_t i1, i2;
    i1 = with_me(i_nop(), ME_PUSH, 1);
    i2 = with_me(i_nop(), ME_POP, 2);
    if (with_ve_ops) begin
      i1 = with_ve(i1, 0, VE_LOAD, 1, 3);
      i2 = with_ve(with_ve(i2, 1, VE_ADD, 3, 'h21), 2, VE_STORE, 3, 9);
    end
    put(v, base + 0, i_misc(MI_LI, 5, 0, n));
    put(v, base + 1, i1);
    put(v, base + 2, i2);
    put(v, base + 3, i_misc(MI_ADDI, 5, 5, -1));
    put(v, base + 4, i_misc(MI_BNE, 5, 0, -3));
    put(v, base + 5, i_misc(MI_FINISH, 0, 0, 0));
    mops = 2 * n;
    vops = with_ve_ops ? 3 * n : 0;
  endtask

  task automatic ve_snippet(int v, int base, int n, int k, output int vops);
    instr_t i;
    i = i_nop();
    for (int s = 0; s < k; s++) i = with_ve(i, s, VE_MUL, 4 + s, s);
    put(v, base + 0, i_misc(MI_LI, 5, 0, n));
    put(v, base + 1, i);
    put(v, base + 2, i_misc(MI_ADDI, 5, 5, -1));
    put(v, base + 3, i_misc(MI_BNE, 5, 0, -2));
    put(v, base + 4, i_misc(MI_FINISH, 0, 0, 0));
    vops = k * n;
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_me [NUM_VNPU], exp_ve [NUM_VNPU], base_me [NUM_VNPU], base_ve [NUM_VNPU];
  logic [NUM_VNPU-1:0] act, left;
  initial begin
    rst_n = 1'b0; mmio_wr = 1'b0; mmio_addr = '0; mmio_wdata = '0;
    dma_vnpu = '0; dma_vaddr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int v = 0; v < NUM_VNPU; v++) wr(32'h2000 | (v << SEG_W), (1 << SEG_W) | (8 + v));
    for (int r = 0; r < ROUNDS; r++) begin
      int me_left, ve_left, mode, n_act, t;
      mode = (r % 3 == 2) ? 1 : 0;
      do act = 4'($urandom); while ($countones(act) < 2);
      n_act = $countones(act);
      me_left = NX; ve_left = NY;
      for (int v = 0; v < NUM_VNPU; v++) begin
        exp_me[v] = 0; exp_ve[v] = 0;
        if (!act[v]) continue;
        begin
          int am, av, ng, pc;
          am = (me_left > 0) ? int'($urandom_range(me_left > 2 ? 2 : me_left, 1)) : 0;
          av = (ve_left > 0) ? int'($urandom_range(ve_left > 2 ? 2 : ve_left, 1)) : 0;
          me_left -= am; ve_left -= av;
          ctx(v, 1, am); ctx(v, 2, av); ctx(v, 3, int'($urandom_range(4, 1)));
          ng = int'($urandom_range(3, 1));
          pc = 0;
          for (int g = 0; g <= 3; g++) for (int e = 0; e < NENT; e++) tbl(v, g, e, 0, 0);
          for (int g = 0; g < ng; g++) begin
            int nme;
            nme = int'($urandom_range(NX, 1));
            for (int e = 0; e < nme; e++) begin
              int mo, vo;
              me_snippet(v, pc, mode == 1 ? int'($urandom_range(120, 40)) : int'($urandom_range(12, 1)), 1'($urandom), mo, vo);
              tbl(v, g, e, 1, pc);
              exp_me[v] += mo; exp_ve[v] += vo;
              pc += 6;
            end
            if ($urandom_range(1, 0) == 1) begin
              int vo;
              ve_snippet(v, pc, int'($urandom_range(12, 1)), int'($urandom_range(NY, 1)), vo);
              tbl(v, g, NX, 1, pc);
              exp_ve[v] += vo;
              pc += 5;
            end
          end
        end
      end
      ctx(15, 0, mode);
      for (int v = 0; v < NUM_VNPU; v++) begin base_me[v] = me_ops[v]; base_ve[v] = ve_ops[v]; end
      for (int v = 0; v < NUM_VNPU; v++)
        if (act[v]) begin
          repeat (int'($urandom_range(60, 0))) @(negedge clk);
          ctx(v, 0, 3);
        end
      left = act;
      t = 0;
      while (left != '0 && t < 100000) begin
        @(negedge clk);
        t++;
        for (int v = 0; v < NUM_VNPU; v++) if (left[v] && dut.vstate[v] == VS_DONE) left[v] = 1'b0;
      end
      check(left == '0, $sformatf("round %0d: all vNPUs done", r));
      repeat (4) @(negedge clk);
      for (int v = 0; v < NUM_VNPU; v++) begin
        check(me_ops[v] - base_me[v] == exp_me[v],
              $sformatf("round %0d vNPU%0d ME ops %0d expected %0d", r, v, me_ops[v] - base_me[v], exp_me[v]));
        check(ve_ops[v] - base_ve[v] == exp_ve[v],
              $sformatf("round %0d vNPU%0d VE ops %0d expected %0d", r, v, ve_ops[v] - base_ve[v], exp_ve[v]));
      end
      $display("round %0d: mode %0d, vNPUs %b, %0d cycles", r, mode, act, t);
    end
    check(n_harvest > 0 && n_reclaim > 0 && n_ts > 0 && n_veh > 0, "all preemption and harvest kinds happened");
    check(bad_addr == 0, "VE SRAM addresses in the issuing vNPU's segment");
    check(bad_save == 0, "saves last 256 cycles, no ME issue during a save");
    $display("harvest %0d reclaim %0d ts_preempt %0d ve_harvest %0d", n_harvest, n_reclaim, n_ts, n_veh);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
