// tb_collocation: two collocated vNPUs on the core at its default
// parameters, an operator-level stand-in for the paper's workload pairs
// (spatial-isolated mode, 2 MEs + 2 VEs allocated to each vNPU).
//
// Programs (4 MEs modelled as taking a push or pop every 8 cycles):
//   A, "ME-heavy" (vNPU0): 3 groups of 4 ME uTOps, each a 20-iteration
//      push/pop loop with a VE load and add per iteration, as a matrix
//      multiplication split over MEs with a fused vector epilogue.
//   B, "light" (vNPU1): 3 groups of one ME uTOp plus one VE uTOp issuing
//      4 VE operations per instruction, so one of its two MEs stays idle.
//   H, "hog" (vNPU2): 2 long ME uTOps, keeping its 2 MEs busy, used as the
//      partner that leaves nothing to harvest.
// Runs, each timed from launch to DONE:
//   1. A alone        A may harvest all 4 MEs
//   2. A with H       A is held to its 2 MEs
//   3. A with B       A harvests B's idle ME
//   4. B alone
// Checks: A alone is faster than A next to H (harvesting of idle MEs);
// A next to B is faster than A next to H (harvesting from a light partner);
// B next to A finishes within B alone plus one reclaim (256-cycle save and
// a few ME operations) per group (performance isolation); exact ME and VE
// operation counts per run. The times and ME utilisation are printed.
module tb_collocation;
  import neu_pkg::*;
  import tb_asm_pkg::*;

  localparam int ME_LAT = 8;

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

  // ME model and counters
  int me_busy [NX];
  int me_ops [NUM_VNPU];
  int ve_ops [NUM_VNPU];
  int me_busy_cycles, cycle;
  always_comb for (int q = 0; q < NX; q++) me_ready[q] = (me_busy[q] == 0) && !me_ctx_save[q];

  always @(posedge clk) begin
    if (!rst_n) begin
      for (int q = 0; q < NX; q++) me_busy[q] <= 0;
      for (int v = 0; v < NUM_VNPU; v++) begin me_ops[v] <= 0; ve_ops[v] <= 0; end
      me_busy_cycles <= 0; cycle <= 0;
    end else begin
      automatic int mo [NUM_VNPU] = '{default: 0};
      automatic int vo [NUM_VNPU] = '{default: 0};
      automatic int nb = 0;
      for (int q = 0; q < NX; q++) begin
        if (me_valid[q] && me_ready[q]) begin
          me_busy[q] <= ME_LAT - 1;
          mo[me_vnpu[q]]++;
        end else if (me_busy[q] > 0) me_busy[q] <= me_busy[q] - 1;
        if (me_busy[q] > 0 || (me_valid[q] && me_ready[q])) nb++;
      end
      for (int p = 0; p < NY; p++) if (ve_valid[p]) vo[ve_vnpu[p]]++;
      for (int v = 0; v < NUM_VNPU; v++) begin
        me_ops[v] <= me_ops[v] + mo[v];
        ve_ops[v] <= ve_ops[v] + vo[v];
      end
      me_busy_cycles <= me_busy_cycles + nb;
      cycle <= cycle + 1;
    end
  end

  // host helpers
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

  task automatic me_loop(int v, int base, int n);
    put(v, base + 0, i_misc(MI_LI, 5, 0, n));
    put(v, base + 1, with_ve(with_me(i_nop(), ME_PUSH, 1), 0, VE_LOAD, 1, 5));
    put(v, base + 2, with_ve(with_me(i_nop(), ME_POP, 2), 0, VE_ADD, 3, 'h21));
    put(v, base + 3, i_misc(MI_ADDI, 5, 5, -1));
    put(v, base + 4, i_misc(MI_BNE, 5, 0, -3));
    put(v, base + 5, i_misc(MI_FINISH, 0, 0, 0));
  endtask

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Launch the vNPUs in mask together; return each one's cycles to DONE.
  task automatic run(logic [NUM_VNPU-1:0] mask, output int t [NUM_VNPU]);
    int t0;
    logic [NUM_VNPU-1:0] left;
    for (int v = 0; v < NUM_VNPU; v++) t[v] = 0;
    @(negedge clk);
    for (int v = 0; v < NUM_VNPU; v++) if (mask[v]) ctx(v, 0, 3);
    t0 = cycle;
    left = mask;
    while (left != '0 && cycle - t0 < 50000) begin
      @(negedge clk);
      for (int v = 0; v < NUM_VNPU; v++)
        if (left[v] && dut.vstate[v] == VS_DONE) begin t[v] = cycle - t0; left[v] = 1'b0; end
    end
    check(left == '0, "run completes");
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int t1 [NUM_VNPU], t2 [NUM_VNPU], t3 [NUM_VNPU], t4 [NUM_VNPU];
  int m0, v0, b0, c0;
  initial begin
    rst_n = 1'b0; mmio_wr = 1'b0; mmio_addr = '0; mmio_wdata = '0;
    dma_vnpu = '0; dma_vaddr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int v = 0; v < 3; v++) begin
      wr(32'h2000 | (v << SEG_W), (1 << SEG_W) | (8 + v));
      for (int g = 0; g < 5; g++) for (int e = 0; e < NENT; e++) tbl(v, g, e, 0, 0);
      ctx(v, 1, 2); ctx(v, 2, 2); ctx(v, 3, 1);
    end
    ctx(15, 0, 0);
    // A: groups 0..2, four ME uTOps each (snippets at 0, 10, 20)
    for (int g = 0; g < 3; g++) begin
      me_loop(0, 10 * g, 20);
      for (int e = 0; e < NX; e++) tbl(0, g, e, 1, 10 * g);
    end
    // B: groups 0..2, one ME uTOp (pc 0) + one VE uTOp (pc 10)
    me_loop(1, 0, 20);
    put(1, 10, i_misc(MI_LI, 5, 0, 20));
    begin
      instr_t i = i_nop();
      for (int s = 0; s < NY; s++) i = with_ve(i, s, VE_MUL, 4 + s, 'h11 * s);
      put(1, 11, i);
    end
    put(1, 12, i_misc(MI_ADDI, 5, 5, -1));
    put(1, 13, i_misc(MI_BNE, 5, 0, -2));
    put(1, 14, i_misc(MI_FINISH, 0, 0, 0));
    for (int g = 0; g < 3; g++) begin tbl(1, g, 0, 1, 0); tbl(1, g, NX, 1, 10); end
    // H: two long ME uTOps
    me_loop(2, 0, 200);
    tbl(2, 0, 0, 1, 0); tbl(2, 0, 1, 1, 0);

    m0 = me_ops[0]; v0 = ve_ops[0]; b0 = me_busy_cycles; c0 = cycle;
    run(4'b0001, t1);
    check(me_ops[0] - m0 == 3 * 4 * 40 && ve_ops[0] - v0 == 3 * 4 * 40, "run 1 operation counts");
    $display("A alone:  %0d cycles, ME utilisation %0d%%", t1[0], 100 * (me_busy_cycles - b0) / (4 * (cycle - c0)));
    m0 = me_ops[0];
    run(4'b0101, t2);
    check(me_ops[0] - m0 == 3 * 4 * 40, "run 2 operation counts");
    $display("A with H: %0d cycles (H %0d)", t2[0], t2[2]);
    m0 = me_ops[0]; v0 = ve_ops[1]; b0 = me_busy_cycles; c0 = cycle;
    run(4'b0011, t3);
    check(me_ops[0] - m0 == 3 * 4 * 40, "run 3 A operation counts");
    check(ve_ops[1] - v0 == 3 * (40 + 80), "run 3 B operation counts");
    $display("A with B: A %0d cycles, B %0d cycles, ME utilisation %0d%%", t3[0], t3[1],
             100 * (me_busy_cycles - b0) / (4 * (cycle - c0)));
    run(4'b0010, t4);
    $display("B alone:  %0d cycles", t4[1]);

    check(t1[0] < t2[0], "harvesting idle MEs speeds A up");
    check(t3[0] < t2[0], "A harvests the ME B leaves idle");
    check(t3[1] <= t4[1] + 3 * (256 + 4 * ME_LAT + 16), "B keeps its performance next to A");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
