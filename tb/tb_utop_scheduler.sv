// tb_utop_scheduler: drives the uTOp scheduler with simple queue models
// (a started uTOp runs for a time given by its start PC, then finishes; a
// preempted one saves for 4 cycles and reports PC + 1 and a register
// signature) and a registered execution-table model.
// Spatial run: vNPU0 and vNPU1 own 2 MEs each. vNPU0's group has 4 ME
// uTOps, vNPU1's first group one ME uTOp and one VE uTOp, so vNPU0 harvests
// a third ME. vNPU1's second group needs 2 MEs: the harvested ME must be
// reclaimed by preemption, and the preempted uTOp must resume from its saved
// PC and registers. vNPU1's uTop.nextGroup skips group 2. vNPU2 issues two
// different nextGroup targets in one group and must end in ERROR; a launch
// is ignored while its third uTOp still runs and accepted once it finished.
// Temporal run: vNPU0 fills all MEs with long uTOps, vNPU1 starts later and
// must get MEs by priority-weighted preemption. Checks every uTOp finishes
// exactly once, the groups and done/error events, and the mechanisms.
module tb_utop_scheduler;
  import neu_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n;

  sched_mode_e mode;
  logic [NUM_VNPU-1:0] launch, fault, done_evt, err_evt, tbl_rd_en;
  logic [NUM_VNPU-1:0][3:0] alloc_me, prio;
  logic [NUM_VNPU-1:0][31:0] active_cnt;
  vnpu_state_e [NUM_VNPU-1:0] vstate;
  logic [NUM_VNPU-1:0][GRP_W-1:0] tbl_rd_group;
  tbl_row_t [NUM_VNPU-1:0] tbl_row;
  logic [NQ-1:0] q_busy, q_finish, q_ng, q_start;
  logic [NQ-1:0][VID_W-1:0] q_vnpu;
  logic [NQ-1:0][IDX_W-1:0] q_idx;
  logic [NQ-1:0][GRP_W-1:0] q_ng_target;
  logic [NX-1:0] q_save_done, q_preempt;
  logic [NX-1:0][PC_W-1:0] q_save_pc;
  regfile_t [NX-1:0] q_save_regs;
  logic [VID_W-1:0] me_st_vnpu, ve_st_vnpu;
  logic [GRP_W-1:0] me_st_group, ve_st_group;
  logic [IDX_W-1:0] me_st_idx;
  logic [PC_W-1:0] me_st_pc, ve_st_pc;
  regfile_t me_st_regs;
  logic harvest_evt, reclaim_evt, ts_preempt_evt;

  utop_scheduler #(.TS_SLICE(64)) dut (.*);

  // execution table model
  tbl_row_t table_m [NUM_VNPU][2**GRP_W];
  always @(posedge clk)
    for (int v = 0; v < NUM_VNPU; v++) if (tbl_rd_en[v]) tbl_row[v] <= table_m[v][tbl_rd_group[v]];

  // queue models
  int qleft [NQ];
  int qsave [NQ];
  logic [PC_W-1:0] qpc [NQ];         // start PC of the uTOp (its identity)
  logic [GRP_W-1:0] qgrp [NQ];
  int runtime [2**PC_W];            // cycles a uTOp starting at this PC runs
  int ngat [2**PC_W];               // nextGroup target issued at finish, -1 none
  int finishes [2**PC_W];
  int starts [2**PC_W];
  int n_harvest = 0, n_reclaim = 0, n_ts = 0, max_v0 = 0, resumed_ok = 0;
  int n_done [NUM_VNPU];
  int n_err [NUM_VNPU];

  always @(posedge clk) begin
    if (!rst_n) begin
      for (int q = 0; q < NQ; q++) begin qleft[q] <= 0; qsave[q] <= 0; end
      for (int v = 0; v < NUM_VNPU; v++) begin n_done[v] <= 0; n_err[v] <= 0; active_cnt[v] <= 0; end
    end else begin
      automatic int v0 = 0;
      for (int q = 0; q < NQ; q++) begin
        if (q_start[q]) begin
          automatic logic [PC_W-1:0] pc = (q < NX) ? me_st_pc : ve_st_pc;
          automatic logic resumed = q < NX && me_st_regs != '0;
          automatic logic [PC_W-1:0] id = resumed ? PC_W'(me_st_regs[1]) : pc;
          q_vnpu[q] <= (q < NX) ? me_st_vnpu : ve_st_vnpu;
          q_idx[q]  <= (q < NX) ? me_st_idx : IDX_W'(NX);
          qgrp[q]   <= (q < NX) ? me_st_group : ve_st_group;
          qpc[q]    <= id;
          qleft[q]  <= resumed ? runtime[id] / 2 : runtime[id];
          if (!resumed) starts[id] <= starts[id] + 1;
          if (resumed && pc == id + PC_W'(1) && me_st_regs[2] == 32'hCAFE) resumed_ok <= resumed_ok + 1;
        end else if (qleft[q] == 1) begin
          finishes[qpc[q]] <= finishes[qpc[q]] + 1;
          qleft[q] <= 0;
        end else if (qleft[q] > 1) begin
          qleft[q] <= qleft[q] - 1;
        end
        if (q < NX) begin
          if (q_preempt[q]) begin qsave[q] <= 4; qleft[q] <= 0; end
          else if (qsave[q] > 0) qsave[q] <= qsave[q] - 1;
        end
        if ((qleft[q] > 0 || qsave[q] > 0) && q_vnpu[q] == 0 && q < NX) v0++;
      end
      if (v0 > max_v0) max_v0 <= v0;
      for (int v = 0; v < NUM_VNPU; v++) begin
        automatic logic act = 1'b0;
        for (int q = 0; q < NQ; q++) if ((qleft[q] > 0 || qsave[q] > 0) && q_vnpu[q] == VID_W'(v)) act = 1'b1;
        if (act) active_cnt[v] <= active_cnt[v] + 1;
        if (done_evt[v]) n_done[v] <= n_done[v] + 1;
        if (err_evt[v])  n_err[v]  <= n_err[v] + 1;
      end
      n_harvest <= n_harvest + int'(harvest_evt);
      n_reclaim <= n_reclaim + int'(reclaim_evt);
      n_ts      <= n_ts + int'(ts_preempt_evt);
    end
  end

  always_comb begin
    for (int q = 0; q < NQ; q++) begin
      q_busy[q]      = qleft[q] > 0 || (q < NX && qsave[q] > 0);
      q_finish[q]    = qleft[q] == 1;
      q_ng[q]        = qleft[q] == 1 && ngat[qpc[q]] >= 0;
      q_ng_target[q] = GRP_W'(ngat[qpc[q]]);
    end
    for (int q = 0; q < NX; q++) begin
      q_save_done[q] = qsave[q] == 1;
      q_save_pc[q]   = qpc[q] + PC_W'(1);
      q_save_regs[q] = '0;
      q_save_regs[q][1] = XLEN'(qpc[q]);
      q_save_regs[q][2] = 32'hCAFE;
    end
  end

  function automatic tbl_entry_t ent(int pc);
    tbl_entry_t e;
    e.valid = 1'b1; e.pc = PC_W'(pc);
    return e;
  endfunction

  task automatic clear_all();
    for (int v = 0; v < NUM_VNPU; v++) for (int g = 0; g < 2**GRP_W; g++) table_m[v][g] = '0;
    for (int p = 0; p < 2**PC_W; p++) begin runtime[p] = 10; ngat[p] = -1; finishes[p] = 0; starts[p] = 0; end
  endtask

  task automatic wait_end(int v, int limit);
    int n = 0;
    while (!(vstate[v] == VS_DONE || vstate[v] == VS_ERROR) && n < limit) begin @(negedge clk); n++; end
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; launch = '0; fault = '0; mode = MODE_SPATIAL;
    alloc_me = {4'd0, 4'd1, 4'd2, 4'd2}; prio = {4'd1, 4'd1, 4'd1, 4'd1};
    q_vnpu = '0; q_idx = '0;
    for (int q = 0; q < NQ; q++) begin qpc[q] = 0; qgrp[q] = 0; end
    clear_all();
    // vNPU0: group 0 with four ME uTOps (pc 10..13), long
    for (int e = 0; e < 4; e++) begin table_m[0][0][e] = ent(10 + e); runtime[10 + e] = 200; end
    // vNPU1: group 0: ME uTOp pc 20 (50 cycles) + VE uTOp pc 30; group 1: two ME uTOps
    // pc 21, 22, pc 21 jumps to group 3; group 2: pc 99 (must not run); group 3: null
    table_m[1][0][0] = ent(20); runtime[20] = 50;
    table_m[1][0][NX] = ent(30); runtime[30] = 20;
    table_m[1][1][0] = ent(21); table_m[1][1][1] = ent(22); runtime[21] = 60; runtime[22] = 60;
    ngat[21] = 3;
    table_m[1][2][0] = ent(99);
    // vNPU2: group 0: two ME uTOps with different nextGroup targets
    table_m[2][0][0] = ent(40); table_m[2][0][1] = ent(41);
    runtime[40] = 300; runtime[41] = 300; ngat[40] = 1; ngat[41] = 2;
    table_m[2][0][2] = ent(42); runtime[42] = 1500;    // still running at the error
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    launch = 4'b0001; @(negedge clk); launch = 4'b0010; @(negedge clk); launch = '0;
    wait_end(0, 3000); wait_end(1, 3000);
    checks++; if (vstate[0] != VS_DONE || vstate[1] != VS_DONE) begin failures++; $display("states %0d %0d", vstate[0], vstate[1]); end
    checks++; if (n_done[0] != 1 || n_done[1] != 1) failures++;
    for (int p = 10; p <= 13; p++) begin checks++; if (finishes[p] != 1) begin failures++; $display("pc %0d finished %0d", p, finishes[p]); end end
    foreach (finishes[p]) if (p == 20 || p == 30 || p == 21 || p == 22) begin checks++; if (finishes[p] != 1) failures++; end
    checks++; if (starts[99] != 0) failures++;
    checks++; if (n_harvest < 1 || max_v0 < 3) begin failures++; $display("harvest %0d max %0d", n_harvest, max_v0); end
    checks++; if (n_reclaim < 1) begin failures++; $display("no reclaim"); end
    checks++; if (resumed_ok < 1) begin failures++; $display("no resume"); end
    // vNPU2: conflicting nextGroup
    launch = 4'b0100; @(negedge clk); launch = '0;
    wait_end(2, 3000);
    checks++; if (vstate[2] != VS_ERROR || n_err[2] != 1) failures++;
    // relaunch while uTOp 42 still runs: ignored; after it finished: accepted
    launch = 4'b0100; @(negedge clk); launch = '0; repeat (2) @(negedge clk);
    checks++; if (vstate[2] != VS_ERROR) begin failures++; $display("launch while draining accepted"); end
    while (finishes[42] == 0) @(negedge clk);
    @(negedge clk);
    launch = 4'b0100; @(negedge clk); launch = '0; @(negedge clk);
    checks++; if (vstate[2] == VS_ERROR || vstate[2] == VS_IDLE) begin failures++; $display("relaunch refused"); end
    wait_end(2, 3000);
    checks++; if (vstate[2] != VS_ERROR || n_err[2] != 2) failures++;
    while (finishes[42] != 2) @(negedge clk);
    // Temporal sharing
    repeat (400) @(negedge clk);
    mode = MODE_TEMPORAL;
    clear_all();
    for (int g = 0; g < 2; g++)
      for (int e = 0; e < NX; e++) begin table_m[0][g][e] = ent(100 + 4*g + e); runtime[100 + 4*g + e] = 400; end
    for (int e = 0; e < 2; e++) begin table_m[1][0][e] = ent(150 + e); runtime[150 + e] = 100; end
    launch = 4'b0001; @(negedge clk); launch = '0;
    repeat (150) @(negedge clk);
    launch = 4'b0010; @(negedge clk); launch = '0;
    wait_end(1, 5000); wait_end(0, 8000);
    checks++; if (vstate[0] != VS_DONE || vstate[1] != VS_DONE) failures++;
    checks++; if (n_ts < 1) begin failures++; $display("no temporal preemption"); end
    for (int p = 100; p < 108; p++) begin checks++; if (finishes[p] != 1) failures++; end
    for (int p = 150; p < 152; p++) begin checks++; if (finishes[p] != 1) failures++; end
    $display("harvest %0d reclaim %0d ts_preempt %0d", n_harvest, n_reclaim, n_ts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
