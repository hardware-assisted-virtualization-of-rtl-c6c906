// utop_scheduler: walks each vNPU's uTOp execution table and places uTOps
// in instruction queues.
//
// Groups: a launched vNPU reads row 0 of its execution table. Every non-null
// entry becomes a pending uTOp. All uTOps of a group may run at once, in any
// order; when every one has finished the vNPU moves on to group g+1, or to
// the group named by uTop.nextGroup. Two different nextGroup targets in one
// group are an exception (vNPU state ERROR, err_evt). A page fault reported
// for the vNPU also ends it with ERROR; uTOps it still runs then finish on
// their own, and a launch is ignored until they have. An all-null row ends the program
// (state DONE, done_evt). Rows are read one cycle ahead (state LOAD).
//
// ME uTOps, spatial-isolated mode (mode = MODE_SPATIAL). A vNPU with fewer
// running ME uTOps than its allocation (alloc_me) and with a pending ME uTOp
// is "entitled". An entitled vNPU gets a free ME queue; if none is free, a
// queue running a harvested uTOp (one whose vNPU runs more ME uTOps than it
// was allocated) is preempted to reclaim the ME (reclaim_evt). When no vNPU
// is entitled, a free ME queue goes to any vNPU with a pending ME uTOp,
// i.e. it is harvested (harvest_evt). Entitled and harvesting vNPUs are
// served round-robin.
//
// ME uTOps, temporal-sharing mode. The vNPU with a pending ME uTOp and the
// least priority-weighted active time (active_cnt / prio) gets a free ME
// queue. If none is free and it trails the owner w of a running uTOp by more
// than TS_SLICE cycles, ((act_u + TS_SLICE) * prio_w < act_w * prio_u), that
// uTOp is preempted (ts_preempt_evt).
//
// VE uTOps always run when a VE queue is free (round-robin over vNPUs).
// At most one ME start, one VE start and one preemption are made per cycle,
// and only one preemption is in progress at a time. A preempted uTOp returns
// to pending with the PC and scalar registers its queue saved and resumes
// from there in whichever ME queue it gets next.
//
// The group semantics, the spatial policy (full use of the allocation,
// harvesting of unused MEs, reclaim by preemption, VE uTOps always run) and
// the use of an active-cycle counter and priorities in temporal mode follow
// the paper; round-robin order, one start per cycle, the exact weighting
// formula and TS_SLICE are this design's choices.
module utop_scheduler
  import neu_pkg::*;
#(
  parameter int TS_SLICE = 1024
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  sched_mode_e                       mode,
  input  logic [NUM_VNPU-1:0]               launch,
  input  logic [NUM_VNPU-1:0][3:0]          alloc_me,
  input  logic [NUM_VNPU-1:0][3:0]          prio,
  input  logic [NUM_VNPU-1:0][31:0]         active_cnt,
  input  logic [NUM_VNPU-1:0]               fault,
  output vnpu_state_e [NUM_VNPU-1:0]        vstate,
  output logic [NUM_VNPU-1:0]               done_evt,
  output logic [NUM_VNPU-1:0]               err_evt,
  // execution table
  output logic [NUM_VNPU-1:0]               tbl_rd_en,
  output logic [NUM_VNPU-1:0][GRP_W-1:0]    tbl_rd_group,
  input  tbl_row_t [NUM_VNPU-1:0]           tbl_row,
  // instruction queues: 0..NX-1 ME queues, NX..NQ-1 VE queues
  input  logic [NQ-1:0]                     q_busy,
  input  logic [NQ-1:0][VID_W-1:0]          q_vnpu,
  input  logic [NQ-1:0][IDX_W-1:0]          q_idx,
  input  logic [NQ-1:0]                     q_finish,
  input  logic [NQ-1:0]                     q_ng,
  input  logic [NQ-1:0][GRP_W-1:0]          q_ng_target,
  input  logic [NX-1:0]                     q_save_done,
  input  logic [NX-1:0][PC_W-1:0]           q_save_pc,
  input  regfile_t [NX-1:0]                 q_save_regs,
  output logic [NQ-1:0]                     q_start,
  output logic [VID_W-1:0]                  me_st_vnpu,
  output logic [GRP_W-1:0]                  me_st_group,
  output logic [IDX_W-1:0]                  me_st_idx,
  output logic [PC_W-1:0]                   me_st_pc,
  output regfile_t                          me_st_regs,
  output logic [VID_W-1:0]                  ve_st_vnpu,
  output logic [GRP_W-1:0]                  ve_st_group,
  output logic [PC_W-1:0]                   ve_st_pc,
  output logic [NX-1:0]                     q_preempt,
  // mechanism events
  output logic                              harvest_evt,
  output logic                              reclaim_evt,
  output logic                              ts_preempt_evt
);
  localparam int CW = 4;

  vnpu_state_e vst   [NUM_VNPU];
  logic [GRP_W-1:0] grp [NUM_VNPU];
  utop_state_e ust   [NUM_VNPU][NENT];
  logic [PC_W-1:0] upc [NUM_VNPU][NENT];
  regfile_t uregs    [NUM_VNPU][NX];
  logic ngv          [NUM_VNPU];
  logic [GRP_W-1:0] ng [NUM_VNPU];
  logic [NX-1:0] pq;
  logic [VID_W-1:0] rr_me, rr_ve;

  vnpu_state_e vst_n [NUM_VNPU];
  logic [GRP_W-1:0] grp_n [NUM_VNPU];
  utop_state_e ust_n [NUM_VNPU][NENT];
  logic [PC_W-1:0] upc_n [NUM_VNPU][NENT];
  regfile_t uregs_n  [NUM_VNPU][NX];
  logic ngv_n        [NUM_VNPU];
  logic [GRP_W-1:0] ng_n [NUM_VNPU];
  logic [NX-1:0] pq_n;
  logic [VID_W-1:0] rr_me_n, rr_ve_n;

  logic [CW-1:0] ready [NUM_VNPU];
  logic [CW-1:0] run   [NUM_VNPU];

  for (genvar v = 0; v < NUM_VNPU; v++) begin : g_vst
    assign vstate[v] = vst[v];
  end

  // Weighted comparison: act_a/prio_a < act_b/prio_b, with prio 0 read as 1.
  function automatic logic lighter(input logic [31:0] act_a, input logic [3:0] pa_in,
                                   input logic [31:0] act_b, input logic [3:0] pb_in,
                                   input logic [31:0] margin);
    logic [3:0] pa, pb;
    logic [36:0] lhs, rhs;
    pa  = (pa_in == '0) ? 4'd1 : pa_in;
    pb  = (pb_in == '0) ? 4'd1 : pb_in;
    lhs = (37'(act_a) + 37'(margin)) * 37'(pb);
    rhs = 37'(act_b) * 37'(pa);
    return lhs < rhs;
  endfunction

  always_comb begin
    automatic logic          found, have_free, preempting, done_q, any_valid;
    automatic logic [NUM_VNPU-1:0] draining;
    automatic int            u, free_q, e_sel, fv;
    automatic logic [VID_W-1:0] w;

    vst_n   = vst;
    grp_n   = grp;
    ust_n   = ust;
    upc_n   = upc;
    uregs_n = uregs;
    ngv_n   = ngv;
    ng_n    = ng;
    rr_me_n = rr_me;
    rr_ve_n = rr_ve;
    done_evt = '0;
    err_evt  = '0;
    tbl_rd_en = '0;
    for (int v = 0; v < NUM_VNPU; v++) tbl_rd_group[v] = grp[v];
    q_start     = '0;
    q_preempt   = '0;
    me_st_vnpu  = '0;
    me_st_group = '0;
    me_st_idx   = '0;
    me_st_pc    = '0;
    me_st_regs  = '0;
    ve_st_vnpu  = '0;
    ve_st_group = '0;
    ve_st_pc    = '0;
    harvest_evt = 1'b0;
    reclaim_evt = 1'b0;
    ts_preempt_evt = 1'b0;

    // 1. Events from the queues.
    for (int q = 0; q < NQ; q++) begin
      if (q_finish[q]) ust_n[q_vnpu[q]][q_idx[q]] = U_DONE;
      if (q_ng[q]) begin
        if (ngv_n[q_vnpu[q]] && ng_n[q_vnpu[q]] != q_ng_target[q]) begin
          if (vst[q_vnpu[q]] == VS_RUN) begin
            vst_n[q_vnpu[q]]   = VS_ERROR;
            err_evt[q_vnpu[q]] = 1'b1;
          end
        end else begin
          ngv_n[q_vnpu[q]] = 1'b1;
          ng_n[q_vnpu[q]]  = q_ng_target[q];
        end
      end
    end
    for (int q = 0; q < NX; q++) begin
      if (q_save_done[q]) begin
        ust_n[q_vnpu[q]][q_idx[q]]   = U_PEND;
        upc_n[q_vnpu[q]][q_idx[q]]   = q_save_pc[q];
        uregs_n[q_vnpu[q]][q_idx[q][$clog2(NX)-1:0]] = q_save_regs[q];
      end
    end

    // 2. Group sequencing per vNPU. A vNPU whose queues still run uTOps of
    // an ended (ERROR) run ignores launch until they have finished.
    draining = '0;
    for (int q = 0; q < NQ; q++) if (q_busy[q]) draining[q_vnpu[q]] = 1'b1;
    for (int v = 0; v < NUM_VNPU; v++) begin
      unique case (vst[v])
        VS_LOAD: begin
          any_valid = 1'b0;
          for (int e = 0; e < NENT; e++) any_valid |= tbl_row[v][e].valid;
          if (!any_valid) begin
            vst_n[v]    = VS_DONE;
            done_evt[v] = 1'b1;
          end else begin
            for (int e = 0; e < NENT; e++) begin
              ust_n[v][e] = tbl_row[v][e].valid ? U_PEND : U_NULL;
              upc_n[v][e] = tbl_row[v][e].pc;
            end
            for (int e = 0; e < NX; e++) uregs_n[v][e] = '0;
            ngv_n[v] = 1'b0;
            vst_n[v] = VS_RUN;
          end
        end
        VS_RUN: begin
          if (fault[v]) begin
            vst_n[v]   = VS_ERROR;
            err_evt[v] = 1'b1;
          end else if (vst_n[v] == VS_RUN) begin
            done_q = 1'b1;
            for (int e = 0; e < NENT; e++)
              if (ust_n[v][e] == U_PEND || ust_n[v][e] == U_RUN) done_q = 1'b0;
            if (done_q) begin
              grp_n[v]        = ngv_n[v] ? ng_n[v] : grp[v] + GRP_W'(1);
              tbl_rd_en[v]    = 1'b1;
              tbl_rd_group[v] = grp_n[v];
              vst_n[v]        = VS_LOAD;
            end
          end
        end
        default: begin   // IDLE, DONE, ERROR
          if (launch[v] && !draining[v]) begin
            grp_n[v]        = '0;
            tbl_rd_en[v]    = 1'b1;
            tbl_rd_group[v] = '0;
            ngv_n[v]        = 1'b0;
            vst_n[v]        = VS_LOAD;
          end
        end
      endcase
    end

    // 3. ME uTOp placement.
    for (int v = 0; v < NUM_VNPU; v++) begin
      ready[v] = '0;
      run[v]   = '0;
      if (vst[v] == VS_RUN)
        for (int e = 0; e < NX; e++) if (ust[v][e] == U_PEND) ready[v] = ready[v] + CW'(1);
    end
    have_free  = 1'b0;
    free_q     = 0;
    preempting = |pq;
    for (int q = NX - 1; q >= 0; q--) begin
      if (q_busy[q] && !pq[q]) run[q_vnpu[q]] = run[q_vnpu[q]] + CW'(1);
      if (!q_busy[q] && !pq[q]) begin have_free = 1'b1; free_q = q; end
    end

    found = 1'b0;
    u     = 0;
    if (mode == MODE_SPATIAL) begin
      for (int k = 0; k < NUM_VNPU; k++) begin
        automatic int v = (int'(rr_me) + k) % NUM_VNPU;
        if (!found && ready[v] != '0 && run[v] < alloc_me[v]) begin found = 1'b1; u = v; end
      end
      if (found) begin
        if (!have_free && !preempting) begin
          for (int q = 0; q < NX; q++) begin
            w = q_vnpu[q];
            if (q_preempt == '0 && q_busy[q] && !pq[q] && int'(w) != u && run[w] > alloc_me[w]) begin
              q_preempt[q] = 1'b1;
              reclaim_evt  = 1'b1;
            end
          end
        end
      end else begin
        for (int k = 0; k < NUM_VNPU; k++) begin
          automatic int v = (int'(rr_me) + k) % NUM_VNPU;
          if (!found && ready[v] != '0) begin found = 1'b1; u = v; end
        end
        harvest_evt = found && have_free;
      end
    end else begin
      for (int v = 0; v < NUM_VNPU; v++) begin
        if (ready[v] != '0 && (!found || lighter(active_cnt[v], prio[v],
                                                 active_cnt[u], prio[u], 32'd0))) begin
          found = 1'b1;
          u = v;
        end
      end
      if (found && !have_free && !preempting) begin
        for (int q = 0; q < NX; q++) begin
          w = q_vnpu[q];
          if (q_preempt == '0 && q_busy[q] && !pq[q] && int'(w) != u &&
              lighter(active_cnt[u], prio[u], active_cnt[w], prio[w], 32'(TS_SLICE))) begin
            q_preempt[q]   = 1'b1;
            ts_preempt_evt = 1'b1;
          end
        end
      end
    end

    if (found && have_free) begin
      e_sel = 0;
      for (int e = NX - 1; e >= 0; e--) if (ust[u][e] == U_PEND) e_sel = e;
      q_start[free_q]  = 1'b1;
      me_st_vnpu       = VID_W'(u);
      me_st_group      = grp[u];
      me_st_idx        = IDX_W'(e_sel);
      me_st_pc         = upc[u][e_sel];
      me_st_regs       = uregs[u][e_sel];
      ust_n[u][e_sel]  = U_RUN;
      rr_me_n          = VID_W'(u + 1);
    end

    for (int q = 0; q < NX; q++)
      pq_n[q] = (pq[q] && q_busy[q] && !q_save_done[q]) || q_preempt[q];

    // 4. VE uTOp placement.
    fv = -1;
    for (int q = NQ - 1; q >= NX; q--) if (!q_busy[q]) fv = q;
    if (fv >= 0) begin
      found = 1'b0;
      for (int k = 0; k < NUM_VNPU; k++) begin
        automatic int v = (int'(rr_ve) + k) % NUM_VNPU;
        if (!found && vst[v] == VS_RUN && ust[v][NX] == U_PEND) begin
          found         = 1'b1;
          q_start[fv]   = 1'b1;
          ve_st_vnpu    = VID_W'(v);
          ve_st_group   = grp[v];
          ve_st_pc      = upc[v][NX];
          ust_n[v][NX]  = U_RUN;
          rr_ve_n       = VID_W'(v + 1);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < NUM_VNPU; v++) begin
        vst[v] <= VS_IDLE;
        grp[v] <= '0;
        ngv[v] <= 1'b0;
        ng[v]  <= '0;
        for (int e = 0; e < NENT; e++) begin
          ust[v][e] <= U_NULL;
          upc[v][e] <= '0;
        end
        for (int e = 0; e < NX; e++) uregs[v][e] <= '0;
      end
      pq    <= '0;
      rr_me <= '0;
      rr_ve <= '0;
    end else begin
      vst   <= vst_n;
      grp   <= grp_n;
      ust   <= ust_n;
      upc   <= upc_n;
      uregs <= uregs_n;
      ngv   <= ngv_n;
      ng    <= ng_n;
      pq    <= pq_n;
      rr_me <= rr_me_n;
      rr_ve <= rr_ve_n;
    end
  end

  // At most one ME queue and one VE queue are started per cycle, and only idle ones.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) (q_start & q_busy) == '0);
  a_one_me_start: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(q_start[NX-1:0]));
endmodule
