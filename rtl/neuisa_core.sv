// neuisa_core: front end of an NPU core that runs several virtual NPUs
// (vNPUs) at once on shared matrix engines (MEs) and vector engines (VEs).
//
// Programs are written in NeuISA: each tensor operator is split into
// micro-tensor operators (uTOps), independent VLIW instruction streams that
// each drive one ME (ME uTOp) or only VEs (VE uTOp). uTOps are grouped; a
// vNPU's execution table lists, per group, the start PCs of its uTOps. The
// core decides at run time how many ME uTOps of each vNPU run, so a vNPU can
// use MEs and VEs that a co-located vNPU leaves idle (harvesting) and get
// them back by preemption when the owner needs them.
//
// Blocks (one module each): vnpu_context (configuration, status, active
// counters), imem (code snippets), utop_exec_table, utop_scheduler,
// NX ME-uTOp and NY VE-uTOp inst_queue instances (fetch + queue each),
// op_scheduler (VE operation selection), ve_dispatch (operation routing and
// SRAM address translation), seg_xlate for SRAM and for HBM, and
// scalar_sram.
//
// Host interface: a 32-bit register port (mmio_*), 16-bit address:
//   0x0xxx  vNPU context registers (see vnpu_context)
//   0x1xxx  execution table, addr[10:0] = {vnpu, group, entry}, data[8:0] = {valid, pc}
//   0x2xxx  SRAM segment table, addr[7:0] = {vnpu, vseg}, data[6:0] = {valid, pseg}
//   0x3xxx  HBM segment table, same layout
//   0x4xxx  scalar SRAM, addr[5:0] = {vnpu, word}
//   0x8000+ instruction memory, addr[12:0] = {vnpu, pc, word}
// Reads return the context registers, segment tables and scalar SRAM words;
// instruction memory and execution table are write-only.
// Engine interface: ME q receives its operations on me_valid/me_op (with the
// issuing vNPU) and accepts them with me_ready; me_ctx_save is high while a
// preempted uTOp's ME state is written back. VE p receives operations on
// ve_valid/ve_op/ve_vnpu (VEs always accept; addresses are physical). The DMA
// engine translates HBM addresses through dma_*. The *_evt outputs pulse when
// the mechanism they name happens.
// The 30 offset bits of dma_paddr are dma_vaddr's offset bits: segment
// translation only replaces the segment number.
// The VE-uTOp queues are the same inst_queue module; their ME-side outputs
// (ME issue, context save) are left unconnected, as is every queue's
// `running` flag (the scheduler uses `busy`).
// The block structure follows the paper's front-end diagram; the host
// register map, the engine handshakes and all widths are this design's.
module neuisa_core
  import neu_pkg::*;
#(
  parameter int QDEPTH      = 4,
  parameter int PREEMPT_LAT = 256,
  parameter int TS_SLICE    = 1024
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host registers
  input  logic                          mmio_wr,
  input  logic [15:0]                   mmio_addr,
  input  logic [31:0]                   mmio_wdata,
  output logic [31:0]                   mmio_rdata,
  output logic [NUM_VNPU-1:0]           irq,
  // matrix engines
  output logic [NX-1:0]                 me_valid,
  output me_slot_t [NX-1:0]             me_op,
  output logic [NX-1:0][VID_W-1:0]      me_vnpu,
  input  logic [NX-1:0]                 me_ready,
  output logic [NX-1:0]                 me_ctx_save,
  // vector engines
  output logic [NY-1:0]                 ve_valid,
  output ve_slot_t [NY-1:0]             ve_op,
  output logic [NY-1:0][VID_W-1:0]      ve_vnpu,
  // DMA engine HBM translation
  input  logic [VID_W-1:0]              dma_vnpu,
  input  logic [HBM_VA_W-1:0]           dma_vaddr,
  output logic [HBM_VA_W-1:0]           dma_paddr,
  output logic                          dma_fault,
  // mechanism events
  output logic                          harvest_evt,
  output logic                          reclaim_evt,
  output logic                          ts_preempt_evt,
  output logic                          ve_harvest_evt,
  output logic [NUM_VNPU-1:0]           fault_evt,
  output logic [NUM_VNPU-1:0][3:0]      ve_given    // VEs used by each vNPU this cycle
);
  // ---------------------------------------------------------------- host decode
  logic is_imem, is_ctx, is_tbl, is_sseg, is_hseg, is_ss;
  assign is_imem = mmio_addr[15];
  assign is_ctx  = mmio_addr[15:12] == 4'h0;
  assign is_tbl  = mmio_addr[15:12] == 4'h1;
  assign is_sseg = mmio_addr[15:12] == 4'h2;
  assign is_hseg = mmio_addr[15:12] == 4'h3;
  assign is_ss   = mmio_addr[15:12] == 4'h4;

  // ---------------------------------------------------------------- contexts
  sched_mode_e                   mode;
  logic [NUM_VNPU-1:0]           launch, active, done_evt, err_evt;
  logic [NUM_VNPU-1:0][3:0]      alloc_me, alloc_ve, prio;
  logic [NUM_VNPU-1:0][31:0]     active_cnt;
  vnpu_state_e [NUM_VNPU-1:0]    vstate;
  logic [31:0]                   ctx_rdata;

  vnpu_context u_ctx (
    .clk, .rst_n,
    .wr_en(mmio_wr && is_ctx), .wr_addr(mmio_addr[11:0]), .wr_data(mmio_wdata),
    .rd_addr(mmio_addr[11:0]), .rd_data(ctx_rdata),
    .mode, .launch, .alloc_me, .alloc_ve, .prio, .active_cnt, .active,
    .vstate, .done_evt, .err_evt, .fault_evt, .irq
  );

  // ---------------------------------------------------------------- instruction memory
  logic [NQ-1:0]               im_rd_en;
  logic [NQ-1:0][IMEM_AW-1:0]  im_rd_addr;
  instr_t [NQ-1:0]             im_rd_data;

  imem u_imem (
    .clk,
    .wr_en(mmio_wr && is_imem), .wr_addr(mmio_addr[IMEM_AW+2:0]), .wr_data(mmio_wdata),
    .rd_en(im_rd_en), .rd_addr(im_rd_addr), .rd_data(im_rd_data)
  );

  // ---------------------------------------------------------------- execution table
  logic [NUM_VNPU-1:0]             tbl_rd_en;
  logic [NUM_VNPU-1:0][GRP_W-1:0]  tbl_rd_group;
  tbl_row_t [NUM_VNPU-1:0]         tbl_row;

  utop_exec_table u_tbl (
    .clk,
    .wr_en(mmio_wr && is_tbl), .wr_addr(mmio_addr[VID_W+GRP_W+IDX_W-1:0]),
    .wr_data(tbl_entry_t'(mmio_wdata[PC_W:0])),
    .rd_en(tbl_rd_en), .rd_group(tbl_rd_group), .rd_row(tbl_row)
  );

  // ---------------------------------------------------------------- scalar SRAM
  logic [NQ-1:0]                   ss_wr;
  logic [NQ-1:0][VID_W+SS_AW-1:0]  ss_addr;
  logic [NQ-1:0][XLEN-1:0]         ss_wdata, ss_rdata;
  logic [XLEN-1:0]                 ss_host_rdata;

  scalar_sram u_ss (
    .clk, .rst_n,
    .wr_en(ss_wr), .addr(ss_addr), .wr_data(ss_wdata), .rd_data(ss_rdata),
    .host_wr(mmio_wr && is_ss), .host_addr(mmio_addr[VID_W+SS_AW-1:0]),
    .host_wdata(mmio_wdata), .host_rdata(ss_host_rdata)
  );

  // ---------------------------------------------------------------- segment tables
  logic [NY-1:0][VID_W-1:0]      xl_vnpu;
  logic [NY-1:0][SRAM_VA_W-1:0]  xl_vaddr, xl_paddr;
  logic [NY-1:0]                 xl_fault;
  logic [SEG_W:0]                sseg_rdata, hseg_rdata;

  seg_xlate #(.NPORT(NY), .OFF_W(SRAM_OFF_W)) u_sram_seg (
    .clk, .rst_n,
    .wr_en(mmio_wr && is_sseg), .wr_addr(mmio_addr[VID_W+SEG_W-1:0]),
    .wr_data(mmio_wdata[SEG_W:0]), .rd_data(sseg_rdata),
    .vnpu(xl_vnpu), .vaddr(xl_vaddr), .paddr(xl_paddr), .fault(xl_fault)
  );

  seg_xlate #(.NPORT(1), .OFF_W(HBM_OFF_W)) u_hbm_seg (
    .clk, .rst_n,
    .wr_en(mmio_wr && is_hseg), .wr_addr(mmio_addr[VID_W+SEG_W-1:0]),
    .wr_data(mmio_wdata[SEG_W:0]), .rd_data(hseg_rdata),
    .vnpu(dma_vnpu), .vaddr(dma_vaddr), .paddr(dma_paddr), .fault(dma_fault)
  );

  always_comb begin
    mmio_rdata = '0;
    if (is_ctx)       mmio_rdata = ctx_rdata;
    else if (is_sseg) mmio_rdata = 32'(sseg_rdata);
    else if (is_hseg) mmio_rdata = 32'(hseg_rdata);
    else if (is_ss)   mmio_rdata = ss_host_rdata;
  end

  // ---------------------------------------------------------------- uTOp scheduler
  logic [NQ-1:0]               q_busy, q_running, q_finish, q_ng, q_start;
  logic [NQ-1:0][VID_W-1:0]    q_vnpu;
  logic [NQ-1:0][IDX_W-1:0]    q_idx;
  logic [NQ-1:0][GRP_W-1:0]    q_ng_target;
  logic [NX-1:0]               q_save_done, q_preempt;
  logic [NX-1:0][PC_W-1:0]     q_save_pc;
  regfile_t [NX-1:0]           q_save_regs;
  logic [VID_W-1:0]            me_st_vnpu, ve_st_vnpu;
  logic [GRP_W-1:0]            me_st_group, ve_st_group;
  logic [IDX_W-1:0]            me_st_idx;
  logic [PC_W-1:0]             me_st_pc, ve_st_pc;
  regfile_t                    me_st_regs;

  utop_scheduler #(.TS_SLICE(TS_SLICE)) u_usched (
    .clk, .rst_n, .mode, .launch, .alloc_me, .prio, .active_cnt, .fault(fault_evt),
    .vstate, .done_evt, .err_evt,
    .tbl_rd_en, .tbl_rd_group, .tbl_row,
    .q_busy, .q_vnpu, .q_idx, .q_finish, .q_ng, .q_ng_target,
    .q_save_done, .q_save_pc, .q_save_regs,
    .q_start, .me_st_vnpu, .me_st_group, .me_st_idx, .me_st_pc, .me_st_regs,
    .ve_st_vnpu, .ve_st_group, .ve_st_pc, .q_preempt,
    .harvest_evt, .reclaim_evt, .ts_preempt_evt
  );

  // ---------------------------------------------------------------- instruction queues
  logic [NQ-1:0][NY-1:0]  q_ve_req, q_ve_grant;
  ve_slot_t [NQ-1:0][NY-1:0] q_ve_ops;

  for (genvar q = 0; q < NQ; q++) begin : g_q
    localparam bit ME_Q = (q < NX);
    logic            iq_me_valid, iq_me_ready, iq_ctx_save, iq_save_done, iq_preempt;
    me_slot_t        iq_me_op;
    logic [PC_W-1:0] iq_save_pc;
    regfile_t        iq_save_regs;

    if (ME_Q) begin : g_me
      assign me_valid[q]    = iq_me_valid;
      assign me_op[q]       = iq_me_op;
      assign me_vnpu[q]     = q_vnpu[q];
      assign iq_me_ready    = me_ready[q];
      assign me_ctx_save[q] = iq_ctx_save;
      assign q_save_done[q] = iq_save_done;
      assign q_save_pc[q]   = iq_save_pc;
      assign q_save_regs[q] = iq_save_regs;
      assign iq_preempt     = q_preempt[q];
    end else begin : g_ve
      assign iq_me_ready = 1'b0;
      assign iq_preempt  = 1'b0;
    end

    inst_queue #(.IS_ME(ME_Q), .DEPTH(QDEPTH), .PREEMPT_LAT(PREEMPT_LAT)) u_q (
      .clk, .rst_n,
      .start(q_start[q]),
      .start_vnpu (ME_Q ? me_st_vnpu  : ve_st_vnpu),
      .start_group(ME_Q ? me_st_group : ve_st_group),
      .start_idx  (ME_Q ? me_st_idx   : IDX_W'(NX)),
      .start_pc   (ME_Q ? me_st_pc    : ve_st_pc),
      .start_regs (ME_Q ? me_st_regs  : regfile_t'('0)),
      .busy(q_busy[q]), .running(q_running[q]), .vnpu(q_vnpu[q]), .idx(q_idx[q]),
      .imem_rd_en(im_rd_en[q]), .imem_rd_addr(im_rd_addr[q]), .imem_rd_data(im_rd_data[q]),
      .me_valid(iq_me_valid), .me_op(iq_me_op), .me_ready(iq_me_ready), .me_ctx_save(iq_ctx_save),
      .ve_req(q_ve_req[q]), .ve_ops(q_ve_ops[q]), .ve_grant(q_ve_grant[q]),
      .ss_wr(ss_wr[q]), .ss_addr(ss_addr[q]), .ss_wdata(ss_wdata[q]), .ss_rdata(ss_rdata[q]),
      .finish_evt(q_finish[q]), .ng_evt(q_ng[q]), .ng_target(q_ng_target[q]),
      .preempt_req(iq_preempt), .save_done(iq_save_done), .save_pc(iq_save_pc),
      .save_regs(iq_save_regs)
    );
  end

  always_comb begin
    active = '0;
    for (int q = 0; q < NQ; q++) if (q_busy[q]) active[q_vnpu[q]] = 1'b1;
  end

  // ---------------------------------------------------------------- operation scheduler and dispatch
  logic [NY-1:0]              port_valid;
  logic [NY-1:0][QID_W-1:0]   port_q;
  logic [NY-1:0][SLOT_W-1:0]  port_s;

  op_scheduler u_osched (
    .clk, .rst_n, .mode, .alloc_ve,
    .q_req(q_ve_req), .q_vnpu, .q_grant(q_ve_grant),
    .port_valid, .port_q, .port_s, .ve_given, .ve_harvest_evt
  );

  ve_dispatch u_disp (
    .q_ops(q_ve_ops), .q_vnpu, .port_valid, .port_q, .port_s,
    .xl_vnpu, .xl_vaddr, .xl_paddr, .xl_fault,
    .ve_valid, .ve_op, .ve_vnpu, .fault_vnpu(fault_evt)
  );
endmodule
