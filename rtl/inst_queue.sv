// inst_queue: one uTOp instruction queue with its fetch unit.
//
// The core has NX ME-uTOp queues (IS_ME = 1), each bound to one ME, and NY
// VE-uTOp queues (IS_ME = 0). The uTOp scheduler starts a uTOp in an idle
// queue with `start` (vNPU, group, uTOp index, start PC and scalar registers,
// which are zero for a new uTOp and the saved values for a preempted one).
//
// Fetch: the queue reads the instruction memory one instruction per cycle
// ahead of execution (registered read, one read in flight) into a FIFO of
// DEPTH entries.
//
// Issue: the head instruction's operations are offered at once. The ME
// operation goes straight to the queue's ME (me_valid/me_ready). Each
// non-nop VE slot raises ve_req[slot]; the operation scheduler answers with
// ve_grant. Operations of one instruction may issue over several cycles; the
// instruction retires in the cycle its last operation issues (or at once when
// it has none) and its misc slot executes then:
//   uTop.finish      end of the uTOp: finish_evt, queue idle
//   uTop.nextGroup   ng_evt with the group index held in %rs
//   uTop.group/index write the current group / uTOp index to %rd
//   li, addi, beq, bne, blt, sld, sst: scalar operations (sld/sst use the
//   vNPU's scalar SRAM words). A taken branch flushes the FIFO and refetches.
// The next instruction's operations become ready the cycle after.
//
// Preemption (ME queues): on preempt_req the queue finishes the head
// instruction if it is partly issued, then stops, drops what it fetched and
// spends PREEMPT_LAT cycles with me_ctx_save high while the ME's partial sums
// and weights are written back. It then pulses save_done with the PC of the
// first unexecuted instruction and its scalar registers and goes idle.
//
// The queue/fetch split, the ME direct issue, the partial issue of an
// instruction's VE operations and the 256-cycle save follow the paper; the
// FIFO depth, the one-read-in-flight fetch, the scalar operations and the
// retire-time execution of the misc slot are this design's choices.
module inst_queue
  import neu_pkg::*;
#(
  parameter bit IS_ME       = 1'b1,
  parameter int DEPTH       = 4,
  parameter int PREEMPT_LAT = 256
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // start a uTOp
  input  logic                   start,
  input  logic [VID_W-1:0]       start_vnpu,
  input  logic [GRP_W-1:0]       start_group,
  input  logic [IDX_W-1:0]       start_idx,
  input  logic [PC_W-1:0]        start_pc,
  input  regfile_t               start_regs,
  output logic                   busy,        // running or saving
  output logic                   running,
  output logic [VID_W-1:0]       vnpu,
  output logic [IDX_W-1:0]       idx,
  // instruction memory
  output logic                   imem_rd_en,
  output logic [IMEM_AW-1:0]     imem_rd_addr,
  input  instr_t                 imem_rd_data,
  // ME issue
  output logic                   me_valid,
  output me_slot_t               me_op,
  input  logic                   me_ready,
  output logic                   me_ctx_save,
  // VE issue through the operation scheduler
  output logic [NY-1:0]          ve_req,
  output ve_slot_t [NY-1:0]      ve_ops,
  input  logic [NY-1:0]          ve_grant,
  // scalar SRAM
  output logic                   ss_wr,
  output logic [VID_W+SS_AW-1:0] ss_addr,
  output logic [XLEN-1:0]        ss_wdata,
  input  logic [XLEN-1:0]        ss_rdata,
  // events to the uTOp scheduler
  output logic                   finish_evt,
  output logic                   ng_evt,
  output logic [GRP_W-1:0]       ng_target,
  // preemption
  input  logic                   preempt_req,
  output logic                   save_done,
  output logic [PC_W-1:0]        save_pc,
  output regfile_t               save_regs
);
  typedef enum logic [1:0] {Q_IDLE, Q_RUN, Q_SAVE} q_state_e;

  localparam int PTR_W = $clog2(DEPTH);
  localparam int CNT_W = $clog2(DEPTH + 1);
  localparam int LAT_W = $clog2(PREEMPT_LAT + 1);

  q_state_e          state;
  logic [GRP_W-1:0]  group;
  logic [PC_W-1:0]   exec_pc;    // PC of the head (next instruction to retire)
  logic [PC_W-1:0]   fetch_pc;
  logic              inflight;   // a read issued last cycle returns now
  instr_t            fifo [DEPTH];
  logic [PTR_W-1:0]  rd_ptr, wr_ptr;
  logic [CNT_W-1:0]  count;
  regfile_t          regs;
  logic              me_issued;
  logic [NY-1:0]     ve_issued;
  logic              preempt_pend;
  logic [LAT_W-1:0]  save_cnt;

  instr_t            head;
  logic              head_valid, partial, stopping;
  logic              me_need, me_fire, retire;
  logic [NY-1:0]     ve_need;
  logic              redirect, finish_now;
  logic [PC_W-1:0]   redirect_pc;
  logic              rd_we;
  logic [REG_W-1:0]  rd_idx;
  logic [XLEN-1:0]   rd_val;
  logic [XLEN-1:0]   rs_val, rdv_val, imm_sx;
  logic              push, fetch;

  assign busy    = (state != Q_IDLE);
  assign running = (state == Q_RUN);
  assign head    = fifo[rd_ptr];
  assign head_valid = running && (count != '0);
  assign partial = me_issued || (ve_issued != '0);
  assign stopping = running && preempt_pend && !partial;

  always_comb begin
    me_need = IS_ME && head.me.op != ME_NOP && !me_issued;
    for (int s = 0; s < NY; s++)
      ve_need[s] = head.ve[s].op != VE_NOP && !ve_issued[s];
  end

  assign me_op      = head.me;
  assign me_valid   = head_valid && !stopping && me_need;
  assign me_fire    = me_valid && me_ready;
  assign ve_ops     = head.ve;
  assign ve_req     = (head_valid && !stopping) ? ve_need : '0;
  assign retire     = head_valid && !stopping && (!me_need || me_fire) &&
                      ((ve_need & ~ve_grant) == '0);

  // Misc slot, executed at retire.
  assign rs_val  = regs[head.misc.rs];
  assign rdv_val = regs[head.misc.rd];
  assign imm_sx  = XLEN'(signed'(head.misc.imm));
  assign ss_addr = {vnpu, head.misc.imm[SS_AW-1:0]};
  assign ss_wdata = rs_val;
  assign ss_wr   = retire && head.misc.op == MI_SST;

  always_comb begin
    redirect    = 1'b0;
    redirect_pc = exec_pc + PC_W'(1);
    finish_now  = 1'b0;
    rd_we       = 1'b0;
    rd_idx      = head.misc.rd;
    rd_val      = '0;
    ng_evt      = 1'b0;
    ng_target   = rs_val[GRP_W-1:0];
    if (retire) begin
      unique case (head.misc.op)
        MI_FINISH:    finish_now = 1'b1;
        MI_NEXTGROUP: ng_evt = 1'b1;
        MI_GROUP:     begin rd_we = 1'b1; rd_val = XLEN'(group); end
        MI_INDEX:     begin rd_we = 1'b1; rd_val = XLEN'(idx); end
        MI_LI:        begin rd_we = 1'b1; rd_val = imm_sx; end
        MI_ADDI:      begin rd_we = 1'b1; rd_val = rs_val + imm_sx; end
        MI_BEQ:       redirect = (rdv_val == rs_val);
        MI_BNE:       redirect = (rdv_val != rs_val);
        MI_BLT:       redirect = ($signed(rdv_val) < $signed(rs_val));
        MI_SLD:       begin rd_we = 1'b1; rd_val = ss_rdata; end
        default:      ;
      endcase
      if (redirect) redirect_pc = exec_pc + head.misc.imm[PC_W-1:0];
    end
  end

  assign finish_evt = finish_now;

  // Fetch.
  assign push  = running && inflight && !redirect && !finish_now && !stopping;
  assign fetch = running && !preempt_pend && !redirect && !finish_now &&
                 (32'(count) + 32'(inflight) < DEPTH);
  assign imem_rd_en   = fetch;
  assign imem_rd_addr = {vnpu, fetch_pc};

  assign me_ctx_save = (state == Q_SAVE);
  assign save_done   = (state == Q_SAVE) && (save_cnt == LAT_W'(PREEMPT_LAT - 1));
  assign save_pc     = exec_pc;
  assign save_regs   = regs;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= Q_IDLE;
      vnpu         <= '0;
      group        <= '0;
      idx          <= '0;
      exec_pc      <= '0;
      fetch_pc     <= '0;
      inflight     <= 1'b0;
      rd_ptr       <= '0;
      wr_ptr       <= '0;
      count        <= '0;
      regs         <= '0;
      me_issued    <= 1'b0;
      ve_issued    <= '0;
      preempt_pend <= 1'b0;
      save_cnt     <= '0;
    end else begin
      unique case (state)
        Q_IDLE: begin
          preempt_pend <= 1'b0;
          if (start) begin
            state     <= Q_RUN;
            vnpu      <= start_vnpu;
            group     <= start_group;
            idx       <= start_idx;
            exec_pc   <= start_pc;
            fetch_pc  <= start_pc;
            regs      <= start_regs;
            regs[0]   <= '0;
            inflight  <= 1'b0;
            rd_ptr    <= '0;
            wr_ptr    <= '0;
            count     <= '0;
            me_issued <= 1'b0;
            ve_issued <= '0;
          end
        end
        Q_RUN: begin
          if (preempt_req && IS_ME) preempt_pend <= 1'b1;
          if (stopping) begin
            state    <= Q_SAVE;
            save_cnt <= '0;
            inflight <= 1'b0;
            count    <= '0;
          end else if (finish_now) begin
            state    <= Q_IDLE;
            inflight <= 1'b0;
            count    <= '0;
            me_issued <= 1'b0;
            ve_issued <= '0;
          end else begin
            if (rd_we && rd_idx != '0) regs[rd_idx] <= rd_val;
            if (retire) begin
              me_issued <= 1'b0;
              ve_issued <= '0;
              exec_pc   <= redirect_pc;
            end else begin
              if (me_fire) me_issued <= 1'b1;
              ve_issued <= ve_issued | (ve_req & ve_grant);
            end
            if (redirect) begin
              count    <= '0;
              inflight <= 1'b0;
              rd_ptr   <= '0;
              wr_ptr   <= '0;
              fetch_pc <= redirect_pc;
            end else begin
              inflight <= fetch;
              if (fetch) fetch_pc <= fetch_pc + PC_W'(1);
              if (push) begin
                fifo[wr_ptr] <= imem_rd_data;
                wr_ptr <= (32'(wr_ptr) == DEPTH - 1) ? '0 : wr_ptr + PTR_W'(1);
              end
              if (retire) rd_ptr <= (32'(rd_ptr) == DEPTH - 1) ? '0 : rd_ptr + PTR_W'(1);
              count <= count + CNT_W'(push) - CNT_W'(retire);
            end
          end
        end
        Q_SAVE: begin
          save_cnt <= save_cnt + LAT_W'(1);
          if (save_done) state <= Q_IDLE;
        end
        default: state <= Q_IDLE;
      endcase
    end
  end

  // A retired instruction has issued every operation it holds.
  a_no_issue_idle: assert property (@(posedge clk) disable iff (!rst_n)
    !running |-> (!me_valid && ve_req == '0));
  a_grant_req: assert property (@(posedge clk) disable iff (!rst_n)
    (ve_grant & ~ve_req) == '0);
endmodule
