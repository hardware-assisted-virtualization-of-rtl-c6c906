// tb_inst_queue: runs a small uTOp through one ME-uTOp queue: uTop.group,
// uTop.index, a six-iteration loop closed by blt whose instructions carry ME
// push/pop and VE operations, sst to the scalar SRAM, uTop.nextGroup and
// uTop.finish. The ME accepts at random and the VE grants are random, so
// operations of one instruction issue over several cycles. Checks the exact
// ME operation sequence, the VE operation count, the scalar SRAM results, the
// nextGroup target and the finish event. The uTOp is then run again and
// preempted part-way: the save must last PREEMPT_LAT cycles, and resuming
// from the saved PC and registers must give the same operation sequence with
// nothing lost or repeated.
module tb_inst_queue;
  import neu_pkg::*;
  import tb_asm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n;
  localparam int LAT = 8;

  logic start; logic [VID_W-1:0] start_vnpu; logic [GRP_W-1:0] start_group;
  logic [IDX_W-1:0] start_idx; logic [PC_W-1:0] start_pc; regfile_t start_regs;
  logic busy, running; logic [VID_W-1:0] vnpu; logic [IDX_W-1:0] idx;
  logic imem_rd_en; logic [IMEM_AW-1:0] imem_rd_addr; instr_t imem_rd_data;
  logic me_valid, me_ready, me_ctx_save; me_slot_t me_op;
  logic [NY-1:0] ve_req, ve_grant; ve_slot_t [NY-1:0] ve_ops;
  logic ss_wr; logic [VID_W+SS_AW-1:0] ss_addr; logic [XLEN-1:0] ss_wdata, ss_rdata;
  logic finish_evt, ng_evt; logic [GRP_W-1:0] ng_target;
  logic preempt_req, save_done; logic [PC_W-1:0] save_pc; regfile_t save_regs;

  inst_queue #(.IS_ME(1'b1), .DEPTH(4), .PREEMPT_LAT(LAT)) dut (.*);

  instr_t mem [2**IMEM_AW];
  always @(posedge clk) if (imem_rd_en) imem_rd_data <= mem[imem_rd_addr];

  logic [XLEN-1:0] ss [NUM_VNPU*SS_WORDS];
  assign ss_rdata = ss[ss_addr];
  always @(posedge clk) if (ss_wr) ss[ss_addr] <= ss_wdata;

  // ME and VE behaviour
  int me_seq [$];
  int ve_count = 0, finishes = 0, ngs = 0, save_cycles = 0, saves = 0;
  logic [GRP_W-1:0] last_ng;
  always @(posedge clk) if (rst_n) begin
    me_ready <= 1'($urandom);
    if (me_valid && me_ready) me_seq.push_back(int'(me_op.op) * 100 + int'(me_op.vreg));
    ve_count <= ve_count + $countones(ve_req & ve_grant);
    if (finish_evt) finishes <= finishes + 1;
    if (ng_evt) begin ngs <= ngs + 1; last_ng <= ng_target; end
    if (me_ctx_save) save_cycles <= save_cycles + 1;
    if (save_done) saves <= saves + 1;
  end
  logic [NY-1:0] grant_mask;
  always_ff @(posedge clk) grant_mask <= NY'($urandom);
  assign ve_grant = ve_req & grant_mask;

  function automatic void load_program(int base);
    instr_t i;
    mem[base + 0] = i_misc(MI_GROUP, 1, 0, 0);
    mem[base + 1] = i_misc(MI_INDEX, 2, 0, 0);
    mem[base + 2] = i_misc(MI_LI, 3, 0, 0);
    mem[base + 3] = i_misc(MI_LI, 4, 0, 6);
    i = with_me(i_misc(MI_ADDI, 3, 3, 1), ME_PUSH, 1);
    i = with_ve(i, 0, VE_ADD, 1, 0);
    mem[base + 4] = with_ve(i, 2, VE_MUL, 2, 0);
    i = with_me(i_misc(MI_BLT, 3, 4, -1), ME_POP, 2);
    mem[base + 5] = with_ve(i, 1, VE_RELU, 2, 0);
    mem[base + 6] = i_misc(MI_SST, 0, 3, 0);
    mem[base + 7] = i_misc(MI_ADDI, 5, 2, 3);
    mem[base + 8] = i_misc(MI_SST, 0, 5, 1);
    mem[base + 9] = i_misc(MI_NEXTGROUP, 0, 1, 0);
    mem[base + 10] = with_ve(i_misc(MI_FINISH, 0, 0, 0), 3, VE_STORE, 3, 77);
  endfunction

  task automatic check_result(string tag);
    checks++;
    if (me_seq.size() != 12) begin failures++; $display("%s: %0d ME ops", tag, me_seq.size()); end
    for (int k = 0; k < me_seq.size() && k < 12; k++) begin
      checks++;
      if (me_seq[k] != ((k % 2 == 0) ? 101 : 202)) failures++;
    end
    checks++; if (ve_count != 19) begin failures++; $display("%s: %0d VE ops", tag, ve_count); end
    checks++; if (ss[{2'd1, 4'd0}] != 6) begin failures++; $display("%s: count %0d", tag, ss[{2'd1, 4'd0}]); end
    checks++; if (ss[{2'd1, 4'd1}] != 5) failures++;
    checks++; if (ngs != 1 || last_ng != 5) failures++;
    checks++; if (finishes != 1 || busy) failures++;
  endtask

  task automatic do_start(logic [PC_W-1:0] pc, regfile_t r);
    start = 1; start_vnpu = 1; start_group = 5; start_idx = 2; start_pc = pc; start_regs = r;
    @(negedge clk);
    start = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; start_vnpu = 0; start_group = 0; start_idx = 0; start_pc = 0;
    start_regs = '0; preempt_req = 0;
    for (int a = 0; a < NUM_VNPU*SS_WORDS; a++) ss[a] = 0;
    for (int a = 0; a < 2**IMEM_AW; a++) mem[a] = i_nop();
    load_program({2'd1, 8'd10});
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // Run 1: straight through.
    do_start(8'd10, '0);
    checks++; if (!busy || vnpu != 1 || idx != 2) failures++;
    while (busy) @(negedge clk);
    check_result("run");
    // Run 2: preempted after the third ME operation, then resumed.
    me_seq.delete(); ve_count = 0; finishes = 0; ngs = 0;
    ss[{2'd1, 4'd0}] = 0; ss[{2'd1, 4'd1}] = 0;
    do_start(8'd10, '0);
    while (me_seq.size() < 3) @(negedge clk);
    preempt_req = 1; @(negedge clk); preempt_req = 0;
    while (!save_done) @(negedge clk);
    checks++; if (save_cycles != LAT - 1 || finishes != 0) begin failures++; $display("save cycles %0d", save_cycles); end
    begin
      automatic logic [PC_W-1:0] pc = save_pc;
      automatic regfile_t r = save_regs;
      @(negedge clk);
      checks++; if (busy || saves != 1 || save_cycles != LAT) begin failures++; $display("after save: busy %0d saves %0d cycles %0d", busy, saves, save_cycles); end
      checks++; if (me_seq.size() < 3 || me_seq.size() >= 12) begin failures++; $display("ops at preempt %0d", me_seq.size()); end
      repeat (5) @(negedge clk);
      do_start(pc, r);
    end
    while (busy) @(negedge clk);
    check_result("preempt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
