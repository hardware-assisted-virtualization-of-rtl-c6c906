// tb_ve_dispatch: random queue contents and port selections with a
// testbench translation function (physical segment = virtual segment XOR
// 0x15, virtual segment 63 faults). Checks that each port carries the
// selected operation and its vNPU, that loads and stores carry translated
// addresses, that ALU operations pass unchanged and that a faulting access
// is dropped and reported for its vNPU.
module tb_ve_dispatch;
  import neu_pkg::*;
  int checks = 0, failures = 0, nfault = 0;

  ve_slot_t [NQ-1:0][NY-1:0]     q_ops;
  logic [NQ-1:0][VID_W-1:0]      q_vnpu;
  logic [NY-1:0]                 port_valid;
  logic [NY-1:0][QID_W-1:0]      port_q;
  logic [NY-1:0][SLOT_W-1:0]     port_s;
  logic [NY-1:0][VID_W-1:0]      xl_vnpu;
  logic [NY-1:0][SRAM_VA_W-1:0]  xl_vaddr, xl_paddr;
  logic [NY-1:0]                 xl_fault;
  logic [NY-1:0]                 ve_valid;
  ve_slot_t [NY-1:0]             ve_op;
  logic [NY-1:0][VID_W-1:0]      ve_vnpu;
  logic [NUM_VNPU-1:0]           fault_vnpu;

  ve_dispatch dut (.*);

  always_comb
    for (int p = 0; p < NY; p++) begin
      xl_paddr[p] = {xl_vaddr[p][SRAM_VA_W-1:SRAM_OFF_W] ^ SEG_W'(6'h15), xl_vaddr[p][SRAM_OFF_W-1:0]};
      xl_fault[p] = xl_vaddr[p][SRAM_VA_W-1:SRAM_OFF_W] == '1;
    end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic [NUM_VNPU-1:0] exp_fault;
      for (int q = 0; q < NQ; q++) begin
        q_vnpu[q] = VID_W'($urandom);
        for (int s = 0; s < NY; s++) begin
          q_ops[q][s].op  = ve_op_e'($urandom % 6);
          q_ops[q][s].vd  = 5'($urandom);
          q_ops[q][s].arg = ($urandom % 5 == 0) ? {6'h3F, 9'($urandom)} : SRAM_VA_W'($urandom);
        end
      end
      for (int p = 0; p < NY; p++) begin
        port_valid[p] = 1'($urandom);
        port_q[p] = QID_W'($urandom);
        port_s[p] = SLOT_W'($urandom);
      end
      #1;
      exp_fault = '0;
      for (int p = 0; p < NY; p++) begin
        automatic ve_slot_t o = q_ops[port_q[p]][port_s[p]];
        automatic logic mem = (o.op == VE_LOAD) || (o.op == VE_STORE);
        automatic logic flt = mem && o.arg[SRAM_VA_W-1:SRAM_OFF_W] == '1;
        automatic ve_slot_t e = o;
        if (mem) e.arg = {o.arg[SRAM_VA_W-1:SRAM_OFF_W] ^ SEG_W'(6'h15), o.arg[SRAM_OFF_W-1:0]};
        checks++;
        if (ve_valid[p] !== (port_valid[p] && !flt)) failures++;
        if (port_valid[p] && !flt) begin
          checks++;
          if (ve_op[p] !== e || ve_vnpu[p] !== q_vnpu[port_q[p]]) failures++;
        end
        if (port_valid[p] && flt) begin exp_fault[q_vnpu[port_q[p]]] = 1; nfault++; end
      end
      checks++;
      if (fault_vnpu !== exp_fault) failures++;
    end
    checks++; if (nfault == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
