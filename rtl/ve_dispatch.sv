// ve_dispatch: VE operation dispatch. Moves the VE operations granted by the
// operation scheduler from their instruction queue slots to the VE issue
// ports and applies memory isolation to VE loads and stores.
//
// For each VE port p with port_valid[p], the operation in slot port_s[p] of
// queue port_q[p] is sent to VE p together with the owning vNPU. For
// VE_LOAD and VE_STORE the operation's vector address is a virtual SRAM
// address of that vNPU; it is sent to the SRAM segment table (xl_vnpu,
// xl_vaddr) and replaced by the physical address returned (xl_paddr). If the
// table reports a fault the operation is dropped (ve_valid low) and
// fault_vnpu flags the vNPU, which the uTOp scheduler then stops. ALU
// operations pass unchanged. Purely combinational: an operation reaches its
// VE in the cycle it is granted.
// Translation of every SRAM access with a page fault on an invalid access
// follows the paper; dropping the faulting operation is this design's choice.
module ve_dispatch
  import neu_pkg::*;
(
  input  ve_slot_t [NQ-1:0][NY-1:0]          q_ops,
  input  logic [NQ-1:0][VID_W-1:0]           q_vnpu,
  input  logic [NY-1:0]                      port_valid,
  input  logic [NY-1:0][QID_W-1:0]           port_q,
  input  logic [NY-1:0][SLOT_W-1:0]          port_s,
  // SRAM segment translation
  output logic [NY-1:0][VID_W-1:0]           xl_vnpu,
  output logic [NY-1:0][SRAM_VA_W-1:0]       xl_vaddr,
  input  logic [NY-1:0][SRAM_VA_W-1:0]       xl_paddr,
  input  logic [NY-1:0]                      xl_fault,
  // VE issue ports
  output logic [NY-1:0]                      ve_valid,
  output ve_slot_t [NY-1:0]                  ve_op,
  output logic [NY-1:0][VID_W-1:0]           ve_vnpu,
  output logic [NUM_VNPU-1:0]                fault_vnpu
);
  ve_slot_t [NY-1:0] sel_op;

  always_comb begin
    for (int p = 0; p < NY; p++) begin
      sel_op[p]   = q_ops[port_q[p]][port_s[p]];
      xl_vnpu[p]  = q_vnpu[port_q[p]];
      xl_vaddr[p] = sel_op[p].arg;
    end
  end

  always_comb begin
    fault_vnpu = '0;
    for (int p = 0; p < NY; p++) begin
      automatic ve_slot_t op = sel_op[p];
      automatic logic     mem = (op.op == VE_LOAD) || (op.op == VE_STORE);
      ve_vnpu[p]  = q_vnpu[port_q[p]];
      ve_op[p]    = op;
      if (mem) ve_op[p].arg = xl_paddr[p];
      ve_valid[p] = port_valid[p] && !(mem && xl_fault[p]);
      if (port_valid[p] && mem && xl_fault[p]) fault_vnpu[q_vnpu[port_q[p]]] = 1'b1;
    end
  end
endmodule
