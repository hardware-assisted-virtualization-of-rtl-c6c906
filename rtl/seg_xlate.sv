// seg_xlate: fixed-size segment address translation for one memory (SRAM or HBM).
//
// Memory isolation between vNPUs uses segmentation: the memory is cut into
// fixed-size segments and each vNPU maps its virtual segments to physical
// ones. A virtual address {vseg, offset} of vNPU v translates to
// {table[v][vseg].pseg, offset}, i.e. the offset added to the start of the
// physical segment. An access through an invalid entry raises a page fault
// (fault = 1). The scheme, the 2 MB SRAM / 1 GB HBM segment sizes and the
// fault follow the paper; the table organisation (64 entries per vNPU, one
// write port, combinational lookup on NPORT ports) is this design's. Table
// write: wr_addr = {vnpu, vseg}, wr_data = {valid, pseg}. Reset invalidates
// all entries. The offset bits of paddr are vaddr's offset bits unchanged:
// that is what segmentation means, so they are wires from the inputs.
module seg_xlate
  import neu_pkg::*;
#(
  parameter int NPORT = 1,
  parameter int OFF_W = SRAM_OFF_W
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 wr_en,
  input  logic [VID_W+SEG_W-1:0]               wr_addr,
  input  logic [SEG_W:0]                       wr_data,
  output logic [SEG_W:0]                       rd_data,   // entry at wr_addr, for readback
  input  logic [NPORT-1:0][VID_W-1:0]          vnpu,
  input  logic [NPORT-1:0][SEG_W+OFF_W-1:0]    vaddr,
  output logic [NPORT-1:0][SEG_W+OFF_W-1:0]    paddr,
  output logic [NPORT-1:0]                     fault
);
  localparam int ENTRIES = NUM_VNPU * (2 ** SEG_W);

  logic             valid [ENTRIES];
  logic [SEG_W-1:0] pseg  [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) valid[i] <= 1'b0;
    end else if (wr_en) begin
      valid[wr_addr] <= wr_data[SEG_W];
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) pseg[wr_addr] <= wr_data[SEG_W-1:0];
  end

  assign rd_data = {valid[wr_addr], pseg[wr_addr]};

  always_comb begin
    for (int p = 0; p < NPORT; p++) begin
      automatic logic [VID_W+SEG_W-1:0] e = {vnpu[p], vaddr[p][SEG_W+OFF_W-1:OFF_W]};
      paddr[p] = {pseg[e], vaddr[p][OFF_W-1:0]};
      fault[p] = !valid[e];
    end
  end
endmodule
