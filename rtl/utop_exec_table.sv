// utop_exec_table: the uTOp execution tables of all vNPU contexts.
//
// Row {vnpu, group} describes one uTOp group: NX ME-uTOp entries and one
// VE-uTOp entry, each the start PC of a code snippet or null (valid = 0).
// By convention of this design an all-null row ends the vNPU's program.
// The host writes one entry per access: wr_addr = {vnpu, group, entry},
// wr_data = {valid, pc}. The uTOp scheduler reads whole rows, one read port
// per vNPU, registered (row valid the cycle after rd_en). The row layout
// (NX ME entries plus one VE entry) follows the paper; the port structure is
// this design's choice.
module utop_exec_table
  import neu_pkg::*;
(
  input  logic                             clk,
  input  logic                             wr_en,
  input  logic [VID_W+GRP_W+IDX_W-1:0]     wr_addr,
  input  tbl_entry_t                       wr_data,
  input  logic [NUM_VNPU-1:0]              rd_en,
  input  logic [NUM_VNPU-1:0][GRP_W-1:0]   rd_group,
  output tbl_row_t [NUM_VNPU-1:0]          rd_row
);
  localparam int ROWS = NUM_VNPU * (2 ** GRP_W);

  logic [VID_W+GRP_W-1:0] wr_row;
  logic [IDX_W-1:0]       wr_ent;
  assign wr_row = wr_addr[VID_W+GRP_W+IDX_W-1:IDX_W];
  assign wr_ent = wr_addr[IDX_W-1:0];

  for (genvar e = 0; e < NENT; e++) begin : g_ent
    tbl_entry_t mem [ROWS];
    always_ff @(posedge clk) begin
      if (wr_en && wr_ent == IDX_W'(e)) mem[wr_row] <= wr_data;
    end
    for (genvar v = 0; v < NUM_VNPU; v++) begin : g_rd
      always_ff @(posedge clk) begin
        if (rd_en[v]) rd_row[v][e] <= mem[{VID_W'(v), rd_group[v]}];
      end
    end
  end
endmodule
