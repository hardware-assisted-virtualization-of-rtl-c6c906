// imem: instruction memory holding the uTOp code snippets of all vNPU contexts.
//
// Each vNPU owns a region of 2**PC_W instructions; a queue reads instruction
// {vnpu, pc}. There is one read port per instruction queue (NQ ports) so
// every queue can fetch one VLIW instruction per cycle; reads are registered
// (data valid the cycle after rd_en). The host loads code through a 32-bit
// write port: wr_addr = {vnpu, pc, word}, word 0 holding instruction bits
// 31:0. The paper states only that the on-chip instruction memory is large
// enough not to stall the pipeline; the size, the port count and the load
// path are this design's choices.
module imem
  import neu_pkg::*;
#(
  parameter int NPORT = NQ
) (
  input  logic                         clk,
  input  logic                         wr_en,
  input  logic [IMEM_AW+2:0]           wr_addr,   // {vnpu, pc, word[2:0]}
  input  logic [31:0]                  wr_data,
  input  logic [NPORT-1:0]             rd_en,
  input  logic [NPORT-1:0][IMEM_AW-1:0] rd_addr,
  output instr_t [NPORT-1:0]           rd_data
);
  localparam int DEPTH = 2 ** IMEM_AW;

  logic [INSTR_WORDS*32-1:0] rd_word [NPORT];

  for (genvar w = 0; w < INSTR_WORDS; w++) begin : g_word
    logic [31:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && wr_addr[2:0] == 3'(w))
        mem[wr_addr[IMEM_AW+2:3]] <= wr_data;
    end
    for (genvar p = 0; p < NPORT; p++) begin : g_port
      always_ff @(posedge clk) begin
        if (rd_en[p]) rd_word[p][w*32 +: 32] <= mem[rd_addr[p]];
      end
    end
  end

  for (genvar p = 0; p < NPORT; p++) begin : g_out
    assign rd_data[p] = instr_t'(rd_word[p][INSTR_W-1:0]);
  end
endmodule
