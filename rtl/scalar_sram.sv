// scalar_sram: per-vNPU scalar words addressed by the misc slot (sld/sst).
//
// The paper keeps loop counters that live across uTOp groups (the Count of
// its loop example) in on-chip SRAM. This block is this design's small
// stand-in for that scalar part of the SRAM: SS_WORDS 32-bit words per vNPU,
// one combinational read and one write port per instruction queue, plus a
// host port for loading and reading values. Reads are combinational; writes
// land at the clock edge. When several queues write the same word in one
// cycle the highest-numbered queue wins; the host write goes first, so any
// queue write overrides it. Reset clears all words.
module scalar_sram
  import neu_pkg::*;
#(
  parameter int NPORT = NQ
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic [NPORT-1:0]                   wr_en,
  input  logic [NPORT-1:0][VID_W+SS_AW-1:0]  addr,
  input  logic [NPORT-1:0][XLEN-1:0]         wr_data,
  output logic [NPORT-1:0][XLEN-1:0]         rd_data,
  input  logic                               host_wr,
  input  logic [VID_W+SS_AW-1:0]             host_addr,
  input  logic [XLEN-1:0]                    host_wdata,
  output logic [XLEN-1:0]                    host_rdata
);
  localparam int WORDS = NUM_VNPU * SS_WORDS;
  logic [XLEN-1:0] mem [WORDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < WORDS; i++) mem[i] <= '0;
    end else begin
      if (host_wr) mem[host_addr] <= host_wdata;
      for (int p = 0; p < NPORT; p++)
        if (wr_en[p]) mem[addr[p]] <= wr_data[p];
    end
  end

  always_comb begin
    for (int p = 0; p < NPORT; p++) rd_data[p] = mem[addr[p]];
    host_rdata = mem[host_addr];
  end
endmodule
