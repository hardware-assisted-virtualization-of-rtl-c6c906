// tb_scalar_sram: random writes from the queue ports and the host port
// against a model (highest port wins on a same-word collision, the host
// loses to any port), with combinational reads checked every cycle.
module tb_scalar_sram;
  import neu_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n;

  logic [NQ-1:0]                   wr_en;
  logic [NQ-1:0][VID_W+SS_AW-1:0]  addr;
  logic [NQ-1:0][XLEN-1:0]         wr_data, rd_data;
  logic                            host_wr;
  logic [VID_W+SS_AW-1:0]          host_addr;
  logic [XLEN-1:0]                 host_wdata, host_rdata;

  scalar_sram dut (.*);

  localparam int W = NUM_VNPU * SS_WORDS;
  logic [XLEN-1:0] model [W];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; wr_en = '0; addr = '0; wr_data = '0; host_wr = 0; host_addr = '0; host_wdata = '0;
    for (int i = 0; i < W; i++) model[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      for (int p = 0; p < NQ; p++) begin
        wr_en[p]   = ($urandom % 4) == 0;
        addr[p]    = (VID_W+SS_AW)'($urandom % 8);   // few words: collisions happen
        wr_data[p] = $urandom;
      end
      host_wr    = ($urandom % 3) == 0;
      host_addr  = (VID_W+SS_AW)'($urandom % W);
      host_wdata = $urandom;
      #1;
      for (int p = 0; p < NQ; p++) begin
        checks++;
        if (rd_data[p] !== model[addr[p]]) failures++;
      end
      checks++;
      if (host_rdata !== model[host_addr]) failures++;
      if (host_wr) model[host_addr] = host_wdata;
      for (int p = 0; p < NQ; p++) if (wr_en[p]) model[addr[p]] = wr_data[p];
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
