// tb_imem: writes random instructions through the 32-bit host port and reads
// them back on every read port, comparing with a copy kept by the testbench.
// Also checks that a read port holds its data while rd_en is low.
module tb_imem;
  import neu_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                          wr_en;
  logic [IMEM_AW+2:0]            wr_addr;
  logic [31:0]                   wr_data;
  logic [NQ-1:0]                 rd_en;
  logic [NQ-1:0][IMEM_AW-1:0]    rd_addr;
  instr_t [NQ-1:0]               rd_data;

  imem dut (.*);

  localparam int N = 64;
  logic [IMEM_AW-1:0] addrs [N];
  logic [INSTR_WORDS*32-1:0] words [N];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_addr = '0; wr_data = '0; rd_en = '0; rd_addr = '0;
    for (int n = 0; n < N; n++) begin
      addrs[n] = IMEM_AW'(n * 17 + 3);           // distinct addresses
      for (int w = 0; w < INSTR_WORDS; w++) words[n][w*32 +: 32] = $urandom;
    end
    @(negedge clk);
    for (int n = 0; n < N; n++)
      for (int w = 0; w < INSTR_WORDS; w++) begin
        wr_en = 1; wr_addr = {addrs[n], 3'(w)}; wr_data = words[n][w*32 +: 32];
        @(negedge clk);
      end
    wr_en = 0;
    for (int n = 0; n < N; n++) begin
      for (int p = 0; p < NQ; p++) begin
        rd_en[p] = 1; rd_addr[p] = addrs[(n + p) % N];
      end
      @(negedge clk);
      for (int p = 0; p < NQ; p++) begin
        checks++;
        if (rd_data[p] !== instr_t'(words[(n + p) % N][INSTR_W-1:0])) begin
          failures++;
          $display("mismatch port %0d entry %0d", p, (n + p) % N);
        end
      end
    end
    // hold when rd_en low
    rd_en = '0;
    for (int p = 0; p < NQ; p++) rd_addr[p] = addrs[0];
    @(negedge clk);
    for (int p = 0; p < NQ; p++) begin
      checks++;
      if (rd_data[p] !== instr_t'(words[(N - 1 + p) % N][INSTR_W-1:0])) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
