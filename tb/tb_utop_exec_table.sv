// tb_utop_exec_table: fills the execution tables of all vNPUs with random
// entries and reads every row back on each vNPU's port, one cycle after the
// request, against the testbench's copy.
module tb_utop_exec_table;
  import neu_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                            wr_en;
  logic [VID_W+GRP_W+IDX_W-1:0]    wr_addr;
  tbl_entry_t                      wr_data;
  logic [NUM_VNPU-1:0]             rd_en;
  logic [NUM_VNPU-1:0][GRP_W-1:0]  rd_group;
  tbl_row_t [NUM_VNPU-1:0]         rd_row;

  utop_exec_table dut (.*);

  tbl_row_t model [NUM_VNPU][2**GRP_W];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_addr = '0; wr_data = '0; rd_en = '0; rd_group = '0;
    @(negedge clk);
    for (int v = 0; v < NUM_VNPU; v++)
      for (int g = 0; g < 2**GRP_W; g++)
        for (int e = 0; e < NENT; e++) begin
          tbl_entry_t t;
          t.valid = 1'($urandom);
          t.pc    = PC_W'($urandom);
          model[v][g][e] = t;
          wr_en = 1; wr_addr = {VID_W'(v), GRP_W'(g), IDX_W'(e)}; wr_data = t;
          @(negedge clk);
        end
    wr_en = 0;
    for (int g = 0; g < 2**GRP_W; g++) begin
      for (int v = 0; v < NUM_VNPU; v++) begin
        rd_en[v] = 1; rd_group[v] = GRP_W'((g + 7 * v) % (2**GRP_W));
      end
      @(negedge clk);
      for (int v = 0; v < NUM_VNPU; v++) begin
        checks++;
        if (rd_row[v] !== model[v][(g + 7 * v) % (2**GRP_W)]) begin
          failures++;
          $display("row mismatch v%0d g%0d", v, g);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
