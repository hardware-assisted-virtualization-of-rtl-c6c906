// tb_seg_xlate: maps random virtual segments of every vNPU to physical
// segments (some left invalid) and checks translated addresses, faults and
// the isolation between vNPUs on random accesses. Uses the SRAM geometry
// (2 MB segments = 512 vectors) with three lookup ports.
module tb_seg_xlate;
  import neu_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, faults = 0;
  logic rst_n;
  localparam int NP = 3;

  logic                          wr_en;
  logic [VID_W+SEG_W-1:0]        wr_addr;
  logic [SEG_W:0]                wr_data, rd_data;
  logic [NP-1:0][VID_W-1:0]      vnpu;
  logic [NP-1:0][SRAM_VA_W-1:0]  vaddr, paddr;
  logic [NP-1:0]                 fault;

  seg_xlate #(.NPORT(NP), .OFF_W(SRAM_OFF_W)) dut (.*);

  logic             mv [NUM_VNPU][2**SEG_W];
  logic [SEG_W-1:0] mp [NUM_VNPU][2**SEG_W];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; wr_en = 0; wr_addr = '0; wr_data = '0; vnpu = '0; vaddr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // after reset every entry faults
    vnpu[0] = 2; vaddr[0] = 15'h1234; #1;
    checks++; if (!fault[0]) failures++;
    for (int v = 0; v < NUM_VNPU; v++)
      for (int s = 0; s < 2**SEG_W; s++) begin
        mv[v][s] = ($urandom % 4) != 0;
        mp[v][s] = SEG_W'($urandom);
        wr_en = 1; wr_addr = {VID_W'(v), SEG_W'(s)}; wr_data = {mv[v][s], mp[v][s]};
        @(negedge clk);
      end
    wr_en = 0;
    for (int t = 0; t < 1000; t++) begin
      for (int p = 0; p < NP; p++) begin
        vnpu[p]  = VID_W'($urandom);
        vaddr[p] = SRAM_VA_W'($urandom);
      end
      #1;
      for (int p = 0; p < NP; p++) begin
        automatic int s = int'(vaddr[p][SRAM_VA_W-1:SRAM_OFF_W]);
        checks++;
        if (fault[p] !== !mv[vnpu[p]][s]) failures++;
        if (mv[vnpu[p]][s]) begin
          checks++;
          if (paddr[p] !== {mp[vnpu[p]][s], vaddr[p][SRAM_OFF_W-1:0]}) failures++;
        end else faults++;
      end
      @(negedge clk);
    end
    checks++; if (faults == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
