// tb_vnpu_context: writes and reads back the configuration registers of
// every context and the core mode, checks the one-cycle launch pulse, the
// active-cycle counter (exact count over a known number of active cycles),
// the interrupt on completion and on error, the fault flag and their clear.
module tb_vnpu_context;
  import neu_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n;

  logic                        wr_en;
  logic [11:0]                 wr_addr, rd_addr;
  logic [31:0]                 wr_data, rd_data;
  sched_mode_e                 mode;
  logic [NUM_VNPU-1:0]         launch, active, done_evt, err_evt, fault_evt, irq;
  logic [NUM_VNPU-1:0][3:0]    alloc_me, alloc_ve, prio;
  logic [NUM_VNPU-1:0][31:0]   active_cnt;
  vnpu_state_e [NUM_VNPU-1:0]  vstate;

  vnpu_context dut (.*);

  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    wr_en = 1; wr_addr = a; wr_data = d;
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic chk(input logic [11:0] a, input logic [31:0] exp, input string what);
    rd_addr = a; #1;
    checks++;
    if (rd_data !== exp) begin
      failures++;
      $display("%s: read %h expected %h", what, rd_data, exp);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; wr_en = 0; wr_addr = '0; wr_data = '0; rd_addr = '0;
    active = '0; done_evt = '0; err_evt = '0; fault_evt = '0;
    for (int v = 0; v < NUM_VNPU; v++) vstate[v] = VS_IDLE;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < NUM_VNPU; v++) begin
      wr({4'(v), 4'h0, 4'd1}, 32'(v + 1));
      wr({4'(v), 4'h0, 4'd2}, 32'(4 - v));
      wr({4'(v), 4'h0, 4'd3}, 32'(2 * v + 1));
    end
    for (int v = 0; v < NUM_VNPU; v++) begin
      chk({4'(v), 4'h0, 4'd1}, 32'(v + 1), "alloc_me");
      chk({4'(v), 4'h0, 4'd2}, 32'(4 - v), "alloc_ve");
      chk({4'(v), 4'h0, 4'd3}, 32'(2 * v + 1), "prio");
      checks++; if (alloc_me[v] != 4'(v + 1) || alloc_ve[v] != 4'(4 - v) || prio[v] != 4'(2*v+1)) failures++;
    end
    wr(12'hF00, 32'd1);
    checks++; if (mode != MODE_TEMPORAL) failures++;
    chk(12'hF00, 32'd1, "mode");
    // launch pulse
    wr_en = 1; wr_addr = {4'd2, 4'h0, 4'd0}; wr_data = 32'd1;
    @(negedge clk); wr_en = 0;
    checks++; if (launch != 4'b0100) failures++;
    @(negedge clk);
    checks++; if (launch != '0) failures++;
    // active counter: vNPU 1 active 37 cycles
    active = 4'b0010;
    repeat (37) @(negedge clk);
    active = '0;
    chk({4'd1, 4'h0, 4'd5}, 32'd37, "active");
    chk({4'd0, 4'h0, 4'd5}, 32'd0, "active0");
    checks++; if (active_cnt[1] != 32'd37) failures++;
    wr({4'd1, 4'h0, 4'd5}, 32'd0);
    chk({4'd1, 4'h0, 4'd5}, 32'd0, "active clear");
    // completion interrupt and status
    vstate[3] = VS_DONE;
    done_evt = 4'b1000; @(negedge clk); done_evt = '0;
    checks++; if (irq != 4'b1000) failures++;
    chk({4'd3, 4'h0, 4'd4}, {25'd0, 1'b0, 1'b0, 1'b1, 1'b0, VS_DONE}, "status done");
    // error with fault
    vstate[0] = VS_ERROR;
    fault_evt = 4'b0001; @(negedge clk); fault_evt = '0;
    err_evt = 4'b0001; @(negedge clk); err_evt = '0;
    checks++; if (irq != 4'b1001) failures++;
    chk({4'd0, 4'h0, 4'd4}, {25'd0, 1'b1, 1'b1, 1'b1, 1'b0, VS_ERROR}, "status error");
    wr({4'd0, 4'h0, 4'd0}, 32'd2);
    checks++; if (irq != 4'b1000) failures++;
    chk({4'd0, 4'h0, 4'd4}, {25'd0, 1'b0, 1'b0, 1'b0, 1'b0, VS_ERROR}, "status cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
