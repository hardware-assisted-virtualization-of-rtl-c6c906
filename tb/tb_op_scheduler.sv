// tb_op_scheduler: replays the two cycles of the VE-harvesting example
// (two vNPUs with two VEs each; cycle 1: 3 and 6 ready operations, cycle 2:
// 1 and 5) and then checks random request patterns against a reference
// model written from the policy: allocation first, spare VEs round-robin,
// ME-uTOp queues before VE-uTOp queues, at most NY grants, grants only where
// requested, and ports packed from 0.
module tb_op_scheduler;
  import neu_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  logic rst_n;

  sched_mode_e                 mode;
  logic [NUM_VNPU-1:0][3:0]    alloc_ve;
  logic [NQ-1:0][NY-1:0]       q_req, q_grant;
  logic [NQ-1:0][VID_W-1:0]    q_vnpu;
  logic [NY-1:0]               port_valid;
  logic [NY-1:0][QID_W-1:0]    port_q;
  logic [NY-1:0][SLOT_W-1:0]   port_s;
  logic [NUM_VNPU-1:0][3:0]    ve_given;
  logic                        ve_harvest_evt;

  op_scheduler dut (.*);

  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  // Reference model.
  function automatic void model(output logic [NQ-1:0][NY-1:0] g, output int given [NUM_VNPU]);
    int rdy [NUM_VNPU];
    int quota [NUM_VNPU];
    int spare, rr, n;
    spare = NY;
    rr = cyc % NUM_VNPU;
    for (int v = 0; v < NUM_VNPU; v++) begin
      rdy[v] = 0;
      for (int q = 0; q < NQ; q++) if (q_vnpu[q] == VID_W'(v)) rdy[v] += $countones(q_req[q]);
    end
    for (int v = 0; v < NUM_VNPU; v++) begin
      int a;
      a = (mode == MODE_SPATIAL) ? int'(alloc_ve[v]) : 0;
      a = (a < rdy[v]) ? a : rdy[v];
      a = (a < spare) ? a : spare;
      quota[v] = a; spare -= a;
    end
    for (int k = 0; k < NUM_VNPU; k++) begin
      int v, x;
      v = (rr + k) % NUM_VNPU;
      x = rdy[v] - quota[v];
      x = (x < spare) ? x : spare;
      quota[v] += x; spare -= x;
    end
    g = '0;
    for (int v = 0; v < NUM_VNPU; v++) begin
      n = 0;
      for (int q = 0; q < NQ; q++)          // ME queues come first in index order
        if (q_vnpu[q] == VID_W'(v))
          for (int s = 0; s < NY; s++)
            if (q_req[q][s] && n < quota[v]) begin g[q][s] = 1; n++; end
      given[v] = n;
    end
  endfunction

  task automatic compare();
    logic [NQ-1:0][NY-1:0] g;
    int given [NUM_VNPU];
    int np;
    model(g, given);
    checks++;
    if (q_grant !== g) begin
      failures++;
      $display("cycle %0d grant %h expected %h (req %h)", cyc, q_grant, g, q_req);
    end
    np = 0;
    for (int p = 0; p < NY; p++) if (port_valid[p]) begin
      np++;
      checks++;
      if (!q_grant[port_q[p]][port_s[p]]) failures++;
    end
    checks++;
    if (np != $countones(q_grant)) failures++;
    for (int v = 0; v < NUM_VNPU; v++) begin
      checks++;
      if (int'(ve_given[v]) != given[v]) failures++;
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; mode = MODE_SPATIAL; q_req = '0;
    alloc_ve = {4'd0, 4'd0, 4'd2, 4'd2};
    // queues 0..2: vNPU0 ME uTOps, queue 3: vNPU1 ME uTOp, queue 4: vNPU1 VE uTOp
    q_vnpu = '0;
    q_vnpu[3] = 1; q_vnpu[4] = 1;
    for (int q = 5; q < NQ; q++) q_vnpu[q] = 2;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Example, cycle 1.
    q_req[0] = 4'b0001; q_req[1] = 4'b0001; q_req[2] = 4'b0001;
    q_req[3] = 4'b1111; q_req[4] = 4'b0011;
    #1;
    checks++; if (q_grant[0] != 4'b0001 || q_grant[1] != 4'b0001 || q_grant[2] != '0) failures++;
    checks++; if (q_grant[3] != 4'b0011 || q_grant[4] != '0) failures++;
    checks++; if (ve_given[0] != 2 || ve_given[1] != 2 || ve_harvest_evt) failures++;
    @(negedge clk);
    // Example, cycle 2: vNPU0 one ready op; vNPU1 harvests one VE, which goes to its VE uTOp.
    q_req[0] = '0; q_req[1] = '0; q_req[2] = 4'b0001;
    q_req[3] = 4'b1100; q_req[4] = 4'b0011;
    #1;
    checks++; if (q_grant[2] != 4'b0001) failures++;
    checks++; if (q_grant[3] != 4'b1100 || q_grant[4] != 4'b0001) failures++;
    checks++; if (ve_given[0] != 1 || ve_given[1] != 3 || !ve_harvest_evt) failures++;
    @(negedge clk);
    // Random patterns, both modes.
    for (int t = 0; t < 3000; t++) begin
      mode = (t < 2000) ? MODE_SPATIAL : MODE_TEMPORAL;
      for (int v = 0; v < NUM_VNPU; v++) alloc_ve[v] = 4'($urandom % 3);
      for (int q = 0; q < NQ; q++) begin
        q_vnpu[q] = VID_W'($urandom);
        q_req[q]  = NY'($urandom) & NY'($urandom);
      end
      #1;
      compare();
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
