// op_scheduler: the operation scheduler's VE half. Every cycle it decides
// which ready VE operations, taken from the head instructions of all
// instruction queues, issue to the NY VEs.
//
// Step 1, VEs per vNPU: a vNPU first gets min(ready, alloc_ve) VEs, where
// ready is its number of ready VE operations. VEs left over are harvested by
// vNPUs that have more ready operations than that, visited round-robin from
// a pointer that advances every cycle. In temporal-sharing mode allocations
// are ignored and all VEs are shared this way. Allocations that add up to
// more than NY are served in vNPU order until the VEs run out.
// Step 2, operations: within a vNPU, operations from ME-uTOp queues go first
// (queue order, then slot order), then those of VE-uTOp queues, so that MEs
// are released as early as possible.
// Granted operations are packed onto VE ports 0, 1, ... (port_valid, and the
// queue and slot each port takes its operation from). The decision is
// combinational; only the round-robin pointer is a register.
// The two-step policy and the ME-uTOp-first order follow the paper; the
// round-robin order of harvesting and the packing onto ports are this
// design's choices.
module op_scheduler
  import neu_pkg::*;
(
  input  logic                           clk,
  input  logic                           rst_n,
  input  sched_mode_e                    mode,
  input  logic [NUM_VNPU-1:0][3:0]       alloc_ve,
  input  logic [NQ-1:0][NY-1:0]          q_req,
  input  logic [NQ-1:0][VID_W-1:0]       q_vnpu,
  output logic [NQ-1:0][NY-1:0]          q_grant,
  output logic [NY-1:0]                  port_valid,
  output logic [NY-1:0][QID_W-1:0]       port_q,
  output logic [NY-1:0][SLOT_W-1:0]      port_s,
  output logic [NUM_VNPU-1:0][3:0]       ve_given,   // VEs given to each vNPU this cycle
  output logic                           ve_harvest_evt
);
  localparam int CW = $clog2(NQ * NY + 1);

  logic [VID_W-1:0] rr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else        rr <= rr + VID_W'(1);
  end

  always_comb begin
    automatic logic [CW-1:0] ready [NUM_VNPU];
    automatic logic [CW-1:0] quota [NUM_VNPU];
    automatic logic [CW-1:0] taken [NUM_VNPU];
    automatic int            spare, port;

    for (int v = 0; v < NUM_VNPU; v++) begin
      ready[v] = '0;
      taken[v] = '0;
    end
    for (int q = 0; q < NQ; q++)
      for (int s = 0; s < NY; s++)
        if (q_req[q][s]) ready[q_vnpu[q]] = ready[q_vnpu[q]] + CW'(1);

    // Step 1: VEs per vNPU.
    spare = NY;
    ve_harvest_evt = 1'b0;
    for (int v = 0; v < NUM_VNPU; v++) begin
      automatic int a = (mode == MODE_SPATIAL) ? int'(alloc_ve[v]) : 0;
      if (a > int'(ready[v])) a = int'(ready[v]);
      if (a > spare) a = spare;
      quota[v] = CW'(a);
      spare    = spare - a;
    end
    for (int k = 0; k < NUM_VNPU; k++) begin
      automatic int v = (int'(rr) + k) % NUM_VNPU;
      automatic int x = int'(ready[v]) - int'(quota[v]);
      if (x > spare) x = spare;
      if (x > 0) begin
        quota[v] = quota[v] + CW'(x);
        spare    = spare - x;
        if (int'(quota[v]) > int'(alloc_ve[v])) ve_harvest_evt = 1'b1;
      end
    end

    // Step 2: pick operations, ME-uTOp queues first.
    q_grant    = '0;
    port_valid = '0;
    port_q     = '0;
    port_s     = '0;
    port       = 0;
    for (int pass = 0; pass < 2; pass++) begin
      for (int q = 0; q < NQ; q++) begin
        if ((pass == 0) == (q < NX)) begin
          for (int s = 0; s < NY; s++) begin
            if (q_req[q][s] && taken[q_vnpu[q]] < quota[q_vnpu[q]] && port < NY) begin
              q_grant[q][s]    = 1'b1;
              taken[q_vnpu[q]] = taken[q_vnpu[q]] + CW'(1);
              port_valid[port] = 1'b1;
              port_q[port]     = QID_W'(q);
              port_s[port]     = SLOT_W'(s);
              port             = port + 1;
            end
          end
        end
      end
    end
    for (int v = 0; v < NUM_VNPU; v++) ve_given[v] = 4'(taken[v]);
  end

  a_grant_subset: assert property (@(posedge clk) disable iff (!rst_n) (q_grant & ~q_req) == '0);
endmodule
