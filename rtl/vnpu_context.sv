// vnpu_context: the per-vNPU context registers of the NPU core.
//
// Each vNPU context holds its configuration (allocated MEs and VEs, its
// priority for temporal sharing), a launch control, its status, its
// completion interrupt and an active-cycle performance counter that counts
// every cycle in which any instruction queue runs one of its uTOps. One core
// register holds the scheduling mode (spatial-isolated or temporal-sharing).
//
// Host register map (12-bit address {ctx[3:0], 4'b0, reg[3:0]}):
//   ctx 0..NUM_VNPU-1:
//     reg 0 CTRL     write: bit0 launch the program at group 0,
//                           bit1 clear the interrupt and fault flags
//     reg 1 ALLOC_ME allocated MEs (4 b)      reg 2 ALLOC_VE allocated VEs (4 b)
//     reg 3 PRIO     priority, 1..15 (0 reads as 1 in the scheduler)
//     reg 4 STATUS   read: [2:0] state, [4] interrupt pending,
//                          [5] page fault seen, [6] error seen
//     reg 5 ACTIVE   read: active cycles; write: clear
//   ctx 15, reg 0 MODE bit0: 0 spatial-isolated, 1 temporal-sharing.
// Writes take effect at the clock edge, reads are combinational. launch is a
// one-cycle pulse. An interrupt is raised when the program ends, either
// normally or with an error, and stays until cleared.
// That a context keeps the vNPU configuration, that the guest waits for a
// completion interrupt or polls status registers, and the active-cycle
// counter come from the paper; the register map is this design's.
module vnpu_context
  import neu_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         wr_en,
  input  logic [11:0]                  wr_addr,
  input  logic [31:0]                  wr_data,
  input  logic [11:0]                  rd_addr,
  output logic [31:0]                  rd_data,
  output sched_mode_e                  mode,
  output logic [NUM_VNPU-1:0]          launch,
  output logic [NUM_VNPU-1:0][3:0]     alloc_me,
  output logic [NUM_VNPU-1:0][3:0]     alloc_ve,
  output logic [NUM_VNPU-1:0][3:0]     prio,
  output logic [NUM_VNPU-1:0][31:0]    active_cnt,
  input  logic [NUM_VNPU-1:0]          active,
  input  vnpu_state_e [NUM_VNPU-1:0]   vstate,
  input  logic [NUM_VNPU-1:0]          done_evt,
  input  logic [NUM_VNPU-1:0]          err_evt,
  input  logic [NUM_VNPU-1:0]          fault_evt,
  output logic [NUM_VNPU-1:0]          irq
);
  logic [NUM_VNPU-1:0] fault_seen, err_seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode       <= MODE_SPATIAL;
      launch     <= '0;
      alloc_me   <= '0;
      alloc_ve   <= '0;
      prio       <= '0;
      active_cnt <= '0;
      irq        <= '0;
      fault_seen <= '0;
      err_seen   <= '0;
    end else begin
      launch <= '0;
      for (int v = 0; v < NUM_VNPU; v++) begin
        if (active[v]) active_cnt[v] <= active_cnt[v] + 32'd1;
        if (done_evt[v] || err_evt[v]) irq[v] <= 1'b1;
        if (fault_evt[v]) fault_seen[v] <= 1'b1;
        if (err_evt[v])   err_seen[v]   <= 1'b1;
      end
      if (wr_en) begin
        if (wr_addr[11:8] == 4'hF) begin
          if (wr_addr[3:0] == 4'd0) mode <= sched_mode_e'(wr_data[0]);
        end else if (32'(wr_addr[11:8]) < NUM_VNPU) begin
          automatic logic [VID_W-1:0] v = wr_addr[VID_W+7:8];
          unique case (wr_addr[3:0])
            4'd0: begin
              launch[v] <= wr_data[0];
              if (wr_data[1]) begin
                irq[v]        <= 1'b0;
                fault_seen[v] <= 1'b0;
                err_seen[v]   <= 1'b0;
              end
            end
            4'd1: alloc_me[v] <= wr_data[3:0];
            4'd2: alloc_ve[v] <= wr_data[3:0];
            4'd3: prio[v]     <= wr_data[3:0];
            4'd5: active_cnt[v] <= '0;
            default: ;
          endcase
        end
      end
    end
  end

  always_comb begin
    rd_data = '0;
    if (rd_addr[11:8] == 4'hF) begin
      if (rd_addr[3:0] == 4'd0) rd_data = 32'(mode);
    end else if (32'(rd_addr[11:8]) < NUM_VNPU) begin
      automatic logic [VID_W-1:0] v = rd_addr[VID_W+7:8];
      unique case (rd_addr[3:0])
        4'd1: rd_data = 32'(alloc_me[v]);
        4'd2: rd_data = 32'(alloc_ve[v]);
        4'd3: rd_data = 32'(prio[v]);
        4'd4: rd_data = {25'd0, err_seen[v], fault_seen[v], irq[v], 1'b0, vstate[v]};
        4'd5: rd_data = active_cnt[v];
        default: ;
      endcase
    end
  end
endmodule
