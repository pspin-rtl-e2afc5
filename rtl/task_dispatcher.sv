// task_dispatcher: chooses the processing cluster that runs a task.
//
// As in the paper, a cluster can take a task when its L1 packet buffer has
// room for the packet data. The message's home cluster (msgid modulo the
// number of clusters, so that packets of one message share an L1 and its
// scratchpad) is tried first; if it cannot accept, the least loaded cluster
// is chosen; if none can, the dispatcher blocks and back-pressures the MPQ
// engine.
//
// This design's own choices: the L1 packet buffer of each cluster is split
// into L1_SLOTS fixed slots of L1_SLOT_BYTES and the dispatcher keeps one
// credit per slot. "Least loaded" means most free slots (lowest index on a
// tie). A credit is taken by every dispatched task and returned by the
// cluster when the task's completion notification leaves it.
//
// Timing: combinational from a valid task to the cluster's valid; one task
// per cycle.
module task_dispatcher
  import pspin_pkg::*;
#(
  parameter int unsigned NUM_CLUSTERS_P = NUM_CLUSTERS,
  parameter int unsigned SLOTS          = L1_SLOTS,
  localparam int unsigned CW            = $clog2(SLOTS + 1),
  localparam int unsigned IW            = (NUM_CLUSTERS_P > 1) ? $clog2(NUM_CLUSTERS_P) : 1
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic                      task_valid_i,
  output logic                      task_ready_o,
  input  task_t                     task_i,
  output logic [NUM_CLUSTERS_P-1:0] cl_valid_o,
  input  logic [NUM_CLUSTERS_P-1:0] cl_ready_i,
  output task_t                     cl_task_o,
  input  logic [NUM_CLUSTERS_P-1:0] credit_ret_i,
  output logic                      home_hit_o,    // event: sent to home cluster
  output logic                      blocked_o      // event: no cluster can accept
);
  logic [CW-1:0] credits_q [NUM_CLUSTERS_P];

  logic [IW-1:0] home, pick;
  logic          found;
  logic [NUM_CLUSTERS_P-1:0] ok;

  assign home      = IW'(task_i.her.msgid % NUM_CLUSTERS_P);
  assign cl_task_o = task_i;

  always_comb begin
    logic [CW-1:0] best;
    for (int c = 0; c < NUM_CLUSTERS_P; c++)
      ok[c] = cl_ready_i[c] && (credits_q[c] != '0);
    found = 1'b0;
    pick  = home;
    best  = '0;
    if (ok[home]) begin
      found = 1'b1;
    end else begin
      for (int c = 0; c < NUM_CLUSTERS_P; c++) begin
        if (ok[c] && (!found || credits_q[c] > best)) begin
          found = 1'b1;
          pick  = IW'(c);
          best  = credits_q[c];
        end
      end
    end
  end

  always_comb begin
    cl_valid_o = '0;
    if (task_valid_i && found) cl_valid_o[pick] = 1'b1;
  end
  assign task_ready_o = found;
  assign home_hit_o   = task_valid_i && found && (pick == home);
  assign blocked_o    = task_valid_i && !found;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int c = 0; c < NUM_CLUSTERS_P; c++) credits_q[c] <= CW'(SLOTS);
    end else begin
      for (int c = 0; c < NUM_CLUSTERS_P; c++)
        credits_q[c] <= credits_q[c] - CW'(cl_valid_o[c]) + CW'(credit_ret_i[c]);
    end
  end

  for (genvar c = 0; c < NUM_CLUSTERS_P; c++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     credit_ret_i[c] |-> credits_q[c] < CW'(SLOTS) || cl_valid_o[c]);
  end
endmodule
