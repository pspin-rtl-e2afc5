// pspin_cluster: one PsPIN processing cluster.
//
// Contents, as drawn in the paper's cluster figure: the cluster-local
// scheduler (CSCHED) with its task FIFO, the cluster DMA engine, the L1 TCDM
// with its interconnect, one HPU driver per HPU, and two round-robin
// arbiters: one picks, every cycle, the HPU driver whose completion
// notification leaves the cluster, the other the HPU driver whose command
// goes to the command unit. Command responses are returned to the HPU
// driver named in the command id.
//
// The HPUs themselves (32-bit RISC-V cores) are not part of this RTL: their
// register bus to the HPU driver, their L1 ports, clock enable, watchdog
// interrupt and PMP configuration are ports of the cluster. The instruction
// cache and the HPU ports to the PE interconnect are not included.
//
// Interface: task in (valid/ready); completion notification out
// (valid/ready); the L1 slot of a task and the dispatcher credit are returned
// when its notification is accepted (`credit_ret_o`); command out
// (valid/ready) and response in; L2 read master for the DMA engine.
module pspin_cluster
  import pspin_pkg::*;
#(
  parameter int unsigned NUM_HPUS_P = NUM_HPUS,
  parameter int unsigned L1_SIZE    = 1 << 20,
  localparam int unsigned HW        = (NUM_HPUS_P > 1) ? $clog2(NUM_HPUS_P) : 1
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  logic [CLUSTER_ID_W-1:0]      cluster_id_i,
  // tasks from the task dispatcher
  input  logic                         task_valid_i,
  output logic                         task_ready_o,
  input  task_t                        task_i,
  // completion notifications to the MPQ engine
  output logic                         fb_valid_o,
  input  logic                         fb_ready_i,
  output feedback_t                    fb_o,
  output logic                         credit_ret_o,
  // commands to / responses from the command unit
  output logic                         cmd_valid_o,
  input  logic                         cmd_ready_i,
  output cmd_t                         cmd_o,
  input  logic                         resp_valid_i,
  input  cmd_resp_t                    resp_i,
  // L2 read master of the cluster DMA (DMA interconnect)
  output logic                         l2_req_o,
  output logic [31:0]                  l2_addr_o,
  input  logic                         l2_gnt_i,
  input  logic                         l2_rvalid_i,
  input  logic [WIDE_W-1:0]            l2_rdata_i,
  // HPU register buses
  input  logic [NUM_HPUS_P-1:0]        core_req_i,
  input  logic [NUM_HPUS_P-1:0]        core_we_i,
  input  logic [NUM_HPUS_P-1:0][7:0]   core_addr_i,
  input  logic [NUM_HPUS_P-1:0][31:0]  core_wdata_i,
  output logic [NUM_HPUS_P-1:0]        core_gnt_o,
  output logic [NUM_HPUS_P-1:0]        core_rvalid_o,
  output logic [NUM_HPUS_P-1:0][31:0]  core_rdata_o,
  output logic [NUM_HPUS_P-1:0]        clk_en_o,
  output logic [NUM_HPUS_P-1:0]        irq_o,
  output logic [NUM_HPUS_P-1:0][3:0][31:0] pmp_base_o,
  output logic [NUM_HPUS_P-1:0][3:0][31:0] pmp_size_o,
  // HPU L1 ports
  input  logic [NUM_HPUS_P-1:0]        tcdm_req_i,
  input  logic [NUM_HPUS_P-1:0]        tcdm_we_i,
  input  logic [NUM_HPUS_P-1:0][3:0]   tcdm_be_i,
  input  logic [NUM_HPUS_P-1:0][31:0]  tcdm_addr_i,
  input  logic [NUM_HPUS_P-1:0][31:0]  tcdm_wdata_i,
  output logic [NUM_HPUS_P-1:0]        tcdm_gnt_o,
  output logic [NUM_HPUS_P-1:0]        tcdm_rvalid_o,
  output logic [NUM_HPUS_P-1:0][31:0]  tcdm_rdata_o,
  // events
  output logic                         wd_fire_o,
  output logic                         tcdm_conflict_o
);
  localparam int unsigned SLW = $clog2(L1_SLOTS);

  // ------------------------------------------------------------ CSCHED
  logic                  dma_valid, dma_ready, dma_done;
  logic [31:0]           dma_src, dma_dst;
  logic [15:0]           dma_len;
  logic [NUM_HPUS_P-1:0] hpu_idle, hpu_valid;
  hpu_task_t             hpu_task;
  logic                  slot_free_valid;
  logic [SLW-1:0]        slot_free;

  cluster_scheduler #(.NUM_HPUS_P(NUM_HPUS_P)) u_csched (
    .clk_i, .rst_ni,
    .task_valid_i, .task_ready_o, .task_i,
    .dma_valid_o(dma_valid), .dma_ready_i(dma_ready), .dma_src_o(dma_src),
    .dma_dst_o(dma_dst), .dma_len_o(dma_len), .dma_done_i(dma_done),
    .hpu_idle_i(hpu_idle), .hpu_valid_o(hpu_valid), .hpu_task_o(hpu_task),
    .slot_free_valid_i(slot_free_valid), .slot_free_i(slot_free)
  );

  // ---------------------------------------------------------- DMA + L1
  logic                  l1w_req;
  logic [31:0]           l1w_addr;
  logic [WIDE_W/8-1:0]   l1w_be;
  logic [WIDE_W-1:0]     l1w_wdata;

  cluster_dma u_dma (
    .clk_i, .rst_ni,
    .xfer_valid_i(dma_valid), .xfer_ready_o(dma_ready), .xfer_src_i(dma_src),
    .xfer_dst_i(dma_dst), .xfer_len_i(dma_len), .done_o(dma_done),
    .l2_req_o, .l2_addr_o, .l2_gnt_i, .l2_rvalid_i, .l2_rdata_i,
    .l1_req_o(l1w_req), .l1_addr_o(l1w_addr), .l1_be_o(l1w_be), .l1_wdata_o(l1w_wdata)
  );

  l1_tcdm #(.NPORTS(NUM_HPUS_P), .SIZE_BYTES(L1_SIZE)) u_l1 (
    .clk_i, .rst_ni,
    .req_i(tcdm_req_i), .we_i(tcdm_we_i), .be_i(tcdm_be_i), .addr_i(tcdm_addr_i),
    .wdata_i(tcdm_wdata_i), .gnt_o(tcdm_gnt_o), .rvalid_o(tcdm_rvalid_o),
    .rdata_o(tcdm_rdata_o),
    .wreq_i(l1w_req), .wwe_i(1'b1), .wbe_i(l1w_be), .waddr_i(l1w_addr),
    .wwdata_i(l1w_wdata), .wgnt_o(), .wrvalid_o(), .wrdata_o(),
    .conflict_o(tcdm_conflict_o)
  );

  // ------------------------------------------------------- HPU drivers
  logic [NUM_HPUS_P-1:0]           d_fb_valid, d_fb_ready, d_cmd_valid, d_cmd_ready;
  logic [NUM_HPUS_P-1:0]           d_resp_valid, d_wd;
  feedback_t                       d_fb   [NUM_HPUS_P];
  logic [SLW-1:0]                  d_slot [NUM_HPUS_P];
  cmd_t                            d_cmd  [NUM_HPUS_P];

  for (genvar h = 0; h < NUM_HPUS_P; h++) begin : g_hpu
    hpu_driver u_drv (
      .clk_i, .rst_ni,
      .cluster_id_i, .hpu_id_i(HPU_ID_W'(h)),
      .task_valid_i(hpu_valid[h]), .task_i(hpu_task), .idle_o(hpu_idle[h]),
      .core_req_i(core_req_i[h]), .core_we_i(core_we_i[h]), .core_addr_i(core_addr_i[h]),
      .core_wdata_i(core_wdata_i[h]), .core_gnt_o(core_gnt_o[h]),
      .core_rvalid_o(core_rvalid_o[h]), .core_rdata_o(core_rdata_o[h]),
      .clk_en_o(clk_en_o[h]), .irq_o(irq_o[h]),
      .pmp_base_o(pmp_base_o[h]), .pmp_size_o(pmp_size_o[h]),
      .fb_valid_o(d_fb_valid[h]), .fb_ready_i(d_fb_ready[h]), .fb_o(d_fb[h]),
      .fb_slot_o(d_slot[h]),
      .cmd_valid_o(d_cmd_valid[h]), .cmd_ready_i(d_cmd_ready[h]), .cmd_o(d_cmd[h]),
      .resp_valid_i(d_resp_valid[h]), .resp_i(resp_i),
      .wd_fire_o(d_wd[h])
    );
    assign d_resp_valid[h] = resp_valid_i && (int'(resp_i.id.hpu) == h);
  end
  assign wd_fire_o = |d_wd;

  // ------------------------------------------ completion notifications
  logic [NUM_HPUS_P-1:0] fb_gnt;
  logic [HW-1:0]         fb_idx;
  rr_arb #(.N(NUM_HPUS_P)) u_fb_arb (
    .clk_i, .rst_ni, .req_i(d_fb_valid), .advance_i(fb_ready_i),
    .gnt_o(fb_gnt), .idx_o(fb_idx), .valid_o(fb_valid_o)
  );
  assign fb_o            = d_fb[fb_idx];
  assign d_fb_ready      = fb_ready_i ? fb_gnt : '0;
  assign slot_free_valid = fb_valid_o && fb_ready_i;
  assign slot_free       = d_slot[fb_idx];
  assign credit_ret_o    = slot_free_valid;

  // ----------------------------------------------------------- commands
  logic [NUM_HPUS_P-1:0] cmd_gnt;
  logic [HW-1:0]         cmd_idx;
  rr_arb #(.N(NUM_HPUS_P)) u_cmd_arb (
    .clk_i, .rst_ni, .req_i(d_cmd_valid), .advance_i(cmd_ready_i),
    .gnt_o(cmd_gnt), .idx_o(cmd_idx), .valid_o(cmd_valid_o)
  );
  assign cmd_o       = d_cmd[cmd_idx];
  assign d_cmd_ready = cmd_ready_i ? cmd_gnt : '0;
endmodule
