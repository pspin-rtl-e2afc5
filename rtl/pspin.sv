// pspin: top level of the PsPIN packet-processing unit.
//
// PsPIN runs sPIN packet handlers on many small cores next to the NIC. The
// NIC inbound engine writes a matched packet into the L2 packet buffer and
// sends a handler execution request (HER). The packet scheduler (MPQ engine
// plus task dispatcher) turns HERs into header, payload and completion
// handler tasks in sPIN order and sends each to a processing cluster; the
// cluster copies the packet into its L1 and starts a handler on an idle HPU.
// Handlers issue commands (to the NIC outbound engine, the off-cluster DMA
// engine or the HostDirect unit) through the command unit; when a handler
// is done and its commands have completed, a completion notification goes
// back through the MPQ engine to the NIC, which frees the packet buffer.
//
// Data path: the NHI interconnect joins the host master, the NIC inbound
// and outbound engines and the off-cluster DMA engine to one port of the L2
// packet buffer and of the L2 handler memory; the DMA interconnect joins
// the four cluster DMA engines to the other port. The program memory has
// its own host port and instruction-refill port.
//
// Not inside this top, brought out as ports: the RISC-V HPU cores (register
// bus to their HPU drivers, L1 ports, clock enables, interrupts, PMP
// settings), the NIC inbound/outbound engines, the host interface with its
// IOMMU, and the per-cluster instruction caches (refill port). The PE
// interconnect (HPU access to L2 and remote L1s) is not built.
//
// Defaults are the paper's configuration: 4 clusters of 8 HPUs, 1 MiB L1
// per cluster, 4 MiB packet buffer, 4 MiB handler memory, 32 KiB program
// memory, 512-bit data paths.
module pspin
  import pspin_pkg::*;
#(
  parameter int unsigned NUM_CLUSTERS_P = NUM_CLUSTERS,
  parameter int unsigned NUM_HPUS_P     = NUM_HPUS,
  parameter int unsigned L1_SIZE        = 1 << 20,
  parameter int unsigned L2_PKT_SIZE    = 4 << 20,
  parameter int unsigned L2_HND_SIZE    = 4 << 20,
  parameter int unsigned HER_BUF        = 64,
  localparam int unsigned NC = NUM_CLUSTERS_P,
  localparam int unsigned NH = NUM_HPUS_P,
  localparam int unsigned BEAT_B = WIDE_W / 8
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  // ---- NIC inbound engine: HERs and completion notifications
  input  logic                       her_valid_i,
  output logic                       her_ready_o,
  input  her_t                       her_i,
  output logic                       nic_fb_valid_o,
  output feedback_t                  nic_fb_o,
  // ---- external NHI masters: 0 host, 1 NIC inbound, 2 NIC outbound
  input  logic [2:0]                 nhi_req_i,
  input  logic [2:0]                 nhi_we_i,
  input  logic [2:0][BEAT_B-1:0]     nhi_be_i,
  input  logic [2:0][31:0]           nhi_addr_i,
  input  logic [2:0][WIDE_W-1:0]     nhi_wdata_i,
  output logic [2:0]                 nhi_gnt_o,
  output logic [2:0]                 nhi_rvalid_o,
  output logic [2:0][WIDE_W-1:0]     nhi_rdata_o,
  // ---- NIC outbound engine: NIC commands
  output logic                       nic_cmd_valid_o,
  input  logic                       nic_cmd_ready_i,
  output cmd_t                       nic_cmd_o,
  input  logic                       nic_resp_valid_i,
  output logic                       nic_resp_ready_o,
  input  cmd_resp_t                  nic_resp_i,
  // ---- host interface: off-cluster DMA writes
  output logic                       dma_hw_valid_o,
  input  logic                       dma_hw_ready_i,
  output logic [63:0]                dma_hw_addr_o,
  output logic [WIDE_W-1:0]          dma_hw_data_o,
  output logic [BEAT_B-1:0]          dma_hw_strb_o,
  // ---- host interface: HostDirect writes
  output logic                       hd_hw_valid_o,
  input  logic                       hd_hw_ready_i,
  output logic [63:0]                hd_hw_addr_o,
  output logic [HOSTDIR_W-1:0]       hd_hw_data_o,
  input  logic                       hd_hw_ack_i,
  // ---- program memory: 0 host, 1 instruction refill
  input  logic [1:0]                 pm_req_i,
  input  logic [1:0]                 pm_we_i,
  input  logic [1:0][7:0]            pm_be_i,
  input  logic [1:0][31:0]           pm_addr_i,
  input  logic [1:0][63:0]           pm_wdata_i,
  output logic [1:0]                 pm_gnt_o,
  output logic [1:0]                 pm_rvalid_o,
  output logic [63:0]                pm_rdata_o,
  // ---- HPU cores
  input  logic [NC-1:0][NH-1:0]       core_req_i,
  input  logic [NC-1:0][NH-1:0]       core_we_i,
  input  logic [NC-1:0][NH-1:0][7:0]  core_addr_i,
  input  logic [NC-1:0][NH-1:0][31:0] core_wdata_i,
  output logic [NC-1:0][NH-1:0]       core_gnt_o,
  output logic [NC-1:0][NH-1:0]       core_rvalid_o,
  output logic [NC-1:0][NH-1:0][31:0] core_rdata_o,
  output logic [NC-1:0][NH-1:0]       clk_en_o,
  output logic [NC-1:0][NH-1:0]       irq_o,
  output logic [NC-1:0][NH-1:0][3:0][31:0] pmp_base_o,
  output logic [NC-1:0][NH-1:0][3:0][31:0] pmp_size_o,
  input  logic [NC-1:0][NH-1:0]       tcdm_req_i,
  input  logic [NC-1:0][NH-1:0]       tcdm_we_i,
  input  logic [NC-1:0][NH-1:0][3:0]  tcdm_be_i,
  input  logic [NC-1:0][NH-1:0][31:0] tcdm_addr_i,
  input  logic [NC-1:0][NH-1:0][31:0] tcdm_wdata_i,
  output logic [NC-1:0][NH-1:0]       tcdm_gnt_o,
  output logic [NC-1:0][NH-1:0]       tcdm_rvalid_o,
  output logic [NC-1:0][NH-1:0][31:0] tcdm_rdata_o,
  // ---- events, one-cycle pulses (for monitoring)
  output logic                       ev_home_o,         // task sent to its home cluster
  output logic                       ev_dispatch_block_o,// no cluster could take a task
  output logic                       ev_mpq_timeout_o,  // MPQ reset by the monitor
  output logic                       ev_watchdog_o,     // a handler watchdog fired
  output logic                       ev_tcdm_conflict_o,// L1 bank conflict
  output logic                       ev_l2_conflict_o   // L2 port conflict
);
  localparam int unsigned MW = $clog2(NUM_MPQ);

  // ====================================================== packet scheduler
  logic      task_valid, task_ready;
  task_t     tsk;
  logic      fb_valid;
  feedback_t fb;
  logic      touch_valid, reset_valid, reset_ack;
  logic [MW-1:0] touch_id, reset_id;
  logic [31:0]   touch_thr;
  logic [NUM_MPQ-1:0] mpq_idle;

  mpq_engine #(.HER_BUF(HER_BUF)) u_mpq (
    .clk_i, .rst_ni,
    .her_valid_i, .her_ready_o, .her_i,
    .task_valid_o(task_valid), .task_ready_i(task_ready), .task_o(tsk),
    .fb_valid_i(fb_valid), .fb_i(fb),
    .nic_fb_valid_o, .nic_fb_o,
    .touch_valid_o(touch_valid), .touch_id_o(touch_id), .touch_thr_o(touch_thr),
    .idle_o(mpq_idle), .reset_valid_i(reset_valid), .reset_id_i(reset_id),
    .reset_ack_o(reset_ack)
  );

  mpq_monitor u_mon (
    .clk_i, .rst_ni,
    .touch_valid_i(touch_valid), .touch_id_i(touch_id), .touch_thr_i(touch_thr),
    .idle_i(mpq_idle), .reset_valid_o(reset_valid), .reset_id_o(reset_id),
    .reset_ack_i(reset_ack)
  );
  assign ev_mpq_timeout_o = reset_ack;

  logic [NC-1:0] cl_valid, cl_ready, credit_ret;
  task_t         cl_task;
  task_dispatcher #(.NUM_CLUSTERS_P(NC)) u_disp (
    .clk_i, .rst_ni,
    .task_valid_i(task_valid), .task_ready_o(task_ready), .task_i(tsk),
    .cl_valid_o(cl_valid), .cl_ready_i(cl_ready), .cl_task_o(cl_task),
    .credit_ret_i(credit_ret),
    .home_hit_o(ev_home_o), .blocked_o(ev_dispatch_block_o)
  );

  // ============================================================ clusters
  logic [NC-1:0]  c_fb_valid, c_fb_ready, c_cmd_valid, c_cmd_ready, c_resp_valid;
  feedback_t      c_fb  [NC];
  cmd_t           c_cmd [NC];
  cmd_resp_t      resp;
  logic [NC-1:0]  c_l2_req, c_l2_gnt, c_l2_rvalid;
  logic [NC-1:0][31:0]       c_l2_addr;
  logic [NC-1:0][WIDE_W-1:0] c_l2_rdata;
  logic [NC-1:0]  c_wd, c_conf;

  for (genvar c = 0; c < NC; c++) begin : g_cl
    pspin_cluster #(.NUM_HPUS_P(NH), .L1_SIZE(L1_SIZE)) u_cluster (
      .clk_i, .rst_ni, .cluster_id_i(CLUSTER_ID_W'(c)),
      .task_valid_i(cl_valid[c]), .task_ready_o(cl_ready[c]), .task_i(cl_task),
      .fb_valid_o(c_fb_valid[c]), .fb_ready_i(c_fb_ready[c]), .fb_o(c_fb[c]),
      .credit_ret_o(credit_ret[c]),
      .cmd_valid_o(c_cmd_valid[c]), .cmd_ready_i(c_cmd_ready[c]), .cmd_o(c_cmd[c]),
      .resp_valid_i(c_resp_valid[c]), .resp_i(resp),
      .l2_req_o(c_l2_req[c]), .l2_addr_o(c_l2_addr[c]), .l2_gnt_i(c_l2_gnt[c]),
      .l2_rvalid_i(c_l2_rvalid[c]), .l2_rdata_i(c_l2_rdata[c]),
      .core_req_i(core_req_i[c]), .core_we_i(core_we_i[c]), .core_addr_i(core_addr_i[c]),
      .core_wdata_i(core_wdata_i[c]), .core_gnt_o(core_gnt_o[c]),
      .core_rvalid_o(core_rvalid_o[c]), .core_rdata_o(core_rdata_o[c]),
      .clk_en_o(clk_en_o[c]), .irq_o(irq_o[c]),
      .pmp_base_o(pmp_base_o[c]), .pmp_size_o(pmp_size_o[c]),
      .tcdm_req_i(tcdm_req_i[c]), .tcdm_we_i(tcdm_we_i[c]), .tcdm_be_i(tcdm_be_i[c]),
      .tcdm_addr_i(tcdm_addr_i[c]), .tcdm_wdata_i(tcdm_wdata_i[c]),
      .tcdm_gnt_o(tcdm_gnt_o[c]), .tcdm_rvalid_o(tcdm_rvalid_o[c]),
      .tcdm_rdata_o(tcdm_rdata_o[c]),
      .wd_fire_o(c_wd[c]), .tcdm_conflict_o(c_conf[c])
    );
  end
  assign ev_watchdog_o      = |c_wd;
  assign ev_tcdm_conflict_o = |c_conf;

  // completion notifications: one cluster per cycle, round robin
  logic [$clog2(NC)-1:0] fb_idx;
  rr_arb #(.N(NC)) u_fb_arb (
    .clk_i, .rst_ni, .req_i(c_fb_valid), .advance_i(1'b1),
    .gnt_o(c_fb_ready), .idx_o(fb_idx), .valid_o(fb_valid)
  );
  assign fb = c_fb[fb_idx];

  // ========================================================= command path
  logic [2:0] d_valid, d_ready, d_resp_valid, d_resp_ready;
  cmd_t       d_cmd;
  cmd_resp_t  d_resp [3];

  cmd_unit #(.NUM_CLUSTERS_P(NC)) u_cmd (
    .clk_i, .rst_ni,
    .cl_cmd_valid_i(c_cmd_valid), .cl_cmd_ready_o(c_cmd_ready), .cl_cmd_i(c_cmd),
    .cl_resp_valid_o(c_resp_valid), .cl_resp_o(resp),
    .dst_valid_o(d_valid), .dst_ready_i(d_ready), .dst_cmd_o(d_cmd),
    .dst_resp_valid_i(d_resp_valid), .dst_resp_ready_o(d_resp_ready), .dst_resp_i(d_resp)
  );

  assign nic_cmd_valid_o  = d_valid[0];
  assign d_ready[0]       = nic_cmd_ready_i;
  assign nic_cmd_o        = d_cmd;
  assign d_resp_valid[0]  = nic_resp_valid_i;
  assign nic_resp_ready_o = d_resp_ready[0];
  assign d_resp[0]        = nic_resp_i;

  // off-cluster DMA engine, NHI master 3
  logic              od_req, od_gnt, od_rvalid;
  logic [31:0]       od_addr;
  logic [WIDE_W-1:0] od_rdata;
  offcluster_dma u_odma (
    .clk_i, .rst_ni,
    .cmd_valid_i(d_valid[1]), .cmd_ready_o(d_ready[1]), .cmd_i(d_cmd),
    .resp_valid_o(d_resp_valid[1]), .resp_ready_i(d_resp_ready[1]), .resp_o(d_resp[1]),
    .rd_req_o(od_req), .rd_addr_o(od_addr), .rd_gnt_i(od_gnt),
    .rd_rvalid_i(od_rvalid), .rd_rdata_i(od_rdata),
    .hw_valid_o(dma_hw_valid_o), .hw_ready_i(dma_hw_ready_i), .hw_addr_o(dma_hw_addr_o),
    .hw_data_o(dma_hw_data_o), .hw_strb_o(dma_hw_strb_o)
  );

  host_direct u_hd (
    .clk_i, .rst_ni,
    .cmd_valid_i(d_valid[2]), .cmd_ready_o(d_ready[2]), .cmd_i(d_cmd),
    .resp_valid_o(d_resp_valid[2]), .resp_ready_i(d_resp_ready[2]), .resp_o(d_resp[2]),
    .hw_valid_o(hd_hw_valid_o), .hw_ready_i(hd_hw_ready_i), .hw_addr_o(hd_hw_addr_o),
    .hw_data_o(hd_hw_data_o), .hw_ack_i(hd_hw_ack_i)
  );

  // ========================================================== interconnects
  // slave 0: L2 packet buffer, slave 1: L2 handler memory
  logic [1:0]              pa_req, pa_we, pa_gnt, pa_rvalid;   // NHI side
  logic [1:0][BEAT_B-1:0]  pa_be;
  logic [1:0][31:0]        pa_addr;
  logic [1:0][WIDE_W-1:0]  pa_wdata, pa_rdata;
  logic [1:0]              pb_req, pb_we, pb_gnt, pb_rvalid;   // DMA side
  logic [1:0][BEAT_B-1:0]  pb_be;
  logic [1:0][31:0]        pb_addr;
  logic [1:0][WIDE_W-1:0]  pb_wdata, pb_rdata;

  mem_xbar #(.NM(4), .NS(2)) u_nhi (
    .clk_i, .rst_ni,
    .m_req_i   ({od_req,   nhi_req_i}),
    .m_we_i    ({1'b0,     nhi_we_i}),
    .m_be_i    ({{BEAT_B{1'b0}}, nhi_be_i}),
    .m_addr_i  ({od_addr,  nhi_addr_i}),
    .m_wdata_i ({{WIDE_W{1'b0}}, nhi_wdata_i}),
    .m_gnt_o   ({od_gnt,   nhi_gnt_o}),
    .m_rvalid_o({od_rvalid, nhi_rvalid_o}),
    .m_rdata_o ({od_rdata, nhi_rdata_o}),
    .s_req_o(pa_req), .s_we_o(pa_we), .s_be_o(pa_be), .s_addr_o(pa_addr),
    .s_wdata_o(pa_wdata), .s_gnt_i(pa_gnt), .s_rvalid_i(pa_rvalid), .s_rdata_i(pa_rdata)
  );

  logic [NC-1:0][BEAT_B-1:0] c_l2_be;
  logic [NC-1:0][WIDE_W-1:0] c_l2_wdata;
  assign c_l2_be    = '0;
  assign c_l2_wdata = '0;
  mem_xbar #(.NM(NC), .NS(2)) u_dmax (
    .clk_i, .rst_ni,
    .m_req_i(c_l2_req), .m_we_i('0), .m_be_i(c_l2_be), .m_addr_i(c_l2_addr),
    .m_wdata_i(c_l2_wdata), .m_gnt_o(c_l2_gnt), .m_rvalid_o(c_l2_rvalid),
    .m_rdata_o(c_l2_rdata),
    .s_req_o(pb_req), .s_we_o(pb_we), .s_be_o(pb_be), .s_addr_o(pb_addr),
    .s_wdata_o(pb_wdata), .s_gnt_i(pb_gnt), .s_rvalid_i(pb_rvalid), .s_rdata_i(pb_rdata)
  );

  // ============================================================ L2 memories
  logic [1:0] l2_conf;
  l2_mem #(.SIZE_BYTES(L2_PKT_SIZE), .NBANKS(32), .BANK_W(512)) u_l2_pkt (
    .clk_i, .rst_ni,
    .req_i({pb_req[0], pa_req[0]}), .we_i({pb_we[0], pa_we[0]}),
    .be_i({pb_be[0], pa_be[0]}), .addr_i({pb_addr[0], pa_addr[0]}),
    .wdata_i({pb_wdata[0], pa_wdata[0]}), .gnt_o({pb_gnt[0], pa_gnt[0]}),
    .rvalid_o({pb_rvalid[0], pa_rvalid[0]}), .rdata_o({pb_rdata[0], pa_rdata[0]}),
    .conflict_o(l2_conf[0])
  );
  l2_mem #(.SIZE_BYTES(L2_HND_SIZE), .NBANKS(32), .BANK_W(64)) u_l2_hnd (
    .clk_i, .rst_ni,
    .req_i({pb_req[1], pa_req[1]}), .we_i({pb_we[1], pa_we[1]}),
    .be_i({pb_be[1], pa_be[1]}), .addr_i({pb_addr[1], pa_addr[1]}),
    .wdata_i({pb_wdata[1], pa_wdata[1]}), .gnt_o({pb_gnt[1], pa_gnt[1]}),
    .rvalid_o({pb_rvalid[1], pa_rvalid[1]}), .rdata_o({pb_rdata[1], pa_rdata[1]}),
    .conflict_o(l2_conf[1])
  );
  assign ev_l2_conflict_o = |l2_conf;

  prog_mem u_prog (
    .clk_i, .rst_ni,
    .req_i(pm_req_i), .we_i(pm_we_i), .be_i(pm_be_i), .addr_i(pm_addr_i),
    .wdata_i(pm_wdata_i), .gnt_o(pm_gnt_o), .rvalid_o(pm_rvalid_o), .rdata_o(pm_rdata_o)
  );
endmodule
