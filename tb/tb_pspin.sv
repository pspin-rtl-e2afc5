// tb_pspin: end-to-end test of the PsPIN top level at its default size.
//
// Around the top: 32 behavioural HPUs (hpu_model), a NIC inbound model that
// writes each packet into the L2 packet buffer through the NHI interconnect
// and then sends its HER, a NIC outbound model that executes NIC commands by
// reading the packet back from L2, a host model that takes DMA and
// HostDirect writes and checks their data, and a host master that reads the
// packet buffer in the background.
//
// Scenario (message id: what it exercises):
//   0-7   5 packets of 64, 512, 1024, 65 and 200 B with header, payload and
//         completion handlers; payload handlers send plain / DMA / NIC /
//         HostDirect commands (message id mod 4)
//   20-23 50 packets of 64 B each with long payload handlers, so that every
//         cluster fills up and the task dispatcher has to block
//   40    one packet and no end-of-message: the MPQ monitor must reset it
//   41    a payload handler that never returns: watchdog, error report
//   42    header handler only: the other packets are freed without a task
// Checked: packet data in L1, in host memory and at the NIC outbound; sPIN
// handler ordering; every packet freed exactly once; every MPQ released;
// error notifications; the count of every mechanism (home-cluster hit,
// dispatch block, MPQ timeout, watchdog, L1 bank conflict, L2 port conflict).
module tb_pspin;
  import pspin_pkg::*;
  import pspin_tb_pkg::*;

  localparam int NC = NUM_CLUSTERS, NH = NUM_HPUS;
  localparam int MAX_CYCLES = 400000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ----------------------------------------------------------- DUT ports
  logic her_valid, her_ready;  her_t her;
  logic nic_fb_valid;          feedback_t nic_fb;
  logic [2:0] nhi_req, nhi_we, nhi_gnt, nhi_rvalid;
  logic [2:0][63:0] nhi_be;
  logic [2:0][31:0] nhi_addr;
  logic [2:0][511:0] nhi_wdata, nhi_rdata;
  logic nic_cmd_valid, nic_cmd_ready, nic_resp_valid, nic_resp_ready;
  cmd_t nic_cmd; cmd_resp_t nic_resp;
  logic dma_hw_valid, dma_hw_ready; logic [63:0] dma_hw_addr; logic [511:0] dma_hw_data;
  logic [63:0] dma_hw_strb;
  logic hd_hw_valid, hd_hw_ready, hd_hw_ack; logic [63:0] hd_hw_addr; logic [255:0] hd_hw_data;
  logic [1:0] pm_req, pm_we, pm_gnt, pm_rvalid; logic [1:0][7:0] pm_be;
  logic [1:0][31:0] pm_addr; logic [1:0][63:0] pm_wdata; logic [63:0] pm_rdata;
  logic [NC-1:0][NH-1:0] core_req, core_we, core_gnt, core_rvalid, clk_en, irq;
  logic [NC-1:0][NH-1:0][7:0] core_addr;
  logic [NC-1:0][NH-1:0][31:0] core_wdata, core_rdata;
  logic [NC-1:0][NH-1:0][3:0][31:0] pmp_base, pmp_size;
  logic [NC-1:0][NH-1:0] tcdm_req, tcdm_we, tcdm_gnt, tcdm_rvalid;
  logic [NC-1:0][NH-1:0][3:0] tcdm_be;
  logic [NC-1:0][NH-1:0][31:0] tcdm_addr, tcdm_wdata, tcdm_rdata;
  logic ev_home, ev_block, ev_mpq_to, ev_wd, ev_tcdm, ev_l2;

  pspin dut (
    .clk_i(clk), .rst_ni(rst_n),
    .her_valid_i(her_valid), .her_ready_o(her_ready), .her_i(her),
    .nic_fb_valid_o(nic_fb_valid), .nic_fb_o(nic_fb),
    .nhi_req_i(nhi_req), .nhi_we_i(nhi_we), .nhi_be_i(nhi_be), .nhi_addr_i(nhi_addr),
    .nhi_wdata_i(nhi_wdata), .nhi_gnt_o(nhi_gnt), .nhi_rvalid_o(nhi_rvalid),
    .nhi_rdata_o(nhi_rdata),
    .nic_cmd_valid_o(nic_cmd_valid), .nic_cmd_ready_i(nic_cmd_ready), .nic_cmd_o(nic_cmd),
    .nic_resp_valid_i(nic_resp_valid), .nic_resp_ready_o(nic_resp_ready), .nic_resp_i(nic_resp),
    .dma_hw_valid_o(dma_hw_valid), .dma_hw_ready_i(dma_hw_ready), .dma_hw_addr_o(dma_hw_addr),
    .dma_hw_data_o(dma_hw_data), .dma_hw_strb_o(dma_hw_strb),
    .hd_hw_valid_o(hd_hw_valid), .hd_hw_ready_i(hd_hw_ready), .hd_hw_addr_o(hd_hw_addr),
    .hd_hw_data_o(hd_hw_data), .hd_hw_ack_i(hd_hw_ack),
    .pm_req_i(pm_req), .pm_we_i(pm_we), .pm_be_i(pm_be), .pm_addr_i(pm_addr),
    .pm_wdata_i(pm_wdata), .pm_gnt_o(pm_gnt), .pm_rvalid_o(pm_rvalid), .pm_rdata_o(pm_rdata),
    .core_req_i(core_req), .core_we_i(core_we), .core_addr_i(core_addr),
    .core_wdata_i(core_wdata), .core_gnt_o(core_gnt), .core_rvalid_o(core_rvalid),
    .core_rdata_o(core_rdata), .clk_en_o(clk_en), .irq_o(irq),
    .pmp_base_o(pmp_base), .pmp_size_o(pmp_size),
    .tcdm_req_i(tcdm_req), .tcdm_we_i(tcdm_we), .tcdm_be_i(tcdm_be), .tcdm_addr_i(tcdm_addr),
    .tcdm_wdata_i(tcdm_wdata), .tcdm_gnt_o(tcdm_gnt), .tcdm_rvalid_o(tcdm_rvalid),
    .tcdm_rdata_o(tcdm_rdata),
    .ev_home_o(ev_home), .ev_dispatch_block_o(ev_block), .ev_mpq_timeout_o(ev_mpq_to),
    .ev_watchdog_o(ev_wd), .ev_tcdm_conflict_o(ev_tcdm), .ev_l2_conflict_o(ev_l2)
  );

  // ------------------------------------------------------------- HPUs
  for (genvar c = 0; c < NC; c++) begin : g_c
    for (genvar h = 0; h < NH; h++) begin : g_h
      hpu_model u_hpu (
        .clk_i(clk),
        .core_req_o(core_req[c][h]), .core_we_o(core_we[c][h]), .core_addr_o(core_addr[c][h]),
        .core_wdata_o(core_wdata[c][h]), .core_gnt_i(core_gnt[c][h]),
        .core_rvalid_i(core_rvalid[c][h]), .core_rdata_i(core_rdata[c][h]), .irq_i(irq[c][h]),
        .tcdm_req_o(tcdm_req[c][h]), .tcdm_we_o(tcdm_we[c][h]), .tcdm_be_o(tcdm_be[c][h]),
        .tcdm_addr_o(tcdm_addr[c][h]), .tcdm_wdata_o(tcdm_wdata[c][h]),
        .tcdm_gnt_i(tcdm_gnt[c][h]), .tcdm_rvalid_i(tcdm_rvalid[c][h]),
        .tcdm_rdata_i(tcdm_rdata[c][h])
      );
    end
  end

  // ---------------------------------------------------------- counters
  int cycles = 0;
  int n_home = 0, n_block = 0, n_mpq_to = 0, n_wd = 0, n_tcdm = 0, n_l2 = 0;
  int n_last_use = 0, n_mpq_free = 0, n_err_fb = 0, n_gated = 0;
  int n_hd_writes = 0, n_dma_beats = 0, n_nic_done = 0, n_host_reads = 0;
  int freed [4096];
  always @(posedge clk) if (rst_n) begin
    cycles++;
    n_home   += int'(ev_home);
    n_block  += int'(ev_block);
    n_mpq_to += int'(ev_mpq_to);
    n_wd     += int'(ev_wd);
    n_tcdm   += int'(ev_tcdm);
    n_l2     += int'(ev_l2);
    if (!(&clk_en)) n_gated++;
    if (nic_fb_valid) begin
      if (nic_fb.last_use) begin
        int g;
        g = int'((nic_fb.pkt_addr - L2_PKT_BASE) >> 10);
        n_last_use++;
        freed[g]++;
        // a packet whose handler issued a command is released only after
        // the command has completed
        if (cmd_expect[g] > 0)
          check(cmd_seen[g] == cmd_expect[g],
                $sformatf("packet %0d released before its command completed", g));
      end
      n_mpq_free += int'(nic_fb.mpq_free);
      n_err_fb   += int'(nic_fb.error);
    end
  end

  // ------------------------------------------------ NIC inbound model
  logic        in_req = 0;
  logic [31:0] in_addr = 0;
  logic [511:0] in_wdata = '0;
  logic        ob_req = 0;
  logic [31:0] ob_addr = 0;
  logic        hm_req = 0;
  logic [31:0] hm_addr = 0;
  assign nhi_req   = {ob_req, in_req, hm_req};
  assign nhi_we    = 3'b010;
  assign nhi_be    = {64'd0, {64{1'b1}}, 64'd0};
  assign nhi_addr  = {ob_addr, in_addr, hm_addr};
  assign nhi_wdata = {512'd0, in_wdata, 512'd0};

  int g_next = 0;
  int total_pkts = 0;

  task automatic write_packet(int g, int size);
    int beats;
    beats = (size + 63) / 64;
    for (int b = 0; b < beats; b++) begin
      @(negedge clk);
      in_req  = 1;
      in_addr = L2_PKT_BASE + 32'(g * 1024 + b * 64);
      for (int k = 0; k < 16; k++) in_wdata[k*32 +: 32] = pkt_word(g, b * 16 + k);
      #1;
      while (!nhi_gnt[1]) begin @(negedge clk); #1; end
    end
    @(negedge clk);
    in_req = 0;
  endtask

  // packet p of npkts of message m
  task automatic send_pkt(int m, int p, int npkts, int size0, bit hh, int ph_mode, bit th,
                          bit eom, int mpq_to, int hpu_to, int hcyc);
    hcycles[m] = hcyc;
    begin
      int g, size;
      her_t h;
      g = g_next++;
      size = (size0 > 0) ? size0 : ((p % 5 == 0) ? 64 : (p % 5 == 1) ? 512 :
                                    (p % 5 == 2) ? 1024 : (p % 5 == 3) ? 65 : 200);
      write_packet(g, size);
      h = '0;
      h.msgid            = MSGID_W'(m);
      h.eom              = eom && (p == npkts - 1);
      h.pkt_addr         = L2_PKT_BASE + 32'(g * 1024);
      h.pkt_size         = 16'(size);
      h.copy_size        = 16'(size);
      h.ctx.hh_en        = hh;
      h.ctx.ph_en        = (ph_mode >= 0);
      h.ctx.th_en        = th;
      h.ctx.hh_addr      = 32'h100;
      h.ctx.ph_addr      = 32'h200 + 32'(ph_mode);
      h.ctx.th_addr      = 32'h300;
      h.ctx.hmem_addr    = L2_HND_BASE;
      h.ctx.hmem_size    = 32'h1000;
      h.ctx.scratch_addr = L1_BASE + 32'h1_0000;
      h.ctx.scratch_size = 32'h1000;
      h.ctx.host_desc_addr = 32'h2000_0000 + 32'(m) * 64;
      h.ctx.mpq_timeout  = 32'(mpq_to);
      h.ctx.hpu_timeout  = 32'(hpu_to);
      @(negedge clk);
      her_valid = 1;
      her       = h;
      #1;
      while (!her_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      her_valid = 0;
      pkts_sent[m]++;
      total_pkts++;
    end
  endtask

  task automatic send_msg(int m, int npkts, int size0, bit hh, int ph_mode, bit th,
                          bit eom, int mpq_to, int hpu_to, int hcyc);
    for (int p = 0; p < npkts; p++)
      send_pkt(m, p, npkts, size0, hh, ph_mode, th, eom, mpq_to, hpu_to, hcyc);
  endtask

  // ----------------------------------------------- NIC outbound model
  assign nic_cmd_ready = 1'b1;
  cmd_t ob_q[$];
  always @(posedge clk) if (rst_n && nic_cmd_valid) ob_q.push_back(nic_cmd);
  initial begin
    nic_resp_valid = 0;
    nic_resp = '0;
    forever begin
      cmd_t c;
      @(negedge clk);
      if (ob_q.size() > 0) begin
        int g;
        c = ob_q.pop_front();
        g = int'(c.dst_addr[31:0]);
        // read the first beat of the packet back from L2
        ob_req  = 1;
        ob_addr = c.src_addr;
        #1;
        while (!nhi_gnt[2]) begin @(negedge clk); #1; end
        @(negedge clk);
        ob_req = 0;
        check(nhi_rvalid[2] && nhi_rdata[2][31:0] == pkt_word(g, 0),
              $sformatf("NIC outbound data of packet %0d", g));
        nic_resp_valid = 1;
        nic_resp.id    = c.id;
        nic_resp.error = 0;
        #1;
        while (!nic_resp_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        nic_resp_valid = 0;
        n_nic_done++;
        cmd_seen[g]++;
      end
    end
  end

  // --------------------------------------------------------- host model
  logic dma_rdy = 0;                        // accepts every other cycle
  always @(negedge clk) dma_rdy <= !dma_rdy;
  assign dma_hw_ready = dma_rdy;
  assign hd_hw_ready  = 1'b1;
  always @(posedge clk) begin
    hd_hw_ack <= rst_n && hd_hw_valid;
    if (rst_n && dma_hw_valid && dma_hw_ready) begin
      int g, b;
      g = int'((dma_hw_addr[31:0] - 32'h8000_0000) >> 10);
      b = int'(dma_hw_addr[9:6]);
      n_dma_beats++;
      cmd_seen[g]++;
      check(dma_hw_addr[63:32] == 32'h1 && dma_hw_data[31:0] == pkt_word(g, b * 16),
            $sformatf("DMA host data of packet %0d beat %0d", g, b));
    end
    if (rst_n && hd_hw_valid && hd_hw_ready) begin
      n_hd_writes++;
      if (hd_hw_addr[31:28] == 4'h2) begin
        n_err_reports++;
        check(hd_hw_data[31:0] == 32'hDEAD && hd_hw_addr[31:0] == 32'h2000_0000 + 41 * 64,
              "error report in the execution context descriptor");
      end else begin
        int g;
        g = int'((hd_hw_addr[31:0] - 32'h4000_0000) >> 5);
        check(hd_hw_data[31:0] == pkt_word(g, 0), $sformatf("HostDirect data of packet %0d", g));
        cmd_seen[g]++;
      end
    end
  end

  // host master reading the packet buffer in the background
  bit hm_run = 0;
  initial begin
    forever begin
      @(negedge clk);
      if (hm_run && g_next > 2) begin
        int g;
        g = $urandom_range(0, g_next - 2);
        hm_req  = 1;
        hm_addr = L2_PKT_BASE + 32'(g * 1024);
        #1;
        while (!nhi_gnt[0]) begin @(negedge clk); #1; end
        @(negedge clk);
        hm_req = 0;
        n_host_reads++;
        check(nhi_rvalid[0] && nhi_rdata[0][31:0] == pkt_word(g, 0),
              $sformatf("host read of packet %0d: %0d %h", g, nhi_rvalid[0], nhi_rdata[0][31:0]));
      end
    end
  end

  // program memory: the host loads code, the refill port reads it back
  task automatic pm_access(int p, bit we, logic [31:0] a, logic [63:0] wd,
                           output logic [63:0] rd);
    @(negedge clk);
    pm_req[p] = 1; pm_we[p] = we; pm_addr[p] = a; pm_wdata[p] = wd; pm_be[p] = 8'hFF;
    #1;
    while (!pm_gnt[p]) begin @(negedge clk); #1; end
    @(negedge clk);
    pm_req[p] = 0;
    rd = pm_rdata;
  endtask

  // ------------------------------------------------------------ main
  initial begin
    logic [63:0] rd;
    her_valid = 0; her = '0;
    pm_req = 0; pm_we = 0; pm_be = 0; pm_addr = 0; pm_wdata = 0;
    for (int m = 0; m < 256; m++) begin
      hh_started[m] = 0; hh_done[m] = 0; ph_started[m] = 0; ph_done[m] = 0;
      th_started[m] = 0; pkts_sent[m] = 0; hcycles[m] = 20;
    end
    for (int g = 0; g < 4096; g++) begin freed[g] = 0; cmd_expect[g] = 0; cmd_seen[g] = 0; end
    repeat (5) @(negedge clk);
    rst_n = 1;

    // handler code into program memory, read back through the refill port
    for (int i = 0; i < 8; i++) pm_access(0, 1, 32'(i * 8), 64'hC0DE_0000_0000_0000 | 64'(i), rd);
    for (int i = 0; i < 8; i++) begin
      pm_access(1, 0, 32'(i * 8), 0, rd);
      check(rd == (64'hC0DE_0000_0000_0000 | 64'(i)), "program memory read back");
    end

    // messages with all three handlers and commands
    for (int m = 0; m < 8; m++) send_msg(m, 5, 0, 1, m % 4, 1, 1, 1000000, 0, 20);
    // a message whose end never arrives (MPQ monitor)
    send_msg(40, 1, 64, 0, 0, 0, 0, 2000, 0, 20);
    // a payload handler that hangs (watchdog)
    send_msg(41, 1, 128, 0, 4, 0, 1, 1000000, 300, 20);
    // header handler only
    send_msg(42, 3, 256, 1, -1, 0, 1, 1000000, 0, 20);
    // load: long handlers on four messages, host reads in the background
    hm_run = 1;
    for (int p = 0; p < 50; p++)
      for (int m = 20; m < 24; m++)
        send_pkt(m, p, 50, 64, 0, 0, 0, 1, 1000000, 0, 400);
    hm_run = 0;

    // drain
    while (n_last_use < total_pkts || n_mpq_free < 15) @(negedge clk);
    repeat (50) @(negedge clk);

    check(total_pkts == 245, "packets sent");
    check(n_last_use == total_pkts, $sformatf("packets freed: %0d", n_last_use));
    for (int g = 0; g < total_pkts; g++)
      if (freed[g] != 1) check(0, $sformatf("packet %0d freed %0d times", g, freed[g]));
    check(n_mpq_free == 15, $sformatf("MPQs released: %0d", n_mpq_free));
    check(n_err_fb == 2, $sformatf("error notifications: %0d", n_err_fb));
    check(n_hh == 9, $sformatf("header handlers: %0d", n_hh));
    check(n_ph == 242, $sformatf("payload handlers: %0d", n_ph));
    check(n_th == 8, $sformatf("completion handlers: %0d", n_th));
    check(n_cmd_dma == 10 && n_cmd_nic == 10 && n_cmd_hd == 10, "commands issued");
    check(n_nic_done == 10, "NIC commands executed");
    check(n_hd_writes == 11, $sformatf("HostDirect writes: %0d", n_hd_writes));
    check(n_err_reports == 1, "error reports");
    // DMA beats: sizes 64,512,1024,65,200 -> 1+8+16+2+4 = 31 beats per message
    check(n_dma_beats == 62, $sformatf("DMA beats: %0d", n_dma_beats));
    check(n_irq == 1, "watchdog interrupt seen by the HPU");
    // every mechanism must have happened
    check(n_home  > 0, $sformatf("home-cluster dispatch: %0d", n_home));
    check(n_block > 0, $sformatf("dispatcher blocked: %0d cycles", n_block));
    check(n_mpq_to == 1, $sformatf("MPQ timeouts: %0d", n_mpq_to));
    check(n_wd == 1, $sformatf("watchdog fired: %0d", n_wd));
    check(n_tcdm > 0, $sformatf("L1 bank conflicts: %0d", n_tcdm));
    check(n_l2 > 0, $sformatf("L2 port conflicts: %0d", n_l2));
    check(n_gated > 0, "idle HPUs clock-gated");
    check(n_host_reads > 0, "host reads");
    $display("cycles=%0d home=%0d block=%0d mpq_to=%0d wd=%0d tcdm_conf=%0d l2_conf=%0d",
             cycles, n_home, n_block, n_mpq_to, n_wd, n_tcdm, n_l2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (MAX_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish (freed %0d/%0d, mpq_free %0d)",
             n_last_use, total_pkts, n_mpq_free);
    $display("  cmds dma %0d nic %0d hd %0d; nic done %0d, hd writes %0d, dma beats %0d",
             n_cmd_dma, n_cmd_nic, n_cmd_hd, n_nic_done, n_hd_writes, n_dma_beats);
    for (int m = 0; m < 64; m++)
      if (pkts_sent[m] > 0)
        $display("  msg %0d: sent %0d hh %0d/%0d ph %0d/%0d th %0d", m, pkts_sent[m],
                 hh_started[m], hh_done[m], ph_started[m], ph_done[m], th_started[m]);
    for (int g = 0; g < total_pkts; g++)
      if (freed[g] != 1) $display("  packet %0d freed %0d times", g, freed[g]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
