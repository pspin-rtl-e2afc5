// hpu_model: behavioural stand-in for one RISC-V HPU running the PsPIN
// runtime loop.
//
// Loop: read the handler pointer from the HPU driver (the read is held while
// the driver has no task), read the arguments, run the handler, write the
// doorbell. The handler is chosen by the pointer (see pspin_tb_pkg); every
// handler first reads the first and last word of its packet copy in L1 and
// checks them, then spends `pspin_tb_pkg::hcycles[msg]` cycles and issues
// its command, if any. The sPIN ordering rules are checked on the fly: a
// payload handler must not start before the header handler of its message
// finished, a completion handler not before every payload handler finished.
// All signals are driven at the falling edge and sampled 1 time unit later.
module hpu_model
  import pspin_tb_pkg::*;
(
  input  logic        clk_i,
  output logic        core_req_o,
  output logic        core_we_o,
  output logic [7:0]  core_addr_o,
  output logic [31:0] core_wdata_o,
  input  logic        core_gnt_i,
  input  logic        core_rvalid_i,
  input  logic [31:0] core_rdata_i,
  input  logic        irq_i,
  output logic        tcdm_req_o,
  output logic        tcdm_we_o,
  output logic [3:0]  tcdm_be_o,
  output logic [31:0] tcdm_addr_o,
  output logic [31:0] tcdm_wdata_o,
  input  logic        tcdm_gnt_i,
  input  logic        tcdm_rvalid_i,
  input  logic [31:0] tcdm_rdata_i
);
  initial begin
    core_req_o = 0; core_we_o = 0; core_addr_o = 0; core_wdata_o = 0;
    tcdm_req_o = 0; tcdm_we_o = 0; tcdm_be_o = 0; tcdm_addr_o = 0; tcdm_wdata_o = 0;
  end

  task automatic reg_access(input bit we, input logic [7:0] a, input logic [31:0] wd,
                            output logic [31:0] rd);
    @(negedge clk_i);
    core_req_o = 1; core_we_o = we; core_addr_o = a; core_wdata_o = wd;
    #1;
    while (!core_gnt_i) begin @(negedge clk_i); #1; end
    @(negedge clk_i);
    core_req_o = 0;
    rd = core_rdata_i;
  endtask

  task automatic l1_read(input logic [31:0] a, output logic [31:0] rd);
    @(negedge clk_i);
    tcdm_req_o = 1; tcdm_we_o = 0; tcdm_be_o = 4'hF; tcdm_addr_o = a;
    #1;
    while (!tcdm_gnt_i) begin @(negedge clk_i); #1; end
    @(negedge clk_i);
    tcdm_req_o = 0;
    rd = tcdm_rdata_i;
  endtask

  initial begin : runtime
    logic [31:0] fp, l1a, sz, l2a, km, d, w0, wl;
    int g, m, kind, mode, nw;
    forever begin
      reg_access(0, 8'h00, 0, fp);       // blocks while no task
      reg_access(0, 8'h04, 0, l1a);
      reg_access(0, 8'h08, 0, sz);
      reg_access(0, 8'h0C, 0, l2a);
      reg_access(0, 8'h20, 0, km);
      m    = int'(km[7:0]);
      kind = int'(km[9:8]);
      g    = int'((l2a - 32'h1C00_0000) >> 10);
      // ordering rules
      if (kind == 0) begin
        hh_started[m]++; n_hh++;
        check(fp == 32'h100, "header handler pointer");
      end else if (kind == 1) begin
        check(hh_started[m] == hh_done[m], $sformatf("msg %0d: payload before header done", m));
        ph_started[m]++; n_ph++;
      end else begin
        check(ph_done[m] == ph_started[m] && ph_started[m] > 0 || ph_started[m] == 0,
              $sformatf("msg %0d: completion before payloads done", m));
        th_started[m]++; n_th++;
        check(fp == 32'h300, "completion handler pointer");
      end
      // the packet copy in L1
      nw = (int'(sz) > 1024) ? 256 : (int'(sz) + 3) / 4;
      if (nw > 0) begin
        l1_read(l1a, w0);
        check(w0 == pkt_word(g, 0), $sformatf("pkt %0d word 0: %h", g, w0));
        l1_read(l1a + 32'((nw - 1) * 4), wl);
        // only the bytes inside the packet are defined
        begin
          int nb;
          logic [31:0] mask;
          nb   = (int'(sz) > 1024) ? 4 : int'(sz) - (nw - 1) * 4;
          mask = (nb >= 4) ? 32'hFFFF_FFFF : (32'h1 << (8 * nb)) - 1;
          check((wl & mask) == (pkt_word(g, nw - 1) & mask),
                $sformatf("pkt %0d last word: %h", g, wl));
        end
      end
      mode = (kind == 1) ? int'(fp - 32'h200) : 0;
      repeat (hcycles[m]) @(negedge clk_i);
      if (mode == 4) begin
        // a handler that never returns: wait for the watchdog
        while (!irq_i) @(negedge clk_i);
        n_irq++;
        reg_access(1, 8'h28, 32'hDEAD, d);          // report the failure
        ph_done[m]++;
      end else begin
        if (mode == 1) begin                          // DMA packet to host
          reg_access(1, 8'h40, l2a, d);
          reg_access(1, 8'h44, 32'h8000_0000 + 32'(g) * 1024, d);
          reg_access(1, 8'h48, 32'h0000_0001, d);
          reg_access(1, 8'h4C, sz, d);
          reg_access(1, 8'h70, 32'd1, d);
          n_cmd_dma++;
          cmd_expect[g] = (int'(sz) + 63) / 64;
        end else if (mode == 2) begin                 // send packet over NIC
          reg_access(1, 8'h40, l2a, d);
          reg_access(1, 8'h44, 32'(g), d);
          reg_access(1, 8'h4C, sz, d);
          reg_access(1, 8'h70, 32'd0, d);
          n_cmd_nic++;
          cmd_expect[g] = 1;
        end else if (mode == 3) begin                 // HostDirect
          reg_access(1, 8'h44, 32'h4000_0000 + 32'(g) * 32, d);
          reg_access(1, 8'h48, 32'h0000_0001, d);
          reg_access(1, 8'h50, pkt_word(g, 0), d);
          reg_access(1, 8'h70, 32'd2, d);
          n_cmd_hd++;
          cmd_expect[g] = 1;
        end
        if (kind == 0) hh_done[m]++;
        else if (kind == 1) ph_done[m]++;
        reg_access(1, 8'h24, 0, d);                  // doorbell
      end
    end
  end
endmodule
