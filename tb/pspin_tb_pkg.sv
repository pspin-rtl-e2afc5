// pspin_tb_pkg: scoreboard shared by the end-to-end testbench and its
// behavioural HPU models.
//
// Packet data convention: 32-bit word k of global packet g is (g << 12) | k.
// Handler function pointers encode what the behavioural handler does:
// 0x100 header handler, 0x300 completion handler, 0x200 + mode payload
// handler with mode 0 plain, 1 DMA to host, 2 NIC send, 3 HostDirect,
// 4 never returns (watchdog test).
package pspin_tb_pkg;
  int checks   = 0;
  int failures = 0;

  // per message
  int hh_started [256];
  int hh_done    [256];
  int ph_started [256];
  int ph_done    [256];
  int th_started [256];
  int pkts_sent  [256];

  int n_hh = 0, n_ph = 0, n_th = 0;
  int n_cmd_dma = 0, n_cmd_nic = 0, n_cmd_hd = 0, n_err_reports = 0;
  int n_irq = 0;
  int hcycles    [256];        // handler body length per message, cycles
  // per packet: host-visible effects a handler command expects / has produced
  int cmd_expect [4096];        // DMA beats, or 1 for a NIC / HostDirect command
  int cmd_seen   [4096];

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endfunction

  function automatic logic [31:0] pkt_word(int g, int k);
    return 32'((g << 12) | k);
  endfunction
endpackage
