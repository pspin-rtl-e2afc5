// tb_l1_tcdm: self-checking test of the banked L1 (TCDM) at its default
// size: 1 MiB in 64 word-interleaved banks, 8 HPU ports and one wide port.
//
// The HPU ports issue random word reads and byte-enabled writes into a small
// window so that they often collide on a bank, and the wide port writes and
// reads random 64 B beats in the same window. Checked every cycle: at most
// one HPU port is granted per bank, none on the 16 banks the wide port
// occupies, every request that does not collide is granted, the conflict
// event equals "some request not granted", and each read returns one cycle
// later the contents held by a byte-wise reference model.
module tb_l1_tcdm;
  import pspin_pkg::*;
  localparam int NP = NUM_HPUS;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NP-1:0] req, we, gnt, rv;
  logic [NP-1:0][3:0] be;
  logic [NP-1:0][31:0] addr, wd, rd;
  logic wreq, wwe, wgnt, wrv, conf;
  logic [63:0] wbe;
  logic [31:0] waddr;
  logic [511:0] wwd, wrd;
  l1_tcdm dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .we_i(we), .be_i(be), .addr_i(addr),
               .wdata_i(wd), .gnt_o(gnt), .rvalid_o(rv), .rdata_o(rd),
               .wreq_i(wreq), .wwe_i(wwe), .wbe_i(wbe), .waddr_i(waddr), .wwdata_i(wwd),
               .wgnt_o(wgnt), .wrvalid_o(wrv), .wrdata_o(wrd), .conflict_o(conf));

  localparam int WIN = 2048;               // words in the test window
  logic [31:0] ref_mem [WIN];
  int n_conf = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit expv [NP]; logic [31:0] expd [NP];
    bit wexpv; logic [511:0] wexpd;
    req = 0; we = 0; be = 0; addr = 0; wd = 0; wreq = 0; wwe = 0; wbe = 0; waddr = 0; wwd = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // initialise the window through the wide port
    for (int b = 0; b < WIN / 16; b++) begin
      @(negedge clk);
      wreq = 1; wwe = 1; wbe = '1; waddr = L1_BASE + 32'(b * 64);
      for (int k = 0; k < 16; k++) begin
        wwd[k*32 +: 32] = $urandom;
        ref_mem[b * 16 + k] = wwd[k*32 +: 32];
      end
    end
    @(negedge clk); wreq = 0;
    for (int it = 0; it < 8000; it++) begin
      int wb0;
      @(negedge clk);
      wreq = $urandom_range(0, 3) == 0;
      wwe  = $urandom_range(0, 1);
      waddr = L1_BASE + 32'($urandom_range(0, WIN / 16 - 1) * 64);
      wbe = {$urandom, $urandom};
      for (int k = 0; k < 16; k++) wwd[k*32 +: 32] = $urandom;
      for (int p = 0; p < NP; p++) begin
        req[p]  = $urandom_range(0, 1);
        we[p]   = $urandom_range(0, 2) == 0;
        be[p]   = 4'($urandom);
        addr[p] = L1_BASE + 32'($urandom_range(0, ((it / 1000) % 2) ? WIN - 1 : 127) * 4);
        wd[p]   = $urandom;
      end
      #1;
      wb0 = int'(waddr[7:2]);
      begin
        int nb [64];
        for (int b = 0; b < 64; b++) nb[b] = 0;
        for (int p = 0; p < NP; p++) begin
          int b;
          b = int'(addr[p][7:2]);
          if (gnt[p]) begin
            nb[b]++;
            chk(req[p], "grant only on request");
            chk(!(wreq && b >= wb0 && b < wb0 + 16), "no HPU grant on a bank held by the wide port");
          end
        end
        for (int b = 0; b < 64; b++) chk(nb[b] <= 1, "one HPU port per bank");
        for (int p = 0; p < NP; p++) begin
          int b, others;
          b = int'(addr[p][7:2]);
          others = 0;
          for (int q = 0; q < NP; q++) if (q != p && req[q] && addr[q][7:2] == addr[p][7:2]) others++;
          if (req[p] && others == 0 && !(wreq && b >= wb0 && b < wb0 + 16))
            chk(gnt[p], "uncontended request granted");
          if (req[p] && others > 0 && !(wreq && b >= wb0 && b < wb0 + 16))
            chk(nb[b] == 1, "a contended bank serves one port");
        end
        chk(conf == |(req & ~gnt), "conflict event");
        if (conf) n_conf++;
        chk(wgnt == wreq, "wide port always granted");
      end
      // predictions (reads see the contents before this edge)
      for (int p = 0; p < NP; p++) begin
        expv[p] = gnt[p];
        expd[p] = ref_mem[(addr[p] - L1_BASE) >> 2];
      end
      wexpv = wreq;
      for (int k = 0; k < 16; k++) wexpd[k*32 +: 32] = ref_mem[((waddr - L1_BASE) >> 2) + 32'(k)];
      for (int p = 0; p < NP; p++)
        if (gnt[p] && we[p])
          for (int k = 0; k < 4; k++)
            if (be[p][k]) ref_mem[(addr[p] - L1_BASE) >> 2][k*8 +: 8] = wd[p][k*8 +: 8];
      if (wreq && wwe)
        for (int k = 0; k < 64; k++)
          if (wbe[k]) ref_mem[((waddr - L1_BASE) >> 2) + 32'(k / 4)][(k % 4)*8 +: 8] = wwd[k*8 +: 8];
      @(posedge clk); #1;
      for (int p = 0; p < NP; p++) begin
        chk(rv[p] == expv[p], "rvalid one cycle after the grant");
        if (expv[p] && !we[p]) chk(rd[p] == expd[p], $sformatf("HPU port %0d read data", p));
      end
      chk(wrv == wexpv, "wide rvalid");
      if (wexpv && !wwe) chk(wrd == wexpd, "wide read data");
    end
    chk(n_conf > 500, "bank conflicts exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
