// tb_mem_xbar: self-checking test of the 512-bit request/grant crossbar.
//
// Four masters issue random reads and writes to two slaves (the L2 packet
// and handler regions). The slaves are testbench memories that grant at
// random and answer reads one cycle after the grant. Every read must return,
// to the master that issued it, the data the reference model holds; each
// slave must see at most one request per cycle, and every master must be
// served (round-robin, no starvation).
module tb_mem_xbar;
  import pspin_pkg::*;
  localparam int NM = 4, NS = 2;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NM-1:0] mreq, mwe, mgnt, mrv;
  logic [NM-1:0][63:0] mbe;
  logic [NM-1:0][31:0] maddr;
  logic [NM-1:0][511:0] mwd, mrd;
  logic [NS-1:0] sreq, swe, sgnt, srv;
  logic [NS-1:0][63:0] sbe;
  logic [NS-1:0][31:0] saddr;
  logic [NS-1:0][511:0] swd, srd;
  mem_xbar dut (.clk_i(clk), .rst_ni(rst_n), .m_req_i(mreq), .m_we_i(mwe), .m_be_i(mbe),
                .m_addr_i(maddr), .m_wdata_i(mwd), .m_gnt_o(mgnt), .m_rvalid_o(mrv),
                .m_rdata_o(mrd), .s_req_o(sreq), .s_we_o(swe), .s_be_o(sbe),
                .s_addr_o(saddr), .s_wdata_o(swd), .s_gnt_i(sgnt), .s_rvalid_i(srv),
                .s_rdata_i(srd));

  // slave models: 16 beats each, address bits [9:6]
  logic [511:0] smem [NS][16];
  logic [NS-1:0] sg_en;
  always_comb for (int s = 0; s < NS; s++) sgnt[s] = sreq[s] && sg_en[s];
  always @(posedge clk) begin
    for (int s = 0; s < NS; s++) begin
      srv[s] <= sgnt[s] && !swe[s];
      if (sgnt[s]) begin
        if (swe[s]) begin
          for (int k = 0; k < 64; k++) if (sbe[s][k]) smem[s][saddr[s][9:6]][k*8 +: 8] <= swd[s][k*8 +: 8];
        end else srd[s] <= smem[s][saddr[s][9:6]];
      end
    end
  end

  logic [511:0] ref_mem [NS][16];
  int nserved [NM];
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit expv [NM];
    logic [511:0] expd [NM];
    mreq = 0; mwe = 0; mbe = 0; maddr = 0; mwd = 0; sg_en = 0; srv = 0; srd = 0;
    for (int s = 0; s < NS; s++) for (int i = 0; i < 16; i++) begin
      smem[s][i] = {16{32'(s * 16 + i)}}; ref_mem[s][i] = smem[s][i];
    end
    for (int m = 0; m < NM; m++) nserved[m] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      for (int m = 0; m < NM; m++) begin
        if (!mreq[m] || mgnt[m]) begin end
        mreq[m]  = $urandom_range(0, 2) != 0;
        mwe[m]   = $urandom_range(0, 3) == 0;
        maddr[m] = ($urandom_range(0, 1) ? L2_HND_BASE : L2_PKT_BASE) + 32'($urandom_range(0, 15) * 64);
        for (int k = 0; k < 16; k++) mwd[m][k*32 +: 32] = $urandom;
        mbe[m]   = {$urandom, $urandom};
      end
      sg_en = NS'($urandom);
      #1;
      for (int s = 0; s < NS; s++) begin
        int nm;
        nm = 0;
        for (int m = 0; m < NM; m++)
          if (mgnt[m] && ((maddr[m] & 32'hFFC0_0000) == ((s == 0) ? L2_PKT_BASE : L2_HND_BASE))) nm++;
        chk(nm == int'(sgnt[s]), "one grant per slave, matching the slave grant");
      end
      for (int m = 0; m < NM; m++) begin
        int s, b;
        s = ((maddr[m] & 32'hFFC0_0000) == L2_HND_BASE) ? 1 : 0;
        b = int'(maddr[m][9:6]);
        chk(!mgnt[m] || mreq[m], "grant only on request");
        expv[m] = mgnt[m] && !mwe[m];
        if (expv[m]) expd[m] = ref_mem[s][b];
        if (mgnt[m]) nserved[m]++;
      end
      for (int m = 0; m < NM; m++)
        if (mgnt[m] && mwe[m]) begin
          int s, b;
          s = ((maddr[m] & 32'hFFC0_0000) == L2_HND_BASE) ? 1 : 0;
          b = int'(maddr[m][9:6]);
          for (int k = 0; k < 64; k++) if (mbe[m][k]) ref_mem[s][b][k*8 +: 8] = mwd[m][k*8 +: 8];
        end
      @(posedge clk); #1;
      for (int m = 0; m < NM; m++) begin
        chk(mrv[m] == expv[m], "read response to the right master");
        if (expv[m]) chk(mrd[m] == expd[m], $sformatf("read data master %0d", m));
      end
    end
    for (int m = 0; m < NM; m++) chk(nserved[m] > 500, "every master served");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
