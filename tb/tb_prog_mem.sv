// tb_prog_mem: self-checking test of the single-ported program memory.
//
// The host port and the instruction-refill port request in random
// patterns; exactly one is granted per cycle, alternating when both ask,
// and a read returns the 64-bit word one cycle after its grant. A reference
// array with byte enables predicts the data.
module tb_prog_mem;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] req, we, gnt, rvalid;
  logic [1:0][7:0] be;
  logic [1:0][31:0] addr;
  logic [1:0][63:0] wdata;
  logic [63:0] rdata;
  prog_mem dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .we_i(we), .be_i(be),
                .addr_i(addr), .wdata_i(wdata), .gnt_o(gnt), .rvalid_o(rvalid),
                .rdata_o(rdata));

  logic [63:0] ref_mem [4096];
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last, nboth;
    logic [63:0] exp;
    bit expv;
    req = 0; we = 0; be = 0; addr = 0; wdata = 0; last = 1; nboth = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4096; i++) begin        // host loads the whole memory
      @(negedge clk);
      req = 2'b01; we = 2'b01; be[0] = 8'hFF; addr[0] = 32'(i * 8);
      wdata[0] = {$urandom, $urandom};
      ref_mem[i] = wdata[0];
      #1 chk(gnt == 2'b01, "host write granted");
    end
    last = 0;
    for (int it = 0; it < 5000; it++) begin
      int s;
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        req[p] = $urandom_range(0, 2) != 0;
        we[p]  = (p == 0) && $urandom_range(0, 3) == 0;
        be[p]  = 8'($urandom);
        addr[p] = 32'($urandom_range(0, 4095) * 8);
        wdata[p] = {$urandom, $urandom};
      end
      #1;
      if (req == 2'b11) begin
        s = 1 - last;
        nboth++;
      end else s = req[1] ? 1 : 0;
      if (req != 0) begin
        chk(gnt == (2'b01 << s), "one requester granted, alternating");
        last = s;
      end else chk(gnt == 0, "no grant without request");
      expv = (req != 0) && !we[s];
      if (expv) exp = ref_mem[addr[s][14:3]];
      if (req != 0 && we[s])
        for (int k = 0; k < 8; k++) if (be[s][k]) ref_mem[addr[s][14:3]][k*8 +: 8] = wdata[s][k*8 +: 8];
      @(posedge clk); #1;
      chk(rvalid == ((req != 0 && !we[s]) ? (2'b01 << s) : 2'b00), "rvalid");
      if (expv) chk(rdata == exp, "read data");
    end
    chk(nboth > 100, "both requesters exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
