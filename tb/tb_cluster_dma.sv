// tb_cluster_dma: self-checking test of the cluster DMA engine (L2 to L1).
//
// Random transfers (length 0 to 1024 B, 64 B aligned) run against a
// testbench L2 that grants at random and answers one cycle after the grant.
// Every L1 write beat must carry the source beat, the destination address
// advanced by 64 B per beat and byte enables covering exactly the transfer
// length; `done` must pulse once, in the cycle after the last beat (and one
// cycle after acceptance for an empty transfer); the engine must not accept
// a new transfer while busy.
module tb_cluster_dma;
  import pspin_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic xv, xr, done, l2_req, l2_gnt, l2_rv, l1_req;
  logic [31:0] xsrc, xdst, l2_addr, l1_addr;
  logic [15:0] xlen;
  logic [511:0] l2_rd, l1_wd;
  logic [63:0] l1_be;
  cluster_dma dut (.clk_i(clk), .rst_ni(rst_n), .xfer_valid_i(xv), .xfer_ready_o(xr),
                   .xfer_src_i(xsrc), .xfer_dst_i(xdst), .xfer_len_i(xlen), .done_o(done),
                   .l2_req_o(l2_req), .l2_addr_o(l2_addr), .l2_gnt_i(l2_gnt),
                   .l2_rvalid_i(l2_rv), .l2_rdata_i(l2_rd),
                   .l1_req_o(l1_req), .l1_addr_o(l1_addr), .l1_be_o(l1_be), .l1_wdata_o(l1_wd));

  function automatic logic [511:0] beat_of(logic [31:0] a);
    logic [511:0] v;
    for (int k = 0; k < 16; k++) v[k*32 +: 32] = a + 32'(k);
    return v;
  endfunction
  logic gen = 0;
  assign l2_gnt = l2_req && gen;
  always @(negedge clk) gen <= $urandom_range(0, 2) != 0;
  always @(posedge clk) begin
    l2_rv <= rst_n && l2_gnt;
    if (l2_gnt) l2_rd <= beat_of(l2_addr);
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    xv = 0; xsrc = 0; xdst = 0; xlen = 0; l2_rv = 0; l2_rd = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      logic [31:0] s, d;
      int len, beats, wb, cyc, ndone;
      s = L2_PKT_BASE + 32'($urandom_range(0, 65535) * 64);
      d = L1_BASE + 32'($urandom_range(0, 31) * 1024);
      len = (n % 20 == 0) ? 0 : $urandom_range(1, 1024);
      beats = (len + 63) / 64;
      @(negedge clk);
      xv = 1; xsrc = s; xdst = d; xlen = 16'(len);
      #1 chk(xr, "idle engine ready");
      @(negedge clk);
      xv = $urandom_range(0, 1);          // a second request must wait
      #1;
      wb = 0; cyc = 0; ndone = 0;
      if (beats == 0) chk(done, "empty transfer completes at once");
      while (wb < beats && cyc < 3000) begin
        #1;
        chk(!xr || wb == beats, "busy while transferring");
        chk(!done, "no early done");
        if (l1_req) begin
          logic [63:0] eb;
          int rem;
          rem = len - wb * 64;
          for (int k = 0; k < 64; k++) eb[k] = k < rem;
          chk(l1_wd == beat_of(s + 32'(wb * 64)), "L1 write data");
          chk(l1_addr == d + 32'(wb * 64), "L1 write address");
          chk(l1_be == eb, "byte enables");
          wb++;
        end
        @(negedge clk);
        cyc++;
      end
      if (beats > 0) begin
        #1 chk(done, "done after the last beat");
      end
      xv = 0;
      @(negedge clk);
      #1 chk(!done && xr, "single done pulse, ready again");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
