// tb_l2_mem: self-checking test of the two-port banked L2 memory.
//
// Both ports write and read random 64 B beats of the default-size (4 MiB)
// memory with random byte enables; a byte-wise reference model in the
// testbench predicts every read, which must arrive one cycle after its
// grant. When both ports hit the same bank group only one may be granted,
// the winner must alternate between conflicts, and the conflict event must
// be raised; otherwise both are granted in the same cycle.
module tb_l2_mem;
  import pspin_pkg::*;
  localparam int unsigned SIZE = 4 << 20;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] req, we, gnt, rvalid, conflict;
  logic [1:0][63:0] be;
  logic [1:0][31:0] addr;
  logic [1:0][511:0] wdata, rdata;
  logic conf;
  l2_mem dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .we_i(we), .be_i(be), .addr_i(addr),
              .wdata_i(wdata), .gnt_o(gnt), .rvalid_o(rvalid), .rdata_o(rdata),
              .conflict_o(conf));

  logic [511:0] ref_mem [int];          // beat index -> contents (written beats)
  logic [511:0] exp_q [2];
  bit           exp_v [2];
  int           n_conf = 0, last_win = -1, n_alt = 0;

  function automatic logic [511:0] rnd512();
    logic [511:0] v;
    for (int k = 0; k < 16; k++) v[k*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int used [$];
  initial begin
    req = 0; we = 0; be = 0; addr = 0; wdata = 0;
    exp_v[0] = 0; exp_v[1] = 0; exp_q[0] = 0; exp_q[1] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // fill a set of beats with known data through both ports
    for (int i = 0; i < 64; i++) used.push_back($urandom_range(0, SIZE / 64 - 1));
    foreach (used[i]) begin
      int p;
      p = i % 2;
      @(negedge clk);
      req = 0; req[p] = 1; we[p] = 1; be[p] = '1; addr[p] = 32'(used[i] * 64);
      wdata[p] = rnd512();
      ref_mem[used[i]] = wdata[p];
      #1 chk(gnt[p] && !conf, "single write granted");
    end
    @(negedge clk); req = 0;
    // random traffic
    for (int it = 0; it < 3000; it++) begin
      bit same;
      @(negedge clk);
      same = ($urandom_range(0, 3) == 0);
      for (int p = 0; p < 2; p++) begin
        int b;
        b = used[$urandom_range(0, used.size() - 1)];
        if (same && p == 1) b = (int'(addr[0]) / 64) ^ (32 * $urandom_range(1, 8));
        if (same && p == 1 && !ref_mem.exists(b)) b = int'(addr[0]) / 64;
        req[p]   = $urandom_range(0, 3) != 0;
        we[p]    = $urandom_range(0, 2) == 0;
        addr[p]  = 32'(b * 64);
        wdata[p] = rnd512();
        for (int k = 0; k < 64; k++) be[p][k] = $urandom_range(0, 1);
      end
      if (req[0] && req[1] && we[0] && we[1] && addr[0] == addr[1]) req[1] = 0;
      #1;
      begin
        bit c;
        c = req[0] && req[1] && (addr[0][10:6] == addr[1][10:6]);
        chk(conf == c, "conflict event");
        if (c) begin
          chk(gnt[0] ^ gnt[1], "exactly one port granted on a conflict");
          if (last_win >= 0) chk(gnt[last_win] == 0, "conflict winner alternates");
          last_win = gnt[1] ? 1 : 0;
          n_conf++;
        end else chk(gnt == req, "both ports granted without conflict");
      end
      // predict: reads see the old contents (writes take effect at the edge)
      for (int p = 0; p < 2; p++) begin
        int b;
        b = int'(addr[p]) / 64;
        exp_v[p] = gnt[p] && !we[p];
        if (exp_v[p]) exp_q[p] = ref_mem.exists(b) ? ref_mem[b] : 'x;
      end
      for (int p = 0; p < 2; p++)
        if (gnt[p] && we[p]) begin
          int b;
          b = int'(addr[p]) / 64;
          for (int k = 0; k < 64; k++) if (be[p][k]) ref_mem[b][k*8 +: 8] = wdata[p][k*8 +: 8];
        end
      @(posedge clk); #1;
      for (int p = 0; p < 2; p++) begin
        chk(rvalid[p] == exp_v[p], "rvalid one cycle after a read grant");
        if (exp_v[p]) chk(rdata[p] == exp_q[p], $sformatf("read data port %0d", p));
      end
    end
    chk(n_conf > 50, "conflicts exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
