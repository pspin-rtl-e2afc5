// tb_offcluster_dma: self-checking test of the off-cluster DMA engine.
//
// Random commands (length 1 to 2048 B, 64 B aligned source) are executed
// against a testbench L2 model that grants at random and answers one cycle
// after the grant, while the host side accepts at random. Each beat written
// to the host must carry the source data of that beat, the destination
// address advanced by 64 B per beat and byte strobes covering exactly the
// command's length; the response must carry the command id and come after
// the last beat.
module tb_offcluster_dma;
  import pspin_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cv, cr, rv, rr, rd_req, rd_gnt, rd_rv, hw_v, hw_r;
  cmd_t cmd; cmd_resp_t resp;
  logic [31:0] rd_addr; logic [511:0] rd_data, hw_data;
  logic [63:0] hw_addr, hw_strb;
  offcluster_dma dut (.clk_i(clk), .rst_ni(rst_n), .cmd_valid_i(cv), .cmd_ready_o(cr),
                      .cmd_i(cmd), .resp_valid_o(rv), .resp_ready_i(rr), .resp_o(resp),
                      .rd_req_o(rd_req), .rd_addr_o(rd_addr), .rd_gnt_i(rd_gnt),
                      .rd_rvalid_i(rd_rv), .rd_rdata_i(rd_data),
                      .hw_valid_o(hw_v), .hw_ready_i(hw_r), .hw_addr_o(hw_addr),
                      .hw_data_o(hw_data), .hw_strb_o(hw_strb));

  function automatic logic [511:0] beat_of(logic [31:0] a);
    logic [511:0] v;
    for (int k = 0; k < 16; k++) v[k*32 +: 32] = a ^ 32'(k * 32'h0101_0101);
    return v;
  endfunction

  logic gen = 0;
  assign rd_gnt = rd_req && gen;
  always @(negedge clk) gen <= $urandom_range(0, 1);
  always @(posedge clk) begin
    rd_rv <= rst_n && rd_gnt;
    if (rd_gnt) rd_data <= beat_of(rd_addr);
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cv = 0; cmd = '0; rr = 0; hw_r = 0; rd_rv = 0; rd_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      cmd_t c;
      int beats, wb, cyc;
      c = '0;
      c.id.cluster = 2'($urandom); c.id.hpu = 3'($urandom); c.id.slot = 2'($urandom);
      c.ctype = CMD_DMA;
      c.src_addr = L2_PKT_BASE + 32'($urandom_range(0, 4095) * 64);
      c.dst_addr = {$urandom, $urandom};
      c.length = 32'((n % 10 == 0) ? 64 * $urandom_range(1, 32) : $urandom_range(1, 2048));
      beats = (int'(c.length) + 63) / 64;
      @(negedge clk);
      cv = 1; cmd = c;
      #1 chk(cr, "idle engine accepts");
      @(negedge clk);
      cv = 0;
      wb = 0; cyc = 0;
      while (wb < beats && cyc < 5000) begin
        hw_r = $urandom_range(0, 1);
        #1;
        chk(!rv, "no response before the last beat");
        if (hw_v && hw_r) begin
          int rem;
          logic [63:0] es;
          rem = int'(c.length) - wb * 64;
          for (int k = 0; k < 64; k++) es[k] = k < rem;
          chk(hw_data == beat_of(c.src_addr + 32'(wb * 64)), $sformatf("beat %0d data", wb));
          chk(hw_addr == c.dst_addr + 64'(wb * 64), "beat address");
          chk(hw_strb == es, "byte strobes");
          wb++;
        end
        @(negedge clk);
        cyc++;
      end
      hw_r = 0;
      chk(wb == beats, "all beats written");
      #1 chk(rv && resp.id == c.id, "response with the command id");
      rr = 1;
      @(negedge clk);
      rr = 0;
      #1 chk(!rv && !hw_v, "done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
