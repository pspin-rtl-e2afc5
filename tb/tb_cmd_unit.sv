// tb_cmd_unit: self-checking test of the command unit.
//
// Four clusters offer random commands of the three types; the three
// destinations accept at random. Every command must reach the destination
// of its type exactly once, unchanged, and a cluster's command must be
// acknowledged in the cycle it is handed over. The destinations then return
// responses at random; each must reach the cluster named in its id, one
// response per cycle.
module tb_cmd_unit;
  import pspin_pkg::*;
  localparam int NC = NUM_CLUSTERS;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NC-1:0] cv, cr, rv;
  cmd_t cc [NC];
  cmd_resp_t cresp;
  logic [2:0] dv, dr, drv, drr;
  cmd_t dcmd;
  cmd_resp_t dresp [3];
  cmd_unit dut (.clk_i(clk), .rst_ni(rst_n), .cl_cmd_valid_i(cv), .cl_cmd_ready_o(cr),
                .cl_cmd_i(cc), .cl_resp_valid_o(rv), .cl_resp_o(cresp),
                .dst_valid_o(dv), .dst_ready_i(dr), .dst_cmd_o(dcmd),
                .dst_resp_valid_i(drv), .dst_resp_ready_o(drr), .dst_resp_i(dresp));

  int sent = 0, got = 0, rsent = 0, rgot = 0;
  int waitc [NC];
  cmd_resp_t rq [3][$];
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic cmd_t rnd_cmd(int c);
    cmd_t x;
    x = '0;
    x.id.cluster = 2'(c); x.id.hpu = 3'($urandom); x.id.slot = 2'($urandom);
    x.ctype = cmd_type_e'($urandom_range(0, 2));
    x.src_addr = $urandom; x.dst_addr = {$urandom, $urandom}; x.length = $urandom;
    x.imm[31:0] = $urandom;
    return x;
  endfunction

  initial begin
    cv = 0; dr = 0; drv = 0;
    for (int c = 0; c < NC; c++) begin cc[c] = '0; waitc[c] = 0; end
    for (int d = 0; d < 3; d++) dresp[d] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      for (int c = 0; c < NC; c++)
        if (!cv[c] && $urandom_range(0, 1)) begin cv[c] = 1; cc[c] = rnd_cmd(c); end
      dr = 3'($urandom);
      for (int d = 0; d < 3; d++)
        if (!drv[d] && rq[d].size() > 0 && $urandom_range(0, 1)) begin
          drv[d] = 1; dresp[d] = rq[d].pop_front();
        end
      #1;
      // commands
      chk($onehot0(cr), "at most one cluster served per cycle");
      if (|cr) begin
        int c;
        c = $clog2(cr);
        chk(dv == (3'b001 << int'(cc[c].ctype)), "routed by command type");
        chk(dcmd == cc[c], "command unchanged");
        chk(dr[int'(cc[c].ctype)], "handed over only when the destination is ready");
        begin
          cmd_resp_t r;
          r.id = cc[c].id; r.error = 1'($urandom);
          rq[int'(cc[c].ctype)].push_back(r);
        end
        got++;
      end
      for (int c = 0; c < NC; c++) begin
        if (cv[c] && !cr[c]) waitc[c]++; else waitc[c] = 0;
        chk(waitc[c] < 200, "no cluster starves");
      end
      // responses
      chk($onehot0(drr) && ((drr & ~drv) == 0), "one response taken per cycle");
      if (|drr) begin
        int d;
        d = $clog2(drr);
        chk(rv == (NC'(1) << int'(dresp[d].id.cluster)) && cresp == dresp[d],
            "response to the cluster of its id");
        rgot++;
      end else chk(rv == 0, "no response without a source");
      @(posedge clk);
      for (int c = 0; c < NC; c++) if (cr[c]) cv[c] = 0;
      for (int d = 0; d < 3; d++) if (drr[d]) drv[d] = 0;
    end
    chk(got > 1000 && rgot > 1000, "traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
