// tb_host_direct: self-checking test of the HostDirect unit.
//
// Random HostDirect commands are offered; the host side accepts after a
// random delay and acknowledges after another. The test checks that each
// command's 32 B of immediate data reaches the host at the command's
// address, that the response carries the command id and comes only after
// the acknowledgement, and that a new command is taken only when idle.
module tb_host_direct;
  import pspin_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid, cmd_ready, resp_valid, resp_ready, hw_valid, hw_ready, hw_ack;
  cmd_t cmd; cmd_resp_t resp;
  logic [63:0] hw_addr; logic [255:0] hw_data;
  host_direct dut (.clk_i(clk), .rst_ni(rst_n), .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready),
                   .cmd_i(cmd), .resp_valid_o(resp_valid), .resp_ready_i(resp_ready),
                   .resp_o(resp), .hw_valid_o(hw_valid), .hw_ready_i(hw_ready),
                   .hw_addr_o(hw_addr), .hw_data_o(hw_data), .hw_ack_i(hw_ack));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_valid = 0; cmd = '0; resp_ready = 0; hw_ready = 0; hw_ack = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      cmd_t c;
      int d;
      c = '0;
      c.id.cluster = 2'($urandom); c.id.hpu = 3'($urandom); c.id.slot = 2'($urandom);
      c.ctype = CMD_HOSTDIRECT;
      c.dst_addr = {$urandom, $urandom};
      for (int k = 0; k < 8; k++) c.imm[k*32 +: 32] = $urandom;
      @(negedge clk);
      cmd_valid = 1; cmd = c;
      #1 chk(cmd_ready, "idle unit accepts a command");
      @(negedge clk);
      cmd_valid = 0; cmd = '0;
      d = $urandom_range(0, 3);
      repeat (d) begin
        #1 chk(hw_valid && !resp_valid, "write held until the host is ready");
        @(negedge clk);
      end
      hw_ready = 1;
      #1 chk(hw_valid && hw_addr == c.dst_addr && hw_data == c.imm, "host write address and data");
      chk(!cmd_ready, "busy while a write is outstanding");
      d = $urandom_range(0, 3);
      if (d == 0) hw_ack = 1;
      @(negedge clk);
      hw_ready = 0; hw_ack = 0;
      #1 chk(!hw_valid, "one write per command");
      if (d > 0) begin
        repeat (d) begin
          @(negedge clk);
          #1 chk(!resp_valid, "no response before the acknowledgement");
        end
        hw_ack = 1;
        @(negedge clk);
        hw_ack = 0;
      end
      #1 chk(resp_valid && resp.id == c.id && !resp.error, "response with the command id");
      resp_ready = $urandom_range(0, 1);
      while (!resp_ready) begin
        @(negedge clk);
        #1 chk(resp_valid, "response held");
        resp_ready = $urandom_range(0, 1);
      end
      @(negedge clk);
      resp_ready = 0;
      #1 chk(!resp_valid && cmd_ready, "back to idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
