// tb_task_dispatcher: self-checking test of the task dispatcher.
//
// Random tasks (random message ids) arrive while clusters randomly refuse
// and return credits at random. A reference model keeps its own credit
// count per cluster (starting from the number of L1 packet slots) and
// predicts, every cycle, where the task must go: its home cluster (message
// id modulo the cluster count) if that cluster can take it, else the
// accepting cluster with the most credits (lowest index on a tie), and
// otherwise nowhere, with the blocked event raised.
module tb_task_dispatcher;
  import pspin_pkg::*;
  localparam int NC = NUM_CLUSTERS, SL = L1_SLOTS;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tv, tr, home_hit, blocked;
  task_t t, ct;
  logic [NC-1:0] cv, cr, cret;
  task_dispatcher dut (.clk_i(clk), .rst_ni(rst_n), .task_valid_i(tv), .task_ready_o(tr),
                       .task_i(t), .cl_valid_o(cv), .cl_ready_i(cr), .cl_task_o(ct),
                       .credit_ret_i(cret), .home_hit_o(home_hit), .blocked_o(blocked));

  int cred [NC];
  int n_home = 0, n_other = 0, n_block = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tv = 0; t = '0; cr = 0; cret = 0;
    for (int c = 0; c < NC; c++) cred[c] = SL;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 20000; it++) begin
      int home, exp;
      logic [NC-1:0] ok;
      @(negedge clk);
      tv = $urandom_range(0, 3) != 0;
      t = '0;
      t.her.msgid = MSGID_W'($urandom);
      t.her.pkt_addr = $urandom;
      for (int c = 0; c < NC; c++) begin
        cr[c]   = $urandom_range(0, 7) != 0;
        // phases: mostly sending, then mostly returning credits
        cret[c] = (cred[c] < SL) && ($urandom_range(0, 99) < (((it / 500) % 2) ? 40 : 5));
      end
      #1;
      home = int'(t.her.msgid) % NC;
      for (int c = 0; c < NC; c++) ok[c] = cr[c] && cred[c] > 0;
      exp = -1;
      if (ok[home]) exp = home;
      else
        for (int c = 0; c < NC; c++) if (ok[c] && (exp < 0 || cred[c] > cred[exp])) exp = c;
      chk(tr == (exp >= 0), "ready when some cluster can accept");
      chk(blocked == (tv && exp < 0), "blocked event");
      chk(home_hit == (tv && exp == home), "home event");
      chk(cv == ((tv && exp >= 0) ? (NC'(1) << exp) : '0), $sformatf("target cluster (exp %0d)", exp));
      chk(ct == t, "task passed unchanged");
      if (tv && exp == home) n_home++;
      else if (tv && exp >= 0) n_other++;
      else if (tv) n_block++;
      for (int c = 0; c < NC; c++) cred[c] += int'(cret[c]) - int'(cv[c]);
    end
    chk(n_home > 100 && n_other > 100 && n_block > 100, "all three outcomes seen");
    $display("home %0d other %0d blocked %0d", n_home, n_other, n_block);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
