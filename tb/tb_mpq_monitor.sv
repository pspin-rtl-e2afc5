// tb_mpq_monitor: self-checking test of the MPQ monitor at its default size
// (256 MPQs).
//
// The testbench touches random MPQs with random thresholds and keeps its own
// record of when each was last touched. Safety: every reset request must
// name an MPQ that is idle and whose time since the last touch exceeds its
// threshold. Liveness: a set of MPQs is left idle after a last touch; each
// must be reset within its threshold plus a bound for the pseudo-LRU walk
// to reach it, while busy MPQs keep being touched and are never reset.
module tb_mpq_monitor;
  import pspin_pkg::*;
  localparam int N = NUM_MPQ;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tv, rv, ack;
  logic [7:0] tid, rid;
  logic [31:0] thr;
  logic [N-1:0] idle;
  mpq_monitor dut (.clk_i(clk), .rst_ni(rst_n), .touch_valid_i(tv), .touch_id_i(tid),
                   .touch_thr_i(thr), .idle_i(idle), .reset_valid_o(rv), .reset_id_o(rid),
                   .reset_ack_i(ack));

  longint now = 0, last [N], lthr [N], reset_at [N];
  int n_reset = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tv = 0; tid = 0; thr = 0; ack = 0; idle = '1;
    for (int m = 0; m < N; m++) begin last[m] = 0; lthr[m] = 32'hFFFF_FFFF; reset_at[m] = -1; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // phase 1: random busy traffic, every MPQ busy, no reset allowed
    idle = '0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      tv = $urandom_range(0, 1); tid = 8'($urandom); thr = 32'($urandom_range(50, 500));
      ack = 0;
      #1 chk(!rv, "no reset of a busy MPQ");
    end
    // phase 2: MPQs 0..31 go idle after their last touch; the rest stay busy
    for (int m = 0; m < N; m++) begin
      @(negedge clk);
      tv = 1; tid = 8'(m); thr = (m < 32) ? 32'(100 + 10 * m) : 32'd1000000;
      idle[m] = 0;
    end
    @(negedge clk);
    tv = 0;
    for (int m = 0; m < 32; m++) idle[m] = 1;
    for (int it = 0; it < 6000; it++) begin
      @(negedge clk);
      ack = 0;
      // keep some busy MPQs active
      tv = $urandom_range(0, 3) == 0;
      tid = 8'($urandom_range(32, N - 1));
      thr = 32'd1000000;
      #1;
      if (rv) begin
        int m;
        m = int'(rid);
        chk(m < 32, "only idle MPQs are reset");
        chk(idle[m], "reset MPQ is idle");
        ack = $urandom_range(0, 1);
        if (ack && reset_at[m] < 0) begin
          reset_at[m] = now;
          n_reset++;
          idle[m] = 0;        // the engine frees it; it becomes busy again later
        end
      end
    end
    for (int m = 0; m < 32; m++)
      chk(reset_at[m] >= 0, $sformatf("idle MPQ %0d was reset", m));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (rst_n) now++;
  // safety: time since touch exceeds the threshold
  always @(posedge clk) begin
    if (rst_n && tv) begin last[tid] <= now; lthr[tid] <= thr; end
    if (rst_n && rv && ack && !(tv && tid == rid))
      chk(now - last[rid] > lthr[rid], "reset only after the threshold");
  end
endmodule
