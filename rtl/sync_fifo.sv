// sync_fifo: synchronous first-in first-out queue.
//
// DEPTH entries of type T, valid/ready on both sides. The head entry is
// visible on `data_o` while `valid_o` is high; it leaves when `ready_i` is
// high. A push and a pop may happen in the same cycle. Used for the task
// FIFO of the cluster-local scheduler and for queues between blocks.
module sync_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 8,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic   clk_i,
  input  logic   rst_ni,
  input  logic   valid_i,
  output logic   ready_o,
  input  T       data_i,
  output logic   valid_o,
  input  logic   ready_i,
  output T       data_o,
  output logic [AW:0] count_o
);
  T               mem [DEPTH];
  logic [AW-1:0]  rd_q, wr_q;
  logic [AW:0]    cnt_q;
  logic           push, pop;

  assign ready_o = (cnt_q != (AW+1)'(DEPTH));
  assign valid_o = (cnt_q != '0);
  assign data_o  = mem[rd_q];
  assign push    = valid_i && ready_o;
  assign pop     = valid_o && ready_i;
  assign count_o = cnt_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= (wr_q == AW'(DEPTH - 1)) ? '0 : wr_q + 1'b1;
      if (pop)  rd_q <= (rd_q == AW'(DEPTH - 1)) ? '0 : rd_q + 1'b1;
      cnt_q <= cnt_q + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk_i) if (push) mem[wr_q] <= data_i;

  // A push into a full queue or a pop from an empty one is a protocol error.
  assert property (@(posedge clk_i) disable iff (!rst_ni) cnt_q <= (AW+1)'(DEPTH));
endmodule
