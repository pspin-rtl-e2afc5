// cluster_scheduler: cluster-local scheduler (CSCHED).
//
// Tasks from the task dispatcher enter a FIFO. As the paper describes, a DMA
// transfer of the packet from the L2 packet buffer to the L1 is started for
// each new task, and once the transfer of the task at the head of the FIFO
// has completed, the task is popped and given to an idle HPU driver in a
// single cycle.
//
// Own choices: on entry each task gets a fixed slot of the L1 packet buffer
// (L1_SLOTS slots of L1_SLOT_BYTES at the start of the L1); at most
// L1_SLOT_BYTES of the packet (the task's `copy_size`) are copied. The FIFO
// keeps three pointers: write (task accepted), issue (DMA started) and read
// (task handed to an HPU); DMA completions arrive in issue order and are
// counted. A slot is returned when the HPU driver's completion notification
// leaves the cluster (`slot_free_*`). The idle HPU with the lowest index is
// chosen.
//
// Interface: task in (valid/ready), DMA transfer request (valid/ready) and
// completion pulse, per-HPU idle flags and one-hot task delivery.
module cluster_scheduler
  import pspin_pkg::*;
#(
  parameter int unsigned NUM_HPUS_P = NUM_HPUS,
  parameter int unsigned DEPTH      = 16,
  parameter int unsigned SLOTS      = L1_SLOTS,
  parameter int unsigned SLOT_BYTES = L1_SLOT_BYTES,
  localparam int unsigned AW        = $clog2(DEPTH),
  localparam int unsigned SLW       = $clog2(SLOTS)
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  // tasks from the task dispatcher
  input  logic                  task_valid_i,
  output logic                  task_ready_o,
  input  task_t                 task_i,
  // cluster DMA
  output logic                  dma_valid_o,
  input  logic                  dma_ready_i,
  output logic [31:0]           dma_src_o,
  output logic [31:0]           dma_dst_o,
  output logic [15:0]           dma_len_o,
  input  logic                  dma_done_i,
  // HPU drivers
  input  logic [NUM_HPUS_P-1:0] hpu_idle_i,
  output logic [NUM_HPUS_P-1:0] hpu_valid_o,
  output hpu_task_t             hpu_task_o,
  // slot release
  input  logic                  slot_free_valid_i,
  input  logic [SLW-1:0]        slot_free_i
);
  task_t          tq   [DEPTH];
  logic [SLW-1:0] slot [DEPTH];
  logic [AW:0]    wr_q, iss_q, done_q, rd_q;     // wrap-bit pointers
  logic [SLOTS-1:0] busy_q;

  // first free slot
  logic          have_slot;
  logic [SLW-1:0] free_slot;
  always_comb begin
    have_slot = 1'b0;
    free_slot = '0;
    for (int i = SLOTS - 1; i >= 0; i--)
      if (!busy_q[i]) begin
        have_slot = 1'b1;
        free_slot = SLW'(i);
      end
  end

  logic full;
  assign full         = (wr_q[AW] != rd_q[AW]) && (wr_q[AW-1:0] == rd_q[AW-1:0]);
  assign task_ready_o = !full && have_slot;

  // DMA issue
  task_t itask;
  logic [15:0] clen;
  assign itask       = tq[iss_q[AW-1:0]];
  assign clen        = (itask.her.copy_size > 16'(SLOT_BYTES)) ? 16'(SLOT_BYTES)
                                                               : itask.her.copy_size;
  assign dma_valid_o = (iss_q != wr_q);
  assign dma_src_o   = itask.her.pkt_addr;
  assign dma_dst_o   = L1_BASE + 32'(slot[iss_q[AW-1:0]]) * 32'(SLOT_BYTES);
  assign dma_len_o   = clen;

  // hand-over to an idle HPU
  logic head_ready;
  logic [NUM_HPUS_P-1:0] pick;
  assign head_ready = (rd_q != done_q);
  always_comb begin
    pick = '0;
    for (int h = NUM_HPUS_P - 1; h >= 0; h--)
      if (hpu_idle_i[h]) begin
        pick    = '0;
        pick[h] = 1'b1;
      end
  end
  assign hpu_valid_o            = head_ready ? pick : '0;
  assign hpu_task_o.tsk         = tq[rd_q[AW-1:0]];
  assign hpu_task_o.slot        = slot[rd_q[AW-1:0]];
  assign hpu_task_o.l1_pkt_addr = L1_BASE + 32'(slot[rd_q[AW-1:0]]) * 32'(SLOT_BYTES);

  logic push, issue, hand;
  assign push  = task_valid_i && task_ready_o;
  assign issue = dma_valid_o && dma_ready_i;
  assign hand  = |hpu_valid_o;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wr_q   <= '0;
      iss_q  <= '0;
      done_q <= '0;
      rd_q   <= '0;
      busy_q <= '0;
    end else begin
      if (push)       wr_q   <= wr_q + 1'b1;
      if (issue)      iss_q  <= iss_q + 1'b1;
      if (dma_done_i) done_q <= done_q + 1'b1;
      if (hand)       rd_q   <= rd_q + 1'b1;
      if (push)       busy_q[free_slot] <= 1'b1;
      if (slot_free_valid_i) busy_q[slot_free_i] <= 1'b0;
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) begin
      tq[wr_q[AW-1:0]]   <= task_i;
      slot[wr_q[AW-1:0]] <= free_slot;
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   dma_done_i |-> (done_q != iss_q));
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   $onehot0(hpu_valid_o));
endmodule
