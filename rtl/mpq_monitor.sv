// mpq_monitor: detection of messages whose packets stopped arriving.
//
// The paper keeps the active MPQs in a pseudo-LRU list: a packet pushed to
// an MPQ moves it to the back, and only the candidate victim (the front) is
// checked. If the victim has received no packet for longer than the timeout
// in the execution context that activated it, the MPQ is reset and the host
// is told. This module implements the list as a binary pseudo-LRU tree over
// all NUM_MPQ_P MPQs (NUM_MPQ_P-1 direction bits, the usual tree-PLRU of
// caches) together with a per-MPQ time stamp of the last packet and the
// per-MPQ timeout.
//
// The tree has a leaf for every MPQ, not only the active ones, so the victim
// may be an MPQ that is not waiting for packets (inactive, or busy with
// queued or running handlers). Such a victim is moved to the back of the list
// without changing its time stamp, so that the check walks on to the next
// candidate; this is this design's way of keeping only active MPQs in front.
// An idle, expired victim raises `reset_valid_o` until the MPQ engine
// acknowledges it; the MPQ is then moved to the back as well. Touches from
// arriving packets take precedence over these internal moves.
//
// Timing: one candidate is examined per cycle; a reset request appears in
// the cycle after the victim expired and is held until `reset_ack_i`.
module mpq_monitor
  import pspin_pkg::*;
#(
  parameter int unsigned NUM_MPQ_P = NUM_MPQ,
  localparam int unsigned MW       = $clog2(NUM_MPQ_P)
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // packet pushed to an MPQ
  input  logic                 touch_valid_i,
  input  logic [MW-1:0]        touch_id_i,
  input  logic [31:0]          touch_thr_i,
  // MPQs that are active and wait for packets
  input  logic [NUM_MPQ_P-1:0] idle_i,
  // reset request
  output logic                 reset_valid_o,
  output logic [MW-1:0]        reset_id_o,
  input  logic                 reset_ack_i
);
  logic [NUM_MPQ_P-1:1] tree_q;     // heap order, node 1 is the root
  logic [31:0]          now_q;
  logic [31:0]          ts_q  [NUM_MPQ_P];
  logic [31:0]          thr_q [NUM_MPQ_P];

  // victim: follow the direction bits from the root (0: left, 1: right)
  logic [MW-1:0] victim;
  always_comb begin
    int unsigned node;
    node = 1;
    for (int l = 0; l < MW; l++) node = 2 * node + int'(tree_q[node]);
    victim = MW'(node - NUM_MPQ_P);
  end

  logic expired;
  assign expired = idle_i[victim] && ((now_q - ts_q[victim]) > thr_q[victim]);

  // which leaf is moved to the back this cycle
  logic          mv;
  logic [MW-1:0] mv_id;
  always_comb begin
    mv    = 1'b0;
    mv_id = victim;
    if (touch_valid_i) begin
      mv    = 1'b1;
      mv_id = touch_id_i;
    end else if (!idle_i[victim] || (reset_valid_o && reset_ack_i)) begin
      mv    = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      tree_q        <= '0;
      now_q         <= '0;
      reset_valid_o <= 1'b0;
      reset_id_o    <= '0;
      for (int m = 0; m < NUM_MPQ_P; m++) begin
        ts_q[m]  <= '0;
        thr_q[m] <= '1;
      end
    end else begin
      now_q <= now_q + 1;
      if (mv) begin
        // point every node on the path away from the moved leaf
        int unsigned node;
        node = int'(mv_id) + NUM_MPQ_P;
        for (int l = 0; l < MW; l++) begin
          tree_q[node / 2] <= ~node[0];
          node = node / 2;
        end
      end
      if (touch_valid_i) begin
        ts_q[touch_id_i]  <= now_q;
        thr_q[touch_id_i] <= touch_thr_i;
      end
      if (reset_valid_o) begin
        if (reset_ack_i || !idle_i[reset_id_o] ||
            (touch_valid_i && touch_id_i == reset_id_o))
          reset_valid_o <= 1'b0;
      end else if (expired && !(touch_valid_i && touch_id_i == victim)) begin
        reset_valid_o <= 1'b1;
        reset_id_o    <= victim;
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   reset_ack_i |-> reset_valid_o);
endmodule
