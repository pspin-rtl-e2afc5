// mpq_engine: Message Processing Queue engine of the PsPIN packet scheduler.
//
// Every HER (handler execution request) from the NIC inbound engine names
// the MPQ of its message. The engine keeps the HERs of each MPQ in arrival
// order and turns them into tasks under the ordering rules of sPIN:
//   * the first packet of a message gets the header handler, and no payload
//     handler of that message starts before the header handler completed;
//   * every packet then gets the payload handler;
//   * after the packet marked end-of-message (EOM) has been queued and all
//     payload handlers completed, the completion handler runs on it.
// Completion notifications from the clusters update the MPQ state and are
// forwarded to the NIC inbound engine, which frees packet-buffer space when
// `last_use` is set and may remap the MPQ when `mpq_free` is set.
//
// Structure (this design's own choice; the paper gives the rules, not the
// storage): the HERs sit in a shared buffer of HER_BUF entries chained into
// one linked list per MPQ, with per-MPQ head/tail/count, header-handler
// state, in-flight payload count and the slot of the EOM packet, which is
// kept until its completion handler finishes. A round-robin arbiter over all
// MPQs that can make progress releases at most one task per cycle, which is
// the one-packet-per-cycle scheduling rate the paper reports.
//
// Packets that need no handler task (no payload handler, no header handler
// on them, no completion handler) are released straight back to the NIC.
// A message that ends without a completion handler returns its MPQ to idle
// as soon as its last payload handler completed. The MPQ monitor may reset
// an MPQ that is active but idle (nothing queued or running); the NIC is then
// told with `mpq_free` and `error` set.
//
// Interface: HER in (valid/ready), task out (valid/ready), completion
// notifications in (always accepted, one per cycle), notifications to the
// NIC out (registered, one cycle after the event, no back-pressure), the
// touch/idle/reset port pair of the MPQ monitor.
module mpq_engine
  import pspin_pkg::*;
#(
  parameter int unsigned NUM_MPQ_P = NUM_MPQ,
  parameter int unsigned HER_BUF   = 64,
  localparam int unsigned MW       = $clog2(NUM_MPQ_P),
  localparam int unsigned SW       = $clog2(HER_BUF)
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // HERs from the NIC inbound engine
  input  logic            her_valid_i,
  output logic            her_ready_o,
  input  her_t            her_i,
  // tasks to the task dispatcher
  output logic            task_valid_o,
  input  logic            task_ready_i,
  output task_t           task_o,
  // completion notifications from the clusters
  input  logic            fb_valid_i,
  input  feedback_t       fb_i,
  // completion notifications to the NIC inbound engine
  output logic            nic_fb_valid_o,
  output feedback_t       nic_fb_o,
  // MPQ monitor
  output logic            touch_valid_o,
  output logic [MW-1:0]   touch_id_o,
  output logic [31:0]     touch_thr_o,
  output logic [NUM_MPQ_P-1:0] idle_o,
  input  logic            reset_valid_i,
  input  logic [MW-1:0]   reset_id_i,
  output logic            reset_ack_o
);
  typedef enum logic [1:0] {HH_PEND, HH_RUN, HH_DONE} hh_state_e;
  typedef enum logic [2:0] {ACT_NONE, ACT_HH, ACT_PH, ACT_TH, ACT_END} act_e;

  // ---------------------------------------------------------------- state
  her_t            buf_q      [HER_BUF];
  logic [SW-1:0]   nxt_q      [HER_BUF];
  logic            had_hh_q   [HER_BUF];
  logic [HER_BUF-1:0] free_q;

  logic            active_q   [NUM_MPQ_P];
  hh_state_e       hh_q       [NUM_MPQ_P];
  logic [SW-1:0]   head_q     [NUM_MPQ_P];
  logic [SW-1:0]   tail_q     [NUM_MPQ_P];
  logic [SW:0]     qcnt_q     [NUM_MPQ_P];
  logic [15:0]     infl_q     [NUM_MPQ_P];   // payload handlers in flight
  logic            eom_q      [NUM_MPQ_P];   // EOM packet popped
  logic            th_pend_q  [NUM_MPQ_P];   // EOM packet awaits completion handler
  logic            th_run_q   [NUM_MPQ_P];
  logic [SW-1:0]   eom_slot_q [NUM_MPQ_P];

  // ------------------------------------------------------ free-slot search
  logic          have_free;
  logic [SW-1:0] free_idx;
  always_comb begin
    have_free = 1'b0;
    free_idx  = '0;
    for (int i = HER_BUF - 1; i >= 0; i--) begin
      if (free_q[i]) begin
        have_free = 1'b1;
        free_idx  = SW'(i);
      end
    end
  end

  // ------------------------------------------------ per-MPQ action ready
  logic [NUM_MPQ_P-1:0] can_act;
  always_comb begin
    for (int m = 0; m < NUM_MPQ_P; m++) begin
      logic drained;
      drained = eom_q[m] && (qcnt_q[m] == '0) && (infl_q[m] == '0)
                && (hh_q[m] == HH_DONE) && !th_run_q[m];
      can_act[m] = active_q[m] && (
                     (hh_q[m] == HH_PEND && qcnt_q[m] != '0) ||
                     (hh_q[m] == HH_DONE && qcnt_q[m] != '0) ||
                     drained);
      idle_o[m]  = active_q[m] && !eom_q[m] && (qcnt_q[m] == '0) &&
                   (infl_q[m] == '0) && (hh_q[m] != HH_RUN);
    end
  end

  logic [MW-1:0] sel;
  logic          sel_valid;
  logic          do_act;
  rr_arb #(.N(NUM_MPQ_P)) u_arb (
    .clk_i, .rst_ni, .req_i(can_act), .advance_i(do_act),
    .gnt_o(), .idx_o(sel), .valid_o(sel_valid)
  );

  // ------------------------------------------------- decode chosen action
  act_e    act;
  her_t    head_her;
  logic    head_had_hh;
  logic    ph_task, direct_free;
  logic    own_fb_valid;
  feedback_t own_fb;

  assign head_her    = buf_q[head_q[sel]];
  assign head_had_hh = had_hh_q[head_q[sel]];

  always_comb begin
    act = ACT_NONE;
    if (sel_valid) begin
      if (hh_q[sel] == HH_PEND)                         act = ACT_HH;
      else if (qcnt_q[sel] != '0)                       act = ACT_PH;
      else if (th_pend_q[sel])                          act = ACT_TH;
      else                                              act = ACT_END;
    end
    ph_task     = (act == ACT_PH) && head_her.ctx.ph_en;
    direct_free = (act == ACT_PH) && !head_her.ctx.ph_en && !head_had_hh &&
                  !(head_her.eom && head_her.ctx.th_en);

    task_valid_o = 1'b0;
    task_o       = '0;
    unique case (act)
      ACT_HH: begin
        task_valid_o     = 1'b1;
        task_o.her       = head_her;
        task_o.kind      = HANDLER_HEADER;
        task_o.last_use  = !head_her.ctx.ph_en && !(head_her.eom && head_her.ctx.th_en);
      end
      ACT_PH: begin
        task_valid_o     = ph_task;
        task_o.her       = head_her;
        task_o.kind      = HANDLER_PAYLOAD;
        task_o.last_use  = !(head_her.eom && head_her.ctx.th_en);
      end
      ACT_TH: begin
        task_valid_o     = 1'b1;
        task_o.her       = buf_q[eom_slot_q[sel]];
        task_o.kind      = HANDLER_COMPLETION;
        task_o.last_use  = 1'b1;
      end
      default: ;
    endcase

    // notifications the engine produces itself
    own_fb       = '0;
    own_fb.msgid = MSGID_W'(sel);
    own_fb_valid = 1'b0;
    if (direct_free) begin
      own_fb_valid    = 1'b1;
      own_fb.kind     = HANDLER_PAYLOAD;
      own_fb.last_use = 1'b1;
      own_fb.pkt_addr = head_her.pkt_addr;
      own_fb.pkt_size = head_her.pkt_size;
    end else if (act == ACT_END) begin
      own_fb_valid    = 1'b1;
      own_fb.kind     = HANDLER_COMPLETION;
      own_fb.mpq_free = 1'b1;
    end
  end

  // an action proceeds when its output is free
  logic reset_take;
  always_comb begin
    unique case (act)
      ACT_HH, ACT_TH: do_act = task_ready_i;
      ACT_PH:         do_act = ph_task ? task_ready_i
                             : (direct_free ? !fb_valid_i && !reset_take : 1'b1);
      ACT_END:        do_act = !fb_valid_i && !reset_take;
      default:        do_act = 1'b0;
    endcase
  end

  // ------------------------------------------------------------ monitor
  logic push;
  assign her_ready_o   = have_free;
  assign push          = her_valid_i && have_free;
  assign touch_valid_o = push;
  assign touch_id_o    = MW'(her_i.msgid);
  assign touch_thr_o   = her_i.ctx.mpq_timeout;

  assign reset_take  = reset_valid_i && idle_o[reset_id_i] && !fb_valid_i &&
                       !(push && MW'(her_i.msgid) == reset_id_i);
  assign reset_ack_o = reset_take;

  // ------------------------------------------------------------ updates
  logic [MW-1:0] pm;      // MPQ of the pushed HER
  logic          pop;     // head of `sel` leaves its queue
  logic          keep;    // popped slot stays allocated for the completion handler
  logic [MW-1:0] fm;      // MPQ of the incoming notification
  assign pm   = MW'(her_i.msgid);
  assign fm   = MW'(fb_i.msgid);
  assign pop  = do_act && (act == ACT_PH);
  assign keep = head_her.eom && head_her.ctx.th_en;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      free_q <= '1;
      for (int m = 0; m < NUM_MPQ_P; m++) begin
        active_q[m]  <= 1'b0;
        hh_q[m]      <= HH_DONE;
        head_q[m]    <= '0;
        tail_q[m]    <= '0;
        qcnt_q[m]    <= '0;
        infl_q[m]    <= '0;
        eom_q[m]     <= 1'b0;
        th_pend_q[m] <= 1'b0;
        th_run_q[m]  <= 1'b0;
        eom_slot_q[m]<= '0;
      end
      nic_fb_valid_o <= 1'b0;
      nic_fb_o       <= '0;
    end else begin
      // ---- push a new HER
      if (push) begin
        free_q[free_idx] <= 1'b0;
        if (!active_q[pm]) begin
          active_q[pm] <= 1'b1;
          hh_q[pm]     <= her_i.ctx.hh_en ? HH_PEND : HH_DONE;
          eom_q[pm]    <= 1'b0;
          th_pend_q[pm]<= 1'b0;
          infl_q[pm]   <= '0;
        end
        if (qcnt_q[pm] == '0 || (pop && sel == pm && qcnt_q[pm] == 1))
          head_q[pm] <= free_idx;
        else
          nxt_q[tail_q[pm]] <= free_idx;
        tail_q[pm] <= free_idx;
      end
      if (push) begin
        buf_q[free_idx]    <= her_i;
        had_hh_q[free_idx] <= 1'b0;
      end

      // ---- queue counts
      for (int m = 0; m < NUM_MPQ_P; m++) begin
        qcnt_q[m] <= qcnt_q[m] + (SW+1)'(push && pm == MW'(m))
                               - (SW+1)'(pop  && sel == MW'(m));
      end

      // ---- actions
      if (do_act) begin
        unique case (act)
          ACT_HH: begin
            hh_q[sel] <= HH_RUN;
            had_hh_q[head_q[sel]] <= 1'b1;
          end
          ACT_PH: begin
            if (!(push && pm == sel && qcnt_q[sel] == 1))
              head_q[sel] <= nxt_q[head_q[sel]];
            if (head_her.eom) begin
              eom_q[sel]      <= 1'b1;
              th_pend_q[sel]  <= keep;
              eom_slot_q[sel] <= head_q[sel];
            end
            if (!keep) free_q[head_q[sel]] <= 1'b1;
          end
          ACT_TH: begin
            th_run_q[sel]  <= 1'b1;
            th_pend_q[sel] <= 1'b0;
          end
          ACT_END: active_q[sel] <= 1'b0;
          default: ;
        endcase
      end

      // ---- in-flight payload handlers
      for (int m = 0; m < NUM_MPQ_P; m++) begin
        if (!(push && !active_q[pm] && pm == MW'(m)))
          infl_q[m] <= infl_q[m] + 16'(do_act && ph_task && sel == MW'(m))
                                 - 16'(fb_valid_i && fb_i.kind == HANDLER_PAYLOAD && fm == MW'(m));
      end

      // ---- completion notifications
      nic_fb_valid_o <= 1'b0;
      if (fb_valid_i) begin
        nic_fb_valid_o <= 1'b1;
        nic_fb_o       <= fb_i;
        if (fb_i.kind == HANDLER_HEADER) hh_q[fm] <= HH_DONE;
        if (fb_i.kind == HANDLER_COMPLETION) begin
          th_run_q[fm]            <= 1'b0;
          active_q[fm]            <= 1'b0;
          free_q[eom_slot_q[fm]]  <= 1'b1;
          nic_fb_o.mpq_free       <= 1'b1;
        end
      end else if (reset_take) begin
        active_q[reset_id_i]    <= 1'b0;
        nic_fb_valid_o          <= 1'b1;
        nic_fb_o                <= '0;
        nic_fb_o.msgid          <= MSGID_W'(reset_id_i);
        nic_fb_o.kind           <= HANDLER_COMPLETION;
        nic_fb_o.mpq_free       <= 1'b1;
        nic_fb_o.error          <= 1'b1;
      end else if (do_act && own_fb_valid) begin
        nic_fb_valid_o <= 1'b1;
        nic_fb_o       <= own_fb;
      end
    end
  end

  // ------------------------------------------------------------ checks
  // a notification must belong to an active MPQ
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   fb_valid_i |-> active_q[fm]);
  // the NIC must not send packets of a new message on an MPQ that has not
  // been released yet
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   push |-> !(active_q[pm] && eom_q[pm]));
endmodule
