// hpu_driver: the memory-mapped device between one HPU and the cluster.
//
// What the paper specifies, and this module does:
//  * the HPU runtime reads the handler function pointer from the driver;
//    while there is no task the driver stops the HPU (clock gating, here the
//    `clk_en_o` output) and the load completes when a task arrives;
//  * the runtime reads the handler arguments, calls the handler and writes a
//    doorbell when it returns;
//  * the driver sends the completion notification as soon as no command
//    issued by that task is still in flight. It can hold one completed task
//    whose notification cannot be sent yet and already start the next one;
//  * handler commands (NIC, DMA, HostDirect) are issued through the driver;
//    the handler blocks while they cannot be accepted;
//  * for every task the PMP regions of the core are set so that it can reach
//    only the handler code, its packet, its handler memory region and its
//    L1 scratchpad;
//  * a watchdog raises an interrupt when a handler runs longer than the
//    threshold of its execution context; after an exception or the watchdog
//    the runtime writes the error register, and the driver reports the error
//    to the execution context descriptor in host memory with a HostDirect
//    command before it sends a completion notification flagged as failed.
//
// Own choices: the register map below, up to 4 commands in flight per HPU
// (a 2-bit slot in the command id), and a one-bit task generation per
// command so that the commands of the held task and of the running task are
// counted apart.
//
// Register map (byte offsets, 32-bit registers):
//   0x00 R  handler function pointer (blocks until a task is present)
//   0x04 R  L1 address of the packet        0x08 R  packet size
//   0x0C R  L2 address of the packet        0x10 R  handler memory address
//   0x14 R  handler memory size             0x18 R  L1 scratchpad address
//   0x1C R  scratchpad size                 0x20 R  {kind[9:8], msgid}
//   0x24 W  doorbell: handler finished      0x28 W  error code: handler failed
//   0x40 W  command source                  0x44/0x48 W destination low/high
//   0x4C W  command length                  0x50-0x6C W 32 B immediate data
//   0x70 W  issue command, data = type (blocks while it cannot be accepted)
//   0x74 R  commands in flight of this task 0x78 R  wait: blocks until 0
//   0x7C R  sticky command error flag (cleared by a new task)
// Timing: register reads answer one cycle after the grant; a task delivered
// by the scheduler can be read in the next cycle.
module hpu_driver
  import pspin_pkg::*;
#(
  parameter logic [31:0] CODE_BASE = L2_PROG_BASE,
  parameter logic [31:0] CODE_SIZE = 32'd32768
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic [CLUSTER_ID_W-1:0]  cluster_id_i,
  input  logic [HPU_ID_W-1:0]      hpu_id_i,
  // task from the cluster-local scheduler
  input  logic                     task_valid_i,
  input  hpu_task_t                task_i,
  output logic                     idle_o,
  // HPU register bus
  input  logic                     core_req_i,
  input  logic                     core_we_i,
  input  logic [7:0]               core_addr_i,
  input  logic [31:0]              core_wdata_i,
  output logic                     core_gnt_o,
  output logic                     core_rvalid_o,
  output logic [31:0]              core_rdata_o,
  output logic                     clk_en_o,
  output logic                     irq_o,        // watchdog interrupt
  output logic [3:0][31:0]         pmp_base_o,   // code, packet, handler mem, scratchpad
  output logic [3:0][31:0]         pmp_size_o,
  // completion notification
  output logic                     fb_valid_o,
  input  logic                     fb_ready_i,
  output feedback_t                fb_o,
  output logic [$clog2(L1_SLOTS)-1:0] fb_slot_o,
  // commands
  output logic                     cmd_valid_o,
  input  logic                     cmd_ready_i,
  output cmd_t                     cmd_o,
  input  logic                     resp_valid_i,
  input  cmd_resp_t                resp_i,
  // events
  output logic                     wd_fire_o
);
  localparam int unsigned NSLOT = 1 << CMD_SLOT_W;

  // -------------------------------------------------------------- state
  logic       cur_valid_q;
  hpu_task_t  cur_q;
  logic       cur_gen_q;
  logic       done_valid_q;
  hpu_task_t  done_q;
  logic       done_gen_q, done_err_q;
  logic       errcmd_pend_q;
  logic [31:0] errcode_q;

  logic [NSLOT-1:0]       slot_busy_q, slot_gen_q;
  logic [CMD_SLOT_W:0]    infl_q [2];
  logic                   cmd_err_q;
  logic [31:0]            wd_q;
  logic                   irq_q;

  logic [31:0]            c_src, c_dlo, c_dhi, c_len;
  logic [7:0][31:0]       c_imm;

  // free command slot
  logic                   have_slot;
  logic [CMD_SLOT_W-1:0]  fslot;
  always_comb begin
    have_slot = 1'b0;
    fslot     = '0;
    for (int i = NSLOT - 1; i >= 0; i--)
      if (!slot_busy_q[i]) begin
        have_slot = 1'b1;
        fslot     = CMD_SLOT_W'(i);
      end
  end

  // ---------------------------------------------------- register decode
  logic rd_handler, wr_doorbell, wr_error, wr_issue, rd_wait;
  assign rd_handler  = core_req_i && !core_we_i && core_addr_i == 8'h00;
  assign wr_doorbell = core_req_i &&  core_we_i && core_addr_i == 8'h24;
  assign wr_error    = core_req_i &&  core_we_i && core_addr_i == 8'h28;
  assign wr_issue    = core_req_i &&  core_we_i && core_addr_i == 8'h70;
  assign rd_wait     = core_req_i && !core_we_i && core_addr_i == 8'h78;

  logic finish_ok, issue_ok;
  assign finish_ok = cur_valid_q && !done_valid_q;      // room to hold the task
  assign issue_ok  = cur_valid_q && have_slot && !errcmd_pend_q && cmd_ready_i;

  always_comb begin
    if (rd_handler)                    core_gnt_o = cur_valid_q;
    else if (wr_doorbell || wr_error)  core_gnt_o = finish_ok;
    else if (wr_issue)                 core_gnt_o = issue_ok;
    else if (rd_wait)                  core_gnt_o = (infl_q[cur_gen_q] == '0);
    else                               core_gnt_o = core_req_i;
  end
  assign clk_en_o = !(rd_handler && !cur_valid_q);

  // ------------------------------------------------------ commands out
  logic send_err;     // error report has priority over handler commands
  assign send_err = errcmd_pend_q && have_slot;
  always_comb begin
    cmd_o            = '0;
    cmd_o.id.cluster = cluster_id_i;
    cmd_o.id.hpu     = hpu_id_i;
    cmd_o.id.slot    = fslot;
    if (send_err) begin
      cmd_o.ctype    = CMD_HOSTDIRECT;
      cmd_o.dst_addr = {32'd0, done_q.tsk.her.ctx.host_desc_addr};
      cmd_o.length   = 32'd32;
      cmd_o.imm      = {192'd0, 16'(done_q.tsk.her.msgid), 16'(done_q.tsk.kind), errcode_q};
      cmd_valid_o    = 1'b1;
    end else begin
      cmd_o.ctype    = cmd_type_e'(core_wdata_i[1:0]);
      cmd_o.src_addr = c_src;
      cmd_o.dst_addr = {c_dhi, c_dlo};
      cmd_o.length   = c_len;
      cmd_o.imm      = c_imm;
      cmd_valid_o    = wr_issue && cur_valid_q && have_slot && !errcmd_pend_q;
    end
  end
  logic cmd_fire;
  assign cmd_fire = cmd_valid_o && cmd_ready_i;

  // ------------------------------------------------- completion output
  assign fb_valid_o     = done_valid_q && !errcmd_pend_q && (infl_q[done_gen_q] == '0);
  assign fb_o.msgid     = done_q.tsk.her.msgid;
  assign fb_o.kind      = done_q.tsk.kind;
  assign fb_o.last_use  = done_q.tsk.last_use;
  assign fb_o.error     = done_err_q;
  assign fb_o.mpq_free  = 1'b0;
  assign fb_o.pkt_addr  = done_q.tsk.her.pkt_addr;
  assign fb_o.pkt_size  = done_q.tsk.her.pkt_size;
  assign fb_o.cluster   = cluster_id_i;
  assign fb_slot_o      = done_q.slot;

  assign idle_o = !cur_valid_q;
  assign irq_o  = irq_q;

  // PMP regions of the running task
  always_comb begin
    pmp_base_o[0] = CODE_BASE;
    pmp_size_o[0] = CODE_SIZE;
    pmp_base_o[1] = cur_q.l1_pkt_addr;
    pmp_size_o[1] = 32'(L1_SLOT_BYTES);
    pmp_base_o[2] = cur_q.tsk.her.ctx.hmem_addr;
    pmp_size_o[2] = cur_q.tsk.her.ctx.hmem_size;
    pmp_base_o[3] = cur_q.tsk.her.ctx.scratch_addr;
    pmp_size_o[3] = cur_q.tsk.her.ctx.scratch_size;
    if (!cur_valid_q) pmp_size_o = '0;
  end

  // -------------------------------------------------------- read data
  logic [31:0] rdata;
  always_comb begin
    unique case (core_addr_i)
      8'h00: unique case (cur_q.tsk.kind)
               HANDLER_HEADER:     rdata = cur_q.tsk.her.ctx.hh_addr;
               HANDLER_PAYLOAD:    rdata = cur_q.tsk.her.ctx.ph_addr;
               default:            rdata = cur_q.tsk.her.ctx.th_addr;
             endcase
      8'h04: rdata = cur_q.l1_pkt_addr;
      8'h08: rdata = 32'(cur_q.tsk.her.pkt_size);
      8'h0C: rdata = cur_q.tsk.her.pkt_addr;
      8'h10: rdata = cur_q.tsk.her.ctx.hmem_addr;
      8'h14: rdata = cur_q.tsk.her.ctx.hmem_size;
      8'h18: rdata = cur_q.tsk.her.ctx.scratch_addr;
      8'h1C: rdata = cur_q.tsk.her.ctx.scratch_size;
      8'h20: rdata = {22'd0, cur_q.tsk.kind, 8'(cur_q.tsk.her.msgid)};
      8'h74: rdata = 32'(infl_q[cur_gen_q]);
      8'h78: rdata = 32'(infl_q[cur_gen_q]);
      8'h7C: rdata = 32'(cmd_err_q);
      default: rdata = 32'd0;
    endcase
  end

  // -------------------------------------------------------- sequential
  logic finishing, new_task;
  assign finishing = (wr_doorbell || wr_error) && finish_ok;
  assign new_task  = task_valid_i && !cur_valid_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cur_valid_q   <= 1'b0;
      cur_q         <= '0;
      cur_gen_q     <= 1'b0;
      done_valid_q  <= 1'b0;
      done_q        <= '0;
      done_gen_q    <= 1'b0;
      done_err_q    <= 1'b0;
      errcmd_pend_q <= 1'b0;
      errcode_q     <= '0;
      slot_busy_q   <= '0;
      slot_gen_q    <= '0;
      infl_q[0]     <= '0;
      infl_q[1]     <= '0;
      cmd_err_q     <= 1'b0;
      wd_q          <= '0;
      irq_q         <= 1'b0;
      c_src         <= '0;
      c_dlo         <= '0;
      c_dhi         <= '0;
      c_len         <= '0;
      c_imm         <= '0;
      core_rvalid_o <= 1'b0;
      core_rdata_o  <= '0;
      wd_fire_o     <= 1'b0;
    end else begin
      core_rvalid_o <= core_req_i && core_gnt_o && !core_we_i;
      core_rdata_o  <= rdata;
      wd_fire_o     <= 1'b0;

      // command register writes
      if (core_req_i && core_we_i) begin
        unique case (core_addr_i)
          8'h40: c_src <= core_wdata_i;
          8'h44: c_dlo <= core_wdata_i;
          8'h48: c_dhi <= core_wdata_i;
          8'h4C: c_len <= core_wdata_i;
          8'h50, 8'h54, 8'h58, 8'h5C, 8'h60, 8'h64, 8'h68, 8'h6C:
                 c_imm[3'(core_addr_i[5:2] - 4'h4)] <= core_wdata_i;
          default: ;
        endcase
      end

      // task life cycle
      if (new_task) begin
        cur_valid_q <= 1'b1;
        cur_q       <= task_i;
        wd_q        <= '0;
        irq_q       <= 1'b0;
        cmd_err_q   <= 1'b0;
      end else if (finishing) begin
        cur_valid_q   <= 1'b0;
        done_valid_q  <= 1'b1;
        done_q        <= cur_q;
        done_gen_q    <= cur_gen_q;
        done_err_q    <= wr_error;
        errcmd_pend_q <= wr_error;
        errcode_q     <= core_wdata_i;
        cur_gen_q     <= ~cur_gen_q;
        irq_q         <= 1'b0;
      end else if (cur_valid_q) begin
        wd_q <= wd_q + 1;
        if (!irq_q && cur_q.tsk.her.ctx.hpu_timeout != '0 &&
            wd_q >= cur_q.tsk.her.ctx.hpu_timeout) begin
          irq_q     <= 1'b1;
          wd_fire_o <= 1'b1;
        end
      end
      if (fb_valid_o && fb_ready_i) done_valid_q <= 1'b0;

      // command slots and in-flight counts
      begin
        logic [CMD_SLOT_W:0] d0, d1;
        logic                g;
        d0 = infl_q[0];
        d1 = infl_q[1];
        if (cmd_fire) begin
          g = send_err ? done_gen_q : cur_gen_q;
          slot_busy_q[fslot] <= 1'b1;
          slot_gen_q[fslot]  <= g;
          if (g) d1 = d1 + 1'b1; else d0 = d0 + 1'b1;
          if (send_err) errcmd_pend_q <= 1'b0;
        end
        if (resp_valid_i) begin
          slot_busy_q[resp_i.id.slot] <= 1'b0;
          if (slot_gen_q[resp_i.id.slot]) d1 = d1 - 1'b1; else d0 = d0 - 1'b1;
          if (resp_i.error) cmd_err_q <= 1'b1;
        end
        infl_q[0] <= d0;
        infl_q[1] <= d1;
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   task_valid_i |-> !cur_valid_q);
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   resp_valid_i |-> slot_busy_q[resp_i.id.slot]);
endmodule
