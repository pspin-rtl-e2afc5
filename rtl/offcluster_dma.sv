// offcluster_dma: the off-cluster DMA engine (PsPIN to host memory).
//
// Handlers issue DMA commands to move data from PsPIN memories to host
// memory; the command unit hands them to this engine. It reads the source
// in 512-bit beats through the NHI interconnect and writes each beat to the
// host interface, then returns the command response.
//
// The paper takes its DMA engine from an existing AXI DMA design and says
// that host addresses pass through an IOMMU; the IOMMU is not part of this
// RTL, so the address is used as given. Own choices: one command at a time,
// source 64 B aligned, the host address advanced by 64 B per beat, and a
// 4-entry beat buffer. Reads are issued only while the buffer has room for
// every outstanding beat, so read data is never dropped while the host side
// back-pressures. The last beat carries byte strobes for the remaining bytes.
module offcluster_dma
  import pspin_pkg::*;
(
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                cmd_valid_i,
  output logic                cmd_ready_o,
  input  cmd_t                cmd_i,
  output logic                resp_valid_o,
  input  logic                resp_ready_i,
  output cmd_resp_t           resp_o,
  // NHI read master
  output logic                rd_req_o,
  output logic [31:0]         rd_addr_o,
  input  logic                rd_gnt_i,
  input  logic                rd_rvalid_i,
  input  logic [WIDE_W-1:0]   rd_rdata_i,
  // host write
  output logic                hw_valid_o,
  input  logic                hw_ready_i,
  output logic [63:0]         hw_addr_o,
  output logic [WIDE_W-1:0]   hw_data_o,
  output logic [WIDE_W/8-1:0] hw_strb_o
);
  localparam int unsigned BB = $clog2(WIDE_W / 8);
  typedef enum logic [1:0] {IDLE, MOVE, RESP} state_e;

  state_e      st_q;
  cmd_t        cmd_q;
  logic [25:0] beats_q, rd_q, wr_q;
  logic [2:0]  outst_q;          // reads granted, data not yet returned

  logic        fvalid, fready;
  logic [WIDE_W-1:0] fdata;
  logic [2:0]  fcount;

  sync_fifo #(.T(logic [WIDE_W-1:0]), .DEPTH(4)) u_buf (
    .clk_i, .rst_ni,
    .valid_i(rd_rvalid_i), .ready_o(), .data_i(rd_rdata_i),
    .valid_o(fvalid), .ready_i(fready), .data_o(fdata), .count_o(fcount)
  );

  logic [25:0] beats;
  assign beats       = 26'((33'(cmd_i.length) + 33'((1 << BB) - 1)) >> BB);
  assign cmd_ready_o = (st_q == IDLE);
  assign rd_req_o    = (st_q == MOVE) && (rd_q != beats_q) && (4'(outst_q) + 4'(fcount) < 4'd4);
  assign rd_addr_o   = cmd_q.src_addr + 32'({rd_q, BB'(0)});

  logic [31:0] remain;
  assign remain     = cmd_q.length - 32'({wr_q, BB'(0)});
  assign hw_valid_o = (st_q == MOVE) && fvalid;
  assign hw_addr_o  = cmd_q.dst_addr + 64'({wr_q, BB'(0)});
  assign hw_data_o  = fdata;
  assign fready     = hw_ready_i && (st_q == MOVE);
  always_comb
    for (int k = 0; k < WIDE_W / 8; k++) hw_strb_o[k] = (32'(k) < remain);

  assign resp_valid_o = (st_q == RESP);
  assign resp_o.id    = cmd_q.id;
  assign resp_o.error = 1'b0;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q    <= IDLE;
      cmd_q   <= '0;
      beats_q <= '0;
      rd_q    <= '0;
      wr_q    <= '0;
      outst_q <= '0;
    end else begin
      outst_q <= outst_q + 3'(rd_req_o && rd_gnt_i) - 3'(rd_rvalid_i);
      unique case (st_q)
        IDLE: if (cmd_valid_i) begin
          cmd_q   <= cmd_i;
          beats_q <= beats;
          rd_q    <= '0;
          wr_q    <= '0;
          st_q    <= (beats == '0) ? RESP : MOVE;
        end
        MOVE: begin
          if (rd_req_o && rd_gnt_i) rd_q <= rd_q + 1'b1;
          if (hw_valid_o && hw_ready_i) begin
            wr_q <= wr_q + 1'b1;
            if (wr_q + 1'b1 == beats_q) st_q <= RESP;
          end
        end
        RESP: if (resp_ready_i) st_q <= IDLE;
        default: st_q <= IDLE;
      endcase
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   cmd_valid_i && cmd_ready_o |-> cmd_i.src_addr[BB-1:0] == '0);
endmodule
