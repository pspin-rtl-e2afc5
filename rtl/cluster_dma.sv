// cluster_dma: cluster-local DMA engine (L2 packet buffer to L1 copy).
//
// The cluster-local scheduler starts one transfer per task to bring the
// packet from the L2 packet buffer into the cluster's L1 before the handler
// runs. The engine reads 512-bit beats through the DMA interconnect and
// writes each returning beat into the 512-bit port of the L1 TCDM, so a
// transfer of n bytes takes ceil(n/64) read grants plus the memory latency.
// Reads are issued back to back without waiting for data; the data returns
// in order, so a second counter tracks the write side. The last beat is
// written with byte enables that cover only the remaining bytes.
//
// The paper takes its DMA engine from an existing AXI DMA design and
// describes only what it does here; this engine is this design's own,
// minimal version: one transfer at a time, 64 B aligned source and
// destination, lengths up to 64 KiB, L2-to-L1 direction only.
//
// Interface: transfer request (valid/ready, taken only when idle), a
// one-cycle `done_o` pulse when the last beat is written; L2 read master port
// (req/gnt, rvalid/rdata one or more cycles later, in order); L1 wide write
// port (always granted by the TCDM).
module cluster_dma
  import pspin_pkg::*;
(
  input  logic                clk_i,
  input  logic                rst_ni,
  // transfer requests
  input  logic                xfer_valid_i,
  output logic                xfer_ready_o,
  input  logic [31:0]         xfer_src_i,
  input  logic [31:0]         xfer_dst_i,
  input  logic [15:0]         xfer_len_i,
  output logic                done_o,
  // L2 read master
  output logic                l2_req_o,
  output logic [31:0]         l2_addr_o,
  input  logic                l2_gnt_i,
  input  logic                l2_rvalid_i,
  input  logic [WIDE_W-1:0]   l2_rdata_i,
  // L1 wide write port
  output logic                l1_req_o,
  output logic [31:0]         l1_addr_o,
  output logic [WIDE_W/8-1:0] l1_be_o,
  output logic [WIDE_W-1:0]   l1_wdata_o
);
  localparam int unsigned BB = $clog2(WIDE_W / 8);   // bytes per beat, log2

  logic        busy_q;
  logic [31:0] src_q, dst_q;
  logic [15:0] len_q;
  logic [10:0] beats_q, rd_q, wr_q;
  logic [10:0] beats;

  assign beats        = 11'((17'(xfer_len_i) + 17'((1 << BB) - 1)) >> BB);
  assign xfer_ready_o = !busy_q;

  assign l2_req_o  = busy_q && (rd_q != beats_q);
  assign l2_addr_o = src_q + 32'({rd_q, BB'(0)});

  // bytes valid in the current write beat
  logic [15:0] remain;
  assign remain     = len_q - 16'({wr_q, BB'(0)});
  assign l1_req_o   = l2_rvalid_i && busy_q;
  assign l1_addr_o  = dst_q + 32'({wr_q, BB'(0)});
  assign l1_wdata_o = l2_rdata_i;
  always_comb begin
    for (int k = 0; k < WIDE_W / 8; k++) l1_be_o[k] = (16'(k) < remain);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q  <= 1'b0;
      src_q   <= '0;
      dst_q   <= '0;
      len_q   <= '0;
      beats_q <= '0;
      rd_q    <= '0;
      wr_q    <= '0;
      done_o  <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (!busy_q) begin
        if (xfer_valid_i) begin
          if (beats == '0) begin
            done_o <= 1'b1;
          end else begin
            busy_q  <= 1'b1;
            src_q   <= xfer_src_i;
            dst_q   <= xfer_dst_i;
            len_q   <= xfer_len_i;
            beats_q <= beats;
            rd_q    <= '0;
            wr_q    <= '0;
          end
        end
      end else begin
        if (l2_req_o && l2_gnt_i) rd_q <= rd_q + 1'b1;
        if (l2_rvalid_i) begin
          wr_q <= wr_q + 1'b1;
          if (wr_q + 1'b1 == beats_q) begin
            busy_q <= 1'b0;
            done_o <= 1'b1;
          end
        end
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   xfer_valid_i && xfer_ready_o |-> xfer_src_i[BB-1:0] == '0 && xfer_dst_i[BB-1:0] == '0);
endmodule
