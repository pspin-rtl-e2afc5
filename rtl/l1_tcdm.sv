// l1_tcdm: cluster L1 tightly-coupled data memory with its interconnect.
//
// Following the paper, the L1 of a cluster is 1 MiB split into 64
// word-interleaved 32-bit banks: byte address a lives in bank (a/4) mod 64,
// row (a/4) / 64. Each HPU has a 32-bit port; the cluster DMA engine has a
// 512-bit port that covers 16 consecutive banks of one row (it must be 64 B
// aligned). Per bank, a DMA access wins; otherwise a round-robin arbiter
// picks one of the HPU ports that address the bank. A port whose request is
// not granted simply retries in the next cycle, which is how bank conflicts
// cost HPU cycles. The fixed DMA priority and the round-robin policy are this
// design's own choices; the paper gives only the bank organisation.
//
// Interface: request/grant on every port, byte enables on writes; read data
// and `rvalid` arrive one cycle after the grant (single-cycle access).
// The 1 MiB is an array of flip-flops/latches in RTL; a real implementation
// would map each bank to an SRAM macro.
module l1_tcdm
  import pspin_pkg::*;
#(
  parameter int unsigned NPORTS     = NUM_HPUS,
  parameter int unsigned NBANKS     = 64,
  parameter int unsigned SIZE_BYTES = 1 << 20,
  localparam int unsigned WPB       = WIDE_W / 32,             // words per wide beat
  localparam int unsigned ROWS      = SIZE_BYTES / 4 / NBANKS,
  localparam int unsigned BW        = $clog2(NBANKS),
  localparam int unsigned RW        = $clog2(ROWS),
  localparam int unsigned PW        = (NPORTS > 1) ? $clog2(NPORTS) : 1
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  // narrow (HPU) ports
  input  logic [NPORTS-1:0]       req_i,
  input  logic [NPORTS-1:0]       we_i,
  input  logic [NPORTS-1:0][3:0]  be_i,
  input  logic [NPORTS-1:0][31:0] addr_i,
  input  logic [NPORTS-1:0][31:0] wdata_i,
  output logic [NPORTS-1:0]       gnt_o,
  output logic [NPORTS-1:0]       rvalid_o,
  output logic [NPORTS-1:0][31:0] rdata_o,
  // wide (DMA) port
  input  logic                    wreq_i,
  input  logic                    wwe_i,
  input  logic [WIDE_W/8-1:0]     wbe_i,
  input  logic [31:0]             waddr_i,
  input  logic [WIDE_W-1:0]       wwdata_i,
  output logic                    wgnt_o,
  output logic                    wrvalid_o,
  output logic [WIDE_W-1:0]       wrdata_o,
  // event: a narrow request lost its bank this cycle
  output logic                    conflict_o
);
  logic [31:0] mem [NBANKS][ROWS];

  // address decode
  logic [NPORTS-1:0][BW-1:0] pbank;
  logic [NPORTS-1:0][RW-1:0] prow;
  logic [BW-1:0]             wbank0;
  logic [RW-1:0]             wrow;
  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      pbank[p] = addr_i[p][2 +: BW];
      prow[p]  = addr_i[p][2 + BW +: RW];
    end
    wbank0 = waddr_i[2 +: BW];
    wrow   = waddr_i[2 + BW +: RW];
  end

  // per-bank arbitration
  logic [NBANKS-1:0]           wide_hit;
  logic [NBANKS-1:0][NPORTS-1:0] breq, bgnt;
  logic [NBANKS-1:0][PW-1:0]   bidx;
  logic [NBANKS-1:0]           bvalid;

  always_comb begin
    for (int b = 0; b < NBANKS; b++) begin
      wide_hit[b] = wreq_i && ((b - int'(wbank0)) >= 0) && ((b - int'(wbank0)) < WPB);
      for (int p = 0; p < NPORTS; p++)
        breq[b][p] = req_i[p] && (int'(pbank[p]) == b) && !wide_hit[b];
    end
  end

  for (genvar b = 0; b < NBANKS; b++) begin : g_arb
    rr_arb #(.N(NPORTS)) u_arb (
      .clk_i, .rst_ni, .req_i(breq[b]), .advance_i(1'b1),
      .gnt_o(bgnt[b]), .idx_o(bidx[b]), .valid_o(bvalid[b])
    );
  end

  always_comb begin
    gnt_o = '0;
    for (int b = 0; b < NBANKS; b++) gnt_o |= bgnt[b];
  end
  assign wgnt_o     = wreq_i;
  assign conflict_o = |(req_i & ~gnt_o);

  // banks
  logic [NBANKS-1:0][31:0] bank_rdata_q;
  always_ff @(posedge clk_i) begin
    for (int b = 0; b < NBANKS; b++) begin
      if (wide_hit[b]) begin
        int unsigned lane;
        lane = unsigned'(b - int'(wbank0));
        if (wwe_i) begin
          for (int k = 0; k < 4; k++)
            if (wbe_i[lane*4 + k]) mem[b][wrow][k*8 +: 8] <= wwdata_i[lane*32 + k*8 +: 8];
        end
        bank_rdata_q[b] <= mem[b][wrow];
      end else if (bvalid[b]) begin
        if (we_i[bidx[b]]) begin
          for (int k = 0; k < 4; k++)
            if (be_i[bidx[b]][k]) mem[b][prow[bidx[b]]][k*8 +: 8] <= wdata_i[bidx[b]][k*8 +: 8];
        end
        bank_rdata_q[b] <= mem[b][prow[bidx[b]]];
      end
    end
  end

  // response routing: remember which bank served each port
  logic [NPORTS-1:0][BW-1:0] rbank_q;
  logic [BW-1:0]             wrbank_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_o  <= '0;
      wrvalid_o <= 1'b0;
      rbank_q   <= '0;
      wrbank_q  <= '0;
    end else begin
      rvalid_o  <= gnt_o;
      wrvalid_o <= wgnt_o;
      for (int p = 0; p < NPORTS; p++) if (gnt_o[p]) rbank_q[p] <= pbank[p];
      if (wgnt_o) wrbank_q <= wbank0;
    end
  end

  always_comb begin
    for (int p = 0; p < NPORTS; p++) rdata_o[p] = bank_rdata_q[rbank_q[p]];
    for (int l = 0; l < WPB; l++)    wrdata_o[l*32 +: 32] = bank_rdata_q[BW'(int'(wrbank_q) + l)];
  end

  // the wide port must be aligned to a full beat inside one row
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   wreq_i |-> (waddr_i[5:0] == '0));
endmodule
