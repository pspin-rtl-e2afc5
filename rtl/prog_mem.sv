// prog_mem: L2 program memory holding the handler code.
//
// As in the paper: 32 KiB, single port, half duplex, 64 bit per cycle
// (64 Gbit/s at 1 GHz). The host writes handler code into it; the
// instruction caches of the clusters read it to refill. The two requesters
// share the one port through a two-way round-robin choice (own choice).
// Interface per requester: request/grant, 8 byte enables; read data returns
// with `rvalid` one cycle after the grant.
module prog_mem #(
  parameter int unsigned SIZE_BYTES = 32 * 1024,
  localparam int unsigned ROWS      = SIZE_BYTES / 8,
  localparam int unsigned RW        = $clog2(ROWS)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [1:0]       req_i,      // 0: host, 1: instruction refill
  input  logic [1:0]       we_i,
  input  logic [1:0][7:0]  be_i,
  input  logic [1:0][31:0] addr_i,
  input  logic [1:0][63:0] wdata_i,
  output logic [1:0]       gnt_o,
  output logic [1:0]       rvalid_o,
  output logic [63:0]      rdata_o
);
  logic [63:0] mem [ROWS];
  logic        last_q;      // requester served last
  logic        sel;

  always_comb begin
    gnt_o = '0;
    if (req_i[0] && req_i[1]) sel = ~last_q;
    else                      sel = req_i[1];
    if (|req_i) gnt_o[sel] = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      last_q   <= 1'b1;
      rvalid_o <= '0;
    end else begin
      if (|req_i) last_q <= sel;
      rvalid_o <= gnt_o & ~we_i;
    end
  end

  always_ff @(posedge clk_i) begin
    if (|req_i) begin
      if (we_i[sel]) begin
        for (int k = 0; k < 8; k++)
          if (be_i[sel][k]) mem[addr_i[sel][3 +: RW]][k*8 +: 8] <= wdata_i[sel][k*8 +: 8];
      end else begin
        rdata_o <= mem[addr_i[sel][3 +: RW]];
      end
    end
  end
endmodule
