// l2_mem: two-port, multi-banked, word-interleaved L2 memory.
//
// The paper's L2 packet buffer is 4 MiB with two full-duplex ports and 32
// word-interleaved banks of 512 bit; its L2 handler memory is also 4 MiB but
// uses 64-bit banks. Both are built from this module. Each port moves one
// 512-bit beat per cycle (512 Gbit/s at 1 GHz). A beat covers 512/BANK_W
// adjacent banks, called a group here; beat address a (byte address / 64)
// lives in group a mod NGROUPS at row a / NGROUPS. When both ports address
// the same group in a cycle, one of them waits: priority alternates between
// the ports after every conflict (own choice). In the packet buffer a group
// is a single bank; in the handler memory, 8 banks of 64 bit. The number of
// handler-memory banks is not given in the paper; 32 are assumed.
//
// Interface per port: request/grant with byte enables; read data returns
// with `rvalid` one cycle after the grant. Only the low address bits that
// index the memory are used; address decoding is done by the interconnect.
// The storage is a plain array; a real chip maps each bank to SRAM macros.
module l2_mem
  import pspin_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 4 << 20,
  parameter int unsigned NBANKS     = 32,
  parameter int unsigned BANK_W     = 512,
  localparam int unsigned BEAT_B    = WIDE_W / 8,
  localparam int unsigned NGROUPS   = NBANKS * BANK_W / WIDE_W,
  localparam int unsigned ROWS      = SIZE_BYTES / BEAT_B / NGROUPS,
  localparam int unsigned GW        = (NGROUPS > 1) ? $clog2(NGROUPS) : 1,
  localparam int unsigned RW        = $clog2(ROWS),
  localparam int unsigned OB        = $clog2(BEAT_B)
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic [1:0]            req_i,
  input  logic [1:0]            we_i,
  input  logic [1:0][BEAT_B-1:0] be_i,
  input  logic [1:0][31:0]      addr_i,
  input  logic [1:0][WIDE_W-1:0] wdata_i,
  output logic [1:0]            gnt_o,
  output logic [1:0]            rvalid_o,
  output logic [1:0][WIDE_W-1:0] rdata_o,
  output logic                  conflict_o    // event: both ports hit one group
);
  logic [WIDE_W-1:0] mem [NGROUPS][ROWS];

  logic [1:0][GW-1:0] grp;
  logic [1:0][RW-1:0] row;
  always_comb begin
    for (int p = 0; p < 2; p++) begin
      if (NGROUPS > 1) grp[p] = GW'(addr_i[p][OB +: GW]);
      else             grp[p] = '0;
      row[p] = addr_i[p][OB + ((NGROUPS > 1) ? GW : 0) +: RW];
    end
  end

  logic prio_q;     // port that wins the next conflict
  assign conflict_o = req_i[0] && req_i[1] && (grp[0] == grp[1]);
  always_comb begin
    gnt_o = req_i;
    if (conflict_o) gnt_o[~prio_q] = 1'b0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      prio_q   <= 1'b0;
      rvalid_o <= '0;
    end else begin
      if (conflict_o) prio_q <= ~prio_q;
      rvalid_o <= gnt_o & ~we_i;
    end
  end

  always_ff @(posedge clk_i) begin
    for (int p = 0; p < 2; p++) begin
      if (gnt_o[p]) begin
        if (we_i[p]) begin
          for (int k = 0; k < BEAT_B; k++)
            if (be_i[p][k]) mem[grp[p]][row[p]][k*8 +: 8] <= wdata_i[p][k*8 +: 8];
        end else begin
          rdata_o[p] <= mem[grp[p]][row[p]];
        end
      end
    end
  end
endmodule
