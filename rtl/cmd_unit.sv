// cmd_unit: the PsPIN command unit.
//
// Handlers issue three kinds of commands, which reach this unit from the
// clusters: NIC commands (send data over the network) go to the NIC outbound
// engine, DMA commands (move data to host memory) to the off-cluster DMA
// engine, HostDirect commands (32 B immediate data to a host address) to the
// HostDirect unit. The responses of those three units are returned to the
// cluster named in the command id, which forwards them to the HPU driver.
//
// Own choices: a round-robin arbiter picks one cluster's command per cycle,
// a second one picks one of the three responders per cycle; clusters always
// accept responses. A command waits (back-pressure to the cluster and to the
// handler) while its destination cannot take it.
module cmd_unit
  import pspin_pkg::*;
#(
  parameter int unsigned NUM_CLUSTERS_P = NUM_CLUSTERS,
  localparam int unsigned IW = (NUM_CLUSTERS_P > 1) ? $clog2(NUM_CLUSTERS_P) : 1
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  // from the clusters
  input  logic [NUM_CLUSTERS_P-1:0] cl_cmd_valid_i,
  output logic [NUM_CLUSTERS_P-1:0] cl_cmd_ready_o,
  input  cmd_t                      cl_cmd_i [NUM_CLUSTERS_P],
  output logic [NUM_CLUSTERS_P-1:0] cl_resp_valid_o,
  output cmd_resp_t                 cl_resp_o,
  // destinations: 0 NIC outbound, 1 off-cluster DMA, 2 HostDirect
  output logic [2:0]                dst_valid_o,
  input  logic [2:0]                dst_ready_i,
  output cmd_t                      dst_cmd_o,
  input  logic [2:0]                dst_resp_valid_i,
  output logic [2:0]                dst_resp_ready_o,
  input  cmd_resp_t                 dst_resp_i [3]
);
  // ------------------------------------------------------------ commands
  logic [NUM_CLUSTERS_P-1:0] gnt;
  logic [IW-1:0]             idx;
  logic                      cvalid, cready;
  cmd_t                      cmd;

  rr_arb #(.N(NUM_CLUSTERS_P)) u_cmd_arb (
    .clk_i, .rst_ni, .req_i(cl_cmd_valid_i), .advance_i(cready),
    .gnt_o(gnt), .idx_o(idx), .valid_o(cvalid)
  );
  assign cmd       = cl_cmd_i[idx];
  assign dst_cmd_o = cmd;
  always_comb begin
    dst_valid_o = '0;
    cready      = 1'b0;
    if (cvalid) begin
      unique case (cmd.ctype)
        CMD_NIC:        begin dst_valid_o[0] = 1'b1; cready = dst_ready_i[0]; end
        CMD_DMA:        begin dst_valid_o[1] = 1'b1; cready = dst_ready_i[1]; end
        CMD_HOSTDIRECT: begin dst_valid_o[2] = 1'b1; cready = dst_ready_i[2]; end
        default:        cready = 1'b0;
      endcase
    end
  end
  assign cl_cmd_ready_o = cready ? gnt : '0;

  // ----------------------------------------------------------- responses
  logic [2:0] rgnt;
  logic [1:0] ridx;
  logic       rvalid;
  rr_arb #(.N(3)) u_resp_arb (
    .clk_i, .rst_ni, .req_i(dst_resp_valid_i), .advance_i(1'b1),
    .gnt_o(rgnt), .idx_o(ridx), .valid_o(rvalid)
  );
  assign dst_resp_ready_o = rgnt;
  assign cl_resp_o        = dst_resp_i[ridx];
  always_comb begin
    cl_resp_valid_o = '0;
    if (rvalid) cl_resp_valid_o[cl_resp_o.id.cluster] = 1'b1;
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   cvalid |-> cmd.ctype != 2'd3);
endmodule
