// host_direct: executes HostDirect commands.
//
// A HostDirect command carries 32 B of immediate data instead of a source
// address; the unit writes that data to the host memory address of the
// command and, once the host interface has acknowledged the write, sends the
// command response back through the command unit. The HPU drivers also use
// it to write error conditions into execution context descriptors.
//
// Own choices: one command at a time (IDLE, WRITE, WAIT_ACK, RESP); the host
// write port is a simple valid/ready address+data channel with a separate
// acknowledge pulse, standing in for the AXI4 port toward PCIe in the paper.
module host_direct
  import pspin_pkg::*;
(
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 cmd_valid_i,
  output logic                 cmd_ready_o,
  input  cmd_t                 cmd_i,
  output logic                 resp_valid_o,
  input  logic                 resp_ready_i,
  output cmd_resp_t            resp_o,
  // host write
  output logic                 hw_valid_o,
  input  logic                 hw_ready_i,
  output logic [63:0]          hw_addr_o,
  output logic [HOSTDIR_W-1:0] hw_data_o,
  input  logic                 hw_ack_i
);
  typedef enum logic [1:0] {IDLE, WRITE, WAIT_ACK, RESP} state_e;
  state_e  st_q;
  cmd_t    cmd_q;

  assign cmd_ready_o  = (st_q == IDLE);
  assign hw_valid_o   = (st_q == WRITE);
  assign hw_addr_o    = cmd_q.dst_addr;
  assign hw_data_o    = cmd_q.imm;
  assign resp_valid_o = (st_q == RESP);
  assign resp_o.id    = cmd_q.id;
  assign resp_o.error = 1'b0;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q  <= IDLE;
      cmd_q <= '0;
    end else begin
      unique case (st_q)
        IDLE:     if (cmd_valid_i) begin cmd_q <= cmd_i; st_q <= WRITE; end
        WRITE:    if (hw_ready_i) st_q <= hw_ack_i ? RESP : WAIT_ACK;
        WAIT_ACK: if (hw_ack_i) st_q <= RESP;
        RESP:     if (resp_ready_i) st_q <= IDLE;
        default:  st_q <= IDLE;
      endcase
    end
  end
endmodule
