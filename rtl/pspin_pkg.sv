// pspin_pkg: types and constants shared by the PsPIN blocks.
//
// The sizes that follow the paper are: 4 processing clusters of 8 HPUs,
// a 1 MiB L1 TCDM per cluster (64 word-interleaved 32-bit banks), a 4 MiB
// L2 packet buffer (32 banks of 512 bit), a 4 MiB L2 handler memory
// (64-bit banks), a 32 KiB program memory, 512-bit wide data paths and
// 32 B of immediate data in a HostDirect command. Field widths of the
// handler execution request (HER), the task, the completion notification and
// the handler command are this design's own choice: the paper lists what
// these records carry but not their encoding.
package pspin_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned NUM_CLUSTERS   = 4;
  localparam int unsigned NUM_HPUS       = 8;         // per cluster
  localparam int unsigned NUM_MPQ        = 256;       // assumed
  localparam int unsigned MSGID_W        = $clog2(NUM_MPQ);
  localparam int unsigned ADDR_W         = 32;
  localparam int unsigned WIDE_W         = 512;       // NHI / DMA data width
  localparam int unsigned WIDE_BYTES     = WIDE_W / 8;
  localparam int unsigned HOSTDIR_W      = 256;       // 32 B immediate data
  localparam int unsigned L1_BYTES       = 1 << 20;   // 1 MiB
  localparam int unsigned L1_PKTBUF_BYTES= 32 * 1024; // L1 packet buffer
  localparam int unsigned L1_SLOT_BYTES  = 1024;      // assumed slot size
  localparam int unsigned L1_SLOTS       = L1_PKTBUF_BYTES / L1_SLOT_BYTES;
  localparam int unsigned CLUSTER_ID_W   = $clog2(NUM_CLUSTERS);
  localparam int unsigned HPU_ID_W       = $clog2(NUM_HPUS);

  // ------------------------------------------------------- address map
  // Global byte addresses seen by the NHI and DMA interconnects.
  localparam logic [31:0] L2_PKT_BASE   = 32'h1C00_0000;
  localparam logic [31:0] L2_HND_BASE   = 32'h1C40_0000;
  localparam logic [31:0] L2_PROG_BASE  = 32'h1D00_0000;
  localparam logic [31:0] L1_BASE       = 32'h1000_0000;  // cluster-local L1

  // ------------------------------------------------------- handler kinds
  typedef enum logic [1:0] {
    HANDLER_HEADER     = 2'd0,
    HANDLER_PAYLOAD    = 2'd1,
    HANDLER_COMPLETION = 2'd2
  } handler_kind_e;

  // ----------------------------------------------------- execution context
  // Built by the host and attached to every HER by the NIC inbound engine.
  typedef struct packed {
    logic        hh_en;          // header handler present
    logic        ph_en;          // payload handler present
    logic        th_en;          // completion handler present
    logic [31:0] hh_addr;        // handler function pointers
    logic [31:0] ph_addr;
    logic [31:0] th_addr;
    logic [31:0] hmem_addr;      // L2 handler memory region
    logic [31:0] hmem_size;
    logic [31:0] scratch_addr;   // L1 scratchpad of the home cluster
    logic [31:0] scratch_size;
    logic [31:0] host_desc_addr; // execution context descriptor in host memory
    logic [31:0] mpq_timeout;    // cycles without packets before MPQ reset
    logic [31:0] hpu_timeout;    // handler watchdog, cycles
  } exec_ctx_t;

  // -------------------------------------------- handler execution request
  typedef struct packed {
    logic [MSGID_W-1:0] msgid;   // MPQ the packet is mapped to
    logic               eom;     // last packet of the message
    logic [31:0]        pkt_addr;  // packet in the L2 packet buffer
    logic [15:0]        pkt_size;  // bytes
    logic [15:0]        copy_size; // bytes the handlers need in L1
    exec_ctx_t          ctx;
  } her_t;

  // --------------------------------------------------------------- task
  typedef struct packed {
    her_t          her;
    handler_kind_e kind;
    logic          last_use;     // packet may be freed after this task
  } task_t;

  // Task as seen by an HPU driver (after the L1 copy).
  typedef struct packed {
    task_t       tsk;
    logic [31:0] l1_pkt_addr;    // byte address of the L1 copy
    logic [$clog2(L1_SLOTS)-1:0] slot;
  } hpu_task_t;

  // ------------------------------------------- completion notification
  typedef struct packed {
    logic [MSGID_W-1:0]      msgid;
    handler_kind_e           kind;
    logic                    last_use;
    logic                    error;    // handler failed (exception/watchdog)
    logic                    mpq_free; // MPQ returned to idle (from MPQ engine)
    logic [31:0]             pkt_addr;
    logic [15:0]             pkt_size;
    logic [CLUSTER_ID_W-1:0] cluster;
  } feedback_t;

  // --------------------------------------------------- handler commands
  typedef enum logic [1:0] {
    CMD_NIC        = 2'd0,   // send data over the network
    CMD_DMA        = 2'd1,   // move data to host memory
    CMD_HOSTDIRECT = 2'd2    // write 32 B immediate data to host memory
  } cmd_type_e;

  localparam int unsigned CMD_SLOT_W = 2;  // outstanding commands per HPU: 4
  typedef struct packed {
    logic [CLUSTER_ID_W-1:0] cluster;
    logic [HPU_ID_W-1:0]     hpu;
    logic [CMD_SLOT_W-1:0]   slot;
  } cmd_id_t;

  typedef struct packed {
    cmd_id_t                id;
    cmd_type_e              ctype;
    logic [31:0]            src_addr;  // NIC/DMA: PsPIN-side source
    logic [63:0]            dst_addr;  // host address / network destination
    logic [31:0]            length;    // bytes
    logic [HOSTDIR_W-1:0]   imm;       // HostDirect immediate data
  } cmd_t;

  typedef struct packed {
    cmd_id_t id;
    logic    error;
  } cmd_resp_t;

endpackage
