// st_pkg: types and constants shared by the split-trust hardware.
//
// The machine is cut into statically partitioned trust domains that share no
// processor, memory or bus. They talk only through hardware queues: 12
// delegatable mailboxes and 11 permanent queues. This package fixes the domain
// numbering, the mailbox command/status formats and the table that says which
// domain sits on the fixed end of each mailbox.
//
// Taken from the paper: the set of domains (resource manager, untrusted, two
// TEEs, serial input, serial output, storage, network), 12 mailboxes, 11
// permanent queues, 4 messages per mailbox, 64 B control-plane and 512 B
// data-plane messages. Chosen here: 32-bit words, the domain numbers, the
// 12-bit quota fields, the status word layout and which mailbox serves which
// domain (the paper fixes only the four storage mailboxes).
package st_pkg;

  localparam int unsigned WORD_W = 32;

  // Domains that own a port on every mailbox.
  localparam int unsigned N_DOM = 8;
  localparam int unsigned DOM_W = 3;
  typedef enum logic [DOM_W-1:0] {
    DOM_RM         = 3'd0,  // resource manager (default owner of every mailbox)
    DOM_UNTRUSTED  = 3'd1,  // commodity OS on the application CPU
    DOM_TEE1       = 3'd2,
    DOM_TEE2       = 3'd3,
    DOM_SERIAL_IN  = 3'd4,
    DOM_SERIAL_OUT = 3'd5,
    DOM_STORAGE    = 3'd6,
    DOM_NETWORK    = 3'd7
  } dom_id_t;

  // Microcontroller domains with their own ROM and RAM: every domain except
  // the untrusted one, plus the microcontroller that mediates TPM access.
  localparam int unsigned N_MCU = 8;

  // Quotas. A message quota of all ones means "no message limit"; the time
  // quota cannot be unlimited and must be non-zero.
  localparam int unsigned QUOTA_W = 12;
  localparam logic [QUOTA_W-1:0] MSG_QUOTA_INF = '1;

  typedef enum logic [1:0] {
    MB_NOP      = 2'd0,
    MB_DELEGATE = 2'd1,  // resource manager only: hand the delegatable end to 'target'
    MB_YIELD    = 2'd2   // current owner only: give the delegatable end back
  } mb_op_e;

  typedef struct packed {
    mb_op_e               op;
    dom_id_t              target;
    logic [QUOTA_W-1:0]   msg_quota;
    logic [QUOTA_W-1:0]   time_quota;  // in ticks
  } mb_cmd_t;

  // Status register as read by one domain. All zero is the dummy value.
  typedef struct packed {
    logic                 valid;
    dom_id_t              owner;
    logic [QUOTA_W-1:0]   msg_left;
    logic [QUOTA_W-1:0]   time_left;
    logic [3:0]           rsvd;
  } mb_status_t;

  // One domain's data port on a queue: write side and read acknowledge.
  typedef struct packed {
    logic              wr_valid;
    logic [WORD_W-1:0] wr_data;
    logic              rd_ready;
  } mb_req_t;

  typedef struct packed {
    logic              wr_ready;
    logic              rd_valid;
    logic [WORD_W-1:0] rd_data;
  } mb_rsp_t;

  // Mailboxes of the machine.
  localparam int unsigned N_MB = 12;
  typedef enum logic [3:0] {
    MB_SERIAL_OUT       = 4'd0,
    MB_SERIAL_IN        = 4'd1,
    MB_STORAGE_CMD_IN   = 4'd2,
    MB_STORAGE_CMD_OUT  = 4'd3,
    MB_STORAGE_DATA_IN  = 4'd4,
    MB_STORAGE_DATA_OUT = 4'd5,
    MB_NETWORK_CMD_IN   = 4'd6,
    MB_NETWORK_CMD_OUT  = 4'd7,
    MB_NETWORK_DATA_IN  = 4'd8,
    MB_NETWORK_DATA_OUT = 4'd9,
    MB_TEE1_IPC         = 4'd10,
    MB_TEE2_IPC         = 4'd11
  } mb_id_e;

  // Domain hard-wired to the fixed end of each mailbox.
  localparam dom_id_t MB_FIXED_DOM [N_MB] = '{
    DOM_SERIAL_OUT, DOM_SERIAL_IN,
    DOM_STORAGE, DOM_STORAGE, DOM_STORAGE, DOM_STORAGE,
    DOM_NETWORK, DOM_NETWORK, DOM_NETWORK, DOM_NETWORK,
    DOM_TEE1, DOM_TEE2
  };
  // 1: the fixed end reads (domains send to it); 0: the fixed end writes.
  localparam bit MB_FIXED_READER [N_MB] = '{
    1'b1, 1'b0, 1'b1, 1'b0, 1'b1, 1'b0, 1'b1, 1'b0, 1'b1, 1'b0, 1'b1, 1'b1
  };
  // 1: data-plane mailbox (512 B messages); 0: control plane (64 B messages).
  localparam bit MB_DATA_PLANE [N_MB] = '{
    1'b0, 1'b0, 1'b0, 1'b0, 1'b1, 1'b1, 1'b0, 1'b0, 1'b1, 1'b1, 1'b0, 1'b0
  };

  localparam int unsigned CTRL_MSG_WORDS = 16;   // 64 B
  localparam int unsigned DATA_MSG_WORDS = 128;  // 512 B
  localparam int unsigned MB_MSG_SLOTS   = 4;

  // Permanent queues (11 in the machine). Their two ends are wired outside
  // this hardware; the intended use of each is listed in the top level.
  localparam int unsigned N_PQ = 11;

  // One beat of a packet stream (network device, DMA engine, packet FIFO).
  typedef struct packed {
    logic [WORD_W-1:0] data;
    logic              last;   // final beat of a packet
  } beat_t;

  // Port of a domain's private RAM.
  localparam int unsigned RAM_AW = 17;  // 98304 words = 384 KiB
  typedef struct packed {
    logic              en;
    logic              we;
    logic [3:0]        be;
    logic [RAM_AW-1:0] addr;
    logic [WORD_W-1:0] wdata;
  } ram_req_t;

endpackage
