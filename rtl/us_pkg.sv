// us_pkg: types and constants shared by the accelerator-sharing controller.
//
// The controller sits between a host DMA engine and a set of streaming
// accelerators. The host sends one-beat commands; each request command names an
// accelerator type and the host addresses of two scatter-gather lists (one for
// the accelerator's input data, RX, one for its output data, TX). Configuration
// commands rewrite the accelerator group table and the data priority table.
//
// The field list of a command (command id, CPU core id, accelerator type,
// addresses and lengths of the scatter-gather lists) follows the paper; all
// widths, the 256-bit command layout, the opcode values and the configuration
// command encoding are this design's own choices.
package us_pkg;

  // ---- global sizes ------------------------------------------------------
  localparam int unsigned ADDR_W     = 64;   // host byte address
  localparam int unsigned LEN_W      = 32;   // element length in bytes
  localparam int unsigned SGW_W      = 64;   // one scatter-gather list word
  localparam int unsigned CMDID_W    = 16;
  localparam int unsigned CORE_W     = 8;
  localparam int unsigned TYPE_W     = 4;    // accelerator type field
  localparam int unsigned NELEM_W    = 16;   // elements per scatter-gather list
  localparam int unsigned CMD_W      = 256;  // one command beat
  localparam int unsigned PAGE_BYTES = 4096; // host memory page

  // ---- commands ----------------------------------------------------------
  typedef enum logic [3:0] {
    OP_REQUEST   = 4'h1,   // accelerator request
    OP_CFG_GROUP = 4'h2,   // write one row of acc_map: cfg_index = group, cfg_value = member mask
    OP_CFG_TYPE  = 4'h3,   // map accelerator type cfg_index to group cfg_value
    OP_CFG_PRIO  = 4'h4    // data priority weight of accelerator cfg_index = cfg_value[7:0]
  } opcode_e;

  // Request command, packed MSB first. 4+16+8+4+64+16+64+16 = 192 bits,
  // padded to CMD_W.
  typedef struct packed {
    opcode_e              opcode;
    logic [CMDID_W-1:0]   cmd_id;
    logic [CORE_W-1:0]    core_id;
    logic [TYPE_W-1:0]    acc_type;
    logic [ADDR_W-1:0]    rx_sgl_addr;   // host address of the RX list
    logic [NELEM_W-1:0]   rx_nelem;      // elements in the RX list
    logic [ADDR_W-1:0]    tx_sgl_addr;   // host address of the TX list
    logic [NELEM_W-1:0]   tx_nelem;      // elements in the TX list
  } req_cmd_t;

  localparam int unsigned REQ_CMD_W = $bits(req_cmd_t);

  // Configuration command view of the same beat.
  typedef struct packed {
    opcode_e              opcode;
    logic [15:0]          cfg_index;
    logic [63:0]          cfg_value;
  } cfg_cmd_t;

  // Request-command payload kept in the command queues (opcode dropped).
  typedef struct packed {
    logic [CMDID_W-1:0]   cmd_id;
    logic [CORE_W-1:0]    core_id;
    logic [TYPE_W-1:0]    acc_type;
    logic [ADDR_W-1:0]    rx_sgl_addr;
    logic [NELEM_W-1:0]   rx_nelem;
    logic [ADDR_W-1:0]    tx_sgl_addr;
    logic [NELEM_W-1:0]   tx_nelem;
  } qcmd_t;

  // ---- scatter-gather ----------------------------------------------------
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [LEN_W-1:0]  len;     // bytes
  } sg_elem_t;

  // Request to the DMA (fetch a scatter-gather list, read RX data, write TX data).
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [LEN_W-1:0]  len;     // bytes
  } dma_req_t;

  // Number of 64-bit words of a compacted list of n elements:
  // Len[1] Addr[1] (n = 1) or Len[1] Addr[1] .. Addr[n] Len[n] (n >= 2).
  function automatic logic [NELEM_W:0] sgl_words(input logic [NELEM_W-1:0] n);
    return (n <= 1) ? (NELEM_W+1)'(2) : (NELEM_W+1)'(n) + (NELEM_W+1)'(2);
  endfunction

  // Request information queue entry: what the controller must remember about
  // an allocated command until its two lists have arrived.
  localparam int unsigned ACC_IDX_W = 8;   // up to 256 accelerators
  typedef struct packed {
    logic [ACC_IDX_W-1:0] acc;
    logic [NELEM_W-1:0]   rx_nelem;
    logic [NELEM_W-1:0]   tx_nelem;
    logic [CMDID_W-1:0]   cmd_id;
    logic [CORE_W-1:0]    core_id;
  } req_info_t;

  // A decoded scatter-gather element on its way to an accelerator controller,
  // with the request information of the command it belongs to.
  typedef struct packed {
    sg_elem_t  elem;
    logic      is_tx;    // element of the TX (output) list
    logic      first;    // first element of its list
    logic      last;     // last element of its list
    req_info_t info;
  } sg_tagged_t;

  // Completion record returned to the host when an accelerator finishes.
  typedef struct packed {
    logic [CMDID_W-1:0] cmd_id;
    logic [CORE_W-1:0]  core_id;
  } cpl_t;

endpackage
