// command_detector: entry point of the host command stream.
//
// Each command arrives as one CMD_W-bit beat (valid/ready). The opcode in the
// top four bits selects what it is:
//   OP_REQUEST    an accelerator request. Its accelerator type is looked up in
//                 the group table (type_lookup -> lookup_grp) and the command,
//                 minus its opcode, is pushed into that group's command queue.
//                 If that queue is full the beat is held (cmd_ready low),
//                 which holds the whole stream: queue depth should cover the
//                 commands a group can have outstanding.
//   OP_CFG_GROUP  writes one acc_map row of the group table.
//   OP_CFG_TYPE   writes one entry of the type-to-group map.
//   OP_CFG_PRIO   writes one weight of the data priority table.
// Unknown opcodes are consumed and dropped.
//
// Timing: combinational; a beat is accepted in the cycle cmd_valid && cmd_ready
// and the queue push / table write happens at the same clock edge.
//
// Paper: the command detector, its use of the type field and of a
// reconfigurable grouping table, and configuration commands. Own choices: the
// beat layout (us_pkg), the opcodes and the full-queue back-pressure.
module command_detector
  import us_pkg::*;
#(
  parameter int unsigned NUM_GROUPS = 3,
  localparam int unsigned GW = (NUM_GROUPS > 1) ? $clog2(NUM_GROUPS) : 1
) (
  input  logic                   cmd_valid,
  input  logic [CMD_W-1:0]       cmd_data,
  output logic                   cmd_ready,
  // group table
  output logic [TYPE_W-1:0]      type_lookup,
  input  logic [GW-1:0]          lookup_grp,
  output logic                   grp_we,
  output logic                   type_we,
  output logic                   prio_we,
  output logic [15:0]            cfg_index,
  output logic [63:0]            cfg_value,
  // command queues
  output logic [NUM_GROUPS-1:0]  q_push,
  output qcmd_t                  q_data,
  input  logic [NUM_GROUPS-1:0]  q_full
);
  req_cmd_t rc;
  cfg_cmd_t cc;
  logic     is_req;

  assign rc = req_cmd_t'(cmd_data[CMD_W-1 -: REQ_CMD_W]);
  assign cc = cfg_cmd_t'(cmd_data[CMD_W-1 -: $bits(cfg_cmd_t)]);
  assign is_req = (rc.opcode == OP_REQUEST);

  assign type_lookup = rc.acc_type;
  assign cfg_index   = cc.cfg_index;
  assign cfg_value   = cc.cfg_value;

  assign q_data = '{cmd_id: rc.cmd_id, core_id: rc.core_id, acc_type: rc.acc_type,
                    rx_sgl_addr: rc.rx_sgl_addr, rx_nelem: rc.rx_nelem,
                    tx_sgl_addr: rc.tx_sgl_addr, tx_nelem: rc.tx_nelem};

  always_comb begin
    q_push    = '0;
    cmd_ready = 1'b1;
    if (is_req) begin
      cmd_ready = !q_full[lookup_grp];
      q_push[lookup_grp] = cmd_valid && !q_full[lookup_grp];
    end
  end

  assign grp_we  = cmd_valid && (cc.opcode == OP_CFG_GROUP);
  assign type_we = cmd_valid && (cc.opcode == OP_CFG_TYPE);
  assign prio_we = cmd_valid && (cc.opcode == OP_CFG_PRIO);
endmodule
