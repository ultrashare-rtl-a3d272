// tb_command_detector: drives random request and configuration commands into
// the detector (combinational) with a model group table (type -> type mod 3)
// and random queue-full flags. Checks: a request is pushed into exactly the
// queue of its type's group with its fields intact, and held (cmd_ready low,
// no push) when that queue is full; configuration commands raise only their
// own write strobe with the right index and value; unknown opcodes are
// consumed without effect.
module tb_command_detector;
  import us_pkg::*;
  localparam int G = 3;
  logic              cmd_valid = 0, cmd_ready;
  logic [CMD_W-1:0]  cmd_data = '0;
  logic [TYPE_W-1:0] type_lookup;
  logic [1:0]        lookup_grp;
  logic              grp_we, type_we, prio_we;
  logic [15:0]       cfg_index;
  logic [63:0]       cfg_value;
  logic [G-1:0]      q_push, q_full = '0;
  qcmd_t             q_data;
  int checks = 0, failures = 0;

  command_detector #(.NUM_GROUPS(G)) dut (.*);
  assign lookup_grp = 2'(type_lookup % G);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 400; n++) begin
      automatic int kind = $urandom % 5;
      req_cmd_t rc;
      cfg_cmd_t cc;
      cmd_valid = 1;
      q_full = G'($urandom);
      if (kind <= 1) begin
        rc = '{opcode: OP_REQUEST, cmd_id: 16'($urandom), core_id: 8'($urandom),
               acc_type: 4'($urandom), rx_sgl_addr: {32'($urandom), 32'($urandom)},
               rx_nelem: 16'($urandom), tx_sgl_addr: {32'($urandom), 32'($urandom)},
               tx_nelem: 16'($urandom)};
        cmd_data = '0; cmd_data[CMD_W-1 -: REQ_CMD_W] = rc;
        #1;
        begin
          automatic int g = rc.acc_type % G;
          check(cmd_ready == !q_full[g], "ready follows target queue");
          check(q_push == (q_full[g] ? G'(0) : G'(1) << g), "push to the type's group");
          check(q_data.cmd_id == rc.cmd_id && q_data.core_id == rc.core_id &&
                q_data.acc_type == rc.acc_type && q_data.rx_sgl_addr == rc.rx_sgl_addr &&
                q_data.rx_nelem == rc.rx_nelem && q_data.tx_sgl_addr == rc.tx_sgl_addr &&
                q_data.tx_nelem == rc.tx_nelem, "queued fields");
          check(!grp_we && !type_we && !prio_we, "no table write on request");
        end
      end else begin
        opcode_e op;
        op = (kind == 2) ? OP_CFG_GROUP : (kind == 3) ? OP_CFG_TYPE : OP_CFG_PRIO;
        if ($urandom % 8 == 0) op = opcode_e'(4'hF);
        cc = '{opcode: op, cfg_index: 16'($urandom), cfg_value: {32'($urandom), 32'($urandom)}};
        cmd_data = '0; cmd_data[CMD_W-1 -: $bits(cfg_cmd_t)] = cc;
        #1;
        check(cmd_ready && q_push == '0, "config consumed, nothing queued");
        check(grp_we == (op == OP_CFG_GROUP) && type_we == (op == OP_CFG_TYPE) &&
              prio_we == (op == OP_CFG_PRIO), "one write strobe");
        check(cfg_index == cc.cfg_index && cfg_value == cc.cfg_value, "config fields");
      end
      #9;
    end
    cmd_valid = 0; #1;
    check(q_push == '0 && !grp_we && !type_we && !prio_we, "idle when not valid");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
