// tb_ultrashare_top: end-to-end test of the whole controller at its default
// size (nine accelerators in three groups, 128-bit data, 1024-beat buffers).
//
// The testbench plays the host and its DMA engine. Host memory is modelled
// by functions: input beat b of command c has a fixed value that carries the
// tag {A5A5, c, b} in its upper 64 bits. Every command gets an RX list and a
// TX list of scattered pages (page k of a buffer sits at a page address that
// encodes c and k, the first element starts at a random 16-byte offset) in
// the compacted list format, stored in a list memory the DMA model serves.
// The DMA model answers list, RX and TX requests in order, each channel with
// random gaps and back-pressure. Nine stream_acc_model instances stand in
// for the accelerators: accelerators 0,3,6 take 4 cycles per beat,
// 1,4,7 take 2 and 2,5,8 take 1; each XORs the low half of a beat with its
// own key.
//
// Phases
//   1. default configuration: bursts of commands of types 0,1,2 (slow type
//      first) with sizes from one beat to 24 KiB;
//   2. mode switch by configuration commands: group 0 = {0,3}, group 2 =
//      {2,5,6,8}, type 3 -> group 1, data weights (1,1,1,4,4,4,8,8,8);
//      then commands of types 0..3;
//   3. a burst of 100 one-beat commands of type 0 to fill its command queue.
// Checks (end to end)
//   - every RX/TX DMA request is exactly the next element of one command's
//     list; RX bytes requested but not yet taken by the accelerator never
//     exceed the 1024-beat buffer; TX is only requested for data the
//     accelerator has already produced;
//   - each accelerator sees the beats of one command in order, tlast on the
//     last one; TX beats carry the right tag, the right accelerator's key,
//     and tx_data_last on the final beat of each request;
//   - each command completes once, with its core id, on an accelerator of
//     the group its type maps to, after all its output was written.
// Mechanisms counted (each must occur): configuration writes of the three
// tables and their effect, parallel use of a group's accelerators,
// allocation that bypasses a group whose accelerators are all busy, RX
// stalled by a full buffer, TX waiting for output, weighted runs of data
// requests, one-element, two-element and multi-page lists, full command
// queue back-pressure, completions.
// A run stops early, with its result line, once 1000 checks have failed.
module tb_ultrashare_top;
  import us_pkg::*;
  localparam int K = 9, G = 3, DW = 128, BUF = 1024;
  localparam int MAXC = 256, MAXE = 16;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  logic [CMD_W-1:0] cmd_data = '0;
  logic sgl_req_valid, sgl_req_ready = 0, sgl_valid = 0, sgl_ready;
  dma_req_t sgl_req, rx_req, tx_req;
  logic [SGW_W-1:0] sgl_data = '0;
  logic rx_req_valid, rx_req_ready = 0, rx_data_valid = 0, rx_data_ready;
  logic [DW-1:0] rx_data = '0, tx_data;
  logic tx_req_valid, tx_req_ready = 0, tx_data_valid, tx_data_last, tx_data_ready = 0;
  logic cpl_valid, cpl_ready = 0;
  cpl_t cpl;
  logic [ACC_IDX_W-1:0] cpl_acc;
  logic [K-1:0][DW-1:0] acc_in_tdata, acc_out_tdata;
  logic [K-1:0] acc_in_tvalid, acc_in_tlast, acc_in_tready;
  logic [K-1:0] acc_out_tvalid, acc_out_tlast, acc_out_tready;
  logic [K-1:0] acc_status;

  ultrashare_top dut (.*);

  always #5 clk = ~clk;

  for (genvar i = 0; i < K; i++) begin : g_acc
    stream_acc_model #(.DATA_W(DW), .CYCLES_PER_BEAT((i % 3 == 0) ? 4 : (i % 3 == 1) ? 2 : 1),
                       .KEY(64'h1111_1111_1111_1111 * (i + 1))) u_acc (
      .clk, .rst_n,
      .s_tdata(acc_in_tdata[i]), .s_tvalid(acc_in_tvalid[i]), .s_tlast(acc_in_tlast[i]),
      .s_tready(acc_in_tready[i]),
      .m_tdata(acc_out_tdata[i]), .m_tvalid(acc_out_tvalid[i]), .m_tlast(acc_out_tlast[i]),
      .m_tready(acc_out_tready[i]));
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
    if (failures >= 1000) begin   // broken beyond doubt: stop early
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  endtask

  // ---- host memory model -------------------------------------------------
  function automatic logic [63:0] key_of(input int a);
    return 64'h1111_1111_1111_1111 * (a + 1);
  endfunction
  function automatic logic [DW-1:0] in_word(input int c, input int b);
    logic [31:0] h0 = 32'(b) * 32'd2654435761 ^ 32'(c);
    logic [31:0] h1 = 32'(c) * 32'd40503 + 32'(b) * 32'd7;
    return {16'hA5A5, 16'(c), 32'(b), h0, h1};
  endfunction
  function automatic logic [ADDR_W-1:0] page_addr(input bit tx, input int c, input int k);
    // pages of one buffer in reverse order so they are not contiguous
    return {16'h0, tx ? 4'h2 : 4'h1, 16'(c), 16'(MAXE - 1 - k), 12'h000};
  endfunction
  function automatic logic [ADDR_W-1:0] list_addr(input bit tx, input int c);
    return {16'h0, 4'h3, 16'(c), 15'h0, tx, 12'h000};
  endfunction

  // per-command description
  int c_type [MAXC], c_beats [MAXC], c_core [MAXC];
  logic [K-1:0] c_mask [MAXC];
  int n_el [2][MAXC];
  logic [ADDR_W-1:0] el_addr [2][MAXC][MAXE];
  int el_len [2][MAXC][MAXE];     // bytes
  int el_pre [2][MAXC][MAXE];     // beats before this element
  logic [SGW_W-1:0] listmem [logic [ADDR_W-1:0]];
  // per-command progress
  int rx_next [MAXC], rx_reqb [MAXC], rx_cons [MAXC], acc_of [MAXC];
  int tx_next [MAXC], tx_reqb [MAXC], produced [MAXC], tx_written [MAXC];
  bit done [MAXC];
  int ncmd = 0, ncpl = 0;
  logic [K-1:0] grp_mask [G+1];   // current group members, [G] unused
  int type_grp [16];

  // mechanism counters
  int m_cfg_group = 0, m_cfg_type = 0, m_cfg_prio = 0, m_regroup_used = 0, m_remap_used = 0;
  int m_parallel = 0, m_all_busy = 0, m_bypass = 0, m_rx_full = 0, m_tx_wait = 0;
  int m_wrr_run = 0, m_one_el = 0, m_two_el = 0, m_multi_el = 0, m_cmdq_full = 0;
  int phase = 1;

  // Build command c: input/output length bytes, random start offsets.
  task automatic make_cmd(input int c, input int ty, input int bytes);
    c_type[c] = ty; c_beats[c] = bytes / 16; c_core[c] = $urandom_range(0, 255);
    c_mask[c] = grp_mask[type_grp[ty]];
    for (int d = 0; d < 2; d++) begin
      automatic int off = 16 * $urandom_range(0, 255);
      automatic int left = bytes, k = 0, pre = 0;
      automatic logic [ADDR_W-1:0] la = list_addr(d == 1, c);
      automatic int w = 0;
      while (left > 0) begin
        automatic int room = (k == 0) ? PAGE_BYTES - off : PAGE_BYTES;
        automatic int l = (left < room) ? left : room;
        el_addr[d][c][k] = page_addr(d == 1, c, k) + ((k == 0) ? ADDR_W'(off) : '0);
        el_len[d][c][k] = l; el_pre[d][c][k] = pre;
        pre += l / 16; left -= l; k++;
      end
      n_el[d][c] = k;
      // compacted list: Len1 Addr1 [Addr2 .. Addrn Lenn]
      listmem[la + 0] = 64'(el_len[d][c][0]);
      listmem[la + 8] = el_addr[d][c][0];
      w = 2;
      if (k > 1) begin
        for (int e = 1; e < k; e++) begin listmem[la + ADDR_W'(8 * w)] = el_addr[d][c][e]; w++; end
        listmem[la + ADDR_W'(8 * w)] = 64'(el_len[d][c][k-1]);
        for (int e = 1; e < k - 1; e++) if (el_len[d][c][e] != PAGE_BYTES) $display("bad list build");
      end
    end
    rx_next[c] = 0; rx_reqb[c] = 0; rx_cons[c] = 0; acc_of[c] = -1;
    tx_next[c] = 0; tx_reqb[c] = 0; produced[c] = 0; tx_written[c] = 0; done[c] = 0;
  endtask

  // ---- command stream (host -> controller) -------------------------------
  logic [CMD_W-1:0] cmdq [$];
  bit cmd_gaps = 1;
  task automatic send_req(input int c);
    req_cmd_t rc;
    rc.opcode = OP_REQUEST; rc.cmd_id = CMDID_W'(c); rc.core_id = CORE_W'(c_core[c]);
    rc.acc_type = TYPE_W'(c_type[c]);
    rc.rx_sgl_addr = list_addr(0, c); rc.rx_nelem = NELEM_W'(n_el[0][c]);
    rc.tx_sgl_addr = list_addr(1, c); rc.tx_nelem = NELEM_W'(n_el[1][c]);
    cmdq.push_back({rc, {(CMD_W - REQ_CMD_W){1'b0}}});
  endtask
  task automatic send_cfg(input opcode_e op, input int idx, input longint val);
    cfg_cmd_t cc;
    cc.opcode = op; cc.cfg_index = 16'(idx); cc.cfg_value = 64'(val);
    cmdq.push_back({cc, {(CMD_W - $bits(cfg_cmd_t)){1'b0}}});
  endtask

  // ---- DMA model queues ---------------------------------------------------
  dma_req_t sgl_q [$], rx_q [$], tx_q [$];
  int sgl_w = 0, rx_b = 0, tx_b = 0;
  int last_rx_cmd = -1, run_len = 0;

  function automatic int cmd_of(input logic [ADDR_W-1:0] a);
    return int'(a[43:28]);
  endfunction
  function automatic int el_of(input logic [ADDR_W-1:0] a);
    return MAXE - 1 - int'(a[27:12]);
  endfunction

  // Handshakes are evaluated on the rising edge (values the design sampled);
  // the testbench drives its outputs on the falling edge.
  always @(posedge clk) if (rst_n) begin
    // command stream
    if (cmd_valid && cmd_ready) begin
      automatic cfg_cmd_t cc = cmd_data[CMD_W-1 -: $bits(cfg_cmd_t)];
      if (cc.opcode == OP_CFG_GROUP) m_cfg_group++;
      if (cc.opcode == OP_CFG_TYPE)  m_cfg_type++;
      if (cc.opcode == OP_CFG_PRIO)  m_cfg_prio++;
      void'(cmdq.pop_front());
    end
    if (cmd_valid && !cmd_ready) m_cmdq_full++;
    // list requests and list data
    if (sgl_req_valid && sgl_req_ready) begin
      check(listmem.exists(sgl_req.addr), "list request address");
      check(sgl_req.len % 8 == 0, "list length in words");
      sgl_q.push_back(sgl_req);
    end
    if (sgl_valid && sgl_ready) begin
      sgl_w++;
      if (sgl_w * 8 == sgl_q[0].len) begin void'(sgl_q.pop_front()); sgl_w = 0; end
    end
    // RX requests
    if (rx_req_valid && rx_req_ready) begin
      automatic int c = cmd_of(rx_req.addr), e;
      e = rx_next[c];
      check(c < ncmd && e < n_el[0][c] && rx_req.addr == el_addr[0][c][e] &&
            rx_req.len == 32'(el_len[0][c][e]), "RX request is the next element");
      rx_next[c]++; rx_reqb[c] += rx_req.len / 16;
      check(rx_reqb[c] - rx_cons[c] <= BUF, "RX data in flight fits the buffer");
      rx_q.push_back(rx_req);
      if (c == last_rx_cmd) run_len++; else begin last_rx_cmd = c; run_len = 1; end
      if (phase == 2 && run_len == 3) m_wrr_run++;
    end
    if (rx_data_valid && rx_data_ready) begin
      rx_b++;
      if (rx_b * 16 == rx_q[0].len) begin void'(rx_q.pop_front()); rx_b = 0; end
    end
    // accelerator side
    for (int a = 0; a < K; a++) begin
      if (acc_in_tvalid[a] && acc_in_tready[a]) begin
        automatic int c = int'(acc_in_tdata[a][111:96]), b = int'(acc_in_tdata[a][95:64]);
        check(acc_in_tdata[a] == in_word(c, b) && c < ncmd, "accelerator input data");
        if (rx_cons[c] == 0) acc_of[c] = a;
        check(acc_of[c] == a && b == rx_cons[c], "accelerator input order");
        check(acc_in_tlast[a] == (b == c_beats[c] - 1), "accelerator input tlast");
        rx_cons[c]++;
      end
      if (acc_out_tvalid[a] && acc_out_tready[a]) begin
        automatic int c = int'(acc_out_tdata[a][111:96]);
        produced[c]++;
      end
    end
    // TX requests and data
    if (tx_req_valid && tx_req_ready) begin
      automatic int c = cmd_of(tx_req.addr), e;
      e = tx_next[c];
      check(tx_req.addr[47:44] == 4'h2 && c < ncmd && e < n_el[1][c] &&
            tx_req.addr == el_addr[1][c][e] && tx_req.len == 32'(el_len[1][c][e]),
            "TX request is the next element");
      tx_next[c]++; tx_reqb[c] += tx_req.len / 16;
      check(tx_reqb[c] <= produced[c], "TX requested only for produced data");
      tx_q.push_back(tx_req);
    end
    if (tx_data_valid && tx_data_ready) begin
      check(tx_q.size() > 0, "TX data follows a TX request");
      if (tx_q.size() > 0) begin
        automatic int c = cmd_of(tx_q[0].addr), e = el_of(tx_q[0].addr);
        automatic int b = el_pre[1][c][e] + tx_b;
        automatic logic [DW-1:0] exp = in_word(c, b);
        exp[63:0] ^= key_of(acc_of[c]);
        check(tx_data == exp, "TX data content");
        tx_b++; tx_written[c]++;
        check(tx_data_last == (tx_b * 16 == tx_q[0].len), "tx_data_last");
        if (tx_b * 16 == tx_q[0].len) begin void'(tx_q.pop_front()); tx_b = 0; end
      end
    end
    // completions
    if (cpl_valid && cpl_ready) begin
      automatic int c = int'(cpl.cmd_id);
      check(c < ncmd && !done[c], "completion of an outstanding command");
      if (c < ncmd) begin
        check(cpl.core_id == CORE_W'(c_core[c]), "completion core id");
        check(c_mask[c][cpl_acc], "completion on an accelerator of the right group");
        check(int'(cpl_acc) == acc_of[c], "completion names the accelerator used");
        check(tx_written[c] == c_beats[c], "all output written before completion");
        done[c] = 1; ncpl++;
        if (n_el[0][c] == 1) m_one_el++;
        else if (n_el[0][c] == 2) m_two_el++;
        else m_multi_el++;
        if (phase == 2 && cpl_acc == 6 && c_type[c] == 2) m_regroup_used++;
        if (phase == 2 && c_type[c] == 3) m_remap_used++;
        // bypass: a command of group 1 or 2 finishes while group 0 holds more
        // outstanding commands than accelerators (so one waits in its queue)
        if (phase == 1 && c_type[c] != 0) begin
          automatic int out0 = 0;
          for (int x = 0; x < ncmd; x++) if (!done[x] && c_type[x] == 0) out0++;
          if (out0 > 3) m_bypass++;
        end
      end
    end
    // status: parallel use of one group, all busy
    // (acc_status is 1 for an idle accelerator)
    for (int g = 0; g < G; g++) if ($countones(~acc_status & grp_mask[g]) >= 2) m_parallel++;
    if (acc_status == '0) m_all_busy++;
    for (int a = 0; a < K; a++) if (acc_in_tvalid[a] || acc_out_tvalid[a])
      check(!acc_status[a], "accelerator moving data is marked busy");
    // stalls: a started command whose next RX element does not fit, or whose
    // next TX element has not been produced yet
    for (int c = 0; c < ncmd; c++) if (!done[c]) begin
      if (rx_next[c] > 0 && rx_next[c] < n_el[0][c] &&
          rx_reqb[c] - rx_cons[c] + el_len[0][c][rx_next[c]] / 16 > BUF) m_rx_full++;
      if (produced[c] > 0 && tx_next[c] < n_el[1][c] &&
          produced[c] - tx_reqb[c] < el_len[1][c][tx_next[c]] / 16) m_tx_wait++;
    end
  end

  // drive the host/DMA side on the falling edge
  always @(negedge clk) if (rst_n) begin
    cmd_valid     <= cmdq.size() > 0 && (!cmd_gaps || $urandom_range(0, 3) != 0);
    cmd_data      <= (cmdq.size() > 0) ? cmdq[0] : '0;
    sgl_req_ready <= $urandom_range(0, 3) != 0;
    sgl_valid     <= sgl_q.size() > 0 && $urandom_range(0, 4) != 0;
    sgl_data      <= (sgl_q.size() > 0 && listmem.exists(sgl_q[0].addr + ADDR_W'(8 * sgl_w))) ?
                     listmem[sgl_q[0].addr + ADDR_W'(8 * sgl_w)] : '0;
    rx_req_ready  <= $urandom_range(0, 3) != 0;
    rx_data_valid <= rx_q.size() > 0 && $urandom_range(0, 7) != 0;
    if (rx_q.size() > 0) begin
      automatic int c = cmd_of(rx_q[0].addr), e = el_of(rx_q[0].addr);
      rx_data <= in_word(c, el_pre[0][c][e] + int'(rx_q[0].addr[11:0]) / 16 -
                         ((e == 0) ? int'(el_addr[0][c][0][11:0]) / 16 : 0) + rx_b);
    end else rx_data <= '0;
    tx_req_ready  <= $urandom_range(0, 3) != 0;
    tx_data_ready <= $urandom_range(0, 7) != 0;
    cpl_ready     <= $urandom_range(0, 2) != 0;
  end

  task automatic wait_all();
    automatic int guard = 0;
    while ((ncpl < ncmd || cmdq.size() > 0) && guard < 2000000) begin @(posedge clk); guard++; end
    check(ncpl == ncmd, "all commands completed");
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int g = 0; g < G; g++) for (int a = 0; a < K; a++) grp_mask[g][a] = (a % G == g);
    grp_mask[G] = '0;
    for (int t = 0; t < 16; t++) type_grp[t] = t % G;
    repeat (3) @(negedge clk); rst_n = 1;

    // phase 1: default configuration; slow type first, then the others
    for (int i = 0; i < 8; i++) begin
      make_cmd(ncmd, 0, 16 * $urandom_range(1, 1536)); send_req(ncmd); ncmd++;
    end
    make_cmd(ncmd, 0, 16 * 1400); send_req(ncmd); ncmd++;   // larger than the RX buffer
    for (int i = 0; i < 24; i++) begin
      automatic int ty = 1 + i % 2;
      automatic int sz = (i % 6 == 0) ? 1 : (i % 6 == 1) ? $urandom_range(1, 64) : $urandom_range(1, 1536);
      make_cmd(ncmd, ty, 16 * sz); send_req(ncmd); ncmd++;
    end
    wait_all();

    // phase 2: mode switch
    phase = 2;
    send_cfg(OP_CFG_GROUP, 0, 64'h009);          // group 0 = {0,3}
    send_cfg(OP_CFG_GROUP, 2, 64'h164);          // group 2 = {2,5,6,8}
    send_cfg(OP_CFG_TYPE, 3, 1);                 // type 3 -> group 1
    for (int a = 0; a < K; a++) send_cfg(OP_CFG_PRIO, a, (a < 3) ? 1 : (a < 6) ? 4 : 8);
    while (cmdq.size() > 0) @(posedge clk);
    repeat (4) @(posedge clk);
    grp_mask[0] = 9'h009; grp_mask[2] = 9'h164; type_grp[3] = 1;
    for (int i = 0; i < 36; i++) begin
      automatic int ty = i % 4;
      make_cmd(ncmd, ty, 16 * $urandom_range(200, 1536)); send_req(ncmd); ncmd++;
    end
    wait_all();

    // phase 3: fill the type-0 command queue with one-beat commands
    phase = 3;
    cmd_gaps = 0;
    for (int i = 0; i < 100; i++) begin make_cmd(ncmd, 0, 16); send_req(ncmd); ncmd++; end
    wait_all();

    repeat (20) @(posedge clk);
    check(rx_q.size() == 0 && tx_q.size() == 0 && sgl_q.size() == 0, "DMA queues drained");
    $display("mechanisms: cfg_group=%0d cfg_type=%0d cfg_prio=%0d regroup_used=%0d remap_used=%0d",
             m_cfg_group, m_cfg_type, m_cfg_prio, m_regroup_used, m_remap_used);
    $display("mechanisms: parallel=%0d all_busy=%0d bypass=%0d rx_buffer_full=%0d tx_wait=%0d",
             m_parallel, m_all_busy, m_bypass, m_rx_full, m_tx_wait);
    $display("mechanisms: weighted_runs=%0d one_elem=%0d two_elem=%0d multi_elem=%0d cmdq_full=%0d completions=%0d",
             m_wrr_run, m_one_el, m_two_el, m_multi_el, m_cmdq_full, ncpl);
    check(m_cfg_group == 2, "group table written");
    check(m_cfg_type == 1, "type table written");
    check(m_cfg_prio == K, "priority table written");
    check(m_regroup_used > 0, "moved accelerator used by its new group");
    check(m_remap_used > 0, "remapped type served");
    check(m_parallel > 0, "several accelerators of a group busy at once");
    check(m_all_busy > 0, "all accelerators busy at once");
    check(m_bypass > 0, "allocation bypasses a busy group");
    check(m_rx_full > 0, "RX stalled by a full buffer");
    check(m_tx_wait > 0, "TX waited for output");
    check(m_wrr_run > 0, "weighted runs of data requests");
    check(m_one_el > 0 && m_two_el > 0 && m_multi_el > 0, "list sizes");
    check(m_cmdq_full > 0, "command queue full");
    check(ncpl == ncmd, "completions");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
