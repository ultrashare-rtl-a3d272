// tb_acc_controller: one accelerator controller with small buffers
// (BUF_DEPTH 64 beats, SGQ_DEPTH 16) surrounded by models of everything else:
// the allocator (claim), the distributor (start, SG queue pushes), the two
// schedulers (random acks of pending requests), the DMA (returns RX data for
// acked elements after a random delay, in order), the accelerator (a stream
// transform: out = in XOR a constant, same length, with random stalls on
// both sides) and the data submitter (reads acked TX elements' beats).
// Three commands run back to back, each moving more data than the buffers
// hold, so the space and data rules are exercised. Checks:
//   - each RX request is the next RX element, acked only when the buffer has
//     room for all of it counting data still in flight;
//   - each TX request is the next TX element, acked only when the buffer holds
//     all of its data not promised to earlier elements;
//   - the accelerator input is the RX data in order, tlast only on the
//     command's final beat;
//   - the TX data read out is the accelerator's output in order;
//   - status goes busy on claim and idle only after the completion record
//     (command id, core id) is taken, one record per command;
//   - the RX side actually stalls on a full buffer and the TX side on
//     missing data (counted; a mechanism never seen counts as a failure).
module tb_acc_controller;
  import us_pkg::*;
  localparam int DW = 128, BD = 64, SD = 16;
  localparam logic [DW-1:0] XMASK = 128'hA5A5_0000_FFFF_1234_5678_9ABC_DEF0_0F0F;
  logic clk = 0, rst_n = 0;
  logic claim = 0, status, start = 0;
  req_info_t start_info = '0;
  logic rx_sg_push = 0, tx_sg_push = 0, rx_sg_full, tx_sg_full;
  sg_elem_t sg_elem = '0;
  logic rx_req, rx_ack = 0, rx_wr_valid = 0, rx_wr_elem_last = 0;
  sg_elem_t rx_req_elem, tx_req_elem;
  logic [DW-1:0] rx_wr_data = '0, tx_rd_data;
  logic tx_req, tx_ack = 0, tx_rd_en = 0;
  logic [DW-1:0] m_axis_tdata, s_axis_tdata = '0;
  logic m_axis_tvalid, m_axis_tlast, m_axis_tready = 0;
  logic s_axis_tvalid = 0, s_axis_tlast = 0, s_axis_tready;
  logic cpl_valid, cpl_ready = 0;
  cpl_t cpl;
  int checks = 0, failures = 0;

  acc_controller #(.DATA_W(DW), .BUF_DEPTH(BD), .SGQ_DEPTH(SD)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // expectations
  sg_elem_t rx_list[$], tx_list[$];
  int       rx_pend[$];                 // beats of acked, undelivered RX elements
  logic [DW-1:0] rx_stream[$];          // data expected at the accelerator input
  logic [DW-1:0] acc_out_q[$];          // accelerator output still to be produced
  logic [DW-1:0] tx_stream[$];          // data expected out of the TX buffer
  int rx_inflight = 0, rx_buffered = 0, tx_buffered = 0, tx_committed = 0;
  int rd_left = 0, tx_rd_pend[$];
  int rx_total_beats = 0, rx_seen_beats = 0;
  int rx_stalls = 0, tx_stalls = 0, cpls = 0;
  int rx_pushed = 0, tx_pushed = 0, rx_acked = 0, tx_acked = 0;
  int rx_delay = 0, rx_beat_in_elem = 0;
  bit expect_busy = 0;
  cpl_t exp_cpl;

  always @(posedge clk) if (rst_n) begin
    if (rx_sg_push && !rx_sg_full) rx_pushed++;
    if (tx_sg_push && !tx_sg_full) tx_pushed++;
    if (rx_ack) rx_acked++;
    if (tx_ack) tx_acked++;
    // ---- RX scheduler + DMA
    if (rx_ack) begin
      automatic int b = int'(rx_req_elem.len) / 16;
      check(rx_list.size() > 0 && rx_req_elem == rx_list[0], "RX request is the next element");
      check(b <= BD - rx_inflight - rx_buffered, "RX request only with room for it");
      if (rx_list.size() > 0) void'(rx_list.pop_front());
      rx_pend.push_back(b);
      rx_inflight += b;
    end else if (!rx_req && rx_pushed > rx_acked) rx_stalls++;
    if (rx_wr_valid) begin
      rx_inflight--; rx_buffered++;
    end
    // ---- accelerator input
    if (m_axis_tvalid && m_axis_tready) begin
      check(rx_stream.size() > 0 && m_axis_tdata == rx_stream[0], "accelerator input data");
      rx_seen_beats++;
      check(m_axis_tlast == (rx_seen_beats == rx_total_beats), "tlast on the command's last beat");
      acc_out_q.push_back(m_axis_tdata ^ XMASK);
      if (rx_stream.size() > 0) void'(rx_stream.pop_front());
      rx_buffered--;
    end
    // ---- accelerator output
    if (s_axis_tvalid && s_axis_tready) begin
      tx_stream.push_back(s_axis_tdata);
      void'(acc_out_q.pop_front());
      tx_buffered++;
    end
    // ---- TX scheduler
    if (tx_ack) begin
      automatic int b = int'(tx_req_elem.len) / 16;
      check(tx_list.size() > 0 && tx_req_elem == tx_list[0], "TX request is the next element");
      check(b <= tx_buffered - tx_committed, "TX request only with its data present");
      if (tx_list.size() > 0) void'(tx_list.pop_front());
      tx_committed += b;
      tx_rd_pend.push_back(b);
    end else if (!tx_req && tx_pushed > tx_acked) tx_stalls++;
    // ---- data submitter
    if (tx_rd_en) begin
      check(tx_stream.size() > 0 && tx_rd_data == tx_stream[0], "TX data out in order");
      if (tx_stream.size() > 0) void'(tx_stream.pop_front());
      tx_buffered--; tx_committed--;
    end
    // ---- completion and status
    if (cpl_valid && cpl_ready) begin
      check(cpl == exp_cpl, "completion record");
      check(tx_list.size() == 0 && tx_committed == 0 && tx_rd_pend.size() == 0 && rd_left == 0,
            "completion after all TX data");
      cpls++;
      expect_busy = 0;
    end else if (claim) expect_busy = 1;
  end

  // drive the random handshakes on the negative edge
  always @(negedge clk) if (rst_n) begin
    check(status == !expect_busy, "status busy from claim until completion taken");
    rx_ack        = rx_req && ($urandom % 3 == 0);
    tx_ack        = tx_req && ($urandom % 3 == 0);
    m_axis_tready = ($urandom % 4) != 0;
    cpl_ready     = ($urandom % 2) == 0;
    // DMA RX data: in order, after a delay
    rx_wr_valid = 0; rx_wr_elem_last = 0;
    if (rx_pend.size() > 0) begin
      if (rx_delay > 0) rx_delay--;
      else if ($urandom % 4 != 0) begin
        rx_wr_valid = 1;
        rx_wr_data  = rx_stream_src.pop_front();
        rx_beat_in_elem++;
        if (rx_beat_in_elem == rx_pend[0]) begin
          rx_wr_elem_last = 1; rx_beat_in_elem = 0; void'(rx_pend.pop_front());
          rx_delay = $urandom % 6;
        end
      end
    end
    // accelerator output
    if (!(s_axis_tvalid && !s_axis_tready_q)) begin
      s_axis_tvalid = acc_out_q.size() > 0 && ($urandom % 4 != 0);
      s_axis_tdata  = (acc_out_q.size() > 0) ? acc_out_q[0] : '0;
    end
    // submitter reads
    tx_rd_en = 0;
    if (rd_left == 0 && tx_rd_pend.size() > 0) rd_left = tx_rd_pend.pop_front();
    if (rd_left > 0 && ($urandom % 3 != 0)) begin tx_rd_en = 1; rd_left--; end
  end
  logic s_axis_tready_q;
  always @(posedge clk) s_axis_tready_q <= s_axis_tready;
  logic [DW-1:0] rx_stream_src[$];

  task automatic run_cmd(input int id, input int nrx);
    int tot_rx = 0, ntx;
    sg_elem_t rxe[$], txe[$];
    // lists: total TX beats = total RX beats (the accelerator keeps the size)
    for (int i = 0; i < nrx; i++) begin
      automatic int b = (i == 0 || i == nrx - 1) ? 1 + $urandom % 63 : 64;
      rxe.push_back('{addr: 64'(id * 'h100000 + i * 'h1000), len: 32'(b * 16)});
      tot_rx += b;
    end
    begin
      automatic int left = tot_rx;
      while (left > 0) begin
        automatic int b = 1 + $urandom % 64;
        if (b > left) b = left;
        txe.push_back('{addr: 64'(id * 'h200000 + txe.size() * 'h1000), len: 32'(b * 16)});
        left -= b;
      end
      ntx = txe.size();
    end
    rx_total_beats = tot_rx; rx_seen_beats = 0;
    for (int i = 0; i < tot_rx; i++) begin
      automatic logic [DW-1:0] d = {32'(id), 32'(i), $urandom, $urandom};
      rx_stream.push_back(d); rx_stream_src.push_back(d);
    end
    foreach (rxe[i]) rx_list.push_back(rxe[i]);
    foreach (txe[i]) tx_list.push_back(txe[i]);
    exp_cpl = '{cmd_id: 16'(id), core_id: 8'(id + 1)};
    // allocation, then the lists arrive
    @(negedge clk); claim = 1; @(negedge clk); claim = 0;
    repeat (3) @(negedge clk);
    start = 1;
    start_info = '{acc: '0, rx_nelem: 16'(nrx), tx_nelem: 16'(ntx), cmd_id: 16'(id), core_id: 8'(id + 1)};
    foreach (rxe[i]) begin
      while (rx_sg_full) begin rx_sg_push = 0; @(negedge clk); start = 0; end
      rx_sg_push = 1; sg_elem = rxe[i];
      @(negedge clk); start = 0;
    end
    rx_sg_push = 0;
    foreach (txe[i]) begin
      while (tx_sg_full) begin tx_sg_push = 0; @(negedge clk); end
      tx_sg_push = 1; sg_elem = txe[i];
      @(negedge clk);
    end
    tx_sg_push = 0;
    while (cpls < id) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("watchdog expired: cpls %0d rx_list %0d tx_list %0d rx_pend %0d acc_out %0d tx_stream %0d rd_pend %0d rd_left %0d", cpls, rx_list.size(), tx_list.size(), rx_pend.size(), acc_out_q.size(), tx_stream.size(), tx_rd_pend.size(), rd_left);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run_cmd(1, 6);
    run_cmd(2, 1);
    run_cmd(3, 12);
    check(cpls == 3, "three completions");
    check(rx_stalls > 0, $sformatf("RX waited for buffer room (%0d cycles)", rx_stalls));
    check(tx_stalls > 0, $sformatf("TX waited for buffer data (%0d cycles)", tx_stalls));
    $display("rx stalls %0d tx stalls %0d", rx_stalls, tx_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
