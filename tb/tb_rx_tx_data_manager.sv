// tb_rx_tx_data_manager: the RX/TX data path with nine modelled accelerator
// controllers and a modelled DMA.
// Each controller model keeps an RX and a TX request up for a list of
// 4-beat elements; its TX buffer returns numbered beats. The DMA model takes
// requests with random back-pressure, returns RX data in request order and
// consumes TX data. Checks:
//   - every RX beat reaches the controller that asked, in order, with the
//     element's last beat flagged;
//   - every TX request is followed by exactly its beats, read from the
//     controller it names, in order, with tx_data_last on the final beat;
//   - with weights (1,1,1,4,4,4,8,8,8) the first 390 RX grants split
//     10*weight per accelerator (weighted bandwidth sharing);
//   - RX and TX beats move in the same cycle at least once (separate paths).
module tb_rx_tx_data_manager;
  import us_pkg::*;
  localparam int K = 9, DW = 128, EB = 4;
  logic clk = 0, rst_n = 0;
  logic [K-1:0][7:0] acc_weight;
  logic [K-1:0] rx_req, rx_ack, rx_wr_valid, tx_req, tx_ack, tx_rd_en;
  sg_elem_t rx_req_elem [K], tx_req_elem [K];
  logic [DW-1:0] rx_wr_data, tx_rd_data [K];
  logic rx_wr_elem_last;
  logic dma_rx_req_valid, dma_rx_req_ready = 0, dma_rx_data_valid = 0, dma_rx_data_ready;
  dma_req_t dma_rx_req, dma_tx_req;
  logic [DW-1:0] dma_rx_data = '0, dma_tx_data;
  logic dma_tx_req_valid, dma_tx_req_ready = 0, dma_tx_data_valid, dma_tx_data_last, dma_tx_data_ready = 0;
  int checks = 0, failures = 0;
  int rx_sent [K], rx_got_beats [K], tx_sent [K], tx_read [K], rx_grants [K];
  int total_rx_grants = 0, both_cycles = 0;
  int rx_left [K], tx_left [K];
  dma_req_t rx_q[$], tx_q[$];
  int rx_beat = 0, tx_beat = 0;
  bit snap_done = 0;
  int snap [K];

  rx_tx_data_manager #(.NUM_ACC(K), .DATA_W(DW), .WEIGHT_W(8), .INFO_DEPTH(16)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  for (genvar i = 0; i < K; i++) begin : g_c
    assign rx_req[i] = rx_left[i] > 0;
    assign tx_req[i] = tx_left[i] > 0;
    assign rx_req_elem[i] = '{addr: {32'(i), 32'(rx_sent[i])}, len: 32'(EB * 16)};
    assign tx_req_elem[i] = '{addr: {32'(i), 32'(tx_sent[i])}, len: 32'(EB * 16)};
    assign tx_rd_data[i]  = {32'hCAFE, 32'(i), 32'(tx_read[i]), 32'h0};
  end

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < K; i++) begin
      if (rx_ack[i]) begin
        rx_sent[i]++; rx_left[i]--; rx_grants[i]++; total_rx_grants++;
        check(rx_req[i], "RX ack to a requester");
      end
      if (tx_ack[i]) begin tx_sent[i]++; tx_left[i]--; check(tx_req[i], "TX ack to a requester"); end
      if (rx_wr_valid[i]) begin
        automatic int e = rx_got_beats[i] / EB, b = rx_got_beats[i] % EB;
        check(rx_wr_data == {32'(i), 32'(e), 32'(b), 32'h5}, $sformatf("RX beat to acc %0d in order", i));
        check(rx_wr_elem_last == (b == EB - 1), "RX element last flag");
        rx_got_beats[i]++;
      end
      if (tx_rd_en[i]) tx_read[i]++;
    end
    check($onehot0(rx_wr_valid) && $onehot0(tx_rd_en), "one destination per beat");
    if (total_rx_grants >= 390 && !snap_done) begin
      snap_done = 1;
      for (int i = 0; i < K; i++) snap[i] = rx_grants[i];
    end
    // DMA: RX
    if (dma_rx_req_valid && dma_rx_req_ready) rx_q.push_back(dma_rx_req);
    if (dma_rx_data_valid && dma_rx_data_ready) begin
      rx_beat++;
      if (rx_beat == EB) begin rx_beat = 0; void'(rx_q.pop_front()); end
    end
    // DMA: TX
    if (dma_tx_req_valid && dma_tx_req_ready) tx_q.push_back(dma_tx_req);
    if (dma_tx_data_valid && dma_tx_data_ready) begin
      automatic int a = (tx_q.size() > 0) ? int'(tx_q[0].addr[63:32]) : -1;
      automatic int e = (tx_q.size() > 0) ? int'(tx_q[0].addr[31:0]) : -1;
      check(tx_q.size() > 0, "TX data after its request");
      check(dma_tx_data == {32'hCAFE, 32'(a), 32'(e * EB + tx_beat), 32'h0}, "TX beat from the right buffer in order");
      check(dma_tx_data_last == (tx_beat == EB - 1), "TX last flag");
      tx_beat++;
      if (tx_beat == EB) begin tx_beat = 0; void'(tx_q.pop_front()); end
    end
    if ((|rx_wr_valid) && dma_tx_data_valid && dma_tx_data_ready) both_cycles++;
  end

  always @(negedge clk) if (rst_n) begin
    dma_rx_req_ready  = ($urandom % 4) != 0;
    dma_tx_req_ready  = ($urandom % 4) != 0;
    dma_tx_data_ready = ($urandom % 4) != 0;
    dma_rx_data_valid = rx_q.size() > 0 && ($urandom % 5 != 0);
    if (rx_q.size() > 0)
      dma_rx_data = {rx_q[0].addr[63:32], rx_q[0].addr[31:0], 32'(rx_beat), 32'h5};
  end

  initial begin
    repeat (200000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int w [K] = '{1, 1, 1, 4, 4, 4, 8, 8, 8};
    for (int i = 0; i < K; i++) begin
      acc_weight[i] = 8'(w[i]);
      rx_sent[i] = 0; rx_got_beats[i] = 0; tx_sent[i] = 0; tx_read[i] = 0; rx_grants[i] = 0;
      rx_left[i] = 100; tx_left[i] = 30;
    end
    repeat (2) @(negedge clk); rst_n = 1;
    begin
      automatic int guard = 0;
      while (guard < 150000) begin
        automatic bit busy = 0;
        for (int i = 0; i < K; i++) if (rx_left[i] > 0 || tx_left[i] > 0) busy = 1;
        if (!busy && rx_q.size() == 0 && tx_q.size() == 0) break;
        @(negedge clk); guard++;
      end
    end
    repeat (20) @(negedge clk);
    for (int i = 0; i < K; i++) begin
      check(rx_got_beats[i] == 100 * EB, $sformatf("acc %0d got all RX beats", i));
      check(tx_read[i] == 30 * EB, $sformatf("acc %0d TX buffer read fully", i));
      check(snap[i] == 10 * w[i], $sformatf("acc %0d weighted share %0d of 390 (expect %0d)", i, snap[i], 10 * w[i]));
    end
    check(both_cycles > 0, $sformatf("RX and TX moved together in %0d cycles", both_cycles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
