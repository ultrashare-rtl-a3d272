// tb_rx_sg_requester: grants random RX elements whenever the requester says
// ready, with random DMA back-pressure and a randomly full information queue.
// Checks that the DMA sees exactly the granted (address, length) pairs in
// grant order, each presented one cycle after its grant and held until
// accepted; that each grant writes (accelerator, length / 16) into the
// information queue; and that ready is low while the queue is full or a
// request is stuck.
module tb_rx_sg_requester;
  import us_pkg::*;
  logic clk = 0, rst_n = 0;
  logic grant = 0, ready;
  logic [3:0] grant_idx = '0;
  sg_elem_t grant_elem = '0;
  logic rx_req_valid, rx_req_ready = 0;
  dma_req_t rx_req;
  logic info_push, info_full = 0;
  logic [ACC_IDX_W+LEN_W-1:0] info_data;
  int checks = 0, failures = 0, ngrant = 0, naccept = 0;
  dma_req_t exp_q[$];
  logic prev_valid = 0, prev_ready = 0;
  dma_req_t prev_req;

  rx_sg_requester #(.NUM_ACC(9), .DATA_W(128)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge clk) if (rst_n) begin
    check(ready == ((!rx_req_valid || rx_req_ready) && !info_full), "ready rule");
    if (prev_valid && !prev_ready) check(rx_req_valid && rx_req == prev_req, "request held until accepted");
    if (rx_req_valid && rx_req_ready) begin
      check(exp_q.size() > 0 && rx_req == exp_q[0], "DMA request in grant order");
      if (exp_q.size() > 0) void'(exp_q.pop_front());
      naccept++;
    end
    check(info_push == grant, "info written with each grant");
    if (grant) begin
      check(info_data == {8'(grant_idx), grant_elem.len >> 4}, "info entry");
      exp_q.push_back('{addr: grant_elem.addr, len: grant_elem.len});
      ngrant++;
    end
    prev_valid <= rx_req_valid; prev_ready <= rx_req_ready; prev_req <= rx_req;
  end

  initial begin
    repeat (20000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      rx_req_ready = ($urandom % 3) != 0;
      info_full    = ($urandom % 5) == 0;
      grant_idx    = 4'($urandom % 9);
      grant_elem   = '{addr: {32'($urandom), 32'($urandom)}, len: 32'((1 + $urandom % 256) * 16)};
      #1;
      grant = ready && ($urandom % 4 != 0);
      @(negedge clk);
      grant = 0;
    end
    rx_req_ready = 1; info_full = 0;
    repeat (5) @(negedge clk);
    check(exp_q.size() == 0 && naccept == ngrant && ngrant > 500, $sformatf("all %0d grants issued", ngrant));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
