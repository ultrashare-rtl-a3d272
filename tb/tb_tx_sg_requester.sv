// tb_tx_sg_requester: grants random TX elements whenever the requester says
// ready, with random DMA back-pressure and a randomly full submit queue.
// Checks that the DMA sees exactly the granted (address, length) pairs in
// grant order, held until accepted and never offered while the submit queue
// is full; that each acceptance, and nothing else, writes (accelerator,
// length / 16) into the submit queue; and that ready is low while a request
// waits.
module tb_tx_sg_requester;
  import us_pkg::*;
  logic clk = 0, rst_n = 0;
  logic grant = 0, ready;
  logic [3:0] grant_idx = '0;
  sg_elem_t grant_elem = '0;
  logic tx_req_valid, tx_req_ready = 0;
  dma_req_t tx_req;
  logic sub_push, sub_full = 0;
  logic [ACC_IDX_W+LEN_W-1:0] sub_data;
  int checks = 0, failures = 0, ngrant = 0, naccept = 0;
  dma_req_t exp_q[$];
  logic [ACC_IDX_W+LEN_W-1:0] exp_sub[$];
  bit pending = 0;
  logic prev_valid = 0, prev_ready = 0;
  dma_req_t prev_req;

  tx_sg_requester #(.NUM_ACC(9), .DATA_W(128)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge clk) if (rst_n) begin
    check(ready == (!pending || (tx_req_valid && tx_req_ready)), "ready rule");
    check(!(tx_req_valid && sub_full), "no request offered while the submit queue is full");
    if (prev_valid && !prev_ready) check((tx_req_valid || sub_full) && tx_req == prev_req, "request held until accepted");
    if (tx_req_valid && tx_req_ready) begin
      check(exp_q.size() > 0 && tx_req == exp_q[0], "DMA request in grant order");
      check(sub_push && sub_data == exp_sub[0], "submit entry written on acceptance");
      if (exp_q.size() > 0) void'(exp_q.pop_front());
      if (exp_sub.size() > 0) void'(exp_sub.pop_front());
      naccept++;
      pending = 0;
    end else check(!sub_push, "no submit entry without acceptance");
    if (grant) begin
      exp_q.push_back('{addr: grant_elem.addr, len: grant_elem.len});
      exp_sub.push_back({8'(grant_idx), grant_elem.len >> 4});
      ngrant++;
      pending = 1;
    end
    prev_valid <= tx_req_valid; prev_ready <= tx_req_ready; prev_req <= tx_req;
  end

  initial begin
    repeat (20000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      tx_req_ready = ($urandom % 3) != 0;
      sub_full    = ($urandom % 5) == 0;
      grant_idx    = 4'($urandom % 9);
      grant_elem   = '{addr: {32'($urandom), 32'($urandom)}, len: 32'((1 + $urandom % 256) * 16)};
      #1;
      grant = ready && ($urandom % 4 != 0);
      @(negedge clk);
      grant = 0;
    end
    tx_req_ready = 1; sub_full = 0;
    repeat (5) @(negedge clk);
    check(exp_q.size() == 0 && naccept == ngrant && ngrant > 500, $sformatf("all %0d grants issued", ngrant));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
