// tb_command_requester: offers random allocated commands with random DMA
// back-pressure and a randomly full request information queue. For each
// command it expects, in order: one information entry (accelerator, counts,
// ids) written only while the queue has room, an RX list request (RX list
// address, 8 * words) and a TX list request (TX list address, 8 * words),
// where words = 2 for one element and n + 2 otherwise, then exactly one
// req_done pulse, in the cycle the TX request is accepted.
module tb_command_requester;
  import us_pkg::*;
  logic clk = 0, rst_n = 0;
  logic alloc_valid = 0, alloc_ready, req_done;
  qcmd_t alloc_cmd = '0;
  logic [ACC_IDX_W-1:0] alloc_idx = '0;
  logic sgl_req_valid, sgl_req_ready = 0;
  dma_req_t sgl_req;
  logic info_push, info_full = 0;
  req_info_t info_data;
  int checks = 0, failures = 0;
  dma_req_t exp_req[$];
  req_info_t exp_info[$];
  int dones = 0, cmds = 0, tx_accepts = 0;

  command_requester dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic int words(input int n);
    return (n <= 1) ? 2 : n + 2;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (sgl_req_valid && sgl_req_ready) begin
      check(exp_req.size() > 0 && sgl_req == exp_req[0], "list request address and length");
      if (exp_req.size() > 0) void'(exp_req.pop_front());
      if (exp_req.size() % 2 == 0) tx_accepts++;
      check(req_done == (exp_req.size() % 2 == 0), "req_done with the TX request");
    end else begin
      check(!req_done, "no req_done without TX acceptance");
    end
    if (req_done) dones++;
    if (info_push) begin
      check(!info_full, "info written only with room");
      check(exp_info.size() > 0 && info_data == exp_info[0], "info entry");
      if (exp_info.size() > 0) void'(exp_info.pop_front());
    end
    sgl_req_ready <= ($urandom % 3) != 0;
    info_full     <= ($urandom % 4) == 0;
  end

  initial begin
    repeat (20000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      automatic qcmd_t c;
      c = '{cmd_id: 16'(n), core_id: 8'($urandom), acc_type: 4'($urandom),
            rx_sgl_addr: {32'($urandom), 32'($urandom)}, rx_nelem: 16'($urandom % 40),
            tx_sgl_addr: {32'($urandom), 32'($urandom)}, tx_nelem: 16'($urandom % 40)};
      alloc_cmd = c; alloc_idx = 8'($urandom % 9); alloc_valid = 1;
      @(posedge clk);
      while (!alloc_ready) @(posedge clk);
      exp_info.push_back('{acc: alloc_idx, rx_nelem: c.rx_nelem, tx_nelem: c.tx_nelem,
                           cmd_id: c.cmd_id, core_id: c.core_id});
      exp_req.push_back('{addr: c.rx_sgl_addr, len: 32'(words(c.rx_nelem) * 8)});
      exp_req.push_back('{addr: c.tx_sgl_addr, len: 32'(words(c.tx_nelem) * 8)});
      cmds++;
      @(negedge clk); alloc_valid = 0; alloc_cmd = '0;
      repeat ($urandom % 3) @(negedge clk);
    end
    repeat (50) @(negedge clk);
    check(exp_req.size() == 0 && exp_info.size() == 0, "all requests and entries seen");
    check(dones == cmds && tx_accepts == cmds, $sformatf("one req_done per command (%0d/%0d)", dones, cmds));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
