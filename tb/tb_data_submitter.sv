// tb_data_submitter: model TX buffers (one queue per accelerator) hold
// numbered beats; a model submit queue holds random (accelerator, beats)
// entries whose data is present. With random DMA back-pressure, checks that
// the TX stream carries each entry's beats in order from the right buffer,
// that tx_rd_en pulses that buffer once per beat, that tx_data_last marks the
// entry's final beat and the entry is popped then, and that the stream runs
// at one beat per cycle when the DMA is always ready.
module tb_data_submitter;
  import us_pkg::*;
  localparam int K = 9;
  logic clk = 0, rst_n = 0;
  logic sub_empty, sub_pop;
  logic [ACC_IDX_W+LEN_W-1:0] sub_head;
  logic [K-1:0] tx_rd_en;
  logic [127:0] tx_rd_data [K];
  logic tx_data_valid, tx_data_last, tx_data_ready = 0;
  logic [127:0] tx_data;
  int checks = 0, failures = 0, beats = 0, total = 0, cycles = 0;
  logic [ACC_IDX_W+LEN_W-1:0] sub_q[$];
  logic [127:0] buf_q [K][$];
  int done_in_entry = 0;
  bit random_bp = 1;

  data_submitter #(.NUM_ACC(K), .DATA_W(128)) dut (.*);
  always #5 clk = ~clk;
  assign sub_empty = (sub_q.size() == 0);
  assign sub_head  = sub_empty ? '0 : sub_q[0];
  for (genvar i = 0; i < K; i++) begin : g_b
    assign tx_rd_data[i] = (buf_q[i].size() > 0) ? buf_q[i][0] : '0;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (!sub_empty) cycles++;
    if (tx_data_valid && tx_data_ready) begin
      automatic int a = int'(sub_head[LEN_W +: ACC_IDX_W]);
      automatic int n = int'(sub_head[LEN_W-1:0]);
      check(tx_rd_en == (K'(1) << a), "read the entry's buffer");
      check(tx_data == buf_q[a][0], "beat data and order");
      check(tx_data_last == (done_in_entry == n - 1), "last flag");
      check(sub_pop == (done_in_entry == n - 1), "pop on last beat");
      void'(buf_q[a].pop_front());
      beats++;
      if (done_in_entry == n - 1) begin done_in_entry = 0; void'(sub_q.pop_front()); end
      else done_in_entry++;
    end else begin
      check(tx_rd_en == '0 && !sub_pop, "no read without a beat");
    end
    check(tx_data_valid == !sub_empty, "valid while an entry waits");
    if (random_bp) tx_data_ready <= ($urandom % 3) != 0;
  end

  task automatic load(input int entries);
    for (int e = 0; e < entries; e++) begin
      automatic int a = $urandom % K, n = 1 + $urandom % 30;
      sub_q.push_back({8'(a), 32'(n)});
      for (int b = 0; b < n; b++) buf_q[a].push_back({32'(e), 32'(a), 32'(b), $urandom});
      total += n;
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    load(80);
    repeat (2) @(negedge clk); rst_n = 1;
    while (sub_q.size() > 0) @(negedge clk);
    check(beats == total, $sformatf("all %0d beats submitted", total));
    // throughput
    random_bp = 0; tx_data_ready = 1; beats = 0; total = 0; cycles = 0;
    @(negedge clk);
    load(10);
    while (sub_q.size() > 0) @(negedge clk);
    check(cycles == total, $sformatf("one beat per cycle: %0d beats in %0d cycles", total, cycles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
