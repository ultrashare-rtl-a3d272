// tb_data_distributor: a model information queue holds random (accelerator,
// beats) entries; RX beats arrive with random gaps. Checks that every beat is
// written to exactly the accelerator of the oldest entry, with the data
// unchanged, that the entry's final beat carries rx_wr_elem_last and pops the
// entry, and that no beat is taken while the queue is empty.
module tb_data_distributor;
  import us_pkg::*;
  localparam int K = 9;
  logic clk = 0, rst_n = 0;
  logic rx_data_valid = 0, rx_data_ready;
  logic [127:0] rx_data = '0;
  logic info_empty, info_pop;
  logic [ACC_IDX_W+LEN_W-1:0] info_head;
  logic [K-1:0] rx_wr_valid;
  logic [127:0] rx_wr_data;
  logic rx_wr_elem_last;
  int checks = 0, failures = 0, beats_seen = 0, total_beats = 0;
  logic [ACC_IDX_W+LEN_W-1:0] info_q[$];
  int done_in_entry = 0;

  data_distributor #(.NUM_ACC(K), .DATA_W(128)) dut (.*);
  always #5 clk = ~clk;
  assign info_empty = (info_q.size() == 0);
  assign info_head  = info_empty ? '0 : info_q[0];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge clk) if (rst_n) begin
    check(rx_data_ready == !info_empty, "ready when an entry waits");
    if (rx_data_valid && rx_data_ready) begin
      automatic int a = int'(info_head[LEN_W +: ACC_IDX_W]);
      automatic int n = int'(info_head[LEN_W-1:0]);
      check(rx_wr_valid == (K'(1) << a), "beat to the entry's accelerator");
      check(rx_wr_data == rx_data, "data unchanged");
      check(rx_wr_elem_last == (done_in_entry == n - 1), "last beat flag");
      check(info_pop == (done_in_entry == n - 1), "pop on last beat");
      beats_seen++;
      if (done_in_entry == n - 1) begin done_in_entry = 0; void'(info_q.pop_front()); end
      else done_in_entry++;
    end else begin
      check(rx_wr_valid == '0 && !info_pop, "nothing without a beat");
    end
  end

  initial begin
    repeat (50000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int e = 0; e < 100; e++) begin
      automatic int n = 1 + $urandom % 40;
      info_q.push_back({8'($urandom % K), 32'(n)});
      total_beats += n;
    end
    repeat (2) @(negedge clk); rst_n = 1;
    while (info_q.size() > 0) begin
      rx_data_valid = ($urandom % 4) != 0;
      rx_data = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk);
    end
    rx_data_valid = 1;
    repeat (5) @(negedge clk);
    rx_data_valid = 0;
    check(beats_seen == total_beats, $sformatf("all %0d beats delivered", total_beats));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
