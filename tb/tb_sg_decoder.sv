// tb_sg_decoder: builds random compacted scatter-gather lists the way the host
// would (first and last element shorter than a page, middle ones one page,
// middle lengths left out) for a series of commands, RX list then TX list,
// and streams them with random gaps into the decoder while the output side
// applies random back-pressure. Every element that comes out is compared with
// the original list: address, length, RX/TX, first/last flags and the
// command's information; the information queue must be popped exactly once
// per command, on its TX list's last word. Also measures throughput: with no
// back-pressure a list of n >= 2 elements (n + 2 words) must take n + 2 cycles.
module tb_sg_decoder;
  import us_pkg::*;
  logic clk = 0, rst_n = 0;
  logic sgl_valid = 0, sgl_ready;
  logic [SGW_W-1:0] sgl_data = '0;
  logic info_empty;
  req_info_t info_head;
  logic info_pop;
  logic elem_valid, elem_ready = 1;
  sg_tagged_t elem_out;
  int checks = 0, failures = 0;
  req_info_t info_q[$];
  sg_tagged_t exp_q[$];
  logic [SGW_W-1:0] words_q[$];
  bit random_bp = 1;
  int pops = 0;

  sg_decoder dut (.*);
  always #5 clk = ~clk;

  assign info_empty = (info_q.size() == 0);
  assign info_head  = info_empty ? '0 : info_q[0];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // build the list of one side of a command
  task automatic build(input req_info_t inf, input bit tx, input int n);
    logic [ADDR_W-1:0] a [];
    logic [LEN_W-1:0]  l [];
    a = new[n]; l = new[n];
    for (int i = 0; i < n; i++) begin
      a[i] = {32'($urandom), 20'($urandom), 12'h000};
      l[i] = (i == 0 || i == n - 1) ? LEN_W'((1 + $urandom % 256) * 16) : LEN_W'(PAGE_BYTES);
    end
    if (n == 1) begin
      words_q.push_back(64'(l[0])); words_q.push_back(a[0]);
    end else begin
      words_q.push_back(64'(l[0]));
      for (int i = 0; i < n; i++) words_q.push_back(a[i]);
      words_q.push_back(64'(l[n-1]));
    end
    for (int i = 0; i < n; i++)
      exp_q.push_back('{elem: '{addr: a[i], len: l[i]}, is_tx: tx, first: (i == 0),
                        last: (i == n - 1), info: inf});
  endtask

  always @(posedge clk) if (rst_n) begin
    if (elem_valid && elem_ready) begin
      check(exp_q.size() > 0 && elem_out == exp_q[0], "decoded element");
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end
    if (info_pop) begin
      check(!info_empty, "pop of a present entry");
      check(!(elem_valid && !elem_ready), "pop only when output advances");
      pops++;
      void'(info_q.pop_front());
    end
    if (random_bp) elem_ready <= ($urandom % 4) != 0;
  end

  initial begin
    repeat (200000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int feed_cycles;
  task automatic feed(input bit gaps);
    feed_cycles = 0;
    while (words_q.size() > 0) begin
      feed_cycles++;
      sgl_valid = !gaps || ($urandom % 3 != 0);
      sgl_data  = words_q[0];
      @(posedge clk);
      #1;
      if (sgl_valid && sgl_ready_prev) void'(words_q.pop_front());
    end
    sgl_valid = 0;
  endtask
  logic sgl_ready_prev;
  always @(posedge clk) sgl_ready_prev = sgl_ready;

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 60; c++) begin
      automatic req_info_t inf;
      automatic int nrx = 1 + $urandom % 12, ntx = 1 + $urandom % 12;
      if (c % 7 == 0) nrx = 1;
      if (c % 5 == 0) ntx = 2;
      inf = '{acc: 8'($urandom % 9), rx_nelem: 16'(nrx), tx_nelem: 16'(ntx),
              cmd_id: 16'(c), core_id: 8'(c % 4)};
      info_q.push_back(inf);
      build(inf, 0, nrx);
      build(inf, 1, ntx);
    end
    @(negedge clk);
    feed(1);
    repeat (20) @(posedge clk);
    check(exp_q.size() == 0, "all elements decoded");
    check(pops == 60, $sformatf("one info pop per command (%0d)", pops));
    // throughput: one command, 10 + 10 elements, no back-pressure
    random_bp = 0; elem_ready = 1;
    begin
      automatic req_info_t inf = '{acc: 8'd3, rx_nelem: 16'd10, tx_nelem: 16'd10, cmd_id: 16'd99, core_id: 8'd1};
      info_q.push_back(inf);
      build(inf, 0, 10); build(inf, 1, 10);
      @(negedge clk);
      feed(0);
      check(feed_cycles == 24, $sformatf("24 words in 24 cycles (took %0d)", feed_cycles));
    end
    repeat (5) @(posedge clk);
    check(exp_q.size() == 0, "throughput elements decoded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
