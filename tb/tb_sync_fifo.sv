// tb_sync_fifo: self-checking test of the first-word-fall-through FIFO.
// Random pushes and pops (including pushes when full and pops when empty) are
// compared every cycle against a SystemVerilog queue model: head data, empty,
// full and count. Also checks that an entry pushed in cycle n is visible in
// cycle n+1.
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic empty, full;
  logic [$clog2(D):0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // single push, visible next cycle
    @(negedge clk); wr_en = 1; wr_data = 16'hBEEF;
    @(negedge clk); wr_en = 0; model.push_back(16'hBEEF);
    check(!empty && rd_data == 16'hBEEF && count == 1, "fall-through after one push");
    for (int c = 0; c < 3000; c++) begin
      bit do_w, do_r;
      wr_en   = ($urandom % 100) < ((c / 500) % 2 ? 70 : 35);
      rd_en   = ($urandom % 100) < 50;
      wr_data = W'($urandom);
      do_w = wr_en && model.size() < D;
      do_r = rd_en && model.size() > 0;
      @(negedge clk);
      if (do_r) void'(model.pop_front());
      if (do_w) model.push_back(wr_data);
      check(count == model.size(), "count");
      check(empty == (model.size() == 0), "empty");
      check(full  == (model.size() == D), "full");
      if (model.size() > 0) check(rd_data == model[0], "head data");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
