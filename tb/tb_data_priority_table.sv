// tb_data_priority_table: reset weights are all 1; single-entry writes
// (including the paper's rate-based setting 1,1,1,4,4,4,8,8,8) land in the
// right entry one cycle later; out-of-range writes are ignored.
module tb_data_priority_table;
  localparam int K = 9;
  logic clk = 0, rst_n = 0, we = 0;
  logic [15:0] idx = '0;
  logic [7:0] weight = '0;
  logic [K-1:0][7:0] acc_weight, exp_w;
  int checks = 0, failures = 0;
  int rate [K] = '{1, 1, 1, 4, 4, 4, 8, 8, 8};

  data_priority_table #(.NUM_ACC(K), .WEIGHT_W(8)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < K; i++) exp_w[i] = 8'd1;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); check(acc_weight == exp_w, "reset weights");
    for (int i = 0; i < K; i++) begin
      we = 1; idx = 16'(i); weight = 8'(rate[i]);
      @(negedge clk); exp_w[i] = 8'(rate[i]);
      check(acc_weight == exp_w, "rate-based write");
    end
    idx = 16'd9; weight = 8'hFF; @(negedge clk);
    idx = 16'd300; @(negedge clk);
    check(acc_weight == exp_w, "out-of-range ignored");
    for (int n = 0; n < 50; n++) begin
      idx = 16'($urandom % 12); weight = 8'($urandom);
      @(negedge clk);
      if (idx < K) exp_w[idx] = weight;
      check(acc_weight == exp_w, "random write");
    end
    we = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
