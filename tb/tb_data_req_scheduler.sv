// tb_data_req_scheduler: checks the weighted round-robin data request
// scheduler.
//   1  all 9 accelerators always requesting, weights (1,1,1,4,4,4,8,8,8) (the
//      paper's rate-based setting): over whole rounds the grant counts must
//      be in the ratio of the weights, and each turn must be exactly
//      weight grants long, in accelerator order 0..8.
//   2  uniform weights: equal grants.
//   3  work conservation: only accelerators 2 and 7 request; every grant goes
//      to one of them and neither starves.
//   4  en low: no grant.
//   5  an accelerator that stops requesting loses its turn at once.
// ack is checked one-hot at all times and only to a requester.
module tb_data_req_scheduler;
  localparam int K = 9;
  logic clk = 0, rst_n = 0;
  logic [K-1:0] req = '0;
  logic [K-1:0][7:0] acc_weight;
  logic en = 1;
  logic [K-1:0] ack;
  logic [3:0] ack_idx;
  int checks = 0, failures = 0;
  int grants [K];
  int seq[$];

  data_req_scheduler #(.NUM_ACC(K), .WEIGHT_W(8)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge clk) if (rst_n) begin
    check($onehot0(ack) && ((ack & ~req) == '0), "ack one-hot and to a requester");
    for (int i = 0; i < K; i++) if (ack[i]) begin grants[i]++; seq.push_back(i); end
    if (!en) check(ack == '0, "no grant while disabled");
  end

  task automatic clear();
    for (int i = 0; i < K; i++) grants[i] = 0;
    seq.delete();
  endtask

  initial begin
    repeat (20000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int w [K] = '{1, 1, 1, 4, 4, 4, 8, 8, 8};
    for (int i = 0; i < K; i++) acc_weight[i] = 8'(w[i]);
    repeat (2) @(negedge clk); rst_n = 1;
    // 1
    req = '1; clear();
    repeat (39 * 20) @(negedge clk);
    begin
      // turns in order: weight grants of 0, then of 1, ...
      int pos = 0;
      for (int r = 0; r < 10; r++)
        for (int i = 0; i < K; i++)
          for (int g = 0; g < w[i]; g++) begin
            check(pos < seq.size() && seq[pos] == i, $sformatf("rate-based turn order at grant %0d", pos));
            pos++;
          end
    end
    // 2
    for (int i = 0; i < K; i++) acc_weight[i] = 8'd1;
    @(negedge clk); req = '0; repeat (3) @(negedge clk);
    clear(); req = '1;
    repeat (9 * 40) @(negedge clk);
    for (int i = 0; i < K; i++)
      check(grants[i] >= 38 && grants[i] <= 41, $sformatf("uniform share acc %0d = %0d", i, grants[i]));
    // 3
    req = 9'b010000100; clear();
    repeat (200) @(negedge clk);
    check(grants[2] + grants[7] >= 190 && grants[2] >= 90 && grants[7] >= 90,
          $sformatf("work conserving: %0d + %0d", grants[2], grants[7]));
    // 4
    en = 0; clear();
    repeat (20) @(negedge clk);
    check(seq.size() == 0, "no grants while disabled");
    en = 1;
    // 5
    acc_weight[4] = 8'd8; req = 9'b000010001; clear();
    repeat (3) @(negedge clk);
    while (!(ack[4])) @(negedge clk);
    req[4] = 1'b0; clear();
    @(negedge clk); @(negedge clk); @(negedge clk);
    check(grants[4] == 0 && grants[0] >= 1, "turn ends when request drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
