// tb_acc_allocator: checks the allocation algorithm.
// The testbench plays the accelerators (status goes busy on claim, idle when
// the test releases it), the command queues (counted per group) and the
// command requester (takes each offer, reports done two cycles later).
//   A  all queues full, all idle, acc_map = i mod 3: the allocations must be
//      (group, accelerator) = (0,0) (1,1) (2,2) (0,3) (1,4) (2,5) (0,6) (1,7)
//      (2,8): round-robin over queues, lowest idle accelerator of the group.
//   B  with everything busy nothing is allocated; releasing accelerator 4
//      gives it to group 1's head command.
//   C  group 0 has commands but no idle member: groups 1 and 2 still get
//      their accelerators (no head-of-line blocking).
//   D  regrouping: acc_map[0] = {8,5}, both idle -> accelerator 5 is chosen.
//   E  latency: a lone hit is offered within NUM_GROUPS+1 cycles.
// Every offer is also checked against idle & acc_map[group], the rightmost-1
// rule, and the command at the head of the chosen queue.
module tb_acc_allocator;
  import us_pkg::*;
  localparam int K = 9, G = 3;
  logic clk = 0, rst_n = 0;
  logic [K-1:0] acc_status = '1;
  logic [G-1:0][K-1:0] acc_map;
  qcmd_t q_head [G];
  logic [G-1:0] q_empty, q_pop;
  logic alloc_valid, alloc_ready = 1, req_done = 0;
  qcmd_t alloc_cmd;
  logic [1:0] alloc_grp;
  logic [K-1:0] alloc_onehot, claim;
  logic [ACC_IDX_W-1:0] alloc_idx;
  int qcount [G];
  int qtaken [G];
  int checks = 0, failures = 0;
  int got_g[$], got_a[$];

  acc_allocator #(.NUM_ACC(K), .NUM_GROUPS(G)) dut (.*);
  always #5 clk = ~clk;

  for (genvar g = 0; g < G; g++) begin : g_q
    assign q_empty[g] = (qcount[g] == 0);
    assign q_head[g]  = '{cmd_id: 16'(g * 1000 + qtaken[g]), core_id: 8'(g), acc_type: 4'(g),
                          rx_sgl_addr: '0, rx_nelem: '0, tx_sgl_addr: '0, tx_nelem: '0};
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // requester and accelerators model
  always @(posedge clk) begin
    req_done <= 1'b0;
    if (alloc_valid && alloc_ready) begin
      logic [K-1:0] idle;
      idle = acc_status & acc_map[alloc_grp];
      check(alloc_onehot == (idle & (~idle + 1'b1)), "rightmost idle accelerator of the group");
      check(!q_empty[alloc_grp], "queue not empty");
      check(alloc_cmd == q_head[alloc_grp], "head command offered");
      check(q_pop == (G'(1) << alloc_grp) && claim == alloc_onehot, "pop and claim");
      check(alloc_onehot == (K'(1) << alloc_idx), "index matches one-hot");
      got_g.push_back(int'(alloc_grp));
      got_a.push_back(int'(alloc_idx));
      qcount[alloc_grp]--;
      qtaken[alloc_grp]++;
      acc_status <= acc_status & ~alloc_onehot;
      fork begin @(posedge clk); @(posedge clk); req_done <= 1'b1; end join_none
    end else begin
      check(q_pop == '0 && claim == '0, "no pop without handshake");
    end
  end

  task automatic wait_quiet(input int n);
    repeat (n) @(posedge clk);
  endtask

  initial begin
    repeat (5000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int g = 0; g < G; g++) begin
      qcount[g] = 0; qtaken[g] = 0;
      for (int i = 0; i < K; i++) acc_map[g][i] = (i % G == g);
    end
    repeat (2) @(negedge clk); rst_n = 1;
    // A
    for (int g = 0; g < G; g++) qcount[g] = 10;
    wait_quiet(80);
    check(got_g.size() == 9, "A: nine allocations");
    for (int n = 0; n < 9 && n < got_g.size(); n++) begin
      check(got_g[n] == n % 3, $sformatf("A: allocation %0d group", n));
      check(got_a[n] == n, $sformatf("A: allocation %0d accelerator", n));
    end
    // B
    got_g.delete(); got_a.delete();
    wait_quiet(20);
    check(got_g.size() == 0, "B: nothing allocated while all busy");
    @(negedge clk); acc_status[4] = 1'b1;
    wait_quiet(10);
    check(got_g.size() == 1 && got_g[0] == 1 && got_a[0] == 4, "B: released accelerator 4 to group 1");
    // C
    got_g.delete(); got_a.delete();
    @(negedge clk); acc_status = 9'b110110110;   // group 0 members (0,3,6) stay busy
    wait_quiet(40);
    check(got_g.size() == 6, "C: six allocations despite group 0 blocked");
    foreach (got_g[n]) check(got_g[n] != 0, "C: group 0 never chosen");
    // D
    got_g.delete(); got_a.delete();
    @(negedge clk); acc_map[0] = 9'b100100000; acc_map[2] = 9'b000000100; acc_status = 9'b100100000;
    wait_quiet(10);
    check(got_g.size() == 1 && got_g[0] == 0 && got_a[0] == 5, "D: regrouped, accelerator 5 chosen");
    // E
    got_g.delete(); got_a.delete();
    wait_quiet(10);
    @(negedge clk); acc_status[2] = 1'b1;
    begin
      int t = 0;
      while (!alloc_valid && t < 20) begin @(negedge clk); t++; end
      check(t <= G + 1, $sformatf("E: lone hit offered after %0d cycles", t));
    end
    wait_quiet(5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
