// tb_command_queues: random pushes and pops on the three group queues against
// three queue models; checks every head, empty and full flag each cycle, and
// that traffic on one queue never disturbs another.
module tb_command_queues;
  import us_pkg::*;
  localparam int G = 3, D = 4;
  logic clk = 0, rst_n = 0;
  logic [G-1:0] push = '0, pop = '0, empty, full;
  qcmd_t push_data = '0;
  qcmd_t head [G];
  qcmd_t model [G][$];
  int checks = 0, failures = 0;

  command_queues #(.NUM_GROUPS(G), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      automatic int g = $urandom % G;
      push = '0; push[g] = ($urandom % 2);
      pop  = G'($urandom);
      push_data = '{cmd_id: 16'(c), core_id: 8'(g), acc_type: 4'(g), rx_sgl_addr: 64'(c * 3),
                    rx_nelem: 16'(c % 7), tx_sgl_addr: 64'(c * 5), tx_nelem: 16'(c % 5)};
      @(negedge clk);
      for (int q = 0; q < G; q++) begin
        automatic bit can_push = model[q].size() < D;
        if (pop[q] && model[q].size() > 0) void'(model[q].pop_front());
        if (push[q] && can_push) model[q].push_back(push_data);
        check(empty[q] == (model[q].size() == 0), "empty");
        check(full[q] == (model[q].size() == D), "full");
        if (model[q].size() > 0) check(head[q] == model[q][0], "head");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
