// tb_acc_group_table: checks the accelerator group table.
// Reset contents (accelerator i in group i mod G, type j to group j mod G),
// row writes replacing one acc_map row only, type-map writes and lookups,
// writes taking effect one cycle later, and out-of-range writes ignored.
module tb_acc_group_table;
  localparam int K = 9, G = 3, T = 16;
  logic clk = 0, rst_n = 0;
  logic grp_we = 0, type_we = 0;
  logic [15:0] grp_idx = '0, type_idx = '0;
  logic [K-1:0] grp_mask = '0;
  logic [1:0] type_grp = '0, lookup_grp;
  logic [3:0] type_lookup = '0;
  logic [G-1:0][K-1:0] acc_map;
  logic [G-1:0][K-1:0] exp_map;
  logic [1:0] exp_type [T];
  int checks = 0, failures = 0;

  acc_group_table #(.NUM_ACC(K), .NUM_GROUPS(G), .NUM_TYPES(T)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic check_all();
    check(acc_map == exp_map, "acc_map");
    for (int j = 0; j < T; j++) begin
      type_lookup = 4'(j); #1;
      check(lookup_grp == exp_type[j], $sformatf("type %0d lookup", j));
    end
    @(negedge clk);
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int g = 0; g < G; g++) for (int i = 0; i < K; i++) exp_map[g][i] = (i % G == g);
    for (int j = 0; j < T; j++) exp_type[j] = 2'(j % G);
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); check_all();
    // paper example rows, group 0 = {1,3}, group 1 = {2,5}
    grp_we = 1; grp_idx = 0; grp_mask = 9'b000001010;
    @(negedge clk); exp_map[0] = 9'b000001010;
    grp_idx = 1; grp_mask = 9'b000100100;
    @(negedge clk); exp_map[1] = 9'b000100100;
    grp_idx = 3; grp_mask = '1;               // out of range
    @(negedge clk); grp_we = 0;
    check_all();
    // type writes
    for (int n = 0; n < 40; n++) begin
      type_we = 1; type_idx = 16'($urandom % 20); type_grp = 2'($urandom % 4);
      if (type_idx < T && type_grp < G) exp_type[type_idx] = type_grp;
      @(negedge clk);
    end
    type_we = 0;
    check_all();
    // random row writes
    for (int n = 0; n < 30; n++) begin
      grp_we = 1; grp_idx = 16'($urandom % 4); grp_mask = K'($urandom);
      @(negedge clk);
      if (grp_idx < G) exp_map[grp_idx] = grp_mask;
      check(acc_map == exp_map, "acc_map after random write");
    end
    grp_we = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
