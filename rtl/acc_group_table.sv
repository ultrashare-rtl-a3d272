// acc_group_table: the reconfigurable accelerator group table.
//
// Holds acc_map, one row per accelerator group and one column per accelerator:
// bit [g][i] set means accelerator i belongs to group g (the acc_map matrix of
// the paper's allocation algorithm). It also holds the map from accelerator
// type to group that the command detector uses to choose a command queue. The
// host rewrites both through configuration commands, so accelerators can be
// regrouped, added to or removed from groups without reconfiguring the FPGA.
//
// Interface: a row write (grp_we, grp_idx, grp_mask) replaces one row of
// acc_map; a type write (type_we, type_idx, type_grp) replaces one entry of the
// type map. acc_map is a registered output; type_lookup -> lookup_grp is a
// combinational read. Writes take effect in the cycle after they are presented.
// Out-of-range indices are ignored.
//
// Paper: the table, its role and its reconfigurability. Own choices: the type
// map living in the same table, the reset contents (accelerator i in group
// i mod NUM_GROUPS, type j mapped to group j mod NUM_GROUPS) and the write port.
module acc_group_table #(
  parameter int unsigned NUM_ACC    = 9,
  parameter int unsigned NUM_GROUPS = 3,
  parameter int unsigned NUM_TYPES  = 16,
  localparam int unsigned GW = (NUM_GROUPS > 1) ? $clog2(NUM_GROUPS) : 1,
  localparam int unsigned TW = (NUM_TYPES  > 1) ? $clog2(NUM_TYPES)  : 1
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 grp_we,
  input  logic [15:0]                          grp_idx,
  input  logic [NUM_ACC-1:0]                   grp_mask,
  input  logic                                 type_we,
  input  logic [15:0]                          type_idx,
  input  logic [GW-1:0]                        type_grp,
  input  logic [TW-1:0]                        type_lookup,
  output logic [GW-1:0]                        lookup_grp,
  output logic [NUM_GROUPS-1:0][NUM_ACC-1:0]   acc_map
);
  logic [GW-1:0] type_map [NUM_TYPES];

  assign lookup_grp = type_map[type_lookup];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < NUM_GROUPS; g++)
        for (int i = 0; i < NUM_ACC; i++)
          acc_map[g][i] <= ((i % NUM_GROUPS) == g);
      for (int j = 0; j < NUM_TYPES; j++)
        type_map[j] <= GW'(j % NUM_GROUPS);
    end else begin
      if (grp_we && grp_idx < 16'(NUM_GROUPS))
        acc_map[grp_idx[GW-1:0]] <= grp_mask;
      if (type_we && type_idx < 16'(NUM_TYPES) && 32'(type_grp) < NUM_GROUPS)
        type_map[type_idx[TW-1:0]] <= type_grp;
    end
  end
endmodule
