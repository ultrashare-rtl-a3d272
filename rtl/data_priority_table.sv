// data_priority_table: per-accelerator data transfer weights.
//
// One byte weight per accelerator (acc_weight of the paper's scatter-gather
// scheduler). Both data request schedulers, RX and TX, read the same table.
// The host rewrites an entry with a configuration command; a larger weight lets
// the scheduler serve that accelerator more times in a row, so it gets a larger
// share of the PCIe bandwidth.
//
// Interface: we/idx/weight writes one entry (out-of-range idx ignored); the
// whole table is a registered output. Reset gives every accelerator weight 1,
// the uniform setting of the paper's experiments; the reset value itself is
// this design's choice.
module data_priority_table #(
  parameter int unsigned NUM_ACC  = 9,
  parameter int unsigned WEIGHT_W = 8
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              we,
  input  logic [15:0]                       idx,
  input  logic [WEIGHT_W-1:0]               weight,
  output logic [NUM_ACC-1:0][WEIGHT_W-1:0]  acc_weight
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_ACC; i++) acc_weight[i] <= WEIGHT_W'(1);
    end else if (we && idx < 16'(NUM_ACC)) begin
      acc_weight[idx] <= weight;
    end
  end
endmodule
