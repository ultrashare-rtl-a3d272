// command_queues: one FIFO of request commands per accelerator group.
//
// Grouping the queues is what keeps one slow accelerator type from blocking
// the others: a command waiting for a busy group never sits in front of a
// command for a group that has an idle accelerator. The detector pushes into
// queue g with push[g]; the allocator pops the head of queue g with pop[g].
// head[g] shows the head command of queue g (first word fall through), empty[g]
// and full[g] its state. One push and one pop per queue per cycle.
//
// Paper: one dedicated FIFO per group. Own choice: DEPTH (not given).
module command_queues
  import us_pkg::*;
#(
  parameter int unsigned NUM_GROUPS = 3,
  parameter int unsigned DEPTH      = 64
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NUM_GROUPS-1:0]  push,
  input  qcmd_t                  push_data,
  input  logic [NUM_GROUPS-1:0]  pop,
  output qcmd_t                  head  [NUM_GROUPS],
  output logic [NUM_GROUPS-1:0]  empty,
  output logic [NUM_GROUPS-1:0]  full
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  for (genvar g = 0; g < NUM_GROUPS; g++) begin : g_q
    logic [AW:0] cnt_unused;
    sync_fifo #(.WIDTH($bits(qcmd_t)), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .wr_en(push[g]), .wr_data(push_data),
      .rd_en(pop[g]),  .rd_data(head[g]),
      .empty(empty[g]), .full(full[g]), .count(cnt_unused)
    );
  end
endmodule
