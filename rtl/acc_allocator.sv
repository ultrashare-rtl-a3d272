// acc_allocator: the dynamic accelerator allocation unit.
//
// Implements the paper's allocation algorithm. A pointer Q walks the command
// queues round-robin, one queue per clock. For queue Q it forms
//     idle_acc = acc_status & acc_map[Q]
// (acc_status[i] = 1 means accelerator i is idle). If queue Q holds a command
// and idle_acc is not zero, the lowest-numbered idle accelerator (the rightmost
// 1 of idle_acc, isolated as idle_acc & -idle_acc) is allocated to the head
// command of queue Q; otherwise Q simply moves on, so a group with no idle
// accelerator never blocks the other groups.
//
// Handshake: after a hit the unit presents alloc_valid with the command
// (alloc_cmd), the group (alloc_grp) and the accelerator (alloc_onehot,
// alloc_idx). When the command requester takes it (alloc_ready) the head of
// queue Q is popped and claim (= alloc_onehot for one cycle) marks that
// accelerator busy. The unit then waits for req_done, the requester's signal
// that the DMA requests for the lists have been submitted, and resumes the
// scan at the queue after Q.
//
// Timing: a hit found in cycle n is offered in cycle n+1.
//
// Paper: the algorithm, round-robin order, rightmost-one choice and waiting for
// the requester. Own choices: one queue examined per clock, the handshake.
module acc_allocator
  import us_pkg::*;
#(
  parameter int unsigned NUM_ACC    = 9,
  parameter int unsigned NUM_GROUPS = 3,
  localparam int unsigned GW = (NUM_GROUPS > 1) ? $clog2(NUM_GROUPS) : 1
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic [NUM_ACC-1:0]                  acc_status,
  input  logic [NUM_GROUPS-1:0][NUM_ACC-1:0]  acc_map,
  input  qcmd_t                               q_head [NUM_GROUPS],
  input  logic [NUM_GROUPS-1:0]               q_empty,
  output logic [NUM_GROUPS-1:0]               q_pop,
  output logic                                alloc_valid,
  input  logic                                alloc_ready,
  output qcmd_t                               alloc_cmd,
  output logic [GW-1:0]                       alloc_grp,
  output logic [NUM_ACC-1:0]                  alloc_onehot,
  output logic [ACC_IDX_W-1:0]                alloc_idx,
  output logic [NUM_ACC-1:0]                  claim,
  input  logic                                req_done
);
  typedef enum logic [1:0] {S_SCAN, S_OFFER, S_WAIT} state_e;
  state_e        state;
  logic [GW-1:0] q;
  logic [NUM_ACC-1:0] idle_acc, pick;

  function automatic logic [GW-1:0] next_q(input logic [GW-1:0] x);
    return (32'(x) == NUM_GROUPS - 1) ? '0 : x + GW'(1);
  endfunction

  function automatic logic [ACC_IDX_W-1:0] onehot_idx(input logic [NUM_ACC-1:0] v);
    logic [ACC_IDX_W-1:0] r = '0;
    for (int i = 0; i < NUM_ACC; i++) if (v[i]) r = ACC_IDX_W'(i);
    return r;
  endfunction

  assign idle_acc = acc_status & acc_map[q];
  assign pick     = idle_acc & (~idle_acc + NUM_ACC'(1));   // rightmost 1

  assign alloc_valid = (state == S_OFFER);
  assign alloc_cmd   = q_head[alloc_grp];

  always_comb begin
    q_pop = '0;
    claim = '0;
    if (alloc_valid && alloc_ready) begin
      q_pop[alloc_grp] = 1'b1;
      claim            = alloc_onehot;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_SCAN;
      q            <= '0;
      alloc_grp    <= '0;
      alloc_onehot <= '0;
      alloc_idx    <= '0;
    end else begin
      unique case (state)
        S_SCAN: begin
          if (!q_empty[q] && idle_acc != '0) begin
            alloc_grp    <= q;
            alloc_onehot <= pick;
            alloc_idx    <= onehot_idx(pick);
            state        <= S_OFFER;
          end
          q <= next_q(q);
        end
        S_OFFER: if (alloc_ready) state <= S_WAIT;
        S_WAIT:  if (req_done)    state <= S_SCAN;
        default: state <= S_SCAN;
      endcase
    end
  end

  // The chosen accelerator is one-hot and belongs to the chosen group.
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n)
    alloc_valid |-> ($onehot(alloc_onehot) && ((alloc_onehot & acc_map[alloc_grp]) != '0)));
endmodule
