// data_req_scheduler: weighted round-robin over the accelerators' data
// requests (the paper's scatter-gather scheduler). Two are instantiated, one
// for RX and one for TX requests.
//
// A pointer cur names the accelerator whose turn it is. While cur has a
// request and the downstream SG requester can take one (en), cur is granted
// (ack[cur] for one cycle) up to acc_weight[cur] times in a row; after the
// last grant of its turn, or as soon as cur has no request, the pointer jumps
// to the next accelerator after cur, in round-robin order, that has a request.
// An accelerator's weight thus sets its share of grants while all are busy,
// and bandwidth an idle accelerator does not use goes to the others. A weight
// of 0 counts as 1.
//
// Timing: ack is combinational from req, en and the registered pointer; moving
// the pointer to another accelerator costs one cycle without a grant.
//
// Paper: the algorithm (weight from the data priority table, ack to the served
// accelerator). Own choices: reading the loop bound as "weight grants per
// turn", weight 0, and skipping accelerators without a request.
module data_req_scheduler #(
  parameter int unsigned NUM_ACC  = 9,
  parameter int unsigned WEIGHT_W = 8,
  localparam int unsigned AW = (NUM_ACC > 1) ? $clog2(NUM_ACC) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [NUM_ACC-1:0]                req,
  input  logic [NUM_ACC-1:0][WEIGHT_W-1:0]  acc_weight,
  input  logic                              en,
  output logic [NUM_ACC-1:0]                ack,
  output logic [AW-1:0]                     ack_idx
);
  logic [AW-1:0]       cur, nxt;
  logic [WEIGHT_W-1:0] cnt, w;
  logic                grant;

  // next accelerator after cur that has a request; cur itself if none
  always_comb begin
    nxt = cur;
    for (int d = NUM_ACC - 1; d >= 1; d--) begin
      int j;
      j = (int'(cur) + d) % NUM_ACC;
      if (req[j]) nxt = AW'(j);
    end
  end

  assign w     = (acc_weight[cur] == '0) ? WEIGHT_W'(1) : acc_weight[cur];
  assign grant = en && req[cur];

  always_comb begin
    ack = '0;
    ack[cur] = grant;
  end
  assign ack_idx = cur;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= '0;
      cnt <= '0;
    end else if (grant) begin
      if (cnt + WEIGHT_W'(1) >= w) begin
        cur <= nxt;
        cnt <= '0;
      end else begin
        cnt <= cnt + WEIGHT_W'(1);
      end
    end else if (!req[cur]) begin
      cur <= nxt;
      cnt <= '0;
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(ack));
endmodule
