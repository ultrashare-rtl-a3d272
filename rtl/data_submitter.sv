// data_submitter: streams TX data from the accelerators to the DMA.
//
// For each TX element the TX SG requester has issued, in the same order, the
// submit queue holds (accelerator, beats). The submitter reads that many beats
// from that accelerator's TX buffer (tx_rd_en[acc[AW-1:0]], data tx_rd_data[acc[AW-1:0]]) and
// presents them on the DMA TX data stream, with tx_data_last on the final beat
// of the element, then pops the entry. The data is already in the buffer: the
// controller only asked for the element once it was.
//
// Handshake: valid/ready on tx_data_*. Combinational data path from the
// buffer head (first word fall through); one beat per cycle.
//
// Paper: the block's name and place (Fig. 3). Own choices: everything else.
module data_submitter
  import us_pkg::*;
#(
  parameter int unsigned NUM_ACC = 9,
  parameter int unsigned DATA_W  = 128
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               sub_empty,
  input  logic [ACC_IDX_W+LEN_W-1:0] sub_head,   // {accelerator, beats}
  output logic               sub_pop,
  output logic [NUM_ACC-1:0] tx_rd_en,
  input  logic [DATA_W-1:0]  tx_rd_data [NUM_ACC],
  output logic               tx_data_valid,
  output logic [DATA_W-1:0]  tx_data,
  output logic               tx_data_last,
  input  logic               tx_data_ready
);
  localparam int unsigned AW = (NUM_ACC > 1) ? $clog2(NUM_ACC) : 1;
  logic [ACC_IDX_W-1:0] acc;
  logic [LEN_W-1:0]     beats, done_beats;
  logic                 beat, ok;

  assign {acc, beats}  = sub_head;
  assign ok            = 32'(acc) < NUM_ACC;
  assign tx_data_valid = !sub_empty && ok;
  assign tx_data       = ok ? tx_rd_data[acc[AW-1:0]] : '0;
  assign tx_data_last  = (done_beats + LEN_W'(1) >= beats);
  assign beat          = tx_data_valid && tx_data_ready;
  assign sub_pop       = (beat && tx_data_last) || (!sub_empty && !ok);

  always_comb begin
    tx_rd_en = '0;
    if (beat) tx_rd_en[acc[AW-1:0]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 done_beats <= '0;
    else if (beat && tx_data_last) done_beats <= '0;
    else if (beat)              done_beats <= done_beats + LEN_W'(1);
  end
endmodule
