// data_distributor: routes RX data from the DMA to the accelerators.
//
// The DMA answers RX read requests in the order they were issued. The head of
// the data request information queue names the accelerator and the length in
// beats of the oldest outstanding request; the distributor writes that many
// beats into the accelerator's RX buffer (rx_wr_valid[acc[AW-1:0]], shared
// rx_wr_data), marks the final beat (rx_wr_elem_last) and pops the entry.
// The receiving buffer always has room, because its controller only asked for
// the element when it had.
//
// Handshake: rx_data_ready is high whenever an information entry is waiting.
// Combinational data path; the beat counter is the only state.
//
// Paper: the data distributor and its use of the data request information.
// Own choices: in-order answers, beat counting, the handshake.
module data_distributor
  import us_pkg::*;
#(
  parameter int unsigned NUM_ACC = 9,
  parameter int unsigned DATA_W  = 128
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               rx_data_valid,
  input  logic [DATA_W-1:0]  rx_data,
  output logic               rx_data_ready,
  input  logic               info_empty,
  input  logic [ACC_IDX_W+LEN_W-1:0] info_head,   // {accelerator, beats}
  output logic               info_pop,
  output logic [NUM_ACC-1:0] rx_wr_valid,
  output logic [DATA_W-1:0]  rx_wr_data,
  output logic               rx_wr_elem_last
);
  localparam int unsigned AW = (NUM_ACC > 1) ? $clog2(NUM_ACC) : 1;
  logic [ACC_IDX_W-1:0] acc;
  logic [LEN_W-1:0]     beats, done_beats;
  logic                 beat;

  assign {acc, beats}    = info_head;
  assign rx_data_ready   = !info_empty;
  assign beat            = rx_data_valid && rx_data_ready;
  assign rx_wr_data      = rx_data;
  assign rx_wr_elem_last = (done_beats + LEN_W'(1) >= beats);
  assign info_pop        = beat && rx_wr_elem_last;

  always_comb begin
    rx_wr_valid = '0;
    if (beat && 32'(acc) < NUM_ACC) rx_wr_valid[acc[AW-1:0]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        done_beats <= '0;
    else if (info_pop) done_beats <= '0;
    else if (beat)     done_beats <= done_beats + LEN_W'(1);
  end
endmodule
