// rx_tx_data_manager: moves data between the DMA and the accelerator
// controllers, one scatter-gather element at a time.
//
// Two independent paths, so an RX and a TX transfer can run at the same time:
//   RX: data_req_scheduler (weights from the data priority table) picks one
//       requesting controller -> rx_sg_requester issues the DMA read and writes
//       the data request information queue -> data_distributor sends the
//       returning beats to that controller's RX buffer.
//   TX: data_req_scheduler picks one controller whose TX buffer holds a whole
//       element -> tx_sg_requester issues the DMA write request and queues the
//       element -> data_submitter streams the element's beats from that
//       controller's TX buffer to the DMA.
// Because elements of different accelerators interleave freely, the weights
// decide how the PCIe bandwidth is shared.
//
// Interface: per-controller request/ack and data ports (arrays indexed by
// accelerator), the shared weights, and the DMA's RX request, RX data, TX
// request and TX data streams (valid/ready). INFO_DEPTH bounds the RX and TX
// elements in flight.
//
// Paper: the parts and how they connect (Fig. 3), separate RX and TX paths.
// Own choices: queue depths, handshakes, in-order DMA answers.
module rx_tx_data_manager
  import us_pkg::*;
#(
  parameter int unsigned NUM_ACC    = 9,
  parameter int unsigned DATA_W     = 128,
  parameter int unsigned WEIGHT_W   = 8,
  parameter int unsigned INFO_DEPTH = 16
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [NUM_ACC-1:0][WEIGHT_W-1:0]  acc_weight,
  // controllers
  input  logic [NUM_ACC-1:0]                rx_req,
  input  sg_elem_t                          rx_req_elem [NUM_ACC],
  output logic [NUM_ACC-1:0]                rx_ack,
  output logic [NUM_ACC-1:0]                rx_wr_valid,
  output logic [DATA_W-1:0]                 rx_wr_data,
  output logic                              rx_wr_elem_last,
  input  logic [NUM_ACC-1:0]                tx_req,
  input  sg_elem_t                          tx_req_elem [NUM_ACC],
  output logic [NUM_ACC-1:0]                tx_ack,
  output logic [NUM_ACC-1:0]                tx_rd_en,
  input  logic [DATA_W-1:0]                 tx_rd_data [NUM_ACC],
  // DMA
  output logic                              dma_rx_req_valid,
  output dma_req_t                          dma_rx_req,
  input  logic                              dma_rx_req_ready,
  input  logic                              dma_rx_data_valid,
  input  logic [DATA_W-1:0]                 dma_rx_data,
  output logic                              dma_rx_data_ready,
  output logic                              dma_tx_req_valid,
  output dma_req_t                          dma_tx_req,
  input  logic                              dma_tx_req_ready,
  output logic                              dma_tx_data_valid,
  output logic [DATA_W-1:0]                 dma_tx_data,
  output logic                              dma_tx_data_last,
  input  logic                              dma_tx_data_ready
);
  localparam int unsigned AW = (NUM_ACC > 1) ? $clog2(NUM_ACC) : 1;
  localparam int unsigned IW = ACC_IDX_W + LEN_W;
  localparam int unsigned QW = $clog2(INFO_DEPTH) + 1;

  // ---------------- RX path ----------------
  logic          rx_en, rx_grant;
  logic [AW-1:0] rx_idx;
  logic          ri_push, ri_pop, ri_empty, ri_full;
  logic [IW-1:0] ri_wdata, ri_head;
  logic [QW-1:0] ri_cnt;

  data_req_scheduler #(.NUM_ACC(NUM_ACC), .WEIGHT_W(WEIGHT_W)) u_rx_sched (
    .clk, .rst_n, .req(rx_req), .acc_weight, .en(rx_en), .ack(rx_ack), .ack_idx(rx_idx));

  assign rx_grant = |rx_ack;

  rx_sg_requester #(.NUM_ACC(NUM_ACC), .DATA_W(DATA_W)) u_rx_sgr (
    .clk, .rst_n, .grant(rx_grant), .grant_idx(rx_idx), .grant_elem(rx_req_elem[rx_idx]),
    .ready(rx_en), .rx_req_valid(dma_rx_req_valid), .rx_req(dma_rx_req),
    .rx_req_ready(dma_rx_req_ready), .info_push(ri_push), .info_data(ri_wdata),
    .info_full(ri_full));

  sync_fifo #(.WIDTH(IW), .DEPTH(INFO_DEPTH)) u_rx_info (
    .clk, .rst_n, .wr_en(ri_push), .wr_data(ri_wdata), .rd_en(ri_pop),
    .rd_data(ri_head), .empty(ri_empty), .full(ri_full), .count(ri_cnt));

  data_distributor #(.NUM_ACC(NUM_ACC), .DATA_W(DATA_W)) u_dist (
    .clk, .rst_n, .rx_data_valid(dma_rx_data_valid), .rx_data(dma_rx_data),
    .rx_data_ready(dma_rx_data_ready), .info_empty(ri_empty), .info_head(ri_head),
    .info_pop(ri_pop), .rx_wr_valid, .rx_wr_data, .rx_wr_elem_last);

  // ---------------- TX path ----------------
  logic          tx_en, tx_grant;
  logic [AW-1:0] tx_idx;
  logic          sq_push, sq_pop, sq_empty, sq_full;
  logic [IW-1:0] sq_wdata, sq_head;
  logic [QW-1:0] sq_cnt;

  data_req_scheduler #(.NUM_ACC(NUM_ACC), .WEIGHT_W(WEIGHT_W)) u_tx_sched (
    .clk, .rst_n, .req(tx_req), .acc_weight, .en(tx_en), .ack(tx_ack), .ack_idx(tx_idx));

  assign tx_grant = |tx_ack;

  tx_sg_requester #(.NUM_ACC(NUM_ACC), .DATA_W(DATA_W)) u_tx_sgr (
    .clk, .rst_n, .grant(tx_grant), .grant_idx(tx_idx), .grant_elem(tx_req_elem[tx_idx]),
    .ready(tx_en), .tx_req_valid(dma_tx_req_valid), .tx_req(dma_tx_req),
    .tx_req_ready(dma_tx_req_ready), .sub_push(sq_push), .sub_data(sq_wdata),
    .sub_full(sq_full));

  sync_fifo #(.WIDTH(IW), .DEPTH(INFO_DEPTH)) u_tx_sub (
    .clk, .rst_n, .wr_en(sq_push), .wr_data(sq_wdata), .rd_en(sq_pop),
    .rd_data(sq_head), .empty(sq_empty), .full(sq_full), .count(sq_cnt));

  data_submitter #(.NUM_ACC(NUM_ACC), .DATA_W(DATA_W)) u_sub (
    .clk, .rst_n, .sub_empty(sq_empty), .sub_head(sq_head), .sub_pop(sq_pop),
    .tx_rd_en, .tx_rd_data, .tx_data_valid(dma_tx_data_valid), .tx_data(dma_tx_data),
    .tx_data_last(dma_tx_data_last), .tx_data_ready(dma_tx_data_ready));
endmodule
