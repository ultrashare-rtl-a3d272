// ultrashare_top: hardware controller that lets several host applications
// share a set of streaming FPGA accelerators.
//
// Data flow (all streams valid/ready):
//   host command stream -> command_detector -> one command queue per
//   accelerator group -> acc_allocator (round-robin over the queues, picks the
//   lowest-numbered idle accelerator of the group) -> command_requester (asks
//   the DMA for the command's RX and TX scatter-gather lists, records the
//   allocation in the request information queue) -> lists come back on sgl_*
//   -> sg_decoder -> sg_distributor -> the allocated acc_controller's RX/TX
//   scatter-gather queues -> rx_tx_data_manager moves the data element by
//   element under weighted round-robin, RX and TX independently -> completion
//   records leave on cpl_* through cpl_arbiter.
//
// Outside this module: the DMA engine (its five streams: command, list fetch
// request and data, RX request and data, TX request and data) and the
// accelerators (one AXI4-Stream input acc_in_* and output acc_out_* each).
// The DMA must answer list fetches and RX reads in the order it got them.
//
// Configuration commands set the accelerator group table (which accelerators
// form each group, which group serves each type) and the data priority weights
// at run time.
//
// The structure and the algorithms follow the paper; widths, depths, command
// encoding, handshakes and the completion stream are this design's choices.
module ultrashare_top
  import us_pkg::*;
#(
  parameter int unsigned NUM_ACC    = 9,
  parameter int unsigned NUM_GROUPS = 3,
  parameter int unsigned NUM_TYPES  = 16,
  parameter int unsigned DATA_W     = 128,
  parameter int unsigned CMDQ_DEPTH = 64,
  parameter int unsigned INFO_DEPTH = 16,
  parameter int unsigned BUF_DEPTH  = 1024,
  parameter int unsigned SGQ_DEPTH  = 512
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // commands from the host
  input  logic                             cmd_valid,
  input  logic [CMD_W-1:0]                 cmd_data,
  output logic                             cmd_ready,
  // scatter-gather list fetch
  output logic                             sgl_req_valid,
  output dma_req_t                         sgl_req,
  input  logic                             sgl_req_ready,
  input  logic                             sgl_valid,
  input  logic [SGW_W-1:0]                 sgl_data,
  output logic                             sgl_ready,
  // RX data (host -> accelerators)
  output logic                             rx_req_valid,
  output dma_req_t                         rx_req,
  input  logic                             rx_req_ready,
  input  logic                             rx_data_valid,
  input  logic [DATA_W-1:0]                rx_data,
  output logic                             rx_data_ready,
  // TX data (accelerators -> host)
  output logic                             tx_req_valid,
  output dma_req_t                         tx_req,
  input  logic                             tx_req_ready,
  output logic                             tx_data_valid,
  output logic [DATA_W-1:0]                tx_data,
  output logic                             tx_data_last,
  input  logic                             tx_data_ready,
  // completions to the host
  output logic                             cpl_valid,
  output cpl_t                             cpl,
  output logic [ACC_IDX_W-1:0]             cpl_acc,
  input  logic                             cpl_ready,
  // accelerators, AXI4-Stream
  output logic [NUM_ACC-1:0][DATA_W-1:0]   acc_in_tdata,
  output logic [NUM_ACC-1:0]               acc_in_tvalid,
  output logic [NUM_ACC-1:0]               acc_in_tlast,
  input  logic [NUM_ACC-1:0]               acc_in_tready,
  input  logic [NUM_ACC-1:0][DATA_W-1:0]   acc_out_tdata,
  input  logic [NUM_ACC-1:0]               acc_out_tvalid,
  input  logic [NUM_ACC-1:0]               acc_out_tlast,
  output logic [NUM_ACC-1:0]               acc_out_tready,
  // accelerator status, 1 = idle (observation)
  output logic [NUM_ACC-1:0]               acc_status
);
  localparam int unsigned GW = (NUM_GROUPS > 1) ? $clog2(NUM_GROUPS) : 1;
  localparam int unsigned TW = (NUM_TYPES  > 1) ? $clog2(NUM_TYPES)  : 1;
  localparam int unsigned IQW = $clog2(INFO_DEPTH) + 1;

  // ---------------- multi-queue accelerator request ----------------
  logic [TYPE_W-1:0]   type_lookup;
  logic [GW-1:0]       lookup_grp;
  logic                grp_we, type_we, prio_we;
  logic [15:0]         cfg_index;
  logic [63:0]         cfg_value;
  logic [NUM_GROUPS-1:0] q_push, q_pop, q_empty, q_full;
  qcmd_t               q_wdata;
  qcmd_t               q_head [NUM_GROUPS];
  logic [NUM_GROUPS-1:0][NUM_ACC-1:0] acc_map;
  logic [NUM_ACC-1:0][7:0] acc_weight;

  command_detector #(.NUM_GROUPS(NUM_GROUPS)) u_detector (
    .cmd_valid, .cmd_data, .cmd_ready, .type_lookup, .lookup_grp,
    .grp_we, .type_we, .prio_we, .cfg_index, .cfg_value,
    .q_push, .q_data(q_wdata), .q_full);

  acc_group_table #(.NUM_ACC(NUM_ACC), .NUM_GROUPS(NUM_GROUPS), .NUM_TYPES(NUM_TYPES)) u_group_table (
    .clk, .rst_n, .grp_we, .grp_idx(cfg_index), .grp_mask(cfg_value[NUM_ACC-1:0]),
    .type_we, .type_idx(cfg_index), .type_grp(cfg_value[GW-1:0]),
    .type_lookup(type_lookup[TW-1:0]), .lookup_grp, .acc_map);

  data_priority_table #(.NUM_ACC(NUM_ACC), .WEIGHT_W(8)) u_prio_table (
    .clk, .rst_n, .we(prio_we), .idx(cfg_index), .weight(cfg_value[7:0]), .acc_weight);

  command_queues #(.NUM_GROUPS(NUM_GROUPS), .DEPTH(CMDQ_DEPTH)) u_cmd_queues (
    .clk, .rst_n, .push(q_push), .push_data(q_wdata), .pop(q_pop),
    .head(q_head), .empty(q_empty), .full(q_full));

  // ---------------- dynamic accelerator allocation ----------------
  logic                 alloc_valid, alloc_ready, req_done;
  qcmd_t                alloc_cmd;
  logic [GW-1:0]        alloc_grp;
  logic [NUM_ACC-1:0]   alloc_onehot, claim;
  logic [ACC_IDX_W-1:0] alloc_idx;
  logic                 ri_push, ri_pop, ri_empty, ri_full;
  req_info_t            ri_wdata, ri_head;
  logic [IQW-1:0]       ri_cnt;

  acc_allocator #(.NUM_ACC(NUM_ACC), .NUM_GROUPS(NUM_GROUPS)) u_allocator (
    .clk, .rst_n, .acc_status, .acc_map, .q_head, .q_empty, .q_pop,
    .alloc_valid, .alloc_ready, .alloc_cmd, .alloc_grp, .alloc_onehot, .alloc_idx,
    .claim, .req_done);

  command_requester u_cmd_requester (
    .clk, .rst_n, .alloc_valid, .alloc_ready, .alloc_cmd, .alloc_idx, .req_done,
    .sgl_req_valid, .sgl_req, .sgl_req_ready,
    .info_push(ri_push), .info_data(ri_wdata), .info_full(ri_full));

  sync_fifo #(.WIDTH($bits(req_info_t)), .DEPTH(INFO_DEPTH)) u_req_info_q (
    .clk, .rst_n, .wr_en(ri_push), .wr_data(ri_wdata), .rd_en(ri_pop),
    .rd_data(ri_head), .empty(ri_empty), .full(ri_full), .count(ri_cnt));

  // ---------------- scatter-gather ----------------
  logic               el_valid, el_ready;
  sg_tagged_t         el;
  logic [NUM_ACC-1:0] rx_sg_push, tx_sg_push, rx_sg_full, tx_sg_full, start;
  sg_elem_t           sg_elem;
  req_info_t          start_info;

  sg_decoder u_sg_decoder (
    .clk, .rst_n, .sgl_valid, .sgl_data, .sgl_ready,
    .info_empty(ri_empty), .info_head(ri_head), .info_pop(ri_pop),
    .elem_valid(el_valid), .elem_out(el), .elem_ready(el_ready));

  sg_distributor #(.NUM_ACC(NUM_ACC)) u_sg_distributor (
    .elem_valid(el_valid), .elem_in(el), .elem_ready(el_ready),
    .rx_sg_push, .tx_sg_push, .sg_elem, .rx_sg_full, .tx_sg_full,
    .start, .start_info);

  // ---------------- accelerator controllers ----------------
  logic [NUM_ACC-1:0] c_rx_req, c_rx_ack, c_rx_wr_valid, c_tx_req, c_tx_ack, c_tx_rd_en;
  sg_elem_t           c_rx_elem [NUM_ACC];
  sg_elem_t           c_tx_elem [NUM_ACC];
  logic [DATA_W-1:0]  c_rx_wr_data;
  logic               c_rx_wr_last;
  logic [DATA_W-1:0]  c_tx_rd_data [NUM_ACC];
  logic [NUM_ACC-1:0] c_cpl_valid, c_cpl_ready;
  cpl_t               c_cpl [NUM_ACC];

  for (genvar i = 0; i < NUM_ACC; i++) begin : g_acc
    acc_controller #(.DATA_W(DATA_W), .BUF_DEPTH(BUF_DEPTH), .SGQ_DEPTH(SGQ_DEPTH)) u_ctrl (
      .clk, .rst_n,
      .claim(claim[i]), .status(acc_status[i]), .start(start[i]), .start_info,
      .rx_sg_push(rx_sg_push[i]), .tx_sg_push(tx_sg_push[i]), .sg_elem,
      .rx_sg_full(rx_sg_full[i]), .tx_sg_full(tx_sg_full[i]),
      .rx_req(c_rx_req[i]), .rx_req_elem(c_rx_elem[i]), .rx_ack(c_rx_ack[i]),
      .rx_wr_valid(c_rx_wr_valid[i]), .rx_wr_data(c_rx_wr_data), .rx_wr_elem_last(c_rx_wr_last),
      .tx_req(c_tx_req[i]), .tx_req_elem(c_tx_elem[i]), .tx_ack(c_tx_ack[i]),
      .tx_rd_en(c_tx_rd_en[i]), .tx_rd_data(c_tx_rd_data[i]),
      .m_axis_tdata(acc_in_tdata[i]), .m_axis_tvalid(acc_in_tvalid[i]),
      .m_axis_tlast(acc_in_tlast[i]), .m_axis_tready(acc_in_tready[i]),
      .s_axis_tdata(acc_out_tdata[i]), .s_axis_tvalid(acc_out_tvalid[i]),
      .s_axis_tlast(acc_out_tlast[i]), .s_axis_tready(acc_out_tready[i]),
      .cpl_valid(c_cpl_valid[i]), .cpl(c_cpl[i]), .cpl_ready(c_cpl_ready[i]));
  end

  // ---------------- data transfer ----------------
  rx_tx_data_manager #(.NUM_ACC(NUM_ACC), .DATA_W(DATA_W), .WEIGHT_W(8), .INFO_DEPTH(INFO_DEPTH)) u_data_mgr (
    .clk, .rst_n, .acc_weight,
    .rx_req(c_rx_req), .rx_req_elem(c_rx_elem), .rx_ack(c_rx_ack),
    .rx_wr_valid(c_rx_wr_valid), .rx_wr_data(c_rx_wr_data), .rx_wr_elem_last(c_rx_wr_last),
    .tx_req(c_tx_req), .tx_req_elem(c_tx_elem), .tx_ack(c_tx_ack),
    .tx_rd_en(c_tx_rd_en), .tx_rd_data(c_tx_rd_data),
    .dma_rx_req_valid(rx_req_valid), .dma_rx_req(rx_req), .dma_rx_req_ready(rx_req_ready),
    .dma_rx_data_valid(rx_data_valid), .dma_rx_data(rx_data), .dma_rx_data_ready(rx_data_ready),
    .dma_tx_req_valid(tx_req_valid), .dma_tx_req(tx_req), .dma_tx_req_ready(tx_req_ready),
    .dma_tx_data_valid(tx_data_valid), .dma_tx_data(tx_data), .dma_tx_data_last(tx_data_last),
    .dma_tx_data_ready(tx_data_ready));

  // ---------------- completions ----------------
  cpl_arbiter #(.NUM_ACC(NUM_ACC)) u_cpl_arb (
    .clk, .rst_n, .cpl_valid(c_cpl_valid), .cpl_in(c_cpl), .cpl_ready(c_cpl_ready),
    .out_valid(cpl_valid), .out_cpl(cpl), .out_acc(cpl_acc), .out_ready(cpl_ready));
endmodule
