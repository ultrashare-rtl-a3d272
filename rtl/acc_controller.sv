// acc_controller: the controller in front of one accelerator.
//
// It holds the whole scatter-gather lists of the command its accelerator is
// running, in an RX and a TX scatter-gather queue, and two small data buffers
// of a few host pages each, rather than buffers large enough for a whole
// request. Data moves one scatter-gather element at a time:
//   * RX requester: requests the head RX element (rx_req, to the RX data
//     request scheduler) only when the RX buffer has room for the whole
//     element, counting data already requested and still on its way
//     (rx_reserved). rx_ack pops the element.
//   * RX data arriving from the data distributor (rx_wr_*) is written to the
//     RX buffer; the beat that ends the command's last RX element is marked, so
//     the accelerator sees tlast at the end of the command's input.
//   * Bus protocol: the RX buffer drives the accelerator's AXI4-Stream input
//     (m_axis_*); the accelerator's AXI4-Stream output (s_axis_*) fills the TX
//     buffer. Only AXI4-Stream is provided; the accelerator's output tlast is
//     not used, the TX list alone decides where the output ends.
//   * TX requester: requests the head TX element (tx_req) only when the TX
//     buffer holds all of its data not already promised to an earlier element
//     (tx_committed). The data submitter then reads those beats (tx_rd_en).
//   * Acc status: status = 1 means idle. claim (from the allocator) makes the
//     accelerator busy; start (from the scatter-gather distributor) loads the
//     command's element counts and ids. When every TX element has been granted
//     and its data read, cpl_valid offers the completion record; once it is
//     taken the accelerator is idle again.
//
// Lengths are in bytes and must be whole DATA_W beats and at most BUF_DEPTH
// beats (one page suits the default buffers); a longer element is never
// requested, and its command does not finish. Handshakes: rx_req/tx_req are
// held until acked; m_axis/s_axis/cpl are valid/ready.
//
// Paper: the queues, buffers, requesters and their space/data rules, the
// status, buffers of a few pages. Own choices: widths and depths, tlast
// generation, the completion record and the exact moment status returns idle.
module acc_controller
  import us_pkg::*;
#(
  parameter int unsigned DATA_W    = 128,
  parameter int unsigned BUF_DEPTH = 1024,   // 4 pages of 128-bit beats
  parameter int unsigned SGQ_DEPTH = 512,
  localparam int unsigned BW  = $clog2(BUF_DEPTH) + 1,
  localparam int unsigned BSH = $clog2(DATA_W / 8)
) (
  input  logic              clk,
  input  logic              rst_n,
  // status and command start
  input  logic              claim,
  output logic              status,
  input  logic              start,
  input  req_info_t         start_info,
  // scatter-gather queues
  input  logic              rx_sg_push,
  input  logic              tx_sg_push,
  input  sg_elem_t          sg_elem,
  output logic              rx_sg_full,
  output logic              tx_sg_full,
  // RX data request / data
  output logic              rx_req,
  output sg_elem_t          rx_req_elem,
  input  logic              rx_ack,
  input  logic              rx_wr_valid,
  input  logic [DATA_W-1:0] rx_wr_data,
  input  logic              rx_wr_elem_last,
  // TX data request / data
  output logic              tx_req,
  output sg_elem_t          tx_req_elem,
  input  logic              tx_ack,
  input  logic              tx_rd_en,
  output logic [DATA_W-1:0] tx_rd_data,
  // accelerator, AXI4-Stream
  output logic [DATA_W-1:0] m_axis_tdata,
  output logic              m_axis_tvalid,
  output logic              m_axis_tlast,
  input  logic              m_axis_tready,
  input  logic [DATA_W-1:0] s_axis_tdata,
  input  logic              s_axis_tvalid,
  input  logic              s_axis_tlast,
  output logic              s_axis_tready,
  // completion
  output logic              cpl_valid,
  output cpl_t              cpl,
  input  logic              cpl_ready
);
  localparam int unsigned SW = $clog2(SGQ_DEPTH) + 1;

  // ---------------- scatter-gather queues ----------------
  logic rx_sg_empty, tx_sg_empty;
  logic [SW-1:0] rx_sg_cnt, tx_sg_cnt;

  sync_fifo #(.WIDTH($bits(sg_elem_t)), .DEPTH(SGQ_DEPTH)) u_rx_sgq (
    .clk, .rst_n, .wr_en(rx_sg_push), .wr_data(sg_elem), .rd_en(rx_ack),
    .rd_data(rx_req_elem), .empty(rx_sg_empty), .full(rx_sg_full), .count(rx_sg_cnt));

  sync_fifo #(.WIDTH($bits(sg_elem_t)), .DEPTH(SGQ_DEPTH)) u_tx_sgq (
    .clk, .rst_n, .wr_en(tx_sg_push), .wr_data(sg_elem), .rd_en(tx_ack),
    .rd_data(tx_req_elem), .empty(tx_sg_empty), .full(tx_sg_full), .count(tx_sg_cnt));

  // ---------------- command state ----------------
  logic               busy, active;
  logic [NELEM_W-1:0] rx_nelem, tx_nelem, rx_elems_in, tx_elems_acked;
  cpl_t               cur;

  assign status = !busy;

  // ---------------- RX buffer ----------------
  logic [BW-1:0]   rx_cnt, rx_reserved, rx_free;
  logic [LEN_W-1:0] rx_beats;
  logic            rx_buf_empty, rx_buf_full, rx_cmd_last;
  logic [DATA_W:0] rx_head;

  assign rx_beats    = rx_req_elem.len >> BSH;
  assign rx_free     = BW'(BUF_DEPTH) - rx_cnt - rx_reserved;
  assign rx_req      = !rx_sg_empty && rx_beats != '0 && rx_beats <= LEN_W'(rx_free);
  assign rx_cmd_last = rx_wr_elem_last && (rx_elems_in + NELEM_W'(1) >= rx_nelem);

  sync_fifo #(.WIDTH(DATA_W + 1), .DEPTH(BUF_DEPTH)) u_rx_buf (
    .clk, .rst_n, .wr_en(rx_wr_valid), .wr_data({rx_cmd_last, rx_wr_data}),
    .rd_en(m_axis_tvalid && m_axis_tready), .rd_data(rx_head),
    .empty(rx_buf_empty), .full(rx_buf_full), .count(rx_cnt));

  assign m_axis_tvalid = !rx_buf_empty;
  assign m_axis_tdata  = rx_head[DATA_W-1:0];
  assign m_axis_tlast  = rx_head[DATA_W];

  // ---------------- TX buffer ----------------
  logic [BW-1:0]    tx_cnt, tx_committed;
  logic [LEN_W-1:0] tx_beats;
  logic          tx_buf_empty, tx_buf_full;

  sync_fifo #(.WIDTH(DATA_W), .DEPTH(BUF_DEPTH)) u_tx_buf (
    .clk, .rst_n, .wr_en(s_axis_tvalid && s_axis_tready), .wr_data(s_axis_tdata),
    .rd_en(tx_rd_en), .rd_data(tx_rd_data),
    .empty(tx_buf_empty), .full(tx_buf_full), .count(tx_cnt));

  assign s_axis_tready = !tx_buf_full;
  assign tx_beats      = tx_req_elem.len >> BSH;
  assign tx_req        = !tx_sg_empty && tx_beats != '0 && tx_beats <= LEN_W'(tx_cnt - tx_committed);

  // ---------------- completion ----------------
  assign cpl_valid = active && (tx_elems_acked >= tx_nelem) && (tx_committed == '0);
  assign cpl       = cur;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy           <= 1'b0;
      active         <= 1'b0;
      rx_nelem       <= '0;
      tx_nelem       <= '0;
      rx_elems_in    <= '0;
      tx_elems_acked <= '0;
      cur            <= '0;
      rx_reserved    <= '0;
      tx_committed   <= '0;
    end else begin
      if (claim) busy <= 1'b1;
      if (start) begin
        active         <= 1'b1;
        rx_nelem       <= (start_info.rx_nelem == '0) ? NELEM_W'(1) : start_info.rx_nelem;
        tx_nelem       <= (start_info.tx_nelem == '0) ? NELEM_W'(1) : start_info.tx_nelem;
        rx_elems_in    <= '0;
        tx_elems_acked <= '0;
        cur            <= '{cmd_id: start_info.cmd_id, core_id: start_info.core_id};
      end else begin
        if (rx_wr_valid && rx_wr_elem_last) rx_elems_in <= rx_elems_in + NELEM_W'(1);
        if (tx_ack) tx_elems_acked <= tx_elems_acked + NELEM_W'(1);
      end
      if (cpl_valid && cpl_ready) begin
        busy   <= 1'b0;
        active <= 1'b0;
      end
      rx_reserved  <= rx_reserved  + (rx_ack ? BW'(rx_beats) : '0) - BW'(rx_wr_valid);
      tx_committed <= tx_committed + (tx_ack ? BW'(tx_beats) : '0) - BW'(tx_rd_en);
    end
  end

  // ---------------- rules of the interfaces ----------------
  a_rx_ack:  assert property (@(posedge clk) disable iff (!rst_n) rx_ack |-> rx_req);
  a_tx_ack:  assert property (@(posedge clk) disable iff (!rst_n) tx_ack |-> tx_req);
  a_rx_room: assert property (@(posedge clk) disable iff (!rst_n) rx_wr_valid |-> !rx_buf_full);
  a_rx_exp:  assert property (@(posedge clk) disable iff (!rst_n) rx_wr_valid |-> rx_reserved != '0);
  a_tx_rd:   assert property (@(posedge clk) disable iff (!rst_n) tx_rd_en |-> tx_committed != '0);
  a_m_hold:  assert property (@(posedge clk) disable iff (!rst_n)
                              m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid);
endmodule
