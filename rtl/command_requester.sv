// command_requester: turns an allocated command into DMA list fetches.
//
// When the allocator offers a command (alloc_valid) the requester takes it,
// then submits two requests on the DMA scatter-gather list fetch port: first
// the RX list, then the TX list, each with the host address from the command
// and a length of sgl_words(n) * 8 bytes (the compacted list format: one
// 64-bit word per element address plus the first and last length). Before
// the first request it writes a request information entry (accelerator,
// element counts, command id, core id), so the entry is always there when the
// lists come back. When the TX list request is accepted it pulses req_done so
// the allocator can go on with the next queue.
//
// Handshake: valid/ready on sgl_req; the information entry waits for
// info_full to be low. Timing: at least 3 cycles from taking a command to
// req_done.
//
// Paper: its job, the request information it stores and the signal back to the
// allocator. Own choices: the order RX then TX, list lengths derived from the
// element counts, the handshakes.
module command_requester
  import us_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 alloc_valid,
  output logic                 alloc_ready,
  input  qcmd_t                alloc_cmd,
  input  logic [ACC_IDX_W-1:0] alloc_idx,
  output logic                 req_done,
  // DMA: fetch a scatter-gather list
  output logic                 sgl_req_valid,
  output dma_req_t             sgl_req,
  input  logic                 sgl_req_ready,
  // request information queue
  output logic                 info_push,
  output req_info_t            info_data,
  input  logic                 info_full
);
  typedef enum logic [1:0] {S_IDLE, S_RX, S_TX, S_INFO} state_e;
  state_e               state;
  qcmd_t                cmd;
  logic [ACC_IDX_W-1:0] acc;

  assign alloc_ready   = (state == S_IDLE);
  assign sgl_req_valid = (state == S_RX) || (state == S_TX);

  always_comb begin
    sgl_req = '0;
    if (state == S_TX) begin
      sgl_req.addr = cmd.tx_sgl_addr;
      sgl_req.len  = LEN_W'(sgl_words(cmd.tx_nelem)) << 3;
    end else begin
      sgl_req.addr = cmd.rx_sgl_addr;
      sgl_req.len  = LEN_W'(sgl_words(cmd.rx_nelem)) << 3;
    end
  end

  assign info_push = (state == S_INFO) && !info_full;
  assign info_data = '{acc: acc, rx_nelem: cmd.rx_nelem, tx_nelem: cmd.tx_nelem,
                       cmd_id: cmd.cmd_id, core_id: cmd.core_id};
  assign req_done  = (state == S_TX) && sgl_req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cmd   <= '0;
      acc   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (alloc_valid) begin
          cmd   <= alloc_cmd;
          acc   <= alloc_idx;
          state <= S_INFO;
        end
        S_INFO: if (!info_full)    state <= S_RX;
        S_RX:   if (sgl_req_ready) state <= S_TX;
        S_TX:   if (sgl_req_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // The info entry is only written when there is room for it.
  a_info_room: assert property (@(posedge clk) disable iff (!rst_n) info_push |-> !info_full);
endmodule
