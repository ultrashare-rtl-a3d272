// rx_sg_requester: issues granted RX elements to the DMA.
//
// When the RX scheduler grants accelerator g (grant, grant_idx) the requester
// registers a DMA read request for that element (address, length) and writes
// (accelerator, length in beats) into the data request information queue, so
// the data distributor knows where the answer goes. ready tells the scheduler
// it can grant: the output register is free or being emptied, and the
// information queue has room.
//
// Handshake: valid/ready on rx_req_*. Timing: a grant in cycle n is presented
// to the DMA in cycle n+1; one grant per cycle when the DMA keeps up.
//
// Paper: a request carries an address and a length; information is stored per
// RX request. Own choices: the register stage and the handshake.
module rx_sg_requester
  import us_pkg::*;
#(
  parameter int unsigned NUM_ACC = 9,
  parameter int unsigned DATA_W  = 128,
  localparam int unsigned AW = (NUM_ACC > 1) ? $clog2(NUM_ACC) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         grant,
  input  logic [AW-1:0] grant_idx,
  input  sg_elem_t     grant_elem,
  output logic         ready,
  output logic         rx_req_valid,
  output dma_req_t     rx_req,
  input  logic         rx_req_ready,
  output logic         info_push,
  output logic [ACC_IDX_W+LEN_W-1:0] info_data,   // {accelerator, beats}
  input  logic         info_full
);
  localparam int unsigned BSH = $clog2(DATA_W / 8);

  assign ready     = (!rx_req_valid || rx_req_ready) && !info_full;
  assign info_push = grant;
  assign info_data = {ACC_IDX_W'(grant_idx), grant_elem.len >> BSH};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_req_valid <= 1'b0;
      rx_req       <= '0;
    end else begin
      if (rx_req_ready) rx_req_valid <= 1'b0;
      if (grant) begin
        rx_req_valid <= 1'b1;
        rx_req       <= '{addr: grant_elem.addr, len: grant_elem.len};
      end
    end
  end

  a_grant_ok: assert property (@(posedge clk) disable iff (!rst_n) grant |-> ready);
endmodule
