// tx_sg_requester: issues granted TX elements to the DMA.
//
// When the TX scheduler grants accelerator g the requester registers a DMA
// write request for that element (address, length). In the cycle the DMA
// accepts it, (accelerator, length in beats) is queued for the data
// submitter, which then streams that many beats from the accelerator's TX
// buffer; so the DMA always has a write request before its data. ready tells
// the scheduler it can grant: the output register is free or being emptied.
//
// Handshake: valid/ready on tx_req_*; the request is only offered while the
// submit queue has room. Timing: a grant in cycle n is presented to the DMA
// in cycle n+1; its data can start in the cycle after acceptance.
//
// Paper: a request carries an address and a length. Own choices: the queue to
// the data submitter, the register stage and the handshake.
module tx_sg_requester
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
  output logic         tx_req_valid,
  output dma_req_t     tx_req,
  input  logic         tx_req_ready,
  output logic         sub_push,
  output logic [ACC_IDX_W+LEN_W-1:0] sub_data,    // {accelerator, beats}
  input  logic         sub_full
);
  localparam int unsigned BSH = $clog2(DATA_W / 8);

  logic pend;        // a registered request waits for the DMA
  logic accept;

  assign tx_req_valid = pend && !sub_full;
  assign accept       = tx_req_valid && tx_req_ready;
  assign ready        = !pend || accept;
  assign sub_push     = accept;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend     <= 1'b0;
      tx_req   <= '0;
      sub_data <= '0;
    end else begin
      if (accept) pend <= 1'b0;
      if (grant) begin
        pend     <= 1'b1;
        tx_req   <= '{addr: grant_elem.addr, len: grant_elem.len};
        sub_data <= {ACC_IDX_W'(grant_idx), grant_elem.len >> BSH};
      end
    end
  end

  a_grant_ok: assert property (@(posedge clk) disable iff (!rst_n) grant |-> ready);
endmodule
