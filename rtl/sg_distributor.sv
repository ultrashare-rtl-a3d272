// sg_distributor: delivers scatter-gather elements to accelerator controllers.
//
// Each tagged element from the decoder names, through its request
// information, the accelerator allocated to its command. The distributor
// pushes an RX element into that controller's RX scatter-gather queue and a TX
// element into its TX queue. With the first RX element of a command it also
// pulses start for that controller and hands it the command's request
// information (element counts, command id, core id), which tells the
// controller how much data the command moves and what to report on completion.
//
// Handshake: elem_ready is low while the target queue is full. Combinational:
// pushes and start happen at the clock edge where elem_valid && elem_ready.
//
// Paper: its role (elements plus request information in, elements out to the
// allocated controller). Own choice: the start pulse with the information.
module sg_distributor
  import us_pkg::*;
#(
  parameter int unsigned NUM_ACC = 9
) (
  input  logic               elem_valid,
  input  sg_tagged_t         elem_in,
  output logic               elem_ready,
  output logic [NUM_ACC-1:0] rx_sg_push,
  output logic [NUM_ACC-1:0] tx_sg_push,
  output sg_elem_t           sg_elem,
  input  logic [NUM_ACC-1:0] rx_sg_full,
  input  logic [NUM_ACC-1:0] tx_sg_full,
  output logic [NUM_ACC-1:0] start,
  output req_info_t          start_info
);
  localparam int unsigned AW = (NUM_ACC > 1) ? $clog2(NUM_ACC) : 1;
  logic [AW-1:0] a;
  logic          in_range;

  assign a          = elem_in.info.acc[AW-1:0];
  assign in_range   = 32'(elem_in.info.acc) < NUM_ACC;
  assign sg_elem    = elem_in.elem;
  assign start_info = elem_in.info;

  always_comb begin
    rx_sg_push = '0;
    tx_sg_push = '0;
    start      = '0;
    elem_ready = 1'b1;             // an element for a missing accelerator is dropped
    if (in_range) begin
      elem_ready = elem_in.is_tx ? !tx_sg_full[a] : !rx_sg_full[a];
      if (elem_valid && elem_ready) begin
        if (elem_in.is_tx) tx_sg_push[a] = 1'b1;
        else               rx_sg_push[a] = 1'b1;
        start[a] = !elem_in.is_tx && elem_in.first;
      end
    end
  end
endmodule
