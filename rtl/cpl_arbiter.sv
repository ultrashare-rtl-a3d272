// cpl_arbiter: round-robin merge of the accelerator controllers' completion
// records into one completion stream to the host.
//
// Each controller holds cpl_valid[i] with its record until it is taken. The
// arbiter offers the first valid record at or after its pointer and, when the
// host takes it (out_ready), acknowledges that controller (cpl_ready[i]) and
// moves the pointer past it, so no controller waits behind another forever.
// Combinational offer; the pointer is the only state.
//
// The paper only says the host waits for completions; this merge and the
// record format are this design's own.
module cpl_arbiter
  import us_pkg::*;
#(
  parameter int unsigned NUM_ACC = 9,
  localparam int unsigned AW = (NUM_ACC > 1) ? $clog2(NUM_ACC) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NUM_ACC-1:0] cpl_valid,
  input  cpl_t               cpl_in [NUM_ACC],
  output logic [NUM_ACC-1:0] cpl_ready,
  output logic               out_valid,
  output cpl_t               out_cpl,
  output logic [ACC_IDX_W-1:0] out_acc,
  input  logic               out_ready
);
  logic [AW-1:0] ptr, sel;

  always_comb begin
    sel = ptr;
    for (int d = NUM_ACC - 1; d >= 0; d--) begin
      int j;
      j = (int'(ptr) + d) % NUM_ACC;
      if (cpl_valid[j]) sel = AW'(j);
    end
  end

  assign out_valid = |cpl_valid;
  assign out_cpl   = cpl_in[sel];
  assign out_acc   = ACC_IDX_W'(sel);

  always_comb begin
    cpl_ready = '0;
    cpl_ready[sel] = out_valid && out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (out_valid && out_ready) ptr <= (32'(sel) == NUM_ACC - 1) ? '0 : sel + AW'(1);
  end
endmodule
