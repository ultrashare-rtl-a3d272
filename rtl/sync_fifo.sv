// sync_fifo: synchronous first-word-fall-through FIFO.
//
// Every queue and buffer of the controller is one of these: the per-group
// command queues, the request information queue, each accelerator's RX/TX
// scatter-gather queues and RX/TX data buffers, and the data request
// information queue. The paper calls these simple FIFOs held in block RAM; the
// storage here is a plain array that synthesis maps to block RAM.
//
// Interface: push with wr_en/wr_data, pop with rd_en; rd_data always shows the
// head entry while empty is low (first word fall through). A push when full or
// a pop when empty is ignored. count is the number of stored entries. Push and
// pop in the same cycle are both performed. All state is reset to empty.
// Timing: an entry pushed in cycle n is visible at rd_data in cycle n+1.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [AW:0]      count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             do_wr, do_rd;

  assign empty = (count == '0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;
  assign rd_data = mem[rptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= inc(wptr);
      if (do_rd) rptr <= inc(rptr);
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end
endmodule
