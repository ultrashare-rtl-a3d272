// stream_acc_model: behavioural model of a streaming accelerator (not
// synthesizable intent; for testbenches only).
//
// Stands in for the third-party accelerators the controller serves (an
// RGB to YCbCr converter, an AES-128 core): one AXI4-Stream input, one
// AXI4-Stream output, one output beat per input beat. Each beat is held for
// CYCLES_PER_BEAT cycles of "processing" (counted from when it reaches the
// head of the model's 4-entry queue) before it is offered, so instances
// with different values behave like faster and slower accelerator types. The
// transform keeps the upper 64 bits (a tag the testbench uses to trace data)
// and XORs the lower 64 bits with a key derived from KEY. tlast is passed
// through with its beat. All state changes on the clock edge, so the model
// can face the design under test without races.
module stream_acc_model #(
  parameter int unsigned DATA_W          = 128,
  parameter int unsigned CYCLES_PER_BEAT = 1,
  parameter logic [63:0] KEY             = 64'h0123_4567_89AB_CDEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DATA_W-1:0] s_tdata,
  input  logic              s_tvalid,
  input  logic              s_tlast,
  output logic              s_tready,
  output logic [DATA_W-1:0] m_tdata,
  output logic              m_tvalid,
  output logic              m_tlast,
  input  logic              m_tready
);
  logic [DATA_W:0] mem [4];
  logic [1:0]      rd_p, wr_p;
  logic [2:0]      cnt;
  int unsigned     wait_cnt;
  logic            pop, push;

  assign s_tready = cnt < 3'd4;
  assign m_tvalid = cnt != 3'd0 && wait_cnt == 0;
  assign m_tdata  = mem[rd_p][DATA_W-1:0];
  assign m_tlast  = mem[rd_p][DATA_W];
  assign pop      = m_tvalid && m_tready;
  assign push     = s_tvalid && s_tready;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_p <= '0; wr_p <= '0; cnt <= '0;
      wait_cnt <= CYCLES_PER_BEAT - 1;
      for (int i = 0; i < 4; i++) mem[i] <= '0;
    end else begin
      if (pop) begin
        rd_p     <= rd_p + 2'd1;
        wait_cnt <= CYCLES_PER_BEAT - 1;
      end else if (cnt != 3'd0 && wait_cnt != 0) begin
        wait_cnt <= wait_cnt - 1;
      end
      if (push) begin
        mem[wr_p] <= {s_tlast, s_tdata[DATA_W-1:64], s_tdata[63:0] ^ KEY};
        wr_p      <= wr_p + 2'd1;
      end
      cnt <= cnt + {2'b0, push} - {2'b0, pop};
    end
  end
endmodule
