// sg_decoder: expands compacted scatter-gather lists into elements.
//
// A list describes a host buffer as pages. Only the first and the last element
// may be shorter than a page, so the list is sent without the middle lengths,
// one 64-bit word per beat:
//     n = 1 :  Len[1], Addr[1]
//     n >= 2:  Len[1], Addr[1], Addr[2], ..., Addr[n], Len[n]
// and every middle element 2..n-1 is PAGE_BYTES long. For each allocated
// command the DMA returns its RX list and then its TX list; the element counts
// come from the head of the request information queue (info_*), which this
// unit pops when it has taken the last word of the TX list. A length occupies
// the low LEN_W bits of its word.
//
// Output: one tagged element per handshake (elem_valid/elem_ready) carrying
// address, length, RX/TX, first/last-of-list flags and the command's request
// information. One register stage: a word is taken only when the output
// register is free or being emptied, so a new element can leave every cycle.
// A list word is taken only while the request information queue is not empty.
//
// Paper: the compacted format with middle lengths skipped, and the
// decoder/element terminology. Own choices: one word per beat, the word order
// read row by row from the paper's list picture, 4 KiB pages, a count of 0
// treated as 1.
module sg_decoder
  import us_pkg::*;
#(
  parameter int unsigned PAGE = PAGE_BYTES
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             sgl_valid,
  input  logic [SGW_W-1:0] sgl_data,
  output logic             sgl_ready,
  input  logic             info_empty,
  input  req_info_t        info_head,
  output logic             info_pop,
  output logic             elem_valid,
  output sg_tagged_t       elem_out,
  input  logic             elem_ready
);
  typedef enum logic [1:0] {S_LEN1, S_ADDR, S_LENN} state_e;
  state_e             state;
  logic               is_tx;
  logic [NELEM_W-1:0] idx, n;
  logic [LEN_W-1:0]   len1;
  logic [ADDR_W-1:0]  addr_n;
  logic               take, out_free;

  always_comb begin
    n = is_tx ? info_head.tx_nelem : info_head.rx_nelem;
    if (n == '0) n = NELEM_W'(1);
  end

  assign out_free  = !elem_valid || elem_ready;
  assign sgl_ready = out_free && !info_empty;
  assign take      = sgl_valid && sgl_ready;

  // the last word of a list
  logic list_end;
  assign list_end = (state == S_LENN) || (state == S_ADDR && n == NELEM_W'(1));
  assign info_pop = take && list_end && is_tx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_LEN1;
      is_tx      <= 1'b0;
      idx        <= '0;
      len1       <= '0;
      addr_n     <= '0;
      elem_valid <= 1'b0;
      elem_out   <= '0;
    end else begin
      if (elem_ready) elem_valid <= 1'b0;
      if (take) begin
        elem_out.is_tx <= is_tx;
        elem_out.info  <= info_head;
        unique case (state)
          S_LEN1: begin
            len1  <= sgl_data[LEN_W-1:0];
            idx   <= NELEM_W'(1);
            state <= S_ADDR;
          end
          S_ADDR: begin
            if (idx == n && n != NELEM_W'(1)) begin
              addr_n <= sgl_data;          // wait for Len[n]
              state  <= S_LENN;
            end else begin
              elem_valid          <= 1'b1;
              elem_out.elem.addr  <= sgl_data;
              elem_out.elem.len   <= (idx == NELEM_W'(1)) ? len1 : LEN_W'(PAGE);
              elem_out.first      <= (idx == NELEM_W'(1));
              elem_out.last       <= (n == NELEM_W'(1));
              idx                 <= idx + NELEM_W'(1);
              if (n == NELEM_W'(1)) begin
                state <= S_LEN1;
                is_tx <= !is_tx;
              end
            end
          end
          S_LENN: begin
            elem_valid         <= 1'b1;
            elem_out.elem.addr <= addr_n;
            elem_out.elem.len  <= sgl_data[LEN_W-1:0];
            elem_out.first     <= 1'b0;
            elem_out.last      <= 1'b1;
            state              <= S_LEN1;
            is_tx              <= !is_tx;
          end
          default: state <= S_LEN1;
        endcase
      end
    end
  end
endmodule
