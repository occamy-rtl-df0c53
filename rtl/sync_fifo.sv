// Synchronous first-in first-out buffer.
//
// Used as the data FIFO of each streaming unit, between the memory side and
// the FPU register interface, and as a beat buffer in the DMA. A push and a
// pop may happen in the same cycle, also when the FIFO is full (the pop frees
// the slot). The head is visible on rdata_o whenever empty_o is low
// (first-word fall-through). usage_o counts stored entries. Depth is a
// parameter; the paper does not give it.
module sync_fifo #(
  parameter int unsigned DEPTH = 4,
  parameter int unsigned WIDTH = 64,
  localparam int unsigned PW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             flush_i,
  input  logic             push_i,
  input  logic [WIDTH-1:0] wdata_i,
  input  logic             pop_i,
  output logic [WIDTH-1:0] rdata_o,
  output logic             full_o,
  output logic             empty_o,
  output logic [PW:0]      usage_o
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0] rptr, wptr;
  logic [PW:0]   cnt;

  assign full_o  = (cnt == DEPTH[PW:0]);
  assign empty_o = (cnt == '0);
  assign usage_o = cnt;
  assign rdata_o = mem[rptr];

  logic do_push, do_pop;
  assign do_pop  = pop_i && !empty_o;
  assign do_push = push_i && (!full_o || do_pop);

  function automatic logic [PW-1:0] incr(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rptr <= '0; wptr <= '0; cnt <= '0;
    end else if (flush_i) begin
      rptr <= '0; wptr <= '0; cnt <= '0;
    end else begin
      if (do_push) wptr <= incr(wptr);
      if (do_pop)  rptr <= incr(rptr);
      cnt <= cnt + {{PW{1'b0}}, do_push} - {{PW{1'b0}}, do_pop};
    end
  end

  always_ff @(posedge clk_i) if (do_push) mem[wptr] <= wdata_i;

  assert property (@(posedge clk_i) disable iff (!rst_ni) !(push_i && full_o && !pop_i))
    else $error("push into full FIFO");
endmodule
