// sample_fifo: synchronous first-in first-out buffer for one packet channel.
//
// Holds up to DEPTH words of WIDTH bits in a plain array (a block or
// distributed RAM after synthesis). A word pushed in one cycle can be popped in
// the next; push and pop may happen in the same cycle. Reading is first-word
// fall-through: rd_data shows the oldest word whenever empty is low. A push
// while full or a pop while empty is ignored; the caller is expected to look
// at full/empty first (the assertions below flag it in simulation).
//
// Interface: push/wr_data, pop/rd_data, full, empty. Reset is active
// low and synchronous to clk; it empties the buffer.
//
// The buffer itself is this design's choice: it absorbs short stalls of the
// DMA stream, since the converter cannot be stalled.
module sample_fifo #(
  parameter int unsigned WIDTH = 33,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [WIDTH-1:0]           wr_data,
  input  logic                       pop,
  output logic [WIDTH-1:0]           rd_data,
  output logic                       full,
  output logic                       empty
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [$clog2(DEPTH+1)-1:0] count;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rd_data = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= next_ptr(wr_ptr);
      if (do_pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // The callers never push into a full buffer nor pop an empty one.
  a_no_push_full: assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
