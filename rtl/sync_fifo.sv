// sync_fifo: synchronous first-in first-out queue with first-word fall-through.
//
// Used wherever the pipeline needs a queue: the buffer between the
// sub-sampler and the count matrix (it holds addresses back while the k-d
// tree is busy), the s-event window of the count matrix, the S-event index
// FIFO of the classifier and the coordinate FIFO of the mean calculation.
// A circular buffer with read and write pointers and an occupancy counter.
//
// Interface: push/din write when not full; pop removes the head, which is
// always visible on dout while !empty (no read latency).  clr empties the
// queue in one cycle (the detector's "reset mean FIFO"); a push in the same
// cycle as clr lands in the emptied queue.  push and pop in the
// same cycle are allowed, also when full (pop frees the slot).
// Assertions flag a push into a full queue without a pop and a pop from an
// empty queue.  Depth and width are this design's parameters.
module sync_fifo #(
  parameter int unsigned WIDTH = 31,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clr,
  input  logic                       push,
  input  logic [WIDTH-1:0]           din,
  input  logic                       pop,
  output logic [WIDTH-1:0]           dout,
  output logic                       full,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wr_ptr, rd_ptr;

  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty = (count == '0);
  assign dout  = mem[rd_ptr];

  logic do_push, do_pop;
  assign do_pop  = pop && !empty;
  assign do_push = push && (clr || !full || do_pop);

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[clr ? '0 : wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else if (clr) begin
      wr_ptr <= push ? PW'(1 % DEPTH) : '0;
      rd_ptr <= '0;
      count  <= push ? ($clog2(DEPTH+1))'(1) : '0;
    end else begin
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // Handshake rules of the queue.
  always_ff @(posedge clk) begin
    if (rst_n && !clr) begin
      assert (!(push && full && !pop)) else $error("sync_fifo: push into full FIFO");
      assert (!(pop && empty))         else $error("sync_fifo: pop from empty FIFO");
    end
  end

endmodule
