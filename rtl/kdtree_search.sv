// kdtree_search: backtracking-free descent of the k-d tree for one event.
//
// The descriptor of an event is the PATCH x PATCH block of cell counts
// centred on the event's cell; it is never assembled.  The tree is started
// with the centre cell address only, and each node reads the single
// descriptor element it needs straight from the count matrix.  Per node:
//   FETCH  present the node address to the node ROM;
//   TEST   node word available: a leaf ends the walk with its index output,
//          otherwise the count-matrix address of element `dim` is presented
//          (row dim / PATCH, column dim % PATCH of the patch, centred);
//   CMP    count available: go to the left child if count <= threshold,
//          otherwise to the right child.
// No distances are computed and no path is revisited.
//
// Interface: `start` (with `center`) is taken when idle; leaf_valid and
// leaf_index stay up until leaf_ready.  Timing: with D comparisons on the
// path, leaf_valid rises 3*D + 3 cycles after the start cycle.
//
// From the design description: the three-step node cycle, the use of the
// centre address only, reading the element named by the split dimension,
// comparing with the stored split value, stopping at the leaf.  This
// design's choices: the 7 x 7 patch (the 6-bit descriptor index cannot
// address a 9 x 9 = 81-element patch), the row-major element order, the
// "<= goes left" rule and node 0 as the root.
module kdtree_search
  import pcarect_pkg::*;
#(
  parameter int unsigned P    = pcarect_pkg::PATCH,
  parameter int unsigned CW   = pcarect_pkg::CNT_W,
  parameter int unsigned ROOT = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [CELL_AW-1:0] center,
  output logic               busy,
  output logic [PTR_W-1:0]   node_addr,
  input  kd_node_t           node_q,
  output logic [CELL_AW-1:0] cm_addr,
  input  logic [CW-1:0]      cm_data,
  output logic               leaf_valid,
  input  logic               leaf_ready,
  output logic [IDX_W-1:0]   leaf_index
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_TEST, S_CMP, S_OUT} state_t;
  state_t state;

  logic [CELL_AW-1:0] ctr;

  // Cell address of descriptor element `dim` around the centre cell.
  function automatic logic [CELL_AW-1:0] elem_addr(input logic [CELL_AW-1:0] c,
                                                   input logic [DIM_W-1:0]   dim);
    logic [SUB_W-1:0] row, col, ys, xs;
    row = SUB_W'(dim / DIM_W'(P));
    col = SUB_W'(dim % DIM_W'(P));
    ys  = c[CELL_AW-1:SUB_W] + row - SUB_W'(P / 2);
    xs  = c[SUB_W-1:0]       + col - SUB_W'(P / 2);
    return {ys, xs};
  endfunction

  assign cm_addr    = elem_addr(ctr, node_q.dim);
  assign busy       = (state != S_IDLE);
  assign leaf_valid = (state == S_OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      node_addr  <= PTR_W'(ROOT);
      ctr        <= '0;
      leaf_index <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          ctr       <= center;
          node_addr <= PTR_W'(ROOT);
          state     <= S_FETCH;
        end
        S_FETCH: state <= S_TEST;
        S_TEST: begin
          if (node_q.is_leaf) begin
            leaf_index <= node_q.index;
            state      <= S_OUT;
          end else begin
            state <= S_CMP;
          end
        end
        S_CMP: begin
          node_addr <= (32'(cm_data) <= 32'(node_q.threshold)) ? node_q.left : node_q.right;
          state     <= S_FETCH;
        end
        S_OUT: if (leaf_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
