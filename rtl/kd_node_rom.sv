// kd_node_rom: storage of the k-d tree, one 49-bit word per node.
//
// Word layout (kd_node_t, MSB first): type (1 = leaf), left node, right
// node, index output, threshold (split value), descriptor index (split
// dimension), of 1, 12, 12, 12, 6 and 6 bits.  The tree is trained offline,
// so the memory is written once through the load port before events are
// processed; during operation it is a single-port ROM with a registered
// output (address in cycle n, word out in cycle n+1).
//
// The 49-bit word, its fields and their widths follow the design
// description; the load port, the leaf encoding and the bit order are
// this design's choices.
module kd_node_rom
  import pcarect_pkg::*;
#(
  parameter int unsigned NODES = pcarect_pkg::NUM_NODES
) (
  input  logic             clk,
  input  logic [PTR_W-1:0] addr,
  output kd_node_t         q,
  input  logic             ld_en,
  input  logic [PTR_W-1:0] ld_addr,
  input  kd_node_t         ld_data
);
  kd_node_t mem [NODES];

  always_ff @(posedge clk) begin
    if (ld_en) begin
      if (ld_addr < PTR_W'(NODES)) mem[ld_addr] <= ld_data;
    end
    q <= (addr < PTR_W'(NODES)) ? mem[addr] : '0;
  end
endmodule
