// tb_kd_node_rom: loads random 49-bit node words into every address and
// reads them back in random order; the word must appear one cycle after
// the address and must decode into the six fields in order.
module tb_kd_node_rom;
  import pcarect_pkg::*;
  localparam int N = 300;
  logic clk = 0;
  logic [PTR_W-1:0] addr, ld_addr;
  kd_node_t q, ld_data;
  logic ld_en = 0;
  kd_node_t model [N];
  int checks = 0, failures = 0;

  kd_node_rom #(.NODES(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr = '0; ld_addr = '0; ld_data = '0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      model[i] = kd_node_t'({$urandom, $urandom});
      ld_en = 1; ld_addr = PTR_W'(i); ld_data = model[i];
    end
    @(negedge clk) ld_en = 0;
    // field order: type is bit 48, descriptor index bits 5:0
    checks++;
    if ($bits(kd_node_t) != 49) failures++;
    for (int i = 0; i < 2000; i++) begin
      automatic int a = $urandom_range(0, N - 1);
      @(negedge clk) addr = PTR_W'(a);
      @(posedge clk); #1;
      checks++;
      if (q !== model[a]) begin failures++; if (failures < 10) $display("FAIL addr %0d", a); end
      checks++;
      if ({q.is_leaf, q.left, q.right, q.index, q.threshold, q.dim} !== 49'(model[a])) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
