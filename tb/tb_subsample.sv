// tb_subsample: exhaustive check of the pixel -> cell address mapping for
// every 8-bit (x, y): upper 7 bits (y/2 + 2) mod 128, lower (x/2 + 2) mod 128.
module tb_subsample;
  logic [7:0]  x, y;
  logic [13:0] addr;
  int checks = 0, failures = 0;

  subsample dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int yy = 0; yy < 256; yy++) begin
      for (int xx = 0; xx < 256; xx++) begin
        int ey, ex;
        x = 8'(xx); y = 8'(yy);
        #1;
        ey = (yy / 2 + 2) % 128;
        ex = (xx / 2 + 2) % 128;
        checks++;
        if (addr !== 14'(ey * 128 + ex)) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d y=%0d addr=%h", xx, yy, addr);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
