// tb_sram: writes random lines to random addresses of a small instance and
// reads them back one cycle after rd_en, against a reference array.
module tb_sram;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rd_en, wr_en;
  logic [15:0] rd_addr, wr_addr;
  logic [255:0] rd_data, wr_data;
  logic [255:0] ref_mem [256];
  logic written [256];
  int checks = 0, failures = 0;

  sram #(.N_BANKS(16), .LINE_BYTES(32), .LINES_PER_BANK(16), .AW(16)) dut (
    .clk, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data);

  initial begin
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0; wr_data = 0;
    for (int i = 0; i < 256; i++) written[i] = 0;
    @(negedge clk);
    for (int n = 0; n < 400; n++) begin
      wr_en = 1; wr_addr = 16'($urandom % 256);
      wr_data = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      ref_mem[wr_addr] = wr_data; written[wr_addr] = 1;
      @(negedge clk);
    end
    wr_en = 0;
    for (int a = 0; a < 256; a++) if (written[a]) begin
      rd_en = 1; rd_addr = 16'(a);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data !== ref_mem[a]) begin failures++; $display("FAIL sram addr %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
