// tb_config_regs: writes every descriptor word and bias, checks the decoded
// struct fields and the read-back path.
module tb_config_regs;
  import flexnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en;
  logic [6:0] wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  layer_cfg_t cfg;
  logic [15:0][31:0] bias;
  int checks = 0, failures = 0;
  localparam int WORDS = ($bits(layer_cfg_t) + 31) / 32;

  config_regs dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data, .cfg, .bias);

  initial begin
    layer_cfg_t c;
    logic [WORDS*32-1:0] v;
    wr_en = 0; wr_addr = 0; wr_data = 0; rd_addr = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    c = '0;
    c.pe.mxm = 1; c.pe.op = OP_POOL; c.icp = 5'd4; c.n_of = 5'd9; c.n_rounds = 4'd3;
    c.ppm.scale = 16'h1234; c.ifp.base = 16'h0abc; c.flp.len = 5'd16; c.of_base = 16'h7000;
    c.z_bytes = 5'd4;
    v = '0; v[$bits(layer_cfg_t)-1:0] = c;
    for (int w = 0; w < WORDS; w++) begin
      wr_en = 1; wr_addr = 7'(w); wr_data = v[32*w +: 32];
      @(negedge clk);
    end
    for (int b = 0; b < 16; b++) begin
      wr_en = 1; wr_addr = 7'(64 + b); wr_data = 32'(b * 1000 - 7);
      @(negedge clk);
    end
    wr_en = 0;
    checks++;
    if (cfg !== c) begin failures++; $display("FAIL cfg decode"); end
    for (int b = 0; b < 16; b++) begin
      checks++;
      if (bias[b] != 32'(b * 1000 - 7)) begin failures++; $display("FAIL bias %0d", b); end
    end
    for (int w = 0; w < WORDS; w++) begin
      rd_addr = 7'(w);
      @(negedge clk);
      checks++;
      if (rd_data != v[32*w +: 32]) begin failures++; $display("FAIL readback %0d", w); end
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
