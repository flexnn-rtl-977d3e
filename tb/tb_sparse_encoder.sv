// tb_sparse_encoder: the paper's example line (P0=-3, P1=30, P2=0, P3=-2,
// P4..P12 non-zero, P13=4, P14=-25, P15=0) and random sparse lines, checked
// against a reference packer.
module tb_sparse_encoder;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic [15:0][7:0] in_data, out_data;
  logic [15:0] out_bmp;
  logic [4:0] out_cnt;
  int checks = 0, failures = 0;

  sparse_encoder dut (.clk, .rst_n, .in_valid, .in_data, .out_valid, .out_data, .out_bmp, .out_cnt);

  task automatic run(input logic [15:0][7:0] d);
    logic [15:0][7:0] ed;
    logic [15:0] eb;
    int n;
    ed = '0; eb = '0; n = 0;
    for (int i = 0; i < 16; i++) if (d[i] != 0) begin ed[n] = d[i]; eb[i] = 1; n++; end
    in_data = d; in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid || out_data !== ed || out_bmp !== eb || out_cnt != 5'(n)) begin
      failures++;
      $display("FAIL se in %h got %h/%h/%0d exp %h/%h/%0d", d, out_data, out_bmp, out_cnt, ed, eb, n);
    end
  endtask

  initial begin
    logic [15:0][7:0] d;
    in_valid = 0; in_data = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    d = '0;
    d[0] = -8'sd3; d[1] = 8'd30; d[2] = 0; d[3] = -8'sd2;
    for (int i = 4; i <= 12; i++) d[i] = 8'(i);
    d[13] = 8'd4; d[14] = -8'sd25; d[15] = 0;
    run(d);
    checks++;
    if (out_bmp != 16'b0111_1111_1111_1011 || out_data[0] != 8'hfd || out_data[1] != 8'd30 ||
        out_data[2] != 8'hfe || out_data[12] != 8'd4 || out_data[13] != 8'hE7) begin
      failures++;
      $display("FAIL paper example bmp=%b", out_bmp);
    end
    for (int n = 0; n < 200; n++) begin
      for (int i = 0; i < 16; i++) d[i] = ($urandom % 3 == 0) ? 8'($urandom) : 8'd0;
      run(d);
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
