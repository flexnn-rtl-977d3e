// tb_ppm: random psums, biases, scales and shifts against a reference of
// the bias / scale / shift / ReLU / INT8 saturation formula, one cycle late.
module tb_ppm;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, relu, out_valid;
  logic [31:0] psum, bias;
  logic [15:0] scale;
  logic [4:0] shift;
  logic [7:0] of;
  int checks = 0, failures = 0;

  ppm dut (.clk, .rst_n, .in_valid, .psum, .bias, .scale, .shift, .relu, .out_valid, .of);

  initial begin
    in_valid = 0; psum = 0; bias = 0; scale = 0; shift = 0; relu = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      longint v;
      int e;
      psum = 32'($signed(16'($urandom)));
      bias = 32'($signed(12'($urandom)));
      scale = 16'($urandom % 300);
      shift = 5'($urandom % 12);
      relu = 1'($urandom);
      in_valid = 1;
      v = (longint'($signed(psum)) + longint'($signed(bias))) * longint'(scale);
      v = v >>> shift;
      if (relu && v < 0) v = 0;
      e = (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
      @(negedge clk);
      checks++;
      if (!out_valid || $signed(of) != 8'(e)) begin
        failures++;
        $display("FAIL ppm psum=%0d bias=%0d scale=%0d shift=%0d relu=%0d got %0d exp %0d",
          $signed(psum), $signed(bias), scale, shift, relu, $signed(of), e);
      end
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
