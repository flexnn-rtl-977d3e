// tb_csal: checks the combined sparsity bitmaps against an independent
// AND-and-select model, including the paper's worked example
// (IF 0111_0110, FL 1011_0100 -> 0011_0100, written MSB = first position).
module tb_csal;
  logic [3:0][15:0] if_bmp, fl_bmp, lane_if, csb;
  logic mxm;
  logic [1:0] if_sel;
  int checks = 0, failures = 0;

  csal dut (.if_bmp, .fl_bmp, .mxm, .if_sel, .lane_if_bmp(lane_if), .csb);

  task automatic check(input logic [3:0][15:0] exp);
    checks++;
    if (csb !== exp) begin
      failures++;
      $display("FAIL csal mxm=%0d sel=%0d got %h exp %h", mxm, if_sel, csb, exp);
    end
  endtask

  initial begin
    logic [3:0][15:0] exp;
    // paper example in lane 0: positions 0..7 = 0,1,1,1,0,1,1,0 / 1,0,1,1,0,1,0,0
    if_bmp = '0; fl_bmp = '0; mxm = 0; if_sel = 0;
    if_bmp[0] = 16'b0000_0000_0110_1110; // bit i = position i
    fl_bmp[0] = 16'b0000_0000_0010_1101;
    #1;
    exp = '0; exp[0] = 16'b0000_0000_0010_1100; // positions 2,3,5
    check(exp);
    for (int n = 0; n < 200; n++) begin
      for (int i = 0; i < 4; i++) begin
        if_bmp[i] = 16'($urandom); fl_bmp[i] = 16'($urandom);
      end
      mxm = 1'($urandom); if_sel = 2'($urandom);
      #1;
      for (int i = 0; i < 4; i++) exp[i] = (mxm ? if_bmp[if_sel] : if_bmp[i]) & fl_bmp[i];
      check(exp);
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
