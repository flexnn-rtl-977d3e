// tb_circular_buffer: random pushes (only when space allows) and pops;
// data must leave in order, `empty` must match a reference queue, and a
// full buffer must refuse further space.
module tb_circular_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_valid, rd_en, empty, space;
  logic [15:0] wr_data, rd_data;
  logic [1:0] inflight;
  logic [15:0] q[$];
  int checks = 0, failures = 0;

  circular_buffer #(.DEPTH(8), .W(16)) dut (.clk, .rst_n, .wr_valid, .wr_data, .rd_en,
    .rd_data, .empty, .inflight, .space);

  initial begin
    wr_valid = 0; rd_en = 0; wr_data = 0; inflight = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // fill completely
    for (int i = 0; i < 8; i++) begin
      wr_valid = 1; wr_data = 16'(i + 100); q.push_back(wr_data);
      @(negedge clk);
    end
    wr_valid = 0;
    checks++;
    if (space) begin failures++; $display("FAIL space when full"); end
    for (int n = 0; n < 400; n++) begin
      wr_valid = space && ($urandom % 2);
      wr_data = 16'($urandom);
      rd_en = !empty && ($urandom % 2);
      checks++;
      if (empty != (q.size() == 0)) begin failures++; $display("FAIL empty"); end
      if (rd_en) begin
        logic [15:0] e;
        e = q.pop_front();
        checks++;
        if (rd_data != e) begin failures++; $display("FAIL data %h exp %h", rd_data, e); end
      end
      if (wr_valid) q.push_back(wr_data);
      @(negedge clk);
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
