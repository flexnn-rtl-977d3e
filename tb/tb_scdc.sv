// tb_scdc: columns deliver chunks in random order and at random times; each
// packet must carry column c in bytes 16c.. and the SCID in bits 513:512,
// and must wait for pkt_ready.
module tb_scdc;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] col_valid, col_ready;
  logic [3:0][15:0][7:0] col_data;
  logic pkt_valid, pkt_ready;
  logic [513:0] pkt;
  int checks = 0, failures = 0;

  scdc #(.SCID(2'd2)) dut (.clk, .rst_n, .col_valid, .col_data, .col_ready, .pkt_valid, .pkt, .pkt_ready);

  initial begin
    col_valid = 0; col_data = 0; pkt_ready = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 30; n++) begin
      logic [3:0][15:0][7:0] d;
      logic [3:0] sent;
      for (int c = 0; c < 4; c++) for (int b = 0; b < 16; b++) d[c][b] = 8'($urandom);
      sent = 0;
      while (sent != 4'hf) begin
        for (int c = 0; c < 4; c++) begin
          col_valid[c] = !sent[c] && ($urandom % 2);
          col_data[c] = d[c];
        end
        @(posedge clk);
        for (int c = 0; c < 4; c++) if (col_valid[c] && col_ready[c]) sent[c] = 1;
        @(negedge clk);
      end
      col_valid = 0;
      repeat (2) @(negedge clk);
      checks++;
      if (!pkt_valid || pkt !== {2'd2, d[3], d[2], d[1], d[0]}) begin
        failures++; $display("FAIL packet %0d", n);
      end
      pkt_ready = 1;
      @(negedge clk);
      pkt_ready = 0;
      checks++;
      if (pkt_valid) begin failures++; $display("FAIL packet not released"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
