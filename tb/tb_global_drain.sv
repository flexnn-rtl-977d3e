// tb_global_drain: random SCDC packets (random super-column order and
// gaps) for Z = 16, 8 and 4 valid bytes per column chunk. Every DSB row r
// of DSB fill d belongs to Z-line d*zb + r/(16/zb) (see global_drain); the
// reference builds each Z-line from the rows, zero-value compresses it and
// expects exactly one SRAM line {bitmap, packed bytes} at of_base + line.
// Also checks that pkt_ready never accepts a packet into a full DSB
// quarter (the model would then lose data) and that idle returns.
module tb_global_drain;
  import flexnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] pkt_valid, pkt_ready;
  logic [3:0][513:0] pkt;
  logic [15:0] of_base, sram_waddr, lines_written;
  logic [4:0] z_bytes;
  logic flush, restart, sram_we, idle;
  logic [255:0] sram_wdata;
  logic [255:0] got [int];
  int checks = 0, failures = 0;

  global_drain dut (.clk, .rst_n, .pkt_valid, .pkt, .pkt_ready, .of_base, .z_bytes, .flush, .restart,
    .sram_we, .sram_waddr, .sram_wdata, .idle, .lines_written);

  always @(posedge clk) if (rst_n && sram_we) begin
    if (got.exists(int'(sram_waddr))) begin
      failures++; $display("FAIL line %0d written twice", sram_waddr);
    end
    got[int'(sram_waddr)] = sram_wdata;
  end

  task automatic run(input int zb, input int n_dsb);
    logic [15:0][7:0] zl [int];
    int rpb, cyc;
    got.delete();
    z_bytes = 5'(zb); rpb = 16 / zb;
    of_base = 16'(1000 + $urandom % 1000);
    for (int d = 0; d < n_dsb; d++) begin
      logic [3:0][3:0][15:0][7:0] rows;
      logic [3:0] sent;
      for (int s = 0; s < 4; s++) for (int c = 0; c < 4; c++) for (int i = 0; i < 16; i++)
        rows[s][c][i] = (i < zb && $urandom % 3 != 0) ? 8'($urandom) : 8'd0;
      for (int s = 0; s < 4; s++) for (int c = 0; c < 4; c++) begin
        int r, ln;
        r = 4 * s + c; ln = d * zb + r / rpb;
        if (!zl.exists(ln)) zl[ln] = '0;
        for (int i = 0; i < zb; i++) zl[ln][(r % rpb) * zb + i] = rows[s][c][i];
      end
      sent = 0;
      cyc = 0;
      while (sent != 4'hf && cyc < 1000) begin
        for (int s = 0; s < 4; s++) begin
          pkt_valid[s] = !sent[s] && ($urandom % 2);
          pkt[s] = {2'(s), rows[s][3], rows[s][2], rows[s][1], rows[s][0]};
        end
        @(posedge clk);
        for (int s = 0; s < 4; s++) if (pkt_valid[s] && pkt_ready[s]) sent[s] = 1;
        @(negedge clk);
        cyc++;
      end
      pkt_valid = 0;
    end
    flush = 1;
    @(negedge clk);
    flush = 0;
    cyc = 0;
    while (!idle && cyc < 1000) begin @(negedge clk); cyc++; end
    repeat (3) @(negedge clk);
    foreach (zl[ln]) begin
      logic [15:0][7:0] pd;
      logic [15:0] bm;
      int m;
      pd = '0; bm = '0; m = 0;
      for (int i = 0; i < 16; i++) if (zl[ln][i] != 0) begin bm[i] = 1; pd[m] = zl[ln][i]; m++; end
      checks++;
      if (!got.exists(int'(of_base) + ln)) begin
        failures++; $display("FAIL zb=%0d line %0d not written", zb, ln);
      end else if (got[int'(of_base) + ln] !== {112'd0, bm, pd}) begin
        failures++; $display("FAIL zb=%0d line %0d content", zb, ln);
      end
    end
    checks++;
    if (got.size() != zl.size()) begin
      failures++; $display("FAIL zb=%0d wrote %0d lines, expected %0d", zb, got.size(), zl.size());
    end
  endtask

  initial begin
    pkt_valid = 0; pkt = '0; of_base = 0; z_bytes = 16; flush = 0; restart = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(16, 9);   // 144 lines: banks wrap round all 64 several times
    // a new layer restarts the line numbering
    restart = 1; @(negedge clk); restart = 0;
    run(8, 6);
    restart = 1; @(negedge clk); restart = 0;
    run(4, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
