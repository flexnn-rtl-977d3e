// tb_load_path: the load path reads from a behavioural SRAM (random
// compressed lines, one-cycle read latency) and its NoC transfers are
// applied to a model of the 16 x 16 x 4 shadow subbanks. For unicast,
// PE-broadcast and column-broadcast descriptors, each subbank must end up
// holding the dense window (offset/len) of the line given by the affine
// address, re-compressed. Also checks the fetch count (broadcast chunks
// are fetched once) and the rate: one SRAM line per cycle, so a load takes
// fetches + at most 6 cycles.
module tb_load_path;
  import flexnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, sram_rd_en, if_we, fl_we, busy, done;
  logic [3:0] round;
  ld_pat_t ifp, flp;
  logic [15:0] sram_rd_addr, fetches;
  logic [255:0] sram_rd_data;
  logic [15:0] if_col_mask, if_pe_mask, fl_col_mask, fl_pe_mask;
  logic [1:0] if_sub, fl_sub;
  chunk_t if_chunk, fl_chunk;
  chunk_t ifrf [16][16][4];
  chunk_t flrf [16][16][4];
  logic [255:0] mem [int];
  int checks = 0, failures = 0;

  load_path dut (.*);

  function automatic logic [255:0] line_of(input int a);
    if (!mem.exists(a)) begin
      logic [15:0][7:0] d;
      logic [15:0] b;
      int m;
      d = '0; b = '0; m = 0;
      for (int i = 0; i < 16; i++) if ($urandom % 2) begin b[i] = 1; d[m] = 8'($urandom % 255 + 1); m++; end
      mem[a] = {112'd0, b, d};
    end
    return mem[a];
  endfunction

  always @(posedge clk) begin
    sram_rd_data <= sram_rd_en ? line_of(int'(sram_rd_addr)) : 256'd0;
    for (int c = 0; c < 16; c++) for (int p = 0; p < 16; p++) begin
      if (if_we && if_col_mask[c] && if_pe_mask[p]) ifrf[c][p][if_sub] <= if_chunk;
      if (fl_we && fl_col_mask[c] && fl_pe_mask[p]) flrf[c][p][fl_sub] <= fl_chunk;
    end
  end

  function automatic chunk_t expect_chunk(input logic [255:0] ln, input int off, input int len);
    logic [15:0][7:0] dense;
    chunk_t e;
    int m;
    m = 0; dense = '0;
    for (int i = 0; i < 16; i++) if (ln[128 + i]) begin dense[i] = ln[8*m +: 8]; m++; end
    e = '0; m = 0;
    for (int i = 0; i < len; i++) if (off + i < 16 && dense[off + i] != 0) begin
      e.bmp[i] = 1; e.data[m] = dense[off + i]; m++;
    end
    return e;
  endfunction

  task automatic run(input ld_pat_t ip, input ld_pat_t fp, input int rnd, input int exp_fetch);
    int cyc;
    ifp = ip; flp = fp; round = 4'(rnd);
    for (int c = 0; c < 16; c++) for (int p = 0; p < 16; p++) for (int s = 0; s < 4; s++) begin
      ifrf[c][p][s] = '0; flrf[c][p][s] = '0;
    end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 5000) begin @(negedge clk); cyc++; end
    checks++;
    if (fetches != 16'(exp_fetch) || cyc > exp_fetch + 6) begin
      failures++; $display("FAIL fetches %0d exp %0d, cycles %0d", fetches, exp_fetch, cyc);
    end
    for (int c = 0; c < 16; c++) for (int p = 0; p < 16; p++) for (int s = 0; s < 4; s++) begin
      int ia, fa, io, fo;
      ia = int'(16'(ip.base + 16'(rnd) * ip.round_stride + 16'(c) * ip.col_stride + 16'(p) * ip.pe_stride + 16'(s) * ip.sb_stride));
      fa = int'(16'(fp.base + 16'(rnd) * fp.round_stride + 16'(p) * fp.pe_stride + 16'(s) * fp.sb_stride));
      io = (c * ip.col_boff + p * ip.pe_boff + s * ip.sb_boff) % 16;
      fo = (p * fp.pe_boff + s * fp.sb_boff) % 16;
      checks += 2;
      if (ifrf[c][p][s] !== expect_chunk(line_of(ia), io, ip.len)) begin
        failures++; $display("FAIL IF c%0d p%0d s%0d", c, p, s);
      end
      if (flrf[c][p][s] !== expect_chunk(line_of(fa), fo, fp.len)) begin
        failures++; $display("FAIL FL c%0d p%0d s%0d", c, p, s);
      end
    end
  endtask

  initial begin
    ld_pat_t ip, fp;
    start = 0; round = 0; ifp = '0; flp = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // unicast IF (per column and PE), unicast FL per PE, full 16-byte windows
    ip = '0; ip.base = 16'd100; ip.round_stride = 16'd2000; ip.col_stride = 16'd64;
    ip.pe_stride = 16'd4; ip.sb_stride = 16'd1; ip.len = 5'd16;
    fp = '0; fp.base = 16'd5000; fp.round_stride = 16'd100; fp.pe_stride = 16'd4;
    fp.sb_stride = 16'd1; fp.len = 5'd16;
    run(ip, fp, 0, 16 * 16 * 4 + 16 * 4);
    run(ip, fp, 2, 16 * 16 * 4 + 16 * 4);
    // byte windows inside a line (sparse byte select): 4-byte windows
    ip.sb_stride = 16'd0; ip.sb_boff = 4'd4; ip.len = 5'd4;
    fp.sb_stride = 16'd0; fp.sb_boff = 4'd4; fp.len = 5'd4;
    run(ip, fp, 1, 16 * 16 * 4 + 16 * 4);
    // FL broadcast to all PEs, IF multicast across PEs of a column
    ip = '0; ip.base = 16'd300; ip.col_stride = 16'd4; ip.sb_stride = 16'd1; ip.len = 5'd16;
    fp = '0; fp.base = 16'd7000; fp.sb_stride = 16'd1; fp.len = 5'd16;
    run(ip, fp, 0, 16 * 4 + 4);
    // IF broadcast to the whole array
    ip.col_stride = 16'd0;
    run(ip, fp, 0, 4 + 4);
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
