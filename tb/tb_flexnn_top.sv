// tb_flexnn_top: end-to-end test of the full-size FlexNN tile (16 x 16
// VPEs, 1.5 MB SRAM, no parameter overrides). This is also the full-size
// testbench.
//
// For each of a list of layers the testbench writes random sparse IF and
// FL lines into the SRAM through the host port, writes the layer
// descriptor and bias table, pulses start and waits for done. A reference
// model built here from the same SRAM contents recomputes every PE's OF RF
// (VxV / MxM MAC over all rounds, ELTWISE, POOL, external or neighbour
// accumulate), the column drains (FlexTree grouping by IC_P, PPM formula,
// PPM/column-buffer placement), the super-column packets and the global
// drain (Z-lines of z_bytes per row, zero-value compression), and every
// expected output line is read back through the host port and compared.
//
// It also counts how often each mechanism happened and counts a failure
// for any that never happened: load/compute overlap, compute stalled on a
// load, sparsity skipping (MACs done < dense pairs), VxV, MxM, ELTWISE,
// POOL, each IC_P mode (1, 2, 4, 8, 16), PPM ReLU clamping, PPM
// saturation, GD rotation (row written at a non-zero Z offset), SE
// compression (line with zero bytes removed) and neighbour / external
// accumulation.
module tb_flexnn_top;
  import flexnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_wr_en, host_wr_en, host_rd_en, start, busy, done;
  logic [6:0] cfg_wr_addr, cfg_rd_addr;
  logic [31:0] cfg_wr_data, cfg_rd_data, ext_psum, overlap_cycles;
  logic [15:0] host_wr_addr, host_rd_addr, lines_written;
  logic [255:0] host_wr_data, host_rd_data;
  int checks = 0, failures = 0;

  flexnn_top dut (.*);

  // ------------------------------------------------------------ counters
  int n_overlap = 0, n_stall = 0, n_mac_done = 0, n_dense_pairs = 0;
  int n_vxv = 0, n_mxm = 0, n_elt = 0, n_pool = 0, n_icp [5] = '{default: 0};
  int n_relu = 0, n_sat = 0, n_rot = 0, n_se = 0, n_nbr = 0, n_ext = 0;
  always @(posedge clk) if (rst_n) begin
    int m;
    if (dut.u_load.busy && dut.col_busy != '0) n_overlap++;
    if (dut.cst == dut.C_WAIT && dut.col_busy == '0 && dut.u_load.busy) n_stall++;
    m = 0;
    for (int c = 0; c < 16; c++) for (int p = 0; p < 16; p++) m += int'(dut.n_mac[c][p]);
    n_mac_done += m;
    for (int g = 0; g < 4; g++)
      if (dut.u_gd.g_go[g] && !dut.u_gd.g_be[g][0]) n_rot++;
    if (dut.u_gd.sram_we && dut.u_gd.sram_wdata[143:128] != 16'hffff) n_se++;
  end

  // ------------------------------------------------------------ SRAM model
  logic [255:0] mem [int];

  task automatic host_write(input int a, input logic [255:0] d);
    host_wr_en = 1; host_wr_addr = 16'(a); host_wr_data = d;
    @(negedge clk);
    host_wr_en = 0;
    mem[a] = d;
  endtask

  function automatic logic [255:0] rand_line(input int density);
    logic [15:0][7:0] d;
    logic [15:0] b;
    int m;
    d = '0; b = '0; m = 0;
    for (int i = 0; i < 16; i++)
      if ($urandom % 100 < density) begin
        logic [7:0] v;
        v = 8'($urandom);
        if (v == 0) v = 8'd1;
        b[i] = 1; d[m] = v; m++;
      end
    return {112'd0, b, d};
  endfunction

  // dense window [off, off+len) of a stored line
  function automatic void window(input logic [255:0] ln, input int off, input int len,
                                 output int dv [16]);
    logic [15:0][7:0] dense;
    int m;
    m = 0; dense = '0;
    for (int i = 0; i < 16; i++) if (ln[128 + i]) begin dense[i] = ln[8*m +: 8]; m++; end
    for (int i = 0; i < 16; i++) dv[i] = (i < len && off + i < 16) ? int'($signed(dense[off + i])) : 0;
  endfunction

  // ------------------------------------------------------------ reference
  int ofr [16][16][16];   // [col][pe][entry]

  function automatic int line_addr(input ld_pat_t pt, input int rnd, input int c, input int p, input int s);
    return int'(16'(pt.base + 16'(rnd) * pt.round_stride + 16'(c) * pt.col_stride +
                    16'(p) * pt.pe_stride + 16'(s) * pt.sb_stride));
  endfunction

  function automatic logic [7:0] ppm_ref(input layer_cfg_t cf, input int ps, input int bi);
    longint v;
    v = (longint'(ps) + longint'(bi)) * longint'(cf.ppm.scale);
    v = v >>> cf.ppm.shift;
    if (cf.ppm.relu && v < 0) begin v = 0; n_relu++; end
    if (v > 127) begin n_sat++; return 8'd127; end
    if (v < -128) begin n_sat++; return 8'h80; end
    return 8'(v);
  endfunction

  task automatic ref_layer(input layer_cfg_t cf, input int biasv [16], input int extv,
                           output logic [15:0][7:0] zl [int]);
    logic [15:0][7:0] chunks [16][$];
    int g, nt, halves, zb, rpb;
    for (int c = 0; c < 16; c++) for (int p = 0; p < 16; p++) for (int k = 0; k < 16; k++) ofr[c][p][k] = 0;
    for (int rnd = 0; rnd < int'(cf.n_rounds); rnd++)
      for (int c = 0; c < 16; c++) for (int p = 0; p < 16; p++) begin
        int ifv [4][16];
        int flv [4][16];
        for (int s = 0; s < 4; s++) begin
          int a;
          a = line_addr(cf.ifp, rnd, c, p, s);
          window(mem[a], (c * cf.ifp.col_boff + p * cf.ifp.pe_boff + s * cf.ifp.sb_boff) % 16, cf.ifp.len, ifv[s]);
          a = line_addr(cf.flp, rnd, 0, p, s);
          window(mem[a], (p * cf.flp.pe_boff + s * cf.flp.sb_boff) % 16, cf.flp.len, flv[s]);
        end
        unique case (cf.pe.op)
          OP_MAC:
            if (!cf.pe.mxm) begin
              for (int i = 0; i < 4; i++) for (int k = 0; k < 16; k++) begin
                ofr[c][p][cf.pe.of_base] += ifv[i][k] * flv[i][k];
                n_dense_pairs++;
              end
            end else begin
              for (int r = 0; r < 4; r++) for (int i = 0; i < 4; i++) for (int k = 0; k < 16; k++) begin
                ofr[c][p][4*r+i] += ifv[r][k] * flv[i][k];
                n_dense_pairs++;
              end
            end
          OP_ELTWISE: for (int k = 0; k < 16; k++) ofr[c][p][k] = ifv[0][k] + ifv[1][k];
          default: for (int k = 0; k < 16; k++) begin
            int m;
            m = ifv[0][k];
            for (int s = 1; s < 4; s++) if (ifv[s][k] > m) m = ifv[s][k];
            ofr[c][p][k] = m;
          end
        endcase
      end
    if (cf.nbr_accum)
      for (int k = 0; k < int'(cf.n_of); k++) begin
        int old [16][16];
        for (int c = 0; c < 16; c++) for (int p = 0; p < 16; p++) old[c][p] = ofr[c][p][k];
        for (int c = 0; c < 16; c++) for (int p = 0; p < 16; p++)
          if (cf.pe.en_ext_psum) ofr[c][p][k] += extv;
          else if (cf.pe.accum_nbr)
            ofr[c][p][k] += cf.pe.accum_dir ? ((p == 0) ? 0 : old[c][p-1]) : ((c == 0) ? 0 : old[c-1][p]);
      end
    // column drains
    g = (cf.icp <= 2) ? 2 : (cf.icp <= 4) ? 4 : (cf.icp <= 8) ? 8 : 16;
    nt = 16 / g;
    halves = (cf.icp <= 1) ? 2 : 1;
    for (int c = 0; c < 16; c++) begin
      logic [15:0][7:0] cbuf;
      int slot [4];
      cbuf = '0; slot = '{default: 0};
      for (int k = 0; k < int'(cf.n_of); k++)
        for (int h = 0; h < halves; h++) begin
          int tv [8];
          bit full;
          for (int t = 0; t < nt; t++) begin
            tv[t] = 0;
            for (int p = t * g; p < (t + 1) * g; p++)
              if ((cf.icp <= 1) ? (p % 2 == h) : ((p % g) < int'(cf.icp))) tv[t] += ofr[c][p][k];
          end
          for (int j = 0; j < 4; j++)
            if (nt >= 4) begin
              for (int b = 0; b < nt / 4; b++) begin
                cbuf[4*j + slot[j]] = ppm_ref(cf, tv[j * (nt / 4) + b], biasv[4*j + slot[j]]);
                slot[j]++;
              end
            end else if ((j * nt) % 4 == 0) begin
              cbuf[4*j + slot[j]] = ppm_ref(cf, tv[(j * nt) / 4], biasv[4*j + slot[j]]);
              slot[j]++;
            end
          full = 0;
          for (int j = 0; j < 4; j++) if (slot[j] == 4) full = 1;
          if (full || (k == int'(cf.n_of) - 1 && h == halves - 1)) begin
            chunks[c].push_back(cbuf);
            cbuf = '0; slot = '{default: 0};
          end
        end
    end
    // super columns + global drain
    zb = int'(cf.z_bytes);
    rpb = 16 / zb;
    for (int d = 0; d < chunks[0].size(); d++)
      for (int r = 0; r < 16; r++) begin
        int ln;
        ln = d * zb + r / rpb;
        if (!zl.exists(ln)) zl[ln] = '0;
        for (int i = 0; i < zb; i++) zl[ln][(r % rpb) * zb + i] = chunks[r][d][i];
      end
  endtask

  // ------------------------------------------------------------ layer run
  task automatic run_layer(input layer_cfg_t cf, input int density, input int extv);
    localparam int WORDS = ($bits(layer_cfg_t) + 31) / 32;
    logic [WORDS*32-1:0] v;
    int biasv [16];
    logic [15:0][7:0] zl [int];
    int cyc, lw0;
    // operands
    for (int rnd = 0; rnd < int'(cf.n_rounds); rnd++)
      for (int c = 0; c < 16; c++) for (int p = 0; p < 16; p++) for (int s = 0; s < 4; s++) begin
        int a;
        a = line_addr(cf.ifp, rnd, c, p, s);
        if (!mem.exists(a)) host_write(a, rand_line(density));
        a = line_addr(cf.flp, rnd, 0, p, s);
        if (!mem.exists(a)) host_write(a, rand_line(density));
      end
    // descriptor and bias
    v = '0; v[$bits(layer_cfg_t)-1:0] = cf;
    for (int w = 0; w < WORDS; w++) begin
      cfg_wr_en = 1; cfg_wr_addr = 7'(w); cfg_wr_data = v[32*w +: 32];
      @(negedge clk);
    end
    for (int b = 0; b < 16; b++) begin
      biasv[b] = int'($urandom % 201) - 100;
      cfg_wr_en = 1; cfg_wr_addr = 7'(64 + b); cfg_wr_data = 32'(biasv[b]);
      @(negedge clk);
    end
    cfg_wr_en = 0;
    ext_psum = 32'(extv);
    ref_layer(cf, biasv, extv, zl);
    lw0 = int'(lines_written);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
    checks++;
    if (!done) begin failures++; $display("FAIL layer did not finish"); end
    // compare the output lines
    foreach (zl[ln]) begin
      logic [15:0][7:0] pd;
      logic [15:0] bm;
      int m;
      pd = '0; bm = '0; m = 0;
      for (int i = 0; i < 16; i++) if (zl[ln][i] != 0) begin bm[i] = 1; pd[m] = zl[ln][i]; m++; end
      host_rd_en = 1; host_rd_addr = cf.of_base + 16'(ln);
      @(negedge clk);
      host_rd_en = 0;
      checks++;
      if (host_rd_data !== {112'd0, bm, pd}) begin
        failures++;
        if (failures < 20) $display("FAIL op=%0d mxm=%0d icp=%0d line %0d got %h exp %h", cf.pe.op,
          cf.pe.mxm, cf.icp, ln, host_rd_data[143:0], {bm, pd});
      end
    end
    checks++;
    if (int'(16'(lines_written - 16'(lw0))) != zl.size()) begin
      failures++; $display("FAIL lines written %0d expected %0d", 16'(lines_written - 16'(lw0)), zl.size());
    end
    $display("layer op=%0d mxm=%0d icp=%0d rounds=%0d n_of=%0d z=%0d: %0d cycles, %0d lines, overlap %0d",
      cf.pe.op, cf.pe.mxm, cf.icp, cf.n_rounds, cf.n_of, cf.z_bytes, cyc, zl.size(), overlap_cycles);
    if (cf.pe.op == OP_MAC && !cf.pe.mxm) n_vxv++;
    if (cf.pe.op == OP_MAC && cf.pe.mxm) n_mxm++;
    if (cf.pe.op == OP_ELTWISE) n_elt++;
    if (cf.pe.op == OP_POOL) n_pool++;
    if (cf.nbr_accum && cf.pe.accum_nbr && !cf.pe.en_ext_psum) n_nbr++;
    if (cf.nbr_accum && cf.pe.en_ext_psum) n_ext++;
    n_icp[(cf.icp <= 1) ? 0 : (cf.icp <= 2) ? 1 : (cf.icp <= 4) ? 2 : (cf.icp <= 8) ? 3 : 4]++;
  endtask

  function automatic layer_cfg_t base_cfg(input int if_base, input int fl_base, input int of_base);
    layer_cfg_t c;
    c = '0;
    c.pe.op = OP_MAC;
    c.icp = 5'd16; c.n_of = 5'd16; c.n_rounds = 4'd1;
    c.ppm.scale = 16'd1; c.ppm.shift = 5'd4;
    // IF unicast per column and PE, FL per PE broadcast over the columns
    c.ifp.base = 16'(if_base); c.ifp.round_stride = 16'd1024; c.ifp.col_stride = 16'd64;
    c.ifp.pe_stride = 16'd4; c.ifp.sb_stride = 16'd1; c.ifp.len = 5'd16;
    c.flp.base = 16'(fl_base); c.flp.round_stride = 16'd64; c.flp.pe_stride = 16'd4;
    c.flp.sb_stride = 16'd1; c.flp.len = 5'd16;
    c.of_base = 16'(of_base);
    c.z_bytes = 5'd16;
    return c;
  endfunction

  task automatic check_seen(input string what, input int n);
    checks++;
    $display("mechanism %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    layer_cfg_t c;
    cfg_wr_en = 0; cfg_wr_addr = 0; cfg_wr_data = 0; cfg_rd_addr = 0;
    host_wr_en = 0; host_wr_addr = 0; host_wr_data = 0; host_rd_en = 0; host_rd_addr = 0;
    ext_psum = 0; start = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);

    // 1: VxV, IC_P 16, three rounds (load overlaps compute), ReLU
    c = base_cfg(0, 12000, 20000);
    c.n_rounds = 4'd3; c.n_of = 5'd6; c.pe.of_base = 4'd5; c.ppm.relu = 1'b1;
    c.ppm.shift = 5'd9;
    run_layer(c, 50, 0);
    // 2: MxM, IC_P 4, two rounds, neighbour accumulate from the left, saturating
    c = base_cfg(4096, 12400, 21000);
    c.pe.mxm = 1; c.icp = 5'd4; c.n_rounds = 4'd2; c.nbr_accum = 1; c.pe.accum_nbr = 1;
    c.ppm.shift = 5'd6;
    run_layer(c, 40, 0);
    // 3: MxM, IC_P 8, 8-byte windows inside lines, Z = 4 bytes per row
    c = base_cfg(0, 12000, 22000);
    c.pe.mxm = 1; c.icp = 5'd8; c.z_bytes = 5'd4; c.ppm.shift = 5'd8;
    c.ifp.sb_stride = 16'd0; c.ifp.sb_boff = 4'd8; c.ifp.len = 5'd8;
    c.flp.sb_stride = 16'd0; c.flp.sb_boff = 4'd8; c.flp.len = 5'd8;
    run_layer(c, 70, 0);
    // 4: VxV, IC_P 2, external psum accumulate, Z = 8
    c = base_cfg(4096, 12400, 23000);
    c.icp = 5'd2; c.n_of = 5'd1; c.pe.of_base = 4'd0; c.nbr_accum = 1; c.pe.en_ext_psum = 1;
    c.z_bytes = 5'd8; c.ppm.shift = 5'd7; c.ppm.relu = 1'b1;
    run_layer(c, 60, -300);
    // 5: ELTWISE, IC_P 1 (every PE drains separately)
    c = base_cfg(8192, 12000, 24000);
    c.pe.op = OP_ELTWISE; c.icp = 5'd1; c.ppm.shift = 5'd1;
    run_layer(c, 60, 0);
    // 6: POOL, IC_P 1, Z = 2, neighbour accumulate from below
    c = base_cfg(8192, 12000, 25000);
    c.pe.op = OP_POOL; c.icp = 5'd1; c.n_of = 5'd12; c.z_bytes = 5'd2; c.ppm.shift = 5'd0;
    c.nbr_accum = 1; c.pe.accum_nbr = 1; c.pe.accum_dir = 1; c.ppm.relu = 1'b1;
    run_layer(c, 50, 0);

    check_seen("load/compute overlap", n_overlap);
    check_seen("compute waiting for load", n_stall);
    check_seen("sparsity skip (pairs skipped)", n_dense_pairs - n_mac_done);
    check_seen("VxV template", n_vxv);
    check_seen("MxM template", n_mxm);
    check_seen("eltwise", n_elt);
    check_seen("pool", n_pool);
    check_seen("IC_P = 1", n_icp[0]);
    check_seen("IC_P = 2", n_icp[1]);
    check_seen("IC_P = 4", n_icp[2]);
    check_seen("IC_P = 8", n_icp[3]);
    check_seen("IC_P = 16", n_icp[4]);
    check_seen("PPM ReLU clamp", n_relu);
    check_seen("PPM saturation", n_sat);
    check_seen("GD rotation", n_rot);
    check_seen("SE compression", n_se);
    check_seen("neighbour accumulate", n_nbr);
    check_seen("external psum accumulate", n_ext);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
