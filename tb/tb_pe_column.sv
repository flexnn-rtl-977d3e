// tb_pe_column: one column of 16 VPEs with its FlexTree and local drain.
// Random sparse IF/FL chunks are loaded into every PE, the column computes
// (MxM with IC_P 4 and 8, VxV with IC_P 16, POOL with IC_P 1), optionally
// accumulates each PE's OF with its lower neighbour's (PSumY chain), takes
// a snapshot and drains. The 16-byte chunks leaving the column must match a
// reference of the PE arithmetic, the FlexTree grouping, the PPM formula
// and the column-buffer placement.
module tb_pe_column;
  import flexnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  pe_cfg_t pe_cfg;
  pe_cmd_e cmd;
  logic [3:0] acc_idx;
  logic [31:0] ext_psum;
  logic if_we, fl_we, drain_start, out_valid, out_ready, busy, shadow_full, drain_busy;
  logic [15:0] if_pe_mask, fl_pe_mask;
  logic [1:0] if_sub, fl_sub;
  chunk_t if_chunk, fl_chunk;
  logic [15:0][31:0] psum_x_in, psum_out, bias;
  logic [4:0] n_of, icp;
  ppm_cfg_t ppm_cfg;
  logic [15:0][7:0] out_data;
  logic [15:0][2:0] n_mac;
  int checks = 0, failures = 0;

  pe_column dut (.*);

  int ifd [16][4][16];
  int fld [16][4][16];
  int ofr [16][16];

  function automatic chunk_t pack(input int d [16]);
    chunk_t c;
    int n;
    c = '0; n = 0;
    for (int k = 0; k < 16; k++) if (d[k] != 0) begin c.bmp[k] = 1; c.data[n] = 8'(d[k]); n++; end
    return c;
  endfunction

  function automatic logic [7:0] ppm_ref(input int ps, input int bi);
    longint v;
    v = (longint'(ps) + longint'(bi)) * longint'(ppm_cfg.scale);
    v = v >>> ppm_cfg.shift;
    if (ppm_cfg.relu && v < 0) v = 0;
    return (v > 127) ? 8'd127 : (v < -128) ? 8'h80 : 8'(v);
  endfunction

  task automatic issue(input pe_cmd_e c);
    cmd = c; @(negedge clk); cmd = PE_NOP;
  endtask

  task automatic run(input bit mxm, input op_e op, input int ic, input int nof, input bit accum_y);
    logic [15:0][7:0] expq [$];
    logic [15:0][7:0] cbuf;
    int slot [4];
    int g, nt, halves, cyc;
    pe_cfg = '0; pe_cfg.mxm = mxm; pe_cfg.op = op; pe_cfg.of_base = 4'd2;
    pe_cfg.accum_nbr = accum_y; pe_cfg.accum_dir = 1'b1;
    icp = 5'(ic); n_of = 5'(nof);
    for (int p = 0; p < 16; p++) for (int s = 0; s < 4; s++) for (int k = 0; k < 16; k++) begin
      ifd[p][s][k] = ($urandom % 2) ? int'($signed(8'($urandom))) : 0;
      fld[p][s][k] = ($urandom % 2) ? int'($signed(8'($urandom))) : 0;
    end
    // load each PE (unicast) and swap
    for (int p = 0; p < 16; p++) for (int s = 0; s < 4; s++) begin
      if_we = 1; if_pe_mask = 16'(1 << p); if_sub = 2'(s); if_chunk = pack(ifd[p][s]);
      fl_we = 1; fl_pe_mask = 16'(1 << p); fl_sub = 2'(s); fl_chunk = pack(fld[p][s]);
      @(negedge clk);
    end
    if_we = 0; fl_we = 0;
    issue(PE_CLEAR);
    issue(PE_SWAP);
    issue(PE_COMPUTE);
    cyc = 0;
    while (busy && cyc < 500) begin @(negedge clk); cyc++; end
    // reference PE results
    for (int p = 0; p < 16; p++) begin
      for (int k = 0; k < 16; k++) ofr[p][k] = 0;
      if (op == OP_POOL)
        for (int k = 0; k < 16; k++) begin
          ofr[p][k] = ifd[p][0][k];
          for (int s = 1; s < 4; s++) if (ifd[p][s][k] > ofr[p][k]) ofr[p][k] = ifd[p][s][k];
        end
      else if (mxm)
        for (int r = 0; r < 4; r++) for (int i = 0; i < 4; i++) for (int k = 0; k < 16; k++)
          ofr[p][4*r+i] += ifd[p][r][k] * fld[p][i][k];
      else
        for (int i = 0; i < 4; i++) for (int k = 0; k < 16; k++) ofr[p][2] += ifd[p][i][k] * fld[p][i][k];
    end
    if (accum_y)
      for (int k = 0; k < nof; k++) begin
        acc_idx = 4'(k);
        issue(PE_ACCUM);
        for (int p = 15; p >= 1; p--) ofr[p][k] += ofr[p-1][k];
      end
    issue(PE_SNAPSHOT);
    // reference drain
    g = (ic <= 2) ? 2 : (ic <= 4) ? 4 : (ic <= 8) ? 8 : 16;
    nt = 16 / g; halves = (ic <= 1) ? 2 : 1;
    cbuf = '0; slot = '{default: 0};
    for (int k = 0; k < nof; k++) for (int h = 0; h < halves; h++) begin
      int tv [8];
      bit full;
      for (int t = 0; t < nt; t++) begin
        tv[t] = 0;
        for (int p = t * g; p < (t + 1) * g; p++)
          if ((ic <= 1) ? (p % 2 == h) : ((p % g) < ic)) tv[t] += ofr[p][k];
      end
      for (int j = 0; j < 4; j++)
        if (nt >= 4) begin
          for (int b = 0; b < nt / 4; b++) begin
            cbuf[4*j + slot[j]] = ppm_ref(tv[j * (nt / 4) + b], bias[4*j + slot[j]]); slot[j]++;
          end
        end else if ((j * nt) % 4 == 0) begin
          cbuf[4*j + slot[j]] = ppm_ref(tv[(j * nt) / 4], bias[4*j + slot[j]]); slot[j]++;
        end
      full = 0;
      for (int j = 0; j < 4; j++) if (slot[j] == 4) full = 1;
      if (full || (k == nof - 1 && h == halves - 1)) begin expq.push_back(cbuf); cbuf = '0; slot = '{default: 0}; end
    end
    checks++;
    if (!shadow_full) begin failures++; $display("FAIL shadow_full not set"); end
    drain_start = 1; @(negedge clk); drain_start = 0;
    cyc = 0;
    while ((drain_busy || shadow_full) && cyc < 5000) begin
      out_ready = ($urandom % 4 != 0);
      #1;
      if (out_valid && out_ready) begin
        logic [15:0][7:0] e;
        checks++;
        if (expq.size() == 0) begin failures++; $display("FAIL extra chunk"); end
        else begin
          e = expq.pop_front();
          if (out_data !== e) begin
            failures++; $display("FAIL mxm=%0d op=%0d icp=%0d chunk got %h exp %h", mxm, op, ic, out_data, e);
          end
        end
      end
      @(negedge clk); cyc++;
    end
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d chunks missing", expq.size()); end
  endtask

  initial begin
    pe_cfg = '0; cmd = PE_NOP; acc_idx = 0; ext_psum = 0; if_we = 0; fl_we = 0; drain_start = 0;
    out_ready = 1; if_pe_mask = 0; fl_pe_mask = 0; if_sub = 0; fl_sub = 0; if_chunk = '0; fl_chunk = '0;
    psum_x_in = '0; n_of = 1; icp = 16;
    ppm_cfg = '0; ppm_cfg.scale = 16'd1; ppm_cfg.shift = 5'd7;
    for (int i = 0; i < 16; i++) bias[i] = 32'(i * 11) - 32'd80;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 3; n++) begin
      ppm_cfg.relu = 1'(n);
      run(1, OP_MAC, 4, 16, 0);
      run(1, OP_MAC, 8, 12, 1);
      run(0, OP_MAC, 16, 3, 0);
      run(0, OP_POOL, 1, 16, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
