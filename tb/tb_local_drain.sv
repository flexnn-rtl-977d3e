// tb_local_drain: a local drain with its FlexTree, fed from a model of the
// 16 PEs' shadow OF RFs. For IC_P = 16, 8, 4, 2 and 1 and random n_of, the
// sequence of 16-byte column-buffer chunks must match a reference that
// sums each tap group, applies the post-processing formula and places the
// results by the PPM/slot rule described in local_drain. drain_done must
// pulse once at the end, and out_ready back-pressure must hold the chunk.
module tb_local_drain;
  import flexnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, ft_in_valid, ft_half, ft_out_valid, drain_done, out_valid, out_ready, busy;
  logic [4:0] n_of, icp;
  ppm_cfg_t ppm_cfg;
  logic [15:0][31:0] bias, psum_in;
  logic [3:0] of_rd_idx, tap_base, n_taps;
  logic [14:0][31:0] taps;
  logic [15:0][7:0] out_data;
  logic [31:0] ofv [16][16];   // [pe][entry]
  int checks = 0, failures = 0;

  always_comb for (int p = 0; p < 16; p++) psum_in[p] = ofv[p][of_rd_idx];

  flextree u_ft (.clk, .rst_n, .in_valid(ft_in_valid), .psum_in, .icp, .half(ft_half),
    .taps, .out_valid(ft_out_valid), .tap_base, .n_taps);
  local_drain dut (.clk, .rst_n, .start, .n_of, .icp, .ppm_cfg, .bias, .of_rd_idx,
    .ft_in_valid, .ft_half, .taps, .tap_base, .n_taps, .ft_out_valid, .drain_done,
    .out_valid, .out_data, .out_ready, .busy);

  function automatic logic [7:0] ppm_ref(input logic [31:0] ps, input logic [31:0] bi);
    longint v;
    v = (longint'($signed(ps)) + longint'($signed(bi))) * longint'(ppm_cfg.scale);
    v = v >>> ppm_cfg.shift;
    if (ppm_cfg.relu && v < 0) v = 0;
    return (v > 127) ? 8'd127 : (v < -128) ? 8'h80 : 8'(v);
  endfunction

  task automatic run(input int ic, input int nof);
    logic [15:0][7:0] expq [$];
    logic [15:0][7:0] cbuf;
    int slot [4];
    int g, nt, halves, n_chunks, cyc, dd;
    icp = 5'(ic); n_of = 5'(nof);
    for (int p = 0; p < 16; p++) for (int k = 0; k < 16; k++) ofv[p][k] = 32'($urandom % 4001) - 32'd2000;
    g = (ic <= 2) ? 2 : (ic <= 4) ? 4 : (ic <= 8) ? 8 : 16;
    nt = 16 / g;
    halves = (ic <= 1) ? 2 : 1;
    // reference
    cbuf = '0; slot = '{default: 0};
    for (int k = 0; k < nof; k++)
      for (int h = 0; h < halves; h++) begin
        logic [31:0] tv [8];
        bit full;
        for (int t = 0; t < nt; t++) begin
          tv[t] = 0;
          for (int p = t * g; p < (t + 1) * g; p++)
            if ((ic <= 1) ? (p % 2 == h) : ((p % g) < ic)) tv[t] += ofv[p][k];
        end
        for (int j = 0; j < 4; j++) begin
          if (nt >= 4) begin
            for (int b = 0; b < nt / 4; b++) begin
              cbuf[4*j + slot[j]] = ppm_ref(tv[j * (nt / 4) + b], bias[4*j + slot[j]]);
              slot[j]++;
            end
          end else if ((j * nt) % 4 == 0) begin
            cbuf[4*j + slot[j]] = ppm_ref(tv[(j * nt) / 4], bias[4*j + slot[j]]);
            slot[j]++;
          end
        end
        full = 0;
        for (int j = 0; j < 4; j++) if (slot[j] == 4) full = 1;
        if (full || (k == nof - 1 && h == halves - 1)) begin
          expq.push_back(cbuf);
          cbuf = '0; slot = '{default: 0};
        end
      end
    // drive
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    n_chunks = 0; cyc = 0; dd = 0;
    while (busy && cyc < 5000) begin
      out_ready = ($urandom % 3 != 0);
      #1;
      if (out_valid && out_ready) begin
        logic [15:0][7:0] e;
        checks++;
        if (expq.size() == 0) begin failures++; $display("FAIL extra chunk icp=%0d", ic); end
        else begin
          e = expq.pop_front();
          if (out_data !== e) begin
            failures++; $display("FAIL icp=%0d n_of=%0d chunk %0d got %h exp %h", ic, nof, n_chunks, out_data, e);
          end
        end
        n_chunks++;
      end
      @(negedge clk); cyc++;
      if (drain_done) dd++;
    end
    checks++;
    if (expq.size() != 0 || dd != 1) begin
      failures++; $display("FAIL icp=%0d n_of=%0d missing %0d chunks, drain_done %0d", ic, nof, expq.size(), dd);
    end
  endtask

  initial begin
    start = 0; n_of = 1; icp = 16; out_ready = 1;
    ppm_cfg = '0; ppm_cfg.scale = 16'd3; ppm_cfg.shift = 5'd6; ppm_cfg.relu = 0;
    for (int i = 0; i < 16; i++) bias[i] = 32'(i * 37) - 32'd300;
    for (int p = 0; p < 16; p++) for (int k = 0; k < 16; k++) ofv[p][k] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 6; n++) begin
      ppm_cfg.relu = 1'(n);
      run(16, 16); run(8, 5); run(4, 7); run(2, 16); run(1, 3); run(3, 1 + $urandom % 16);
      run(16, 1 + $urandom % 16);
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
