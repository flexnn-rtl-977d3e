// tb_vpe: drives one VPE through every command and checks results against
// dense reference arithmetic computed here:
//  * the paper's sparse dot-product example (lane 0, result -28) and the
//    number of busy cycles (max over lanes of popcount(CSB) + 2),
//  * random VxV and MxM layers with both-sided sparsity, including that the
//    number of MAC operations equals the number of CSB ones (zero skipping)
//    and the MxM cycle count (round 0: P0+2, later rounds Pr+3),
//  * ELTWISE, POOL, external/neighbour ACCUM, SNAPSHOT and the shadow OF RF
//    read port with shadow_full / drain_done.
module tb_vpe;
  import flexnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pe_cfg_t  cfg;
  pe_cmd_e  cmd;
  logic [3:0] acc_idx, of_rd_idx;
  logic ld_if_we, ld_fl_we, shadow_full, drain_done, busy;
  logic [1:0] ld_if_sub, ld_fl_sub;
  chunk_t ld_if_chunk, ld_fl_chunk;
  logic [31:0] ext_psum, psum_x_in, psum_y_in, psum_out, of_rd_data;
  logic [2:0] n_mac;
  int checks = 0, failures = 0;
  int mac_total = 0;

  vpe dut (.*);

  always @(posedge clk) mac_total <= mac_total + int'(n_mac);

  logic signed [7:0] ifd [4][16];
  logic signed [7:0] fld [4][16];

  function automatic chunk_t pack(input logic signed [7:0] d [16]);
    chunk_t c;
    int n;
    c = '0; n = 0;
    for (int k = 0; k < 16; k++) if (d[k] != 0) begin c.bmp[k] = 1; c.data[n] = d[k]; n++; end
    return c;
  endfunction

  function automatic int pcnt(input int s_if, input int s_fl);
    int n = 0;
    for (int k = 0; k < 16; k++) if (ifd[s_if][k] != 0 && fld[s_fl][k] != 0) n++;
    return n;
  endfunction

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", what, $signed(got), $signed(exp));
    end
  endtask

  task automatic issue(input pe_cmd_e c);
    cmd = c;
    @(negedge clk);
    cmd = PE_NOP;
  endtask

  // load ifd/fld into the shadow bank and swap it in
  task automatic load_and_swap();
    for (int s = 0; s < 4; s++) begin
      ld_if_we = 1; ld_if_sub = 2'(s); ld_if_chunk = pack(ifd[s]);
      ld_fl_we = 1; ld_fl_sub = 2'(s); ld_fl_chunk = pack(fld[s]);
      @(negedge clk);
    end
    ld_if_we = 0; ld_fl_we = 0;
    issue(PE_SWAP);
  endtask

  // run COMPUTE and return the number of cycles busy was high
  task automatic compute(output int cyc);
    issue(PE_COMPUTE);
    cyc = 0;
    while (busy && cyc < 200) begin cyc++; @(negedge clk); end
  endtask

  task automatic snapshot_read(output logic [31:0] v [16]);
    issue(PE_SNAPSHOT);
    check("shadow_full set", 32'(shadow_full), 1);
    for (int k = 0; k < 16; k++) begin
      of_rd_idx = 4'(k);
      #1 v[k] = of_rd_data;
    end
    @(negedge clk);
    drain_done = 1;
    @(negedge clk);
    drain_done = 0;
    check("shadow_full cleared", 32'(shadow_full), 0);
  endtask

  task automatic randomize_data(input int density);
    for (int s = 0; s < 4; s++)
      for (int k = 0; k < 16; k++) begin
        ifd[s][k] = ($urandom % 100 < density) ? 8'($urandom) : 8'sd0;
        fld[s][k] = ($urandom % 100 < density) ? 8'($urandom) : 8'sd0;
      end
  endtask

  initial begin
    int cyc, m0, pmax, exp_cyc;
    logic [31:0] v [16];
    cfg = '0; cmd = PE_NOP; acc_idx = 0; of_rd_idx = 0;
    ld_if_we = 0; ld_fl_we = 0; ld_if_sub = 0; ld_fl_sub = 0; ld_if_chunk = '0; ld_fl_chunk = '0;
    ext_psum = 0; psum_x_in = 0; psum_y_in = 0; drain_done = 0;
    for (int s = 0; s < 4; s++) for (int k = 0; k < 16; k++) begin ifd[s][k] = 0; fld[s][k] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;

    // ---- paper example: IF 0,-2,4,6,0,1,15,0  FL 12,0,3,-7,0,2,0,0
    ifd[0][1] = -2; ifd[0][2] = 4; ifd[0][3] = 6; ifd[0][5] = 1; ifd[0][6] = 15;
    fld[0][0] = 12; fld[0][2] = 3; fld[0][3] = -7; fld[0][5] = 2;
    load_and_swap();
    cfg.mxm = 0; cfg.op = OP_MAC; cfg.of_base = 4'd5;
    issue(PE_CLEAR);
    m0 = mac_total;
    compute(cyc);
    check("paper example cycles", cyc, 3 + 2);
    check("paper example MACs", mac_total - m0, 3);
    snapshot_read(v);
    check("paper example dot product", v[5], -32'sd28);

    // ---- random VxV, accumulating over three rounds into OF[of_base]
    for (int n = 0; n < 20; n++) begin
      int ref_sum, macs;
      cfg.of_base = 4'($urandom);
      ref_sum = 0; macs = 0;
      for (int rr = 0; rr < 3; rr++) begin
        randomize_data(20 + 30 * rr);
        load_and_swap();
        pmax = 0;
        for (int i = 0; i < 4; i++) begin
          for (int k = 0; k < 16; k++) ref_sum += int'(ifd[i][k]) * int'(fld[i][k]);
          if (pcnt(i, i) > pmax) pmax = pcnt(i, i);
          macs += pcnt(i, i);
        end
        m0 = mac_total;
        compute(cyc);
        check("vxv cycles", cyc, pmax + 2);
        check("vxv mac count", mac_total - m0, pcnt(0,0) + pcnt(1,1) + pcnt(2,2) + pcnt(3,3));
      end
      snapshot_read(v);
      check("vxv result", v[cfg.of_base], ref_sum);
    end

    // ---- random MxM
    cfg.mxm = 1;
    for (int n = 0; n < 20; n++) begin
      int ref_of [16];
      randomize_data(50);
      load_and_swap();
      exp_cyc = 0;
      for (int r = 0; r < 4; r++) begin
        pmax = 0;
        for (int i = 0; i < 4; i++) begin
          ref_of[4*r+i] = 0;
          for (int k = 0; k < 16; k++) ref_of[4*r+i] += int'(ifd[r][k]) * int'(fld[i][k]);
          if (pcnt(r, i) > pmax) pmax = pcnt(r, i);
        end
        exp_cyc += pmax + ((r == 0) ? 2 : 3);
      end
      compute(cyc);
      check("mxm cycles", cyc, exp_cyc);
      snapshot_read(v);
      for (int k = 0; k < 16; k++) check("mxm result", v[k], ref_of[k]);
    end

    // ---- ELTWISE and POOL
    cfg.mxm = 0;
    for (int n = 0; n < 10; n++) begin
      randomize_data(60);
      load_and_swap();
      cfg.op = OP_ELTWISE;
      compute(cyc);
      snapshot_read(v);
      for (int k = 0; k < 16; k++) check("eltwise", v[k], int'(ifd[0][k]) + int'(ifd[1][k]));
      cfg.op = OP_POOL;
      compute(cyc);
      snapshot_read(v);
      for (int k = 0; k < 16; k++) begin
        int m;
        m = ifd[0][k];
        for (int s = 1; s < 4; s++) if (ifd[s][k] > m) m = ifd[s][k];
        check("pool", v[k], m);
      end
    end

    // ---- ACCUM from the external input and from both neighbours
    cfg = '0;
    cfg.en_ext_psum = 1;
    acc_idx = 4'd3; ext_psum = 32'd1000;
    issue(PE_ACCUM);
    cfg.en_ext_psum = 0; cfg.accum_nbr = 1; cfg.accum_dir = 0; psum_x_in = 32'd20;
    issue(PE_ACCUM);
    cfg.accum_dir = 1; psum_y_in = -32'sd7;
    issue(PE_ACCUM);
    #1 check("psum_out", psum_out, 1013);
    snapshot_read(v);
    check("accum result", v[3], 1013);
    check("cleared after snapshot", v[4], 0);

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
