// flexnn_top: the FlexNN accelerator tile.
//
// A 16 x 16 array of versatile PEs (16 columns of 16), grouped in four
// super columns of four columns, fed from a 1.5 MB, 16-bank SRAM through the
// schedule-aware load path and drained back to the same SRAM through the
// per-column FlexTrees and local drains, the four super-column drain
// concatenators and the global drain, which re-compresses the outputs. All
// of it is steered by the layer descriptor in config_regs.
//
// The array controller (the paper's control logic and column control
// blocks, whose internals the paper does not give) runs one layer per
// `start`:
//   1. CLEAR the OF RFs and load round 0 into the shadow IF/FL RFs;
//   2. for each of n_rounds rounds: SWAP shadow and active RFs, then COMPUTE
//      while, if another round follows, the load path fills the shadow RFs
//      with the next round (double buffering: load overlaps compute);
//   3. optionally one neighbour / external psum ACCUM pass over the n_of OF
//      entries;
//   4. wait for the shadow OF RFs to be free, SNAPSHOT, and start the 16
//      local drains; the SCDCs and the global drain move the results to SRAM;
//   5. flush the global drain and raise `done` when it is idle.
// The host reaches the SRAM and the descriptor registers through plain
// ports; it may use the SRAM ports only while `busy` is low. The external
// psum bypass from SRAM is brought out as the ext_psum input.
//
// Lint note: the last column's psum_out has no right-hand neighbour and is
// left unconnected on purpose.
module flexnn_top
  import flexnn_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  // descriptor registers
  input  logic                    cfg_wr_en,
  input  logic [6:0]              cfg_wr_addr,
  input  logic [31:0]             cfg_wr_data,
  input  logic [6:0]              cfg_rd_addr,
  output logic [31:0]             cfg_rd_data,
  // host SRAM access (while idle)
  input  logic                    host_wr_en,
  input  logic [ADDR_W-1:0]       host_wr_addr,
  input  logic [LINE_BYTES*8-1:0] host_wr_data,
  input  logic                    host_rd_en,
  input  logic [ADDR_W-1:0]       host_rd_addr,
  output logic [LINE_BYTES*8-1:0] host_rd_data,
  input  logic [PSUM_W-1:0]       ext_psum,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  output logic [31:0]             overlap_cycles,  // load and compute both active
  output logic [15:0]             lines_written
);
  layer_cfg_t              cfg;
  typedef enum logic [3:0] {
    C_IDLE, C_LOAD0, C_SWAP, C_COMPUTE, C_WAIT, C_ACCUM, C_SNAPWAIT, C_DRAIN,
    C_DRAINWAIT, C_FLUSH, C_GDWAIT, C_DONE
  } cst_e;
  cst_e                    cst;
  logic [15:0][PSUM_W-1:0] bias;

  config_regs u_cfg (
    .clk, .rst_n, .wr_en(cfg_wr_en), .wr_addr(cfg_wr_addr), .wr_data(cfg_wr_data),
    .rd_addr(cfg_rd_addr), .rd_data(cfg_rd_data), .cfg, .bias
  );

  // ------------------------------------------------------------ SRAM
  logic                    lp_rd_en, gd_we;
  logic [ADDR_W-1:0]       lp_rd_addr, gd_waddr;
  logic [LINE_BYTES*8-1:0] sram_rd_data, gd_wdata;

  sram u_sram (
    .clk,
    .rd_en(busy ? lp_rd_en : host_rd_en),
    .rd_addr(busy ? lp_rd_addr : host_rd_addr),
    .rd_data(sram_rd_data),
    .wr_en(busy ? gd_we : host_wr_en),
    .wr_addr(busy ? gd_waddr : host_wr_addr),
    .wr_data(busy ? gd_wdata : host_wr_data)
  );
  assign host_rd_data = sram_rd_data;

  // ------------------------------------------------------------ load path
  logic       lp_start, lp_busy, lp_done;
  logic [3:0] lp_round;
  logic       if_we, fl_we;
  logic [N-1:0] if_col_mask, if_pe_mask, fl_col_mask, fl_pe_mask;
  logic [1:0] if_sub, fl_sub;
  chunk_t     if_chunk, fl_chunk;
  logic [15:0] lp_fetches;

  load_path u_load (
    .clk, .rst_n, .start(lp_start), .round(lp_round), .ifp(cfg.ifp), .flp(cfg.flp),
    .sram_rd_en(lp_rd_en), .sram_rd_addr(lp_rd_addr), .sram_rd_data,
    .if_we, .if_col_mask, .if_pe_mask, .if_sub, .if_chunk,
    .fl_we, .fl_col_mask, .fl_pe_mask, .fl_sub, .fl_chunk,
    .busy(lp_busy), .done(lp_done), .fetches(lp_fetches)
  );

  // ------------------------------------------------------------ PE array
  pe_cmd_e    cmd;
  logic [3:0] acc_idx;
  logic       drain_start;
  logic [N-1:0][N-1:0][PSUM_W-1:0] psum_out;
  logic [N-1:0] col_busy, col_sfull, col_dbusy, col_ov, col_rdy;
  logic [N-1:0][15:0][7:0] col_data;
  logic [N-1:0][N-1:0][2:0] n_mac;

  for (genvar c = 0; c < N; c++) begin : g_col
    pe_column u_col (
      .clk, .rst_n, .pe_cfg(cfg.pe), .cmd, .acc_idx, .ext_psum,
      .if_we(if_we && if_col_mask[c]), .if_pe_mask, .if_sub, .if_chunk,
      .fl_we(fl_we && fl_col_mask[c]), .fl_pe_mask, .fl_sub, .fl_chunk,
      .psum_x_in(c == 0 ? '0 : psum_out[(c == 0) ? 0 : c-1]),
      .psum_out(psum_out[c]),
      .drain_start, .n_of(cfg.n_of), .icp(cfg.icp), .ppm_cfg(cfg.ppm), .bias,
      .out_valid(col_ov[c]), .out_data(col_data[c]), .out_ready(col_rdy[c]),
      .busy(col_busy[c]), .shadow_full(col_sfull[c]), .drain_busy(col_dbusy[c]),
      .n_mac(n_mac[c])
    );
  end

  // ------------------------------------------------------------ drain
  logic gd_flush, gd_idle;
  logic [N_SC-1:0]        sc_v, sc_r;
  logic [N_SC-1:0][513:0] sc_pkt;
  for (genvar s = 0; s < N_SC; s++) begin : g_sc
    scdc #(.SCID(2'(s))) u_scdc (
      .clk, .rst_n, .col_valid(col_ov[4*s +: 4]), .col_data(col_data[4*s +: 4]),
      .col_ready(col_rdy[4*s +: 4]), .pkt_valid(sc_v[s]), .pkt(sc_pkt[s]), .pkt_ready(sc_r[s])
    );
  end

  global_drain u_gd (
    .clk, .rst_n, .pkt_valid(sc_v), .pkt(sc_pkt), .pkt_ready(sc_r),
    .of_base(cfg.of_base), .z_bytes(cfg.z_bytes), .flush(gd_flush),
    .restart(cst == C_IDLE && start),
    .sram_we(gd_we), .sram_waddr(gd_waddr), .sram_wdata(gd_wdata),
    .idle(gd_idle), .lines_written
  );

  // ------------------------------------------------------------ controller
  logic [3:0] r;
  logic       lp_pending;
  logic [3:0] wait_cnt;
  logic [4:0] k;

  assign busy = (cst != C_IDLE);

  always_comb begin
    cmd         = PE_NOP;
    lp_start    = 1'b0;
    lp_round    = r;
    drain_start = 1'b0;
    gd_flush    = 1'b0;
    acc_idx     = k[3:0];
    unique case (cst)
      C_IDLE:    if (start) begin cmd = PE_CLEAR; lp_start = 1'b1; lp_round = '0; end
      C_SWAP:    cmd = PE_SWAP;
      C_COMPUTE: begin
        cmd = PE_COMPUTE;
        if (5'(r) + 5'd1 < 5'(cfg.n_rounds)) begin lp_start = 1'b1; lp_round = r + 4'd1; end
      end
      C_ACCUM:   cmd = PE_ACCUM;
      C_SNAPWAIT: if (col_sfull == '0) cmd = PE_SNAPSHOT;
      C_DRAIN:   drain_start = 1'b1;
      C_FLUSH:   gd_flush = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cst <= C_IDLE; r <= '0; lp_pending <= 1'b0; done <= 1'b0; wait_cnt <= '0;
      k <= '0; overlap_cycles <= '0;
    end else begin
      done <= 1'b0;
      if (lp_busy && col_busy != '0) overlap_cycles <= overlap_cycles + 32'd1;
      if (lp_done) lp_pending <= 1'b0;
      unique case (cst)
        C_IDLE: if (start) begin
          r <= '0; lp_pending <= 1'b1; overlap_cycles <= '0; cst <= C_LOAD0;
        end
        C_LOAD0: if (lp_done || !lp_pending) cst <= C_SWAP;
        C_SWAP: cst <= C_COMPUTE;
        C_COMPUTE: begin
          if (lp_start) lp_pending <= 1'b1;
          wait_cnt <= 4'd2;
          cst <= C_WAIT;
        end
        C_WAIT: begin
          if (wait_cnt != 0) wait_cnt <= wait_cnt - 4'd1;
          else if (col_busy == '0 && !lp_pending && !lp_busy) begin
            if (5'(r) + 5'd1 < 5'(cfg.n_rounds)) begin
              r <= r + 4'd1;
              cst <= C_SWAP;
            end else begin
              k <= '0;
              cst <= cfg.nbr_accum ? C_ACCUM : C_SNAPWAIT;
            end
          end
        end
        C_ACCUM: begin
          k <= k + 5'd1;
          if (k + 5'd1 >= cfg.n_of) cst <= C_SNAPWAIT;
        end
        C_SNAPWAIT: if (col_sfull == '0) cst <= C_DRAIN;
        C_DRAIN: begin
          wait_cnt <= 4'd2;
          cst <= C_DRAINWAIT;
        end
        C_DRAINWAIT: begin
          if (wait_cnt != 0) wait_cnt <= wait_cnt - 4'd1;
          else if (col_dbusy == '0 && sc_v == '0) cst <= C_FLUSH;
        end
        C_FLUSH: begin
          wait_cnt <= 4'd3;
          cst <= C_GDWAIT;
        end
        C_GDWAIT: begin
          if (wait_cnt != 0) wait_cnt <= wait_cnt - 4'd1;
          else if (gd_idle) cst <= C_DONE;
        end
        C_DONE: begin
          done <= 1'b1;
          cst  <= C_IDLE;
        end
        default: cst <= C_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = ^{n_mac, lp_fetches};
endmodule
