// global_drain: collects the output activations of all super columns,
// regroups them into Z-lines (1 x 1 x Z: all output channels of one x,y
// point) and writes them to SRAM zero-value compressed.
//
// Datapath, in the paper's order:
//  1. Drain staging buffer (DSB), 256 B = 16 rows of 16 B. The super-column
//     NoC delivers at most one 514-bit SCDC packet per cycle; its SCID
//     selects DSB rows 4*SCID .. 4*SCID+3 (one row per column).
//  2. Four global drain muxes (GDM). When the DSB is full, each GDM in
//     every cycle takes the lowest pending DSB row that maps to its own
//     group of drain banks (16:1 entry select), picks the bank (bank
//     select), rotates the row so its first byte lands at the right Z
//     offset (rotator) and writes only the valid bytes (byte enable).
//     Rows carry z_bytes valid bytes each, so 16/z_bytes consecutive rows
//     are concatenated into one 16-byte bank. A bank that is still full
//     and not yet encoded is never overwritten: its GDM waits.
//  3. 64 drain banks (DB) of 16 B in 4 groups of 16 (1 KB).
//  4. Drain address generation (DAGU): every bank carries the running
//     Z-line number it was filled with; line n goes to SRAM line
//     of_base + n.
//  5. Four sparse encoders, one per group, read their group's banks in
//     order as they become full.
//  6. Four write-combining buffers form the 32-byte SRAM line
//     {14 zero bytes, 16-bit bitmap, 16 compressed bytes}; one line per
//     cycle is written, lowest group first.
// `flush` marks partly filled banks as full at the end of a layer;
// `restart` (at the start of a layer, while idle) puts the Z-line count and
// the readers back to line 0 / bank 0 so each layer's lines start at
// of_base.
//
// The row-to-bank rule (Z-line n = running count of filled banks, group
// n/16 mod 4, bank n mod 16), the SRAM line format and the write priority
// are this design's choices; the sizes and the four GDM stages are the
// paper's. The bank multicast the paper allows (one row to several banks)
// is not used by this rule.
//
// Lint notes: only bits [5:0] of a Z-line number select a drain bank, and
// the encoders' byte count is not needed because the SRAM line keeps the
// bitmap; these unused bits are intentional.
module global_drain
  import flexnn_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [N_SC-1:0]         pkt_valid,
  input  logic [N_SC-1:0][513:0]  pkt,
  output logic [N_SC-1:0]         pkt_ready,
  input  logic [ADDR_W-1:0]       of_base,
  input  logic [4:0]              z_bytes,
  input  logic                    flush,
  input  logic                    restart,   // new layer: Z-line count and readers to 0 (only when idle)
  output logic                    sram_we,
  output logic [ADDR_W-1:0]       sram_waddr,
  output logic [LINE_BYTES*8-1:0] sram_wdata,
  output logic                    idle,
  output logic [15:0]             lines_written
);
  // ------------------------------------------------------------ DSB
  logic [15:0][15:0][7:0] dsb;
  logic [3:0]             dsb_full;
  logic [15:0]            pending;      // DSB rows still to be moved
  logic [ADDR_W-1:0]      line_base;    // Z-line number of DSB row 0
  logic                   processing;

  // accept one SCDC packet per cycle into a free DSB quarter
  logic       acc;
  logic [1:0] acc_port;
  always_comb begin
    acc = 1'b0;
    acc_port = '0;
    pkt_ready = '0;
    for (int s = N_SC-1; s >= 0; s--)
      if (pkt_valid[s] && !processing && !dsb_full[pkt[s][513:512]]) begin
        acc = 1'b1;
        acc_port = 2'(s);
      end
    if (acc) pkt_ready[acc_port] = 1'b1;
  end

  // ------------------------------------------------------------ GDM
  logic [63:0][15:0][7:0] db;
  logic [63:0][15:0]      db_mask;
  logic [63:0]            db_full;
  logic [63:0][ADDR_W-1:0] db_tag;

  // z_bytes is a power of two (1..16); anything else is treated as 16.
  // lzb = log2(z_bytes); a drain bank takes 16/z_bytes = 2^(4-lzb) rows.
  logic [4:0] zb;
  logic [2:0] lzb;
  always_comb begin
    unique case (z_bytes)
      5'd1:    begin zb = 5'd1; lzb = 3'd0; end
      5'd2:    begin zb = 5'd2; lzb = 3'd1; end
      5'd4:    begin zb = 5'd4; lzb = 3'd2; end
      5'd8:    begin zb = 5'd8; lzb = 3'd3; end
      default: begin zb = 5'd16; lzb = 3'd4; end
    endcase
  end

  function automatic logic [ADDR_W-1:0] row_line(input logic [3:0] r);
    return line_base + ADDR_W'(r >> (3'd4 - lzb));
  endfunction

  logic [3:0]       g_go;
  logic [3:0][3:0]  g_row;
  logic [3:0][5:0]  g_bank;
  logic [3:0][15:0][7:0] g_data;
  logic [3:0][15:0] g_be;
  always_comb begin
    for (int g = 0; g < 4; g++) begin
      g_go[g] = 1'b0;
      g_row[g] = '0;
      for (int r = 15; r >= 0; r--) begin
        logic [ADDR_W-1:0] ln;
        ln = row_line(4'(r));
        if (processing && pending[r] && ln[5:4] == 2'(g)) begin
          g_go[g]  = 1'b1;
          g_row[g] = 4'(r);
        end
      end
      begin
        logic [ADDR_W-1:0] ln;
        logic [3:0] rot, sub;
        ln        = row_line(g_row[g]);
        g_bank[g] = ln[5:0];
        sub       = g_row[g] & ~(4'hf << (3'd4 - lzb));  // row within its bank
        rot       = sub << lzb;                           // Z offset of the row
        for (int i = 0; i < 16; i++) begin
          g_data[g][4'(i) + rot] = dsb[g_row[g]][i];
          g_be[g][4'(i) + rot]   = (i < int'(zb));
        end
        if (db_full[g_bank[g]]) g_go[g] = 1'b0;  // protect unencoded bank
      end
    end
  end

  // ------------------------------------------------------ readers + SE
  logic [3:0][3:0]          rp;
  logic [3:0]               se_in_v, se_out_v;
  logic [3:0][15:0][7:0]    se_in_d, se_out_d;
  logic [3:0][15:0]         se_bmp;
  logic [3:0][4:0]          se_cnt;
  logic [3:0][ADDR_W-1:0]   se_tag;
  logic [3:0]               wcb_v;
  logic [3:0][LINE_BYTES*8-1:0] wcb_d;
  logic [3:0][ADDR_W-1:0]   wcb_a;
  logic [3:0]               wr_grant;

  always_comb begin
    for (int g = 0; g < 4; g++) begin
      se_in_v[g] = db_full[{2'(g), rp[g]}] && !wcb_v[g] && !se_out_v[g];
      se_in_d[g] = db[{2'(g), rp[g]}];
    end
    wr_grant = '0;
    for (int g = 3; g >= 0; g--) if (wcb_v[g]) wr_grant = 4'(1 << g);
  end

  for (genvar g = 0; g < 4; g++) begin : g_se
    sparse_encoder #(.N(16)) u_se (
      .clk, .rst_n, .in_valid(se_in_v[g]), .in_data(se_in_d[g]),
      .out_valid(se_out_v[g]), .out_data(se_out_d[g]), .out_bmp(se_bmp[g]),
      .out_cnt(se_cnt[g])
    );
  end

  always_comb begin
    sram_we    = |wr_grant;
    sram_waddr = '0;
    sram_wdata = '0;
    for (int g = 0; g < 4; g++)
      if (wr_grant[g]) begin
        sram_waddr = wcb_a[g];
        sram_wdata = wcb_d[g];
      end
  end

  // pending rows after this cycle's GDM moves
  logic [15:0] pend_n;
  always_comb begin
    pend_n = pending;
    for (int g = 0; g < 4; g++) if (g_go[g]) pend_n[g_row[g]] = 1'b0;
  end

  assign idle = !processing && dsb_full == '0 && db_mask == '0 && db_full == '0 &&
                se_out_v == '0 && wcb_v == '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dsb <= '0; dsb_full <= '0; pending <= '0; line_base <= '0; processing <= 1'b0;
      db <= '0; db_mask <= '0; db_full <= '0; db_tag <= '0;
      rp <= '0; se_tag <= '0; wcb_v <= '0; wcb_d <= '0; wcb_a <= '0;
      lines_written <= '0;
    end else begin
      // staging
      if (acc) begin
        for (int c = 0; c < 4; c++)
          dsb[{pkt[acc_port][513:512], 2'(c)}] <= pkt[acc_port][128*c +: 128];
        dsb_full[pkt[acc_port][513:512]] <= 1'b1;
      end
      if (!processing && dsb_full == 4'hf) begin
        processing <= 1'b1;
        pending    <= 16'hffff;
      end
      // GDM writes
      if (processing) begin
        for (int g = 0; g < 4; g++)
          if (g_go[g]) begin
            for (int i = 0; i < 16; i++)
              if (g_be[g][i]) db[g_bank[g]][i] <= g_data[g][i];
            db_mask[g_bank[g]] <= db_mask[g_bank[g]] | g_be[g];
            db_tag[g_bank[g]]  <= row_line(g_row[g]);
            if ((db_mask[g_bank[g]] | g_be[g]) == 16'hffff) db_full[g_bank[g]] <= 1'b1;
          end
        pending <= pend_n;
        if (pend_n == '0) begin
          processing <= 1'b0;
          dsb_full   <= '0;
          line_base  <= line_base + ADDR_W'(zb);
        end
      end
      if (flush)
        for (int b = 0; b < 64; b++) if (db_mask[b] != '0) db_full[b] <= 1'b1;
      // encoders
      for (int g = 0; g < 4; g++) begin
        if (se_in_v[g]) begin
          se_tag[g] <= db_tag[{2'(g), rp[g]}];
          db[{2'(g), rp[g]}]      <= '0;
          db_mask[{2'(g), rp[g]}] <= '0;
          db_full[{2'(g), rp[g]}] <= 1'b0;
          rp[g] <= rp[g] + 4'd1;
        end
        if (se_out_v[g]) begin
          wcb_v[g] <= 1'b1;
          wcb_d[g] <= {112'd0, se_bmp[g], se_out_d[g]};
          wcb_a[g] <= of_base + se_tag[g];
        end else if (wr_grant[g]) begin
          wcb_v[g] <= 1'b0;
        end
      end
      if (sram_we) lines_written <= lines_written + 16'd1;
      if (restart) begin
        line_base <= '0;
        rp        <= '0;
      end
    end
  end
endmodule
