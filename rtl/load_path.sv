// load_path: load FSM, tensor address generation, IF/FL circular buffers,
// sparse byte select and mux arrays of the schedule-aware distribution
// network (the load half of the SDN).
//
// On `start` (the descriptors are set, `round` is captured) the load FSM walks every destination
// PE subbank of the array and fetches its compressed chunk from SRAM.
// Weights are partitioned within a column and activations across columns,
// as in the paper, so an FL chunk depends on (PE row p, subbank s) and is
// broadcast to all 16 columns, while an IF chunk depends on (column c,
// p, s). The address of a chunk is the affine tensor address
//   line = base + round*round_stride + c*col_stride + p*pe_stride + s*sb_stride
// and its dense byte window starts at
//   (c*col_boff + p*pe_boff + s*sb_boff) mod 16 with `len` bytes.
// A stride and byte offset of zero along PE rows (or columns) means every
// PE (column) wants the same chunk: it is fetched once and multicast with a
// destination mask, which gives the unicast / multicast / broadcast
// patterns of the NoC. FL chunks are fetched first, then IF chunks.
//
// An SRAM line is {14 unused bytes, 16-bit bitmap, 16 compressed bytes}
// (this design's line format, shared with the global drain). A fetch is
// only issued when the circular buffer of that operand has room counting
// the fetch in flight. Each cycle the head of each buffer passes through a
// sparse_byte_select (logical -> physical byte select) and the mux array
// into one NoC transfer {column mask, PE mask, subbank, chunk}. The PEs
// always load their shadow RFs, so the array can compute on the active RFs
// meanwhile. `done` pulses when everything is delivered.
//
// Timing: one SRAM read per cycle, read latency one cycle, one IF and one FL
// NoC transfer per cycle.
module load_path
  import flexnn_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [3:0]              round,
  input  ld_pat_t                 ifp,
  input  ld_pat_t                 flp,
  output logic                    sram_rd_en,
  output logic [ADDR_W-1:0]       sram_rd_addr,
  input  logic [LINE_BYTES*8-1:0] sram_rd_data,
  // IF NoC
  output logic                    if_we,
  output logic [N-1:0]            if_col_mask,
  output logic [N-1:0]            if_pe_mask,
  output logic [1:0]              if_sub,
  output chunk_t                  if_chunk,
  // FL NoC
  output logic                    fl_we,
  output logic [N-1:0]            fl_col_mask,
  output logic [N-1:0]            fl_pe_mask,
  output logic [1:0]              fl_sub,
  output chunk_t                  fl_chunk,
  output logic                    busy,
  output logic                    done,
  output logic [15:0]             fetches      // SRAM lines fetched this load
);
  typedef struct packed {
    logic [N-1:0] col_mask;
    logic [N-1:0] pe_mask;
    logic [1:0]   sub;
    logic [3:0]   boff;
    logic [4:0]   len;
    logic [15:0]  bmp;
    logic [127:0] data;
  } cb_ent_t;
  localparam int CBW = $bits(cb_ent_t);

  typedef enum logic [1:0] {L_IDLE, L_FL, L_IF, L_WAIT} st_e;
  st_e st;
  logic [3:0] c, p;
  logic [1:0] s;
  logic [3:0] rnd;    // round captured at start

  // ------------------------------------------------ address generation
  logic fl_bcast_pe, if_bcast_pe, if_bcast_col;
  assign fl_bcast_pe  = (flp.pe_stride == '0) && (flp.pe_boff == '0);
  assign if_bcast_pe  = (ifp.pe_stride == '0) && (ifp.pe_boff == '0);
  assign if_bcast_col = (ifp.col_stride == '0) && (ifp.col_boff == '0);

  logic [ADDR_W-1:0] cur_addr;
  cb_ent_t           cur_meta;
  always_comb begin
    ld_pat_t pat;
    pat = (st == L_IF) ? ifp : flp;
    cur_addr = pat.base + ADDR_W'(rnd) * pat.round_stride + ADDR_W'(s) * pat.sb_stride +
               ADDR_W'(p) * pat.pe_stride + ((st == L_IF) ? ADDR_W'(c) * pat.col_stride : '0);
    cur_meta = '0;
    cur_meta.sub  = s;
    cur_meta.len  = pat.len;
    cur_meta.boff = 4'(p * pat.pe_boff + 4'(s) * pat.sb_boff + ((st == L_IF) ? c * pat.col_boff : 4'd0));
    if (st == L_IF) begin
      cur_meta.col_mask = if_bcast_col ? '1 : N'(1) << c;
      cur_meta.pe_mask  = if_bcast_pe  ? '1 : N'(1) << p;
    end else begin
      cur_meta.col_mask = '1;
      cur_meta.pe_mask  = fl_bcast_pe ? '1 : N'(1) << p;
    end
  end

  // ------------------------------------------------ circular buffers
  logic    if_space, fl_space, if_empty, fl_empty;
  logic    rd_q, rd_is_if_q;
  cb_ent_t meta_q, ret_ent, if_head, fl_head;
  logic    issue;

  assign issue        = ((st == L_FL) && fl_space) || ((st == L_IF) && if_space);
  assign sram_rd_en   = issue;
  assign sram_rd_addr = cur_addr;

  always_comb begin
    ret_ent      = meta_q;
    ret_ent.bmp  = sram_rd_data[143:128];
    ret_ent.data = sram_rd_data[127:0];
  end

  circular_buffer #(.DEPTH(8), .W(CBW)) u_if_cb (
    .clk, .rst_n, .wr_valid(rd_q && rd_is_if_q), .wr_data(ret_ent),
    .rd_en(!if_empty), .rd_data(if_head), .empty(if_empty),
    .inflight({1'b0, rd_q && rd_is_if_q}), .space(if_space)
  );
  circular_buffer #(.DEPTH(8), .W(CBW)) u_fl_cb (
    .clk, .rst_n, .wr_valid(rd_q && !rd_is_if_q), .wr_data(ret_ent),
    .rd_en(!fl_empty), .rd_data(fl_head), .empty(fl_empty),
    .inflight({1'b0, rd_q && !rd_is_if_q}), .space(fl_space)
  );

  // ------------------------------------------------ byte select + mux array
  logic [4:0] if_ps, if_pc, fl_ps, fl_pc;
  sparse_byte_select u_if_sbs (
    .bmp(if_head.bmp), .data(if_head.data), .lstart(if_head.boff), .llen(if_head.len),
    .pstart(if_ps), .pcnt(if_pc), .sub_bmp(if_chunk.bmp), .sub_data(if_chunk.data)
  );
  sparse_byte_select u_fl_sbs (
    .bmp(fl_head.bmp), .data(fl_head.data), .lstart(fl_head.boff), .llen(fl_head.len),
    .pstart(fl_ps), .pcnt(fl_pc), .sub_bmp(fl_chunk.bmp), .sub_data(fl_chunk.data)
  );
  assign if_we       = !if_empty;
  assign if_col_mask = if_head.col_mask;
  assign if_pe_mask  = if_head.pe_mask;
  assign if_sub      = if_head.sub;
  assign fl_we       = !fl_empty;
  assign fl_col_mask = fl_head.col_mask;
  assign fl_pe_mask  = fl_head.pe_mask;
  assign fl_sub      = fl_head.sub;
  assign busy        = (st != L_IDLE);

  // ------------------------------------------------ load FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= L_IDLE; c <= '0; p <= '0; s <= '0; rnd <= '0;
      rd_q <= 1'b0; rd_is_if_q <= 1'b0; meta_q <= '0; done <= 1'b0; fetches <= '0;
    end else begin
      done       <= 1'b0;
      rd_q       <= issue;
      rd_is_if_q <= (st == L_IF);
      meta_q     <= cur_meta;
      if (issue) fetches <= fetches + 16'd1;
      unique case (st)
        L_IDLE: if (start) begin
          st <= L_FL; c <= '0; p <= '0; s <= '0; fetches <= '0; rnd <= round;
        end
        L_FL: if (fl_space) begin
          s <= s + 2'd1;
          if (s == 2'd3) begin
            p <= p + 4'd1;
            if (p == 4'd15 || fl_bcast_pe) begin
              p <= '0;
              st <= L_IF;
            end
          end
        end
        L_IF: if (if_space) begin
          s <= s + 2'd1;
          if (s == 2'd3) begin
            p <= p + 4'd1;
            if (p == 4'd15 || if_bcast_pe) begin
              p <= '0;
              c <= c + 4'd1;
              if (c == 4'd15 || if_bcast_col) begin
                c  <= '0;
                st <= L_WAIT;
              end
            end
          end
        end
        L_WAIT: if (!rd_q && if_empty && fl_empty) begin
          done <= 1'b1;
          st   <= L_IDLE;
        end
        default: st <= L_IDLE;
      endcase
    end
  end
  // physical select counts are informational (one NoC transfer per chunk)
  logic unused;
  assign unused = ^{if_ps, if_pc, fl_ps, fl_pc, sram_rd_data[255:144]};
endmodule
