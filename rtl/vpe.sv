// vpe: Versatile Processing Element of the FlexNN PE array.
//
// Storage (per the paper): four IF and four FL compressed-data (CD) register
// file subbanks of 16 bytes, each with a 16-bit sparsity bitmap (SP BMP RF),
// all double buffered (active + shadow), and a 16 x 32-bit OF RF, also with
// a shadow copy that the local drain reads while the next round computes.
// Loads from the distribution network always write the shadow IF/FL banks;
// PE_SWAP makes them active.
//
// Compute (PE_COMPUTE), selected by the layer descriptor:
//  * MAC, vector x vector: lane i pairs IF subbank i with FL subbank i (same
//    output channel, different input channels). The four lane products are
//    summed by the in-PE adder tree into OF[of_base].
//  * MAC, matrix x matrix: four rounds; in round r every lane takes IF
//    subbank r and its own FL subbank i (a different output channel) and
//    accumulates into OF[4r+i]. The OF entry numbering is this design's.
//  * ELTWISE: the multiplier is bypassed; OF[k] = IF0[k] + IF1[k] on the
//    dense values of subbanks 0 and 1 (paper: eltwise addition of two IF
//    inputs for residual layers).
//  * POOL: OF[k] = max over the four IF subbanks of dense byte k. The paper
//    only names a pooling unit; max pooling over four points is this
//    design's choice.
// In the MAC templates the csal unit ANDs the bitmaps and one cag per lane
// walks the non-zero pairs, so only pairs with both operands non-zero take a
// cycle. Arithmetic is signed INT8 x INT8 into 32-bit psums (FP16/BF16 of
// the paper are not built).
//
// PE_ACCUM adds to OF[acc_idx] either the external psum (en_ext_psum), or
// the psum of the left (accum_dir=0, PSumX) or bottom (accum_dir=1, PSumY)
// neighbour (accum_nbr); psum_out offers OF[acc_idx] to the right and top
// neighbours. These three selects are the multiplexers of the paper's PE
// drawing; stepping them as a separate command is this design's choice.
// PE_SNAPSHOT moves the active OF RF to the shadow OF RF (and clears the
// active one) and raises shadow_full until the local drain pulses drain_done.
//
// Timing: MAC compute keeps busy high for max over lanes of
// (popcount(CSB)+1) cycles per round, plus one start cycle; ELTWISE and
// POOL take one cycle. Commands are accepted only when busy is low.
//
// Lint notes: the cag busy and pos outputs are not needed here (lane_fin and
// the read addresses carry the same information), and the assertion's
// `disable iff (!rst_n)` makes the linter see rst_n used synchronously too;
// both are harmless.
module vpe
  import flexnn_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  pe_cfg_t               cfg,
  input  pe_cmd_e               cmd,
  input  logic [3:0]            acc_idx,
  // load port (IF NoC / FL NoC) into the shadow RFs
  input  logic                  ld_if_we,
  input  logic [1:0]            ld_if_sub,
  input  chunk_t                ld_if_chunk,
  input  logic                  ld_fl_we,
  input  logic [1:0]            ld_fl_sub,
  input  chunk_t                ld_fl_chunk,
  // psum accumulation
  input  logic [PSUM_W-1:0]     ext_psum,
  input  logic [PSUM_W-1:0]     psum_x_in,
  input  logic [PSUM_W-1:0]     psum_y_in,
  output logic [PSUM_W-1:0]     psum_out,
  // drain
  input  logic [3:0]            of_rd_idx,
  output logic [PSUM_W-1:0]     of_rd_data,
  output logic                  shadow_full,
  input  logic                  drain_done,
  // status
  output logic                  busy,
  output logic [2:0]            n_mac        // MAC lanes firing this cycle
);
  chunk_t            if_rf [2][LANES];
  chunk_t            fl_rf [2][LANES];
  logic              act;
  logic [PSUM_W-1:0] of_rf [OF_DEPTH];
  logic [PSUM_W-1:0] of_sh [OF_DEPTH];

  // ---------------------------------------------------------------- sparsity
  logic [1:0]                           round;
  logic [LANES-1:0][SUB_BYTES-1:0]      if_bmps, fl_bmps, lane_if_bmp, csb;
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      if_bmps[i] = if_rf[act][i].bmp;
      fl_bmps[i] = fl_rf[act][i].bmp;
    end
  end

  csal #(.LANES(LANES), .BMP_W(SUB_BYTES)) u_csal (
    .if_bmp(if_bmps), .fl_bmp(fl_bmps), .mxm(cfg.mxm), .if_sel(round),
    .lane_if_bmp(lane_if_bmp), .csb(csb)
  );

  logic             cag_start;
  logic [LANES-1:0] cag_valid, cag_done, cag_busy, lane_fin;
  logic [3:0]       if_ra [LANES];
  logic [3:0]       fl_ra [LANES];
  logic [3:0]       cag_pos [LANES];

  for (genvar i = 0; i < LANES; i++) begin : g_cag
    cag #(.BMP_W(SUB_BYTES)) u_cag (
      .clk, .rst_n, .start(cag_start), .csb(csb[i]),
      .if_bmp(lane_if_bmp[i]), .fl_bmp(fl_bmps[i]),
      .valid(cag_valid[i]), .if_ra(if_ra[i]), .fl_ra(fl_ra[i]),
      .pos(cag_pos[i]), .busy(cag_busy[i]), .done(cag_done[i])
    );
  end

  // ------------------------------------------------------------ MAC lanes
  logic                     running, restart;
  logic signed [PSUM_W-1:0] prod [LANES];
  logic signed [PSUM_W-1:0] tree_sum;
  logic                     mac_cmd;

  assign mac_cmd   = (cmd == PE_COMPUTE) && (cfg.op == OP_MAC) && !busy;
  assign cag_start = mac_cmd || restart;
  assign busy      = running;

  always_comb begin
    tree_sum = '0;
    n_mac    = '0;
    for (int i = 0; i < LANES; i++) begin
      logic [1:0] isub;
      isub    = cfg.mxm ? round : 2'(i);
      prod[i] = cag_valid[i]
              ? PSUM_W'($signed(if_rf[act][isub].data[if_ra[i]]) * $signed(fl_rf[act][i].data[fl_ra[i]]))
              : '0;
      tree_sum = tree_sum + prod[i];
      n_mac    = n_mac + 3'(cag_valid[i]);
    end
  end

  // dense value of byte k of a compressed chunk
  function automatic logic signed [7:0] dense(input chunk_t c, input int k);
    logic [3:0] idx;
    idx = '0;
    for (int j = 0; j < SUB_BYTES; j++) if (j < k) idx = idx + 4'(c.bmp[j]);
    return c.bmp[k] ? $signed(c.data[idx]) : 8'sd0;
  endfunction

  // POOL: maximum over the four IF subbanks of each dense byte
  logic signed [7:0] pool_max [OF_DEPTH];
  always_comb begin
    for (int k = 0; k < OF_DEPTH; k++) begin
      pool_max[k] = dense(if_rf[act][0], k);
      for (int s = 1; s < LANES; s++)
        if (dense(if_rf[act][s], k) > pool_max[k]) pool_max[k] = dense(if_rf[act][s], k);
    end
  end

  logic [PSUM_W-1:0] addend;
  always_comb begin
    if (cfg.en_ext_psum)    addend = ext_psum;
    else if (cfg.accum_nbr) addend = cfg.accum_dir ? psum_y_in : psum_x_in;
    else                    addend = '0;
  end

  assign psum_out   = of_rf[acc_idx];
  assign of_rd_data = of_sh[of_rd_idx];

  // -------------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act         <= 1'b0;
      running     <= 1'b0;
      restart     <= 1'b0;
      round       <= '0;
      lane_fin    <= '0;
      shadow_full <= 1'b0;
      for (int k = 0; k < OF_DEPTH; k++) begin
        of_rf[k] <= '0;
        of_sh[k] <= '0;
      end
      for (int b = 0; b < 2; b++)
        for (int i = 0; i < LANES; i++) begin
          if_rf[b][i] <= '0;
          fl_rf[b][i] <= '0;
        end
    end else begin
      restart <= 1'b0;
      // loads always target the shadow bank
      if (ld_if_we) if_rf[!act][ld_if_sub] <= ld_if_chunk;
      if (ld_fl_we) fl_rf[!act][ld_fl_sub] <= ld_fl_chunk;
      if (drain_done) shadow_full <= 1'b0;

      if (running) begin
        // accumulate the products of this cycle
        if (cfg.mxm) begin
          for (int i = 0; i < LANES; i++)
            if (cag_valid[i]) of_rf[{round, 2'(i)}] <= of_rf[{round, 2'(i)}] + prod[i];
        end else if (|cag_valid) begin
          of_rf[cfg.of_base] <= of_rf[cfg.of_base] + tree_sum;
        end
        if (&(lane_fin | cag_done)) begin
          lane_fin <= '0;
          if (cfg.mxm && round != 2'd3) begin
            round   <= round + 2'd1;
            restart <= 1'b1;
          end else begin
            round   <= '0;
            running <= 1'b0;
          end
        end else begin
          lane_fin <= lane_fin | cag_done;
        end
      end else begin
        unique case (cmd)
          PE_SWAP:  act <= !act;
          PE_CLEAR: for (int k = 0; k < OF_DEPTH; k++) of_rf[k] <= '0;
          PE_COMPUTE: begin
            unique case (cfg.op)
              OP_MAC: begin
                running  <= 1'b1;
                round    <= '0;
                lane_fin <= '0;
              end
              OP_ELTWISE:
                for (int k = 0; k < OF_DEPTH; k++)
                  of_rf[k] <= PSUM_W'(dense(if_rf[act][0], k)) + PSUM_W'(dense(if_rf[act][1], k));
              OP_POOL:
                for (int k = 0; k < OF_DEPTH; k++) of_rf[k] <= PSUM_W'(pool_max[k]);
              default: ;
            endcase
          end
          PE_ACCUM: of_rf[acc_idx] <= of_rf[acc_idx] + addend;
          PE_SNAPSHOT: begin
            for (int k = 0; k < OF_DEPTH; k++) begin
              of_sh[k] <= of_rf[k];
              of_rf[k] <= '0;
            end
            shadow_full <= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

  // a snapshot may not overwrite OF points the local drain has not taken
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd == PE_SNAPSHOT && !busy) |-> (!shadow_full || drain_done));
endmodule
