// local_drain: per-column local drain (LD) with its PPMs and column buffer.
//
// When the column's PEs hold a round of OF points in their shadow OF RFs,
// `start` launches the drain. For every OF RF entry k < n_of the LD puts
// k on of_rd_idx (all 16 PEs), pushes the 16 psums into the FlexTree and
// waits for the taps of the level chosen by IC_P. The taps go through the
// psum mux (15 taps to 4 PPMs) into the four PPMs. As in the paper each
// PPM serves four PEs: PPM j takes the taps that cover PEs 4j..4j+3 and
// writes, through its 4:1 demux, column buffer entries 4j..4j+3 in order.
// With 8 taps a PPM gets two taps per entry index and needs two cycles.
// When every PPM in use has filled its four entries, or the layer's last
// point is out, the 16-byte column buffer goes to the SCDC, with zeros in
// entries that no PE filled. For IC_P = 1 each entry k is read twice, once
// per half of the PE pairs (see flextree). Finally drain_done tells the PEs
// that the shadow OF RF is free.
//
// The tap-to-PPM rule, the bias of entry e being bias[e], and the column
// buffer holding only the INT8 byte of each of its 16 entries are this
// design's choices; the counts (4 PPMs, 16 entries, 16-byte chunks) are
// the paper's.
//
// Timing: per OF entry 1 issue cycle + tree latency (1-4) + 1 or 2 PPM
// cycles; each 16-byte send waits for the PPM pipeline to empty, then for
// out_ready.
module local_drain
  import flexnn_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [4:0]               n_of,
  input  logic [4:0]               icp,
  input  ppm_cfg_t                 ppm_cfg,
  input  logic [15:0][PSUM_W-1:0]  bias,
  // to the PEs / FlexTree
  output logic [3:0]               of_rd_idx,
  output logic                     ft_in_valid,
  output logic                     ft_half,
  input  logic [14:0][PSUM_W-1:0]  taps,
  input  logic [3:0]               tap_base,
  input  logic [3:0]               n_taps,
  input  logic                     ft_out_valid,
  output logic                     drain_done,
  // to the SCDC
  output logic                     out_valid,
  output logic [15:0][7:0]         out_data,
  input  logic                     out_ready,
  output logic                     busy
);
  typedef enum logic [2:0] {S_IDLE, S_ISSUE, S_WAIT, S_PPM, S_SETTLE, S_SEND, S_DONE} st_e;
  st_e st;

  logic [3:0]              k;
  logic                    h;
  logic                    b;          // PPM batch within one OF entry
  logic [7:0][PSUM_W-1:0]  tbuf;
  logic [3:0]              nt;
  logic [3:0][2:0]         slot;       // next entry of each PPM, 0..4
  logic [15:0][7:0]        cb;
  logic                    last_entry; // this entry was the last one of the layer

  // PPM inputs for the current batch
  logic [3:0]              p_v;
  logic [3:0][PSUM_W-1:0]  p_psum;
  logic [3:0][PSUM_W-1:0]  p_bias;
  logic [3:0][3:0]         p_ent;
  logic [3:0][3:0]         q_ent;
  logic [3:0]              q_v;
  logic [3:0]              o_v;
  logic [3:0][7:0]         o_of;
  logic                    round_full;

  always_comb begin
    for (int j = 0; j < 4; j++) begin
      int t;
      logic ok;
      if (nt >= 4'd4) begin
        t  = j * (int'(nt) / 4) + int'(b);
        ok = 1'b1;
      end else begin
        t  = (j * int'(nt)) / 4;
        ok = ((j * int'(nt)) % 4 == 0) && !b;
      end
      p_v[j]    = (st == S_PPM) && ok && (t < int'(nt));
      p_psum[j] = tbuf[t[2:0]];
      p_ent[j]  = 4'(4*j) + 4'(slot[j]);
      p_bias[j] = bias[p_ent[j]];
    end
  end

  for (genvar j = 0; j < 4; j++) begin : g_ppm
    ppm #(.W(PSUM_W)) u_ppm (
      .clk, .rst_n, .in_valid(p_v[j]), .psum(p_psum[j]), .bias(p_bias[j]),
      .scale(ppm_cfg.scale), .shift(ppm_cfg.shift), .relu(ppm_cfg.relu),
      .out_valid(o_v[j]), .of(o_of[j])
    );
  end

  // every PPM that this tap count uses has filled its four entries
  always_comb begin
    round_full = 1'b0;
    for (int j = 0; j < 4; j++) if (slot[j] == 3'd4) round_full = 1'b1;
  end

  assign of_rd_idx   = k;
  assign ft_half     = h;
  assign ft_in_valid = (st == S_ISSUE);
  assign out_valid   = (st == S_SEND);
  assign out_data    = cb;
  assign busy        = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; k <= '0; h <= 1'b0; b <= 1'b0; tbuf <= '0; nt <= '0;
      slot <= '0; cb <= '0; q_v <= '0; q_ent <= '0; drain_done <= 1'b0;
      last_entry <= 1'b0;
    end else begin
      drain_done <= 1'b0;
      q_v   <= p_v;
      q_ent <= p_ent;
      for (int j = 0; j < 4; j++) if (o_v[j] && q_v[j]) cb[q_ent[j]] <= o_of[j];
      unique case (st)
        S_IDLE: if (start) begin
          k <= '0; h <= 1'b0; slot <= '0; cb <= '0;
          st <= S_ISSUE;
        end
        S_ISSUE: st <= S_WAIT;
        S_WAIT: if (ft_out_valid) begin
          for (int t = 0; t < 8; t++) tbuf[t] <= taps[4'(t) + tap_base < 4'd15 ? 4'(t) + tap_base : 4'd14];
          nt <= n_taps;
          b  <= 1'b0;
          st <= S_PPM;
        end
        S_PPM: begin
          for (int j = 0; j < 4; j++) if (p_v[j]) slot[j] <= slot[j] + 3'd1;
          if (nt == 4'd8 && !b) begin
            b <= 1'b1;
          end else begin
            // advance to the next OF entry / half
            logic fin;
            fin = 1'b0;
            if (icp <= 5'd1 && !h) h <= 1'b1;
            else begin
              h <= 1'b0;
              k <= k + 4'd1;
              fin = (5'(k) + 5'd1 >= n_of);
            end
            last_entry <= fin;
            st <= S_SETTLE;
          end
        end
        S_SETTLE: if (q_v == '0 && !(|p_v)) begin
          // PPM pipeline empty: the column buffer holds every result
          if (round_full || (last_entry && slot != '0)) st <= S_SEND;
          else if (last_entry) st <= S_DONE;
          else st <= S_ISSUE;
        end
        S_SEND: if (out_ready) begin
          slot <= '0;
          cb   <= '0;
          st   <= last_entry ? S_DONE : S_ISSUE;
        end
        S_DONE: begin
          drain_done <= 1'b1;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
