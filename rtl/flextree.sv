// flextree: schedule-aware flexible-depth adder tree of one PE column.
//
// The 16 psums of a column enter a four-level registered binary tree. Tap
// registers are named as in the paper's figure: level 1 holds
// H = PE1+PE2, G = PE3+PE4, ... A = PE15+PE16; level 2 holds L = H+G,
// K = F+E, J = D+C, I = B+A; level 3 holds N = L+K, M = J+I; level 4 holds
// O = N+M. The IC partition factor IC_P (how many PEs share the input
// channels of one output point) chooses the level whose taps are the final
// outputs: IC_P 1 or 2 -> A..H (8 taps), 4 -> I..L (4), 8 -> M,N (2),
// 16 -> O (1), as the paper lists.
//
// For an IC_P that is not a power of two the paper feeds zeros from the PEs
// that do not fit; here a PE contributes only when its index within its
// power-of-two group is below IC_P. For IC_P = 1 each PE owns a whole
// output, so the level-1 taps can show only one PE of each pair: `half`
// selects the odd (0) or even (1) PEs and the local drain reads the column
// twice. That two-pass rule is this design's choice.
//
// Output order of `taps`: index 0..7 = H..A (PE order), 8..11 = L,K,J,I,
// 12..13 = N,M, 14 = O. Latency from in_valid to out_valid is the tap level
// (1 to 4 cycles); a new column of psums may enter every cycle. Only the
// INT adders are built (the FP16 adders are not).
module flextree #(
  parameter int W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [15:0][W-1:0] psum_in,
  input  logic [4:0]        icp,
  input  logic              half,
  output logic [14:0][W-1:0] taps,
  output logic              out_valid,
  output logic [3:0]        tap_base,
  output logic [3:0]        n_taps
);
  logic [7:0][W-1:0] l1;
  logic [3:0][W-1:0] l2;
  logic [1:0][W-1:0] l3;
  logic [W-1:0]      l4;
  logic [4:1]        v;
  logic [15:0][W-1:0] m;
  logic [4:0]        grp;
  logic [2:0]        lvl;

  always_comb begin
    if (icp <= 5'd1)      begin grp = 5'd1;  lvl = 3'd1; end
    else if (icp <= 5'd2) begin grp = 5'd2;  lvl = 3'd1; end
    else if (icp <= 5'd4) begin grp = 5'd4;  lvl = 3'd2; end
    else if (icp <= 5'd8) begin grp = 5'd8;  lvl = 3'd3; end
    else                  begin grp = 5'd16; lvl = 3'd4; end
    for (int p = 0; p < 16; p++) begin
      logic keep;
      if (icp <= 5'd1) keep = (p[0] == half);
      else             keep = (5'(p) % grp) < icp;
      m[p] = keep ? psum_in[p] : '0;
    end
    unique case (lvl)
      3'd1:    begin tap_base = 4'd0;  n_taps = 4'd8; end
      3'd2:    begin tap_base = 4'd8;  n_taps = 4'd4; end
      3'd3:    begin tap_base = 4'd12; n_taps = 4'd2; end
      default: begin tap_base = 4'd14; n_taps = 4'd1; end
    endcase
    out_valid = v[lvl];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l1 <= '0; l2 <= '0; l3 <= '0; l4 <= '0; v <= '0;
    end else begin
      v <= {v[3:1], in_valid};
      for (int j = 0; j < 8; j++) l1[j] <= m[2*j] + m[2*j+1];
      for (int j = 0; j < 4; j++) l2[j] <= l1[2*j] + l1[2*j+1];
      for (int j = 0; j < 2; j++) l3[j] <= l2[2*j] + l2[2*j+1];
      l4 <= l3[0] + l3[1];
    end
  end

  always_comb begin
    for (int j = 0; j < 8; j++) taps[j]     = l1[j];
    for (int j = 0; j < 4; j++) taps[8+j]   = l2[j];
    for (int j = 0; j < 2; j++) taps[12+j]  = l3[j];
    taps[14] = l4;
  end
endmodule
