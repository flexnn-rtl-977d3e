// pe_column: one column of the FlexNN PE array.
//
// Sixteen VPEs, their FlexTree and the column's local drain. PE 0 is at the
// bottom of the column: PE p receives PE p-1's psum as its PSumY input
// (psums flow to the top neighbour inside the column) and the psum of the
// same row in the left column as PSumX (psums flow to the right neighbour,
// wired by the array). The column control unit of the paper (one control
// block per PE) is reduced here to broadcasting the array controller's
// command and descriptor to every PE and decoding the NoC destination mask;
// the per-PE FSM state lives inside each VPE. Load transfers arrive already
// filtered by column: a PE takes a transfer when its bit of the PE mask is
// set.
module pe_column
  import flexnn_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  pe_cfg_t                  pe_cfg,
  input  pe_cmd_e                  cmd,
  input  logic [3:0]               acc_idx,
  input  logic [PSUM_W-1:0]        ext_psum,
  // loads (already selected for this column)
  input  logic                     if_we,
  input  logic [N-1:0]             if_pe_mask,
  input  logic [1:0]               if_sub,
  input  chunk_t                   if_chunk,
  input  logic                     fl_we,
  input  logic [N-1:0]             fl_pe_mask,
  input  logic [1:0]               fl_sub,
  input  chunk_t                   fl_chunk,
  // neighbour psums across columns
  input  logic [N-1:0][PSUM_W-1:0] psum_x_in,
  output logic [N-1:0][PSUM_W-1:0] psum_out,
  // drain
  input  logic                     drain_start,
  input  logic [4:0]               n_of,
  input  logic [4:0]               icp,
  input  ppm_cfg_t                 ppm_cfg,
  input  logic [15:0][PSUM_W-1:0]  bias,
  output logic                     out_valid,
  output logic [15:0][7:0]         out_data,
  input  logic                     out_ready,
  // status
  output logic                     busy,        // some PE computing
  output logic                     shadow_full, // some PE holds undrained OF points
  output logic                     drain_busy,
  output logic [N-1:0][2:0]        n_mac
);
  logic [N-1:0]             pe_busy, pe_sfull;
  logic [N-1:0][PSUM_W-1:0] of_rd_data;
  logic [3:0]               of_rd_idx;
  logic                     drain_done, ft_in_valid, ft_half, ft_out_valid;
  logic [14:0][PSUM_W-1:0]  taps;
  logic [3:0]               tap_base, n_taps;

  for (genvar p = 0; p < N; p++) begin : g_pe
    vpe u_vpe (
      .clk, .rst_n, .cfg(pe_cfg), .cmd, .acc_idx,
      .ld_if_we(if_we && if_pe_mask[p]), .ld_if_sub(if_sub), .ld_if_chunk(if_chunk),
      .ld_fl_we(fl_we && fl_pe_mask[p]), .ld_fl_sub(fl_sub), .ld_fl_chunk(fl_chunk),
      .ext_psum,
      .psum_x_in(psum_x_in[p]),
      .psum_y_in(p == 0 ? '0 : psum_out[(p == 0) ? 0 : p-1]),
      .psum_out(psum_out[p]),
      .of_rd_idx, .of_rd_data(of_rd_data[p]),
      .shadow_full(pe_sfull[p]), .drain_done,
      .busy(pe_busy[p]), .n_mac(n_mac[p])
    );
  end

  flextree #(.W(PSUM_W)) u_tree (
    .clk, .rst_n, .in_valid(ft_in_valid), .psum_in(of_rd_data), .icp, .half(ft_half),
    .taps, .out_valid(ft_out_valid), .tap_base, .n_taps
  );

  local_drain u_ld (
    .clk, .rst_n, .start(drain_start), .n_of, .icp, .ppm_cfg, .bias,
    .of_rd_idx, .ft_in_valid, .ft_half, .taps, .tap_base, .n_taps, .ft_out_valid,
    .drain_done, .out_valid, .out_data, .out_ready, .busy(drain_busy)
  );

  assign busy        = |pe_busy;
  assign shadow_full = |pe_sfull;
endmodule
