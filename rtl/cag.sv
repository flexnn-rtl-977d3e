// cag: control and address generation for one MAC lane of a VPE.
//
// Given the combined sparsity bitmap (CSB) of a lane and the two operand
// bitmaps, the unit visits the set bits of the CSB from bit 0 upward, one per
// clock, and for each emits the read addresses of the matching bytes in the
// zero-compressed IF and FL register files. Because a compressed RF holds
// only the non-zero bytes in dense order, the address of dense position p is
// the number of ones of that operand's bitmap below p. Zero pairs are never
// visited, which is where the two-sided sparsity speed-up comes from.
//
// Timing: a one-cycle `start` loads the CSB; `valid` with if_ra/fl_ra is
// then high for popcount(CSB) consecutive cycles, then one cycle with busy
// high and no pair, then a one-cycle `done` (start to done is
// popcount(CSB)+2 cycles; the CSB walk itself occupies popcount+1 cycles). The addressing rule follows the paper's
// example; the one-pair-per-cycle pace is this design's choice.
module cag #(
  parameter int BMP_W = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [BMP_W-1:0]         csb,
  input  logic [BMP_W-1:0]         if_bmp,
  input  logic [BMP_W-1:0]         fl_bmp,
  output logic                     valid,
  output logic [$clog2(BMP_W)-1:0] if_ra,
  output logic [$clog2(BMP_W)-1:0] fl_ra,
  output logic [$clog2(BMP_W)-1:0] pos,    // dense position (ifcount/wcount index)
  output logic                     busy,
  output logic                     done
);
  localparam int AW = $clog2(BMP_W);
  logic [BMP_W-1:0] rem, ifb, flb;

  // lowest set bit of the remaining CSB and prefix popcounts below it
  always_comb begin
    pos   = '0;
    for (int i = BMP_W-1; i >= 0; i--) if (rem[i]) pos = AW'(i);
    if_ra = '0;
    fl_ra = '0;
    for (int i = 0; i < BMP_W; i++) begin
      if (i < int'(pos)) begin
        if_ra = if_ra + AW'(ifb[i]);
        fl_ra = fl_ra + AW'(flb[i]);
      end
    end
    valid = busy && (rem != '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem  <= '0;
      ifb  <= '0;
      flb  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem  <= csb;
        ifb  <= if_bmp;
        flb  <= fl_bmp;
        busy <= 1'b1;
      end else if (busy) begin
        if (rem == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          rem <= rem & (rem - 1'b1);  // clear lowest set bit
        end
      end
    end
  end
endmodule
