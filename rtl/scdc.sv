// scdc: super column drain concatenator.
//
// Each of the four columns of a super column delivers 16-byte chunks from
// its local drain (the psum NoC). The SCDC holds one chunk per column in its
// 64-byte write-combining buffer; when all four are present it offers the
// 514-bit packet {SCID, column 3 .. column 0} to the global drain over the
// super-column NoC. Column c occupies bytes 16c..16c+15 and the two-bit
// super column ID sits in bits 513:512; that bit order is this design's
// choice, the sizes are the paper's.
//
// Handshake: valid/ready on both sides. A column's ready is low while its
// slot is full; the packet is released when pkt_ready is seen with
// pkt_valid, and all four slots empty in that cycle.
module scdc #(
  parameter logic [1:0] SCID = 2'd0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [3:0]              col_valid,
  input  logic [3:0][15:0][7:0]   col_data,
  output logic [3:0]              col_ready,
  output logic                    pkt_valid,
  output logic [513:0]            pkt,
  input  logic                    pkt_ready
);
  logic [3:0]            full;
  logic [3:0][127:0]     wcb;

  assign col_ready = ~full;
  assign pkt_valid = &full;
  assign pkt       = {SCID, wcb[3], wcb[2], wcb[1], wcb[0]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0;
      wcb  <= '0;
    end else begin
      if (pkt_valid && pkt_ready) full <= '0;
      else
        for (int c = 0; c < 4; c++)
          if (col_valid[c] && !full[c]) begin
            full[c] <= 1'b1;
            wcb[c]  <= col_data[c];
          end
    end
  end

  a_pkt_stable: assert property (@(posedge clk) disable iff (!rst_n)
    pkt_valid && !pkt_ready |=> pkt_valid && $stable(pkt));
endmodule
