// sram: on-chip activation / weight / output SRAM of the accelerator.
//
// 1.5 MB in 16 banks of 32-byte lines (3072 lines per bank), as in the
// paper's configuration. Line address a lives in bank a mod 16, row a / 16,
// so consecutive lines fall in different banks. One read port (load path
// or host) and one write port (global drain or host), each one line wide;
// reads return data one cycle after rd_en. The bank interleaving and port
// count are this design's choices. Written as plain arrays, not as a
// process SRAM macro.
module sram #(
  parameter int N_BANKS        = 16,
  parameter int LINE_BYTES     = 32,
  parameter int LINES_PER_BANK = 3072,
  parameter int AW             = 16
) (
  input  logic                    clk,
  input  logic                    rd_en,
  input  logic [AW-1:0]           rd_addr,
  output logic [LINE_BYTES*8-1:0] rd_data,
  input  logic                    wr_en,
  input  logic [AW-1:0]           wr_addr,
  input  logic [LINE_BYTES*8-1:0] wr_data
);
  localparam int BW = $clog2(N_BANKS);
  logic [N_BANKS-1:0][LINE_BYTES*8-1:0] bank_q;
  logic [BW-1:0] rd_bank_q;

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    logic [LINE_BYTES*8-1:0] mem [LINES_PER_BANK];
    always_ff @(posedge clk) begin
      if (wr_en && wr_addr[BW-1:0] == BW'(b)) mem[wr_addr[AW-1:BW]] <= wr_data;
      if (rd_en && rd_addr[BW-1:0] == BW'(b)) bank_q[b] <= mem[rd_addr[AW-1:BW]];
    end
  end

  always_ff @(posedge clk) if (rd_en) rd_bank_q <= rd_addr[BW-1:0];
  assign rd_data = bank_q[rd_bank_q];
endmodule
