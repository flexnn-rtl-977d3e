// sparse_encoder: zero-value compression (ZVC) of one 16-byte drain line.
//
// Sixteen comparators test the input bytes P0..P15 against zero; byte i
// that is non-zero sets bitmap bit Bi and is placed by the packer at the
// next free position of the compressed line, lowest index first (the
// paper's example packs -3, 30, -2, ... , 4, -25 for P0 = -3, P1 = 30,
// P2 = 0, P3 = -2, ..., P13 = 4, P14 = -25, P15 = 0). Unused output bytes
// are zero and out_cnt is the number of non-zero bytes.
//
// Each input line is compressed on its own. The paper's encoder also keeps
// per-context state so that several sparse input lines fill one compressed
// 16-byte output line; that context merging is not built here.
//
// Timing: one register stage, out_valid one cycle after in_valid.
module sparse_encoder #(
  parameter int N = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [N-1:0][7:0]   in_data,
  output logic                out_valid,
  output logic [N-1:0][7:0]   out_data,
  output logic [N-1:0]        out_bmp,
  output logic [$clog2(N):0]  out_cnt
);
  localparam int CW = $clog2(N) + 1;
  logic [N-1:0][7:0] packed_d;
  logic [N-1:0]      bmp;
  logic [CW-1:0]     cnt;

  always_comb begin
    packed_d = '0;
    cnt      = '0;
    for (int i = 0; i < N; i++) begin
      bmp[i] = (in_data[i] != 8'd0);
      if (bmp[i]) begin
        packed_d[cnt[CW-2:0]] = in_data[i];
        cnt = cnt + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_bmp   <= '0;
      out_cnt   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data <= packed_d;
        out_bmp  <= bmp;
        out_cnt  <= cnt;
      end
    end
  end
endmodule
