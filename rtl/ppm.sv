// ppm: post-processing module (integer path) of a local drain.
//
// Turns a 32-bit accumulated OF psum into an INT8 output activation:
// out = sat8( relu?( ((psum + bias) * scale) >>> shift ) ).
// The paper says the PPM applies activation functions and quantization with
// biases and scales from its configuration; this exact formula (bias add,
// 16-bit unsigned scale, arithmetic right shift, optional ReLU, saturation
// to [-128, 127]) is this design's choice. The FP PPM is not built.
//
// Timing: one register stage; of/out_valid follow in_valid by one cycle.
module ppm #(
  parameter int W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] psum,
  input  logic [W-1:0] bias,
  input  logic [15:0]  scale,
  input  logic [4:0]   shift,
  input  logic         relu,
  output logic         out_valid,
  output logic [7:0]   of
);
  logic signed [W+16:0] prod;
  logic signed [W+16:0] shifted;
  logic signed [W+16:0] act;
  logic [7:0]           sat;

  always_comb begin
    prod    = (W+17)'($signed(psum) + $signed(bias)) * $signed({1'b0, scale});
    shifted = prod >>> shift;
    act     = (relu && shifted < 0) ? '0 : shifted;
    if (act > 127)       sat = 8'h7f;
    else if (act < -128) sat = 8'h80;
    else                 sat = act[7:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      of        <= '0;
    end else begin
      out_valid <= in_valid;
      of        <= sat;
    end
  end
endmodule
