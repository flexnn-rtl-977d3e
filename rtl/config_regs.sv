// config_regs: software-programmable layer descriptors (schedule
// descriptor, PE configuration, FlexTree IC partition, PPM settings and
// bias table, load and drain address patterns).
//
// The paper configures every layer through descriptors written before
// `start`; their encoding is not given. Here the whole layer_cfg_t struct of
// flexnn_pkg is a bit vector that the host writes 32 bits at a time: word i
// (wr_addr = i, i < CFG_WORDS) holds bits 32i+31 .. 32i of the struct, the
// most significant struct field ending at the top. Words 64..79 hold the 16
// per-entry 32-bit biases of the PPMs. Reads return the same words one
// cycle later. Writes take effect on the next clock edge.
module config_regs
  import flexnn_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_en,
  input  logic [6:0]              wr_addr,
  input  logic [31:0]             wr_data,
  input  logic [6:0]              rd_addr,
  output logic [31:0]             rd_data,
  output layer_cfg_t              cfg,
  output logic [15:0][PSUM_W-1:0] bias
);
  localparam int CFG_BITS  = $bits(layer_cfg_t);
  localparam int CFG_WORDS = (CFG_BITS + 31) / 32;
  logic [CFG_WORDS*32-1:0] regs;

  assign cfg = layer_cfg_t'(regs[CFG_BITS-1:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      regs <= '0;
      bias <= '0;
      rd_data <= '0;
    end else begin
      if (wr_en) begin
        if (int'(wr_addr) < CFG_WORDS) regs[32*int'(wr_addr) +: 32] <= wr_data;
        else if (wr_addr >= 7'd64 && wr_addr < 7'd80) bias[wr_addr[3:0]] <= wr_data;
      end
      if (int'(rd_addr) < CFG_WORDS)            rd_data <= regs[32*int'(rd_addr) +: 32];
      else if (rd_addr >= 7'd64 && rd_addr < 7'd80) rd_data <= bias[rd_addr[3:0]];
      else                                       rd_data <= '0;
    end
  end
endmodule
