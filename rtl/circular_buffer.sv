// circular_buffer: the IF or FL circular buffer of the load path.
//
// A ring of DEPTH entries with read and write pointers. The load FSM only
// issues an SRAM fetch when `space` says that an entry is free counting the
// fetches already in flight (`inflight`); returned lines are enqueued,
// and the head entry is dequeued when the mux array takes it (rd_en).
// `empty` tells the load FSM there is nothing to distribute. The depth is
// not given by the paper; 8 is this design's choice.
module circular_buffer #(
  parameter int DEPTH = 8,
  parameter int W     = 160
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_valid,
  input  logic [W-1:0] wr_data,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty,
  input  logic [1:0]   inflight,
  output logic         space
);
  localparam int PW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] wp, rp;
  logic [PW:0]   cnt;

  assign empty   = (cnt == '0);
  assign space   = (int'(cnt) + int'(inflight)) < DEPTH;
  assign rd_data = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      if (wr_valid) begin
        mem[wp] <= wr_data;
        wp <= wp + 1'b1;
      end
      if (rd_en && !empty) rp <= rp + 1'b1;
      cnt <= cnt + (PW+1)'(wr_valid) - (PW+1)'(rd_en && !empty);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid |-> (cnt < (PW+1)'(DEPTH) || rd_en));
endmodule
