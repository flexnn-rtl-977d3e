// tb_cag: walks combined bitmaps and checks each emitted IF/FL read address
// against prefix popcounts computed here, and the walk length
// (one pair per cycle, then one empty cycle, then the done pulse:
// popcount(CSB) + 2 cycles from start to done). Starts with the paper's example, whose three
// pairs must read compressed IF bytes 1,2,3 (values 4,6,1) and FL bytes
// 1,2,3 (values 3,-7,2).
module tb_cag;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, valid, busy, done;
  logic [15:0] csb, ifb, flb;
  logic [3:0] if_ra, fl_ra, pos;
  int checks = 0, failures = 0;

  cag #(.BMP_W(16)) dut (.clk, .rst_n, .start, .csb, .if_bmp(ifb), .fl_bmp(flb),
    .valid, .if_ra, .fl_ra, .pos, .busy, .done);

  function automatic int pc_below(input logic [15:0] v, input int p);
    int c = 0;
    for (int i = 0; i < p; i++) c += v[i];
    return c;
  endfunction

  task automatic walk(input logic [15:0] i_b, input logic [15:0] f_b);
    int expect_pos[$];
    int cycles;
    ifb = i_b; flb = f_b; csb = i_b & f_b;
    for (int i = 0; i < 16; i++) if (csb[i]) expect_pos.push_back(i);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done && cycles < 40) begin
      if (valid) begin
        int p;
        p = expect_pos.pop_front();
        checks++;
        if (pos != 4'(p) || if_ra != 4'(pc_below(i_b, p)) || fl_ra != 4'(pc_below(f_b, p))) begin
          failures++;
          $display("FAIL pos %0d/%0d ra %0d/%0d", pos, p, if_ra, fl_ra);
        end
      end
      @(negedge clk); cycles++;
    end
    checks++;
    if (expect_pos.size() != 0 || cycles != $countones(csb) + 2) begin
      failures++;
      $display("FAIL walk length %0d for popcount %0d", cycles, $countones(csb));
    end
  endtask

  initial begin
    start = 0; csb = 0; ifb = 0; flb = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    walk(16'b0000_0000_0110_1110, 16'b0000_0000_0010_1101);
    walk(16'h0000, 16'hffff);
    walk(16'hffff, 16'hffff);
    for (int n = 0; n < 100; n++) walk(16'($urandom), 16'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
