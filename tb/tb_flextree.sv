// tb_flextree: for IC_P = 1, 2, 3, 4, 8 and 16 (and both halves of IC_P = 1)
// random column psums enter the tree; after the level's latency
// (level L valid L cycles after in_valid) each active tap must equal the
// sum of the PEs of its group, with PEs beyond IC_P in a group ignored.
module tb_flextree;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, half, out_valid;
  logic [15:0][31:0] psum_in;
  logic [4:0] icp;
  logic [14:0][31:0] taps;
  logic [3:0] tap_base, n_taps;
  int checks = 0, failures = 0;

  flextree dut (.clk, .rst_n, .in_valid, .psum_in, .icp, .half, .taps, .out_valid, .tap_base, .n_taps);

  task automatic run(input int ic, input bit h);
    int lvl, g, lat;
    logic [31:0] expv;
    icp = 5'(ic); half = h;
    lvl = (ic <= 2) ? 1 : (ic <= 4) ? 2 : (ic <= 8) ? 3 : 4;
    g = 1 << lvl;
    for (int p = 0; p < 16; p++) psum_in[p] = 32'($urandom % 2001) - 32'd1000;
    repeat (5) @(negedge clk);  // let the previous run leave the pipeline
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    lat = 1;
    while (!out_valid && lat < 10) begin @(negedge clk); lat++; end
    checks++;
    if (lat != lvl) begin failures++; $display("FAIL latency icp=%0d got %0d", ic, lat); end
    checks++;
    if (n_taps != 4'(16 / g) || tap_base != 4'((lvl == 1) ? 0 : (lvl == 2) ? 8 : (lvl == 3) ? 12 : 14)) begin
      failures++; $display("FAIL tap select icp=%0d", ic);
    end
    for (int j = 0; j < 16 / g; j++) begin
      expv = 0;
      for (int p = j * g; p < (j + 1) * g; p++)
        if ((ic <= 1) ? (p % 2 == int'(h)) : ((p % g) < ic)) expv += psum_in[p];
      checks++;
      if (taps[int'(tap_base) + j] !== expv) begin
        failures++; $display("FAIL icp=%0d tap %0d got %0d exp %0d", ic, j, $signed(taps[int'(tap_base)+j]), $signed(expv));
      end
    end
  endtask

  initial begin
    in_valid = 0; half = 0; psum_in = 0; icp = 16;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 30; n++) begin
      run(1, 0); run(1, 1); run(2, 0); run(3, 0); run(4, 0); run(8, 0); run(16, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
