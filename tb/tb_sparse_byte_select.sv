// tb_sparse_byte_select: random compressed lines and dense windows; the
// expected window bitmap and bytes are recomputed here by decompressing
// the line and recompressing the window.
module tb_sparse_byte_select;
  logic [15:0] bmp, sub_bmp;
  logic [15:0][7:0] data, sub_data;
  logic [3:0] lstart;
  logic [4:0] llen, pstart, pcnt;
  int checks = 0, failures = 0;

  sparse_byte_select dut (.bmp, .data, .lstart, .llen, .pstart, .pcnt, .sub_bmp, .sub_data);

  initial begin
    for (int n = 0; n < 500; n++) begin
      logic [15:0][7:0] dense, ed;
      logic [15:0] eb;
      int m, ps;
      for (int i = 0; i < 16; i++) dense[i] = ($urandom % 2) ? 8'($urandom % 255 + 1) : 8'd0;
      bmp = '0; data = '0; m = 0;
      for (int i = 0; i < 16; i++) if (dense[i] != 0) begin bmp[i] = 1; data[m] = dense[i]; m++; end
      lstart = 4'($urandom);
      llen = 5'($urandom % (17 - int'(lstart)));
      if (llen == 0) llen = 1;
      #1;
      eb = '0; ed = '0; m = 0; ps = 0;
      for (int i = 0; i < int'(lstart); i++) ps += bmp[i];
      for (int i = 0; i < int'(llen); i++)
        if (dense[int'(lstart) + i] != 0) begin eb[i] = 1; ed[m] = dense[int'(lstart) + i]; m++; end
      checks++;
      if (sub_bmp !== eb || sub_data !== ed || pstart != 5'(ps) || pcnt != 5'(m)) begin
        failures++;
        $display("FAIL sbs start=%0d len=%0d", lstart, llen);
      end
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
