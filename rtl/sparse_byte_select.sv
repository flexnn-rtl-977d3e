// sparse_byte_select: logical-to-physical byte select for compressed data.
//
// A 16-byte line in SRAM holds the non-zero bytes of 16 dense positions,
// packed from byte 0, with a 16-bit bitmap. The load FSM wants the dense
// window [lstart, lstart+llen) for one PE subbank (the logical byte
// select). In the compressed line this window starts at the number of
// bitmap ones below lstart (the physical byte select) and spans the number
// of ones inside the window. The module also returns the window's bitmap
// moved down to bit 0 and the compressed bytes moved down to byte 0 with
// the bytes beyond the window cleared: exactly what the PE subbank stores.
// The paper gives the logical / physical split; the arithmetic is this
// design's. Purely combinational.
module sparse_byte_select (
  input  logic [15:0]       bmp,
  input  logic [15:0][7:0]  data,
  input  logic [3:0]        lstart,
  input  logic [4:0]        llen,
  output logic [4:0]        pstart,
  output logic [4:0]        pcnt,
  output logic [15:0]       sub_bmp,
  output logic [15:0][7:0]  sub_data
);
  always_comb begin
    logic [15:0] win;
    pstart = '0;
    for (int i = 0; i < 16; i++) if (i < int'(lstart)) pstart = pstart + 5'(bmp[i]);
    win = '0;
    for (int i = 0; i < 16; i++) win[i] = (i < int'(llen));
    sub_bmp = (bmp >> lstart) & win;
    pcnt = '0;
    for (int i = 0; i < 16; i++) pcnt = pcnt + 5'(sub_bmp[i]);
    // mux array: physical byte pstart+i goes to byte i of the subbank
    for (int i = 0; i < 16; i++)
      sub_data[i] = (i < int'(pcnt) && (i + int'(pstart)) < 16) ? data[i + int'(pstart)] : 8'd0;
  end
endmodule
