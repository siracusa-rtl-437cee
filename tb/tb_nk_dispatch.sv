// tb_nk_dispatch: self-checking test of the dispatching network.
//
// Fills an 8x8x32 tile with a pattern that encodes pixel row, column and channel, then checks for
// every PE, row and channel that the 3x3 modes deliver pixel (r+dy, c+dx) and the 1x1 mode the
// window centre (r+1, c+1).
module tb_nk_dispatch;
  import neureka_pkg::*;
  logic [63:0][31:0][7:0] tile;
  nk_mode_e mode;
  logic [35:0][8:0][31:0][7:0] pe_act;
  int checks = 0, failures = 0;

  nk_dispatch dut (.tile_i(tile), .mode_i(mode), .pe_act_o(pe_act));

  function automatic logic [7:0] pat(int y, int x, int ch);
    return 8'((y * 8 + x) * 3 + ch * 7);
  endfunction

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int y = 0; y < 8; y++) for (int x = 0; x < 8; x++) for (int ch = 0; ch < 32; ch++)
      tile[y*8+x][ch] = pat(y, x, ch);
    for (int m = 0; m < 3; m++) begin
      mode = (m == 0) ? MODE_3X3 : (m == 1) ? MODE_1X1 : MODE_DW;
      #1;
      for (int r = 0; r < 6; r++) for (int c = 0; c < 6; c++) for (int fs = 0; fs < 9; fs++) begin
        int y, x;
        y = (mode == MODE_1X1) ? r + 1 : r + fs / 3;
        x = (mode == MODE_1X1) ? c + 1 : c + fs % 3;
        for (int ch = 0; ch < 32; ch += 5) begin
          checks++;
          if (pe_act[r*6+c][fs][ch] != pat(y, x, ch)) begin
            failures++;
            if (failures < 10) $display("FAIL mode %0d pe %0d,%0d fs %0d ch %0d", m, r, c, fs, ch);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
