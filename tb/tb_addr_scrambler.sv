// Testbench for addr_scrambler at the default sizes (128 Tiles, 32 banks per
// Tile, 4 KiB of sequential region per Tile). The expected bank and row of each
// address are computed arithmetically: in the sequential region a byte offset
// o belongs to Tile o/4096, bank (o%4096)/4 % 32 and row (o%4096)/128; in the
// interleaved region word w sits in global bank w % 4096, row w / 4096.
module tb_addr_scrambler;
  logic [31:0] a, y;
  int checks = 0, failures = 0;

  addr_scrambler #(.AddrWidth(32), .NumBanksPerTile(32), .NumTiles(128), .SeqBytesPerTile(4096)) dut (
    .addr_i(a), .addr_o(y));

  function automatic void expect_loc(logic [31:0] out, int unsigned gbank, int unsigned row, int unsigned byteoff);
    int unsigned w;
    w = out >> 2;
    checks++;
    if ((w % 4096) != gbank || (w / 4096) != row || out[1:0] != byteoff[1:0]) begin
      failures++;
      $display("addr %h -> %h: bank %0d row %0d, expected bank %0d row %0d", a, out, w % 4096, w / 4096, gbank, row);
    end
  endfunction

  initial begin
    #1;
    for (int n = 0; n < 4000; n++) begin
      int unsigned o, tile, bank, row;
      o = $urandom_range(0, 512*1024 - 1);
      a = o; #1;
      tile = o / 4096;
      bank = ((o % 4096) / 4) % 32;
      row  = (o % 4096) / 128;
      expect_loc(y, tile * 32 + bank, row, o % 4);
    end
    for (int n = 0; n < 4000; n++) begin
      int unsigned o;
      o = $urandom_range(512*1024, 4*1024*1024 - 1);
      a = o; #1;
      expect_loc(y, (o / 4) % 4096, (o / 4) / 4096, o % 4);
      checks++;
      if (y != a) failures++;
    end
    // sequential rows 0..31 and interleaved rows 32..255 never overlap
    a = 32'h0007_FFFC; #1;
    expect_loc(y, 127*32 + 31, 31, 0);
    a = 32'h0008_0000; #1;
    expect_loc(y, 0, 32, 0);
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
