// Testbench for dma_backend at the full SubGroup size (8 Tiles of 32 banks).
// The eight Tile DMA ports are modelled by a word array per Tile that answers
// reads one cycle later; main memory is the behavioural AXI model. Random
// pieces in both directions, in the interleaved and in the sequential L1
// region, are run one after the other; after each one the data at the
// destination is compared word by word with the source, using an L1 address
// decoding written out independently here. With the memory model's stalls
// switched off, the data phase of a full 1 KiB piece must move one 512-bit beat
// per cycle (16 beats in 16 consecutive cycles), in both directions.
module tb_dma_backend;
  import terapool_pkg::*;
  localparam int NT = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic pv, pr, done;
  dma_piece_t piece;
  logic [NT-1:0] treq_v, tresp_v;
  dma_tile_req_t treq;
  logic [NT-1:0][AxiDataWidth-1:0] tresp_d;
  logic ar_v, ar_r, r_v, r_r, aw_v, aw_r, w_v, w_r, b_v, b_r;
  axi_ax_t ar, aw;
  axi_r_t r;
  axi_w_t w;
  axi_b_t b;

  dma_backend dut (
    .clk_i(clk), .rst_ni(rst_n), .piece_valid_i(pv), .piece_ready_o(pr), .piece_i(piece), .done_o(done),
    .tile_req_valid_o(treq_v), .tile_req_o(treq), .tile_resp_valid_i(tresp_v), .tile_resp_rdata_i(tresp_d),
    .ar_valid_o(ar_v), .ar_ready_i(ar_r), .ar_o(ar), .r_valid_i(r_v), .r_ready_o(r_r), .r_i(r),
    .aw_valid_o(aw_v), .aw_ready_i(aw_r), .aw_o(aw), .w_valid_o(w_v), .w_ready_i(w_r), .w_o(w),
    .b_valid_i(b_v), .b_ready_o(b_r), .b_i(b));

  axi_mem_model #(.Latency(8), .RandomStall(1'b1)) mem (
    .clk_i(clk), .rst_ni(rst_n),
    .ar_valid_i(ar_v), .ar_ready_o(ar_r), .ar_i(ar), .r_valid_o(r_v), .r_ready_i(r_r), .r_o(r),
    .aw_valid_i(aw_v), .aw_ready_o(aw_r), .aw_i(aw), .w_valid_i(w_v), .w_ready_o(w_r), .w_i(w),
    .b_valid_o(b_v), .b_ready_i(b_r), .b_o(b));

  // Tile banks: tmem[tile][row][bank]
  logic [31:0] tmem [NT][256][32];
  always @(posedge clk) begin
    tresp_v <= '0;
    for (int t = 0; t < NT; t++) begin
      if (rst_n && treq_v[t]) begin
        for (int k = 0; k < 16; k++) begin
          if (treq.we) tmem[t][treq.row][16 * int'(treq.slot) + k] = treq.wdata[32*k +: 32];
          else tresp_d[t][32*k +: 32] <= tmem[t][treq.row][16 * int'(treq.slot) + k];
        end
        tresp_v[t] <= !treq.we;
      end
    end
  end

  // independent L1 decoding (8 Tiles per SubGroup, 32 banks per Tile)
  function automatic void loc(logic [31:0] a, output int t, output int row, output int bank);
    bank = int'((a >> 2) & 31);
    if (a < 32'h8_0000) begin
      t = int'((a >> 12) & 7);
      row = int'((a >> 7) & 31);
    end else begin
      t = int'((a >> 7) & 7);
      row = int'((a >> 14) & 255);
    end
  endfunction

  int checks = 0, failures = 0;
  int first_beat, last_beat, nbeat;
  always @(posedge clk) begin
    if (rst_n && ((r_v && r_r) || (w_v && w_r))) begin
      if (nbeat == 0) first_beat = cyc;
      last_beat = cyc;
      nbeat++;
    end
  end

  task automatic run_piece(bit to_l2, logic [31:0] l1, logic [31:0] l2, int nbytes, bit timed);
    int t0;
    @(negedge clk);
    pv = 1;
    piece.l1_to_l2 = to_l2; piece.l1_addr = l1; piece.l2_addr = l2; piece.num_bytes = 11'(nbytes);
    nbeat = 0;
    @(posedge clk);
    while (!pr) @(posedge clk);
    t0 = cyc;
    @(negedge clk) pv = 0;
    while (!done) @(posedge clk);
    for (int i = 0; i < nbytes / 4; i++) begin
      int t, row, bank;
      logic [31:0] l1w, l2w;
      loc(l1 + 32'(4 * i), t, row, bank);
      l1w = tmem[t][row][bank];
      l2w = mem.read_word(l2 + 32'(4 * i));
      checks++;
      if (l1w != l2w) begin
        failures++;
        if (failures < 10) $display("%s word %0d: L1 %h L2 %h", to_l2 ? "L1->L2" : "L2->L1", i, l1w, l2w);
      end
    end
    if (timed) begin
      checks++;
      if (nbeat != nbytes / 64 || last_beat - first_beat != nbeat - 1) begin
        failures++;
        $display("%s: %0d beats over %0d cycles, expected one per cycle", to_l2 ? "W" : "R", nbeat, last_beat - first_beat + 1);
      end
    end
  endtask

  initial begin
    pv = 0; piece = '0; tresp_d = '0; tresp_v = '0; nbeat = 0;
    for (int t = 0; t < NT; t++) for (int rr = 0; rr < 256; rr++) for (int k = 0; k < 32; k++) tmem[t][rr][k] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      logic [31:0] l1, l2;
      int off, nb, chunk;
      off = $urandom_range(0, 15);
      nb = 64 * $urandom_range(1, 16 - off);
      chunk = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 511) : $urandom_range(512, 4095);
      l1 = 32'(chunk * 1024 + off * 64);
      l2 = L2BaseAddr + 32'(64 * $urandom_range(0, 16383));
      run_piece($urandom_range(0, 1), l1, l2, nb, 1'b0);
    end
    mem.stall_en = 0;
    repeat (20) @(posedge clk);
    run_piece(1'b0, 32'h0009_0000, L2BaseAddr + 32'h4000, 1024, 1'b1);
    run_piece(1'b1, 32'h0009_0400, L2BaseAddr + 32'h8000, 1024, 1'b1);
    run_piece(1'b1, 32'h0000_2000, L2BaseAddr + 32'h9000, 1024, 1'b1);
    $display("AXI: %0d AR, %0d AW, %0d R beats, %0d W beats", mem.n_ar, mem.n_aw, mem.n_r, mem.n_w);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
