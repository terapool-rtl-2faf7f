// Testbench for terapool_cluster, reduced to 2 Groups x 2 SubGroups x 2 Tiles
// (64 cores, 256 banks; Tiles, banks and cores per Tile as in the full design).
// All cores run random loads and stores over the whole L1 through the
// behavioural core driver, which checks every load against its reference.
// Then, with the cluster idle, single loads from core 0 to a word in its own
// Tile, in another Tile of its SubGroup, in another SubGroup of its Group and
// in the other Group must take 1, 3, 5 and RemoteGroupLatency (9) cycles.
// Counted mechanisms: accesses at each of the four levels, sequential-region
// accesses, and cycles in which a core was stalled by the interconnect.
module tb_terapool_cluster;
  import terapool_pkg::*;
  localparam int NG = 2, NSG = 2, NT = 2, NTA = NG * NSG * NT, NC = NTA * 8, NSGA = NG * NSG;
  localparam int Lat = 9;
  logic clk = 0, rst_n = 0, en = 0;
  always #5 clk = ~clk;

  logic [NC-1:0] cv, cr, rv;
  lsu_req_t      creq [NC];
  lsu_resp_t     cresp [NC];
  logic [31:0]   cpend [NC];
  logic [NSGA-1:0] pv, pr, pd, arv, arr, rvv, rr, awv, awr, wv, wr, bv, br;
  dma_piece_t    pc [NSGA];
  axi_ax_t       ar [NSGA], aw [NSGA];
  axi_r_t        r [NSGA];
  axi_w_t        w [NSGA];
  axi_b_t        b [NSGA];

  terapool_cluster #(
    .NumCoresPerTile(8), .BankingFactor(4), .NumTilesPerSubGroup(NT),
    .NumSubGroupsPerGroup(NSG), .NumGroups(NG), .BankNumWords(256),
    .SeqBytesPerTile(4096), .NumOutstanding(8), .RemoteGroupLatency(Lat)
  ) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_valid_i(cv), .core_req_ready_o(cr), .core_req_i(creq),
    .core_resp_valid_o(rv), .core_resp_o(cresp), .core_pending_o(cpend),
    .dma_piece_valid_i(pv), .dma_piece_ready_o(pr), .dma_piece_i(pc), .dma_piece_done_o(pd),
    .axi_ar_valid_o(arv), .axi_ar_ready_i(arr), .axi_ar_o(ar),
    .axi_r_valid_i(rvv), .axi_r_ready_o(rr), .axi_r_i(r),
    .axi_aw_valid_o(awv), .axi_aw_ready_i(awr), .axi_aw_o(aw),
    .axi_w_valid_o(wv), .axi_w_ready_i(wr), .axi_w_o(w),
    .axi_b_valid_i(bv), .axi_b_ready_o(br), .axi_b_i(b));

  tb_core_driver #(
    .NumTilesAll(NTA), .TileLo(0), .NumTilesDrv(NTA), .ScopeLo(0), .ScopeNum(NTA),
    .MaxRow(256), .PoolSize(16), .TilesPerSg(NT), .TilesPerG(NSG * NT)
  ) drv (
    .clk_i(clk), .rst_ni(rst_n), .enable_i(en),
    .req_valid_o(cv), .req_ready_i(cr), .req_o(creq),
    .resp_valid_i(rv), .resp_i(cresp), .pending_i(cpend));

  // the DMA side is not used here
  initial begin
    pv = '0; arr = '0; rvv = '0; awr = '0; wr = '0; bv = '0;
    for (int i = 0; i < NSGA; i++) begin pc[i] = '0; r[i] = '0; b[i] = '0; end
  end

  int checks = 0, failures = 0;

  function automatic logic [31:0] word_addr(int t, int bank, int row);
    return 32'((row * NTA * 32 + t * 32 + bank) * 4);
  endfunction

  task automatic probe(int core, logic [31:0] a, int exp_lat, string what);
    drv.probe_c[drv.probe_n] = core;
    drv.probe_a[drv.probe_n] = a;
    drv.probe_k[drv.probe_n] = 1'b0;
    drv.probe_e[drv.probe_n] = '0;
    drv.probe_n++;
    repeat (30) @(posedge clk);
    checks++;
    if (drv.last_lat[core] != exp_lat) begin
      failures++;
      $display("%s: latency %0d, expected %0d", what, drv.last_lat[core], exp_lat);
    end else $display("%s: %0d cycles", what, drv.last_lat[core]);
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    en = 1;
    repeat (5000) @(posedge clk);
    en = 0;
    repeat (100) @(posedge clk);
    checks++;
    if (!drv.idle()) begin failures++; $display("loads still pending after drain"); end
    probe(0, word_addr(0, 5, 40), 1, "own Tile");
    probe(0, word_addr(1, 5, 40), 3, "same SubGroup");
    probe(0, word_addr(2, 5, 40), 5, "same Group");
    probe(0, word_addr(4, 5, 40), Lat, "other Group");
    $display("levels: tile %0d, subgroup %0d, group %0d, remote group %0d; sequential %0d; stalls %0d; loads checked %0d",
             drv.n_level[0], drv.n_level[1], drv.n_level[2], drv.n_level[3], drv.n_seq, drv.n_stall, drv.n_load_checked);
    checks += 6;
    for (int l = 0; l < 4; l++) if (drv.n_level[l] == 0) begin failures++; $display("level %0d never used", l); end
    if (drv.n_seq == 0) failures++;
    if (drv.n_stall == 0) failures++;
    checks += drv.checks;
    failures += drv.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
