// Testbench for terapool_group: 4 SubGroups as in the full design, reduced to
// 2 Tiles per SubGroup (64 cores), placed as Group 1 of a 2-Group system (the
// other Group is not present, so the inter-Group ports stay idle and must stay
// idle: random traffic here only targets this Group's Tiles).
// Checks: every load against the core driver's reference; zero-load latency
// of 1, 3 and 5 cycles to the own Tile, another Tile of the SubGroup and a
// Tile of another SubGroup; and one DMA piece (1 KiB, main memory -> L1) into
// SubGroup 2 through its backend, read back by probe loads.
module tb_terapool_group;
  import terapool_pkg::*;
  localparam int NG = 2, NSG = 4, NT = 2, NTA = NG * NSG * NT, NTG = NSG * NT, NC = NTG * 8;
  localparam int NE = NTG * (NG - 1);
  logic clk = 0, rst_n = 0, en = 0;
  always #5 clk = ~clk;

  logic [NC-1:0] cv, cr, rv;
  lsu_req_t      creq [NC];
  lsu_resp_t     cresp [NC];
  logic [31:0]   cpend [NC];
  logic [NE-1:0] mqv, mqr, mpv, mpr, sqv, sqr, spv, spr;
  tcdm_req_t     mq [NE], sq [NE];
  tcdm_resp_t    mp [NE], sp [NE];
  logic [NSG-1:0] pv, pr, pd, arv, arr, rvv, rr, awv, awr, wv, wr, bv, br;
  dma_piece_t    pc [NSG];
  axi_ax_t       ar [NSG], aw [NSG];
  axi_r_t        r [NSG];
  axi_w_t        w [NSG];
  axi_b_t        b [NSG];

  terapool_group #(
    .NumCoresPerTile(8), .BankingFactor(4), .NumTilesPerSubGroup(NT),
    .NumSubGroupsPerGroup(NSG), .NumGroups(NG), .BankNumWords(256),
    .SeqBytesPerTile(4096), .NumOutstanding(8)
  ) dut (
    .clk_i(clk), .rst_ni(rst_n), .group_id_i(1'b1),
    .core_req_valid_i(cv), .core_req_ready_o(cr), .core_req_i(creq),
    .core_resp_valid_o(rv), .core_resp_o(cresp), .core_pending_o(cpend),
    .mst_req_valid_o(mqv), .mst_req_ready_i(mqr), .mst_req_o(mq),
    .mst_resp_valid_i(mpv), .mst_resp_ready_o(mpr), .mst_resp_i(mp),
    .slv_req_valid_i(sqv), .slv_req_ready_o(sqr), .slv_req_i(sq),
    .slv_resp_valid_o(spv), .slv_resp_ready_i(spr), .slv_resp_o(sp),
    .dma_piece_valid_i(pv), .dma_piece_ready_o(pr), .dma_piece_i(pc), .dma_piece_done_o(pd),
    .axi_ar_valid_o(arv), .axi_ar_ready_i(arr), .axi_ar_o(ar),
    .axi_r_valid_i(rvv), .axi_r_ready_o(rr), .axi_r_i(r),
    .axi_aw_valid_o(awv), .axi_aw_ready_i(awr), .axi_aw_o(aw),
    .axi_w_valid_o(wv), .axi_w_ready_i(wr), .axi_w_o(w),
    .axi_b_valid_i(bv), .axi_b_ready_o(br), .axi_b_i(b));

  for (genvar m = 0; m < NSG; m++) begin : gen_mem
    axi_mem_model #(.Latency(8), .RandomStall(1'b1)) i_mem (
      .clk_i(clk), .rst_ni(rst_n),
      .ar_valid_i(arv[m]), .ar_ready_o(arr[m]), .ar_i(ar[m]), .r_valid_o(rvv[m]), .r_ready_i(rr[m]), .r_o(r[m]),
      .aw_valid_i(awv[m]), .aw_ready_o(awr[m]), .aw_i(aw[m]), .w_valid_i(wv[m]), .w_ready_o(wr[m]), .w_i(w[m]),
      .b_valid_o(bv[m]), .b_ready_i(br[m]), .b_o(b[m]));
  end

  tb_core_driver #(
    .NumTilesAll(NTA), .TileLo(NTG), .NumTilesDrv(NTG), .ScopeLo(NTG), .ScopeNum(NTG),
    .MaxRow(224), .PoolSize(16), .TilesPerSg(NT), .TilesPerG(NSG * NT)
  ) drv (
    .clk_i(clk), .rst_ni(rst_n), .enable_i(en),
    .req_valid_o(cv), .req_ready_i(cr), .req_o(creq),
    .resp_valid_i(rv), .resp_i(cresp), .pending_i(cpend));

  int checks = 0, failures = 0, ext = 0;
  initial begin
    mqr = '1; mpv = '0; sqv = '0; spr = '1; pv = '0;
    for (int s = 0; s < NSG; s++) pc[s] = '0;
    for (int i = 0; i < NE; i++) begin mp[i] = '0; sq[i] = '0; end
  end
  always @(posedge clk) if (rst_n && (mqv != 0 || spv != 0)) ext++;

  function automatic logic [31:0] word_addr(int t, int bank, int row);
    return 32'((row * NTA * 32 + t * 32 + bank) * 4);
  endfunction

  task automatic probe_lat(int core, logic [31:0] a, int exp_lat, string what);
    drv.probe_c[drv.probe_n] = core;
    drv.probe_a[drv.probe_n] = a;
    drv.probe_k[drv.probe_n] = 1'b0;
    drv.probe_n++;
    repeat (20) @(posedge clk);
    checks++;
    if (drv.last_lat[core] != exp_lat) begin
      failures++; $display("%s: latency %0d, expected %0d", what, drv.last_lat[core], exp_lat);
    end else $display("%s: %0d cycles", what, drv.last_lat[core]);
  endtask

  localparam logic [31:0] L1Dma = 32'(224 * NTA * 32 * 4 + 6 * NT * 32 * 4);   // SubGroup 2 of Group 1
  localparam logic [31:0] L2Src = L2BaseAddr + 32'h0000_4000;

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    en = 1;
    repeat (200) @(posedge clk);
    // DMA piece while the cores run
    @(negedge clk);
    pv[2] = 1; pc[2].l1_to_l2 = 0; pc[2].l1_addr = L1Dma; pc[2].l2_addr = L2Src; pc[2].num_bytes = 11'(NT * 32 * 4);
    @(posedge clk);
    while (!pr[2]) @(posedge clk);
    @(negedge clk) pv[2] = 0;
    while (!pd[2]) @(posedge clk);
    repeat (3000) @(posedge clk);
    en = 0;
    repeat (100) @(posedge clk);
    checks++;
    if (!drv.idle()) begin failures++; $display("loads still pending"); end
    probe_lat(3, word_addr(NTG, 4, 64), 1, "own Tile");
    probe_lat(3, word_addr(NTG + 1, 4, 64), 3, "other Tile of the SubGroup");
    probe_lat(3, word_addr(NTG + 5, 4, 64), 5, "Tile of another SubGroup");
    for (int i = 0; i < NT * 32; i++) begin
      drv.probe_c[drv.probe_n] = $urandom_range(0, NC - 1);
      drv.probe_a[drv.probe_n] = L1Dma + 32'(4 * i);
      drv.probe_e[drv.probe_n] = gen_mem[0].i_mem.init_word(L2Src + 32'(4 * i));
      drv.probe_k[drv.probe_n] = 1'b1;
      drv.probe_n++;
    end
    while (drv.probe_next != drv.probe_n) @(posedge clk);
    repeat (40) @(posedge clk);
    checks += 2;
    if (ext != 0) begin failures++; $display("traffic left the Group"); end
    if (drv.n_level[0] == 0 || drv.n_level[1] == 0 || drv.n_level[2] == 0) begin failures++; $display("a level was never used"); end
    $display("levels: tile %0d, subgroup %0d, group %0d; stalls %0d; loads checked %0d", drv.n_level[0], drv.n_level[1], drv.n_level[2], drv.n_stall, drv.n_load_checked);
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
