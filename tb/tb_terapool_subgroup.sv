// Testbench for terapool_subgroup: 8 Tiles (64 cores) as in the full design,
// placed as SubGroup 0 of Group 0 in a system of 2 Groups x 2 SubGroups (the
// other SubGroups are not present, so the remote ports stay idle and must stay
// idle: random traffic here only targets this SubGroup's Tiles).
// Checks: every load against the core driver's reference; zero-load latency
// of 1 cycle in the own Tile and 3 cycles to another Tile of the SubGroup; and
// a DMA piece (1 KiB, main memory -> L1, through the SubGroup's backend and
// the Tiles' wide ports) whose words are then read back by probe loads and
// compared with the memory model's content.
module tb_terapool_subgroup;
  import terapool_pkg::*;
  localparam int NG = 2, NSG = 2, NT = 8, NTA = NG * NSG * NT, NC = NT * 8;
  localparam int NR = NSG + NG - 1, NE = NR - 1;
  logic clk = 0, rst_n = 0, en = 0;
  always #5 clk = ~clk;

  logic [NC-1:0] cv, cr, rv;
  lsu_req_t      creq [NC];
  lsu_resp_t     cresp [NC];
  logic [31:0]   cpend [NC];
  logic [NT*NE-1:0] mqv, mqr, mpv, mpr, sqv, sqr, spv, spr;
  tcdm_req_t     mq [NT*NE], sq [NT*NE];
  tcdm_resp_t    mp [NT*NE], sp [NT*NE];
  logic          pv, pr, pd, arv, arr, rvv, rr, awv, awr, wv, wr, bv, br;
  dma_piece_t    pc;
  axi_ax_t       ar, aw;
  axi_r_t        r;
  axi_w_t        w;
  axi_b_t        b;

  terapool_subgroup #(
    .NumCoresPerTile(8), .BankingFactor(4), .NumTilesPerSubGroup(NT),
    .NumSubGroupsPerGroup(NSG), .NumGroups(NG), .BankNumWords(256),
    .SeqBytesPerTile(4096), .NumOutstanding(8)
  ) dut (
    .clk_i(clk), .rst_ni(rst_n), .group_id_i(1'b0), .subgroup_id_i(1'b0),
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

  axi_mem_model #(.Latency(8), .RandomStall(1'b1)) mem (
    .clk_i(clk), .rst_ni(rst_n),
    .ar_valid_i(arv), .ar_ready_o(arr), .ar_i(ar), .r_valid_o(rvv), .r_ready_i(rr), .r_o(r),
    .aw_valid_i(awv), .aw_ready_o(awr), .aw_i(aw), .w_valid_i(wv), .w_ready_o(wr), .w_i(w),
    .b_valid_o(bv), .b_ready_i(br), .b_o(b));

  tb_core_driver #(
    .NumTilesAll(NTA), .TileLo(0), .NumTilesDrv(NT), .ScopeLo(0), .ScopeNum(NT),
    .MaxRow(224), .PoolSize(16), .TilesPerSg(NT), .TilesPerG(NSG * NT)
  ) drv (
    .clk_i(clk), .rst_ni(rst_n), .enable_i(en),
    .req_valid_o(cv), .req_ready_i(cr), .req_o(creq),
    .resp_valid_i(rv), .resp_i(cresp), .pending_i(cpend));

  int checks = 0, failures = 0, ext = 0;
  initial begin
    mqr = '1; mpv = '0; sqv = '0; spr = '1; pv = 0; pc = '0;
    for (int i = 0; i < NT * NE; i++) begin mp[i] = '0; sq[i] = '0; end
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

  localparam logic [31:0] L1Dma = 32'(224 * NTA * 32 * 4);
  localparam logic [31:0] L2Src = L2BaseAddr + 32'h0000_4000;

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    en = 1;
    repeat (200) @(posedge clk);
    // DMA piece while the cores run
    @(negedge clk);
    pv = 1; pc.l1_to_l2 = 0; pc.l1_addr = L1Dma; pc.l2_addr = L2Src; pc.num_bytes = 11'd1024;
    @(posedge clk);
    while (!pr) @(posedge clk);
    @(negedge clk) pv = 0;
    while (!pd) @(posedge clk);
    repeat (3000) @(posedge clk);
    en = 0;
    repeat (100) @(posedge clk);
    checks++;
    if (!drv.idle()) begin failures++; $display("loads still pending"); end
    probe_lat(3, word_addr(0, 4, 64), 1, "own Tile");
    probe_lat(3, word_addr(5, 4, 64), 3, "other Tile of the SubGroup");
    for (int i = 0; i < 256; i++) begin
      drv.probe_c[drv.probe_n] = $urandom_range(0, NC - 1);
      drv.probe_a[drv.probe_n] = L1Dma + 32'(4 * i);
      drv.probe_e[drv.probe_n] = mem.init_word(L2Src + 32'(4 * i));
      drv.probe_k[drv.probe_n] = 1'b1;
      drv.probe_n++;
    end
    while (drv.probe_next != drv.probe_n) @(posedge clk);
    repeat (40) @(posedge clk);
    checks += 2;
    if (ext != 0) begin failures++; $display("traffic left the SubGroup"); end
    if (drv.n_level[0] == 0 || drv.n_level[1] == 0) begin failures++; $display("a level was never used"); end
    $display("levels: tile %0d, subgroup %0d; stalls %0d; loads checked %0d", drv.n_level[0], drv.n_level[1], drv.n_stall, drv.n_load_checked);
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
