// End-to-end testbench of the TeraPool top (cluster, DMA frontend, midend and
// backends) with a reduced hierarchy: 2 Groups x 2 SubGroups x 2 Tiles, i.e.
// 64 core ports, 256 banks and 4 AXI memory ports, each backed by the
// behavioural memory model. Every module keeps its default inner sizes (8
// cores and 32 banks per Tile, 1 KiB banks, 8 outstanding transactions, 9-cycle
// remote-Group latency); only the three hierarchy counts are overridden, so
// the simulation builds and runs in a few minutes. Sizes below are given in
// L1 rows (one row = one word in every bank = 1 KiB here, 16 KiB at full size).
//
// Sequence:
//  1. All core ports run random loads and stores through the behavioural core
//     driver (which checks every load) while software-style register writes
//     launch a DMA transfer of 16 rows from main memory into the top of the
//     L1 (rows 224..239 of every bank). A second, 4 KiB transfer is launched
//     at once and must be held until the first one has finished.
//  2. With the cores stopped, a third transfer copies 4 rows of L1 that the
//     cores have been writing (interleaved rows 32..35) out to main memory.
//  3. With the cores idle, 2048 probe loads from random cores read words the
//     DMA brought in and compare them with the main-memory content.
//  4. A fourth transfer copies the 16 rows back from L1 to another main-memory
//     area; both it and the third transfer are checked against what was
//     written to main memory, which is recorded by watching the W channels.
// Counted mechanisms (each must occur): accesses at the four hierarchy levels
// and to the sequential region, core stalls, full transaction tables, bank
// cycles taken by the DMA from a waiting core request, a launch held while the
// DMA was busy, backends working in parallel, and local/remote response
// collisions at a core.
module tb_terapool;
  import terapool_pkg::*;
  localparam int NG = 2, NSG = 2, NT = 2;
  localparam int NTA = NG * NSG * NT, NC = NTA * 8, NSGA = NG * NSG;
  localparam int RowBytes = NTA * 32 * 4;   // 1 KiB: one row of every bank

  logic clk = 0, rst_n = 0, en = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [NC-1:0] cv, cr, rv;
  lsu_req_t      creq [NC];
  lsu_resp_t     cresp [NC];
  logic [31:0]   cpend [NC];
  logic          dv, dr, dwe;
  logic [7:0]    daddr;
  logic [31:0]   dwdata, drdata;
  logic [NSGA-1:0] arv, arr, rvv, rr, awv, awr, wv, wr, bv, br;
  axi_ax_t       ar [NSGA], aw [NSGA];
  axi_r_t        r [NSGA];
  axi_w_t        w [NSGA];
  axi_b_t        b [NSGA];

  terapool #(
    .NumTilesPerSubGroup(NT), .NumSubGroupsPerGroup(NSG), .NumGroups(NG)
  ) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_valid_i(cv), .core_req_ready_o(cr), .core_req_i(creq),
    .core_resp_valid_o(rv), .core_resp_o(cresp), .core_pending_o(cpend),
    .dma_cfg_valid_i(dv), .dma_cfg_ready_o(dr), .dma_cfg_we_i(dwe),
    .dma_cfg_addr_i(daddr), .dma_cfg_wdata_i(dwdata), .dma_cfg_rdata_o(drdata),
    .axi_ar_valid_o(arv), .axi_ar_ready_i(arr), .axi_ar_o(ar),
    .axi_r_valid_i(rvv), .axi_r_ready_o(rr), .axi_r_i(r),
    .axi_aw_valid_o(awv), .axi_aw_ready_i(awr), .axi_aw_o(aw),
    .axi_w_valid_o(wv), .axi_w_ready_i(wr), .axi_w_o(w),
    .axi_b_valid_i(bv), .axi_b_ready_o(br), .axi_b_i(b));

  tb_core_driver #(
    .NumTilesAll(NTA), .TileLo(0), .NumTilesDrv(NTA), .ScopeLo(0), .ScopeNum(NTA),
    .MaxRow(224), .PoolSize(8), .TilesPerSg(NT), .TilesPerG(NSG * NT)
  ) drv (
    .clk_i(clk), .rst_ni(rst_n), .enable_i(en),
    .req_valid_o(cv), .req_ready_i(cr), .req_o(creq),
    .resp_valid_i(rv), .resp_i(cresp), .pending_i(cpend));

  // main memory: one model per AXI port; W traffic is recorded here
  logic [31:0] l2w [int];     // written main-memory words, keyed by word address
  for (genvar m = 0; m < NSGA; m++) begin : gen_mem
    axi_mem_model #(.Latency(8), .RandomStall(1'b1)) i_mem (
      .clk_i(clk), .rst_ni(rst_n),
      .ar_valid_i(arv[m]), .ar_ready_o(arr[m]), .ar_i(ar[m]), .r_valid_o(rvv[m]), .r_ready_i(rr[m]), .r_o(r[m]),
      .aw_valid_i(awv[m]), .aw_ready_o(awr[m]), .aw_i(aw[m]), .w_valid_i(wv[m]), .w_ready_o(wr[m]), .w_i(w[m]),
      .b_valid_o(bv[m]), .b_ready_i(br[m]), .b_o(b[m]));
    logic [31:0] awq [$];
    int beat = 0;
    always @(posedge clk) begin
      if (rst_n && awv[m] && awr[m]) awq.push_back(aw[m].addr);
      if (rst_n && wv[m] && wr[m]) begin
        for (int k = 0; k < 16; k++) l2w[int'((awq[0] + 32'(64 * beat)) >> 2) + k] = w[m].data[32*k +: 32];
        beat++;
        if (w[m].last) begin beat = 0; void'(awq.pop_front()); end
      end
    end
  end

  function automatic logic [31:0] l2_init(logic [31:0] a);
    return gen_mem[0].i_mem.init_word(a);
  endfunction

  // ---------------- mechanism counters ----------------
  int n_dma_prio = 0, n_full = 0, n_collide = 0, n_held = 0, n_parallel = 0;
  logic [NTA-1:0] t_dma_prio, t_full, t_collide;
  for (genvar g = 0; g < NG; g++) begin : gen_g
    for (genvar s = 0; s < NSG; s++) begin : gen_s
      for (genvar t = 0; t < NT; t++) begin : gen_t
        localparam int Idx = (g * NSG + s) * NT + t;
        logic [7:0] f;
        for (genvar c = 0; c < 8; c++) begin : gen_c
          assign f[c] = dut.i_cluster.gen_group[g].i_group.gen_sg[s].i_subgroup.gen_tile[t].i_tile.gen_core[c].i_ttable.full_o;
        end
        assign t_full[Idx] = |f;
        assign t_dma_prio[Idx] = |(dut.i_cluster.gen_group[g].i_group.gen_sg[s].i_subgroup.gen_tile[t].i_tile.dma_hit &
                                   dut.i_cluster.gen_group[g].i_group.gen_sg[s].i_subgroup.gen_tile[t].i_tile.bk_valid);
        assign t_collide[Idx] = |(dut.i_cluster.gen_group[g].i_group.gen_sg[s].i_subgroup.gen_tile[t].i_tile.rr_valid &
                                  dut.i_cluster.gen_group[g].i_group.gen_sg[s].i_subgroup.gen_tile[t].i_tile.rf_out_valid[7:0]);
      end
    end
  end
  always @(posedge clk) begin
    if (rst_n) begin
      n_dma_prio += $countones(t_dma_prio);
      n_full += $countones(t_full);
      n_collide += $countones(t_collide);
      if (dv && dwe && daddr == 8'h0C && !dr) n_held++;
      if ($countones(rvv | wv) > 1) n_parallel++;
    end
  end

  int checks = 0, failures = 0;

  task automatic cfg_wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    dv = 1; dwe = 1; daddr = a; dwdata = d;
    @(posedge clk);
    while (!dr) @(posedge clk);
    @(negedge clk) dv = 0;
  endtask

  task automatic cfg_rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    dv = 1; dwe = 0; daddr = a;
    #1 d = drdata;
    @(negedge clk) dv = 0;
  endtask

  task automatic launch(logic [31:0] src, logic [31:0] dst, logic [31:0] n);
    cfg_wr(8'h00, src);
    cfg_wr(8'h04, dst);
    cfg_wr(8'h08, n);
    cfg_wr(8'h0C, 32'h1);
  endtask

  task automatic wait_done(int n);
    logic [31:0] d;
    d = 0;
    while (d != 32'(n)) begin
      repeat (20) @(posedge clk);
      cfg_rd(8'h10, d);
    end
  endtask

  localparam logic [31:0] DmaL1 = 32'(224 * RowBytes);       // row 224
  localparam logic [31:0] CoreL1 = 32'(32 * RowBytes);       // row 32
  localparam int Size1 = 16 * RowBytes, Size2 = 4 * RowBytes;
  localparam logic [31:0] L2a = L2BaseAddr, L2b = L2BaseAddr + 32'h0010_0000, L2c = L2BaseAddr + 32'h0020_0000;

  initial begin
    int t0, t1;
    dv = 0; dwe = 0; daddr = 0; dwdata = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    en = 1;
    repeat (300) @(posedge clk);
    drv.dense = 1'b1;
    repeat (200) @(posedge clk);
    drv.dense = 1'b0;
    // 1: main memory -> L1 under core traffic; a second, small transfer into
    // the DMA area is launched at once and is held until the first is done
    t0 = cyc;
    launch(L2a, DmaL1, Size1);
    launch(L2a + 32'(Size1), DmaL1 + 32'(Size1), 4096);
    wait_done(2);
    t1 = cyc;
    $display("transfers 1+2 (%0d bytes) took %0d cycles", Size1 + 4096, t1 - t0);
    en = 0;
    repeat (50) @(posedge clk);
    checks++;
    if (!drv.idle()) begin failures++; $display("cores still busy"); end
    // 2: L1 -> L2 copy of words the cores wrote
    launch(CoreL1, L2b, Size2);
    wait_done(3);

    // 2: check the L1 -> L2 copy of core data
    for (int i = 0; i < Size2 / 4; i++) begin
      int wl1, wl2;
      wl1 = int'(CoreL1 >> 2) + i;
      wl2 = int'(L2b >> 2) + i;
      if (drv.refm.exists(wl1)) begin
        checks++;
        if (!l2w.exists(wl2) || l2w[wl2] != drv.refm[wl1]) begin
          failures++;
          if (failures < 10) $display("L1->L2 word %0d wrong", i);
        end
      end
    end

    // 3: probe loads of DMA'd words
    for (int i = 0; i < 2048; i++) begin
      int off;
      off = 4 * $urandom_range(0, Size1 / 4 - 1);
      drv.probe_c[i] = $urandom_range(0, NC - 1);
      drv.probe_a[i] = DmaL1 + 32'(off);
      drv.probe_e[i] = l2_init(L2a + 32'(off));
      drv.probe_k[i] = 1'b1;
    end
    drv.probe_n = 2048;
    while (drv.probe_next != drv.probe_n) @(posedge clk);
    repeat (40) @(posedge clk);

    // 4: L1 -> L2 copy of the DMA'd region
    launch(DmaL1, L2c, Size1);
    wait_done(4);
    for (int i = 0; i < Size1 / 4; i++) begin
      int wl2;
      wl2 = int'(L2c >> 2) + i;
      checks++;
      if (!l2w.exists(wl2) || l2w[wl2] != l2_init(L2a + 32'(4 * i))) begin
        failures++;
        if (failures < 10) $display("round trip word %0d wrong", i);
      end
    end

    $display("levels: tile %0d, subgroup %0d, group %0d, remote group %0d; sequential %0d; core stalls %0d",
             drv.n_level[0], drv.n_level[1], drv.n_level[2], drv.n_level[3], drv.n_seq, drv.n_stall);
    $display("table full %0d, DMA bank priority %0d, response collisions %0d, launch held %0d, parallel backends %0d, loads checked %0d",
             n_full, n_dma_prio, n_collide, n_held, n_parallel, drv.n_load_checked);
    for (int l = 0; l < 4; l++) begin
      checks++;
      if (drv.n_level[l] == 0) begin failures++; $display("level %0d never used", l); end
    end
    checks += 7;
    if (drv.n_seq == 0) begin failures++; $display("no sequential-region access"); end
    if (drv.n_stall == 0) begin failures++; $display("no core stall"); end
    if (n_full == 0) begin failures++; $display("no full transaction table"); end
    if (n_dma_prio == 0) begin failures++; $display("DMA never took a bank from a core"); end
    if (n_collide == 0) begin failures++; $display("no response collision"); end
    if (n_held == 0) begin failures++; $display("no held launch"); end
    if (n_parallel == 0) begin failures++; $display("backends never ran in parallel"); end
    checks += drv.checks;
    failures += drv.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog: cycle limit reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
