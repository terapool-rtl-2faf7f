// Testbench for terapool_tile in a reduced system of 2 Groups x 2 SubGroups x
// 2 Tiles (8 cores and 32 banks per Tile, as in the full design), so the Tile
// has 3 remote ports. The Tile under test is Tile 1 of SubGroup 0 of Group 1.
//
// The testbench plays three roles around the Tile:
//  * eight cores issuing random loads and stores, from small per-core address
//    pools that mix the Tile's own banks (interleaved and sequential-region
//    addresses) with words of every other Tile;
//  * the rest of the system behind the master ports: a memory model that
//    answers each request after a random delay, checks that the request left
//    on the port the target's position calls for, and applies back-pressure;
//  * remote initiators on the slave ports, and the DMA backend on the wide port.
// Every load's data is compared with a reference memory kept by the
// testbench. Rows are split between initiators (row mod 16) so that no two
// initiators race on one word. At the end, zero-load latencies are checked: 1
// cycle for a core to its own Tile, 2 cycles from slave request to slave
// response, 1 cycle for a DMA read. Counted mechanisms: bank conflicts, DMA
// priority stalls, master-port back-pressure, local/remote response collisions.
module tb_terapool_tile;
  import terapool_pkg::*;
  localparam int NG = 2, NSG = 2, NT = 2, NC = 8, NR = NSG + NG - 1;
  localparam logic [0:0] MyG = 1, MySg = 0, MyT = 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [NC-1:0] creq_v, creq_r, cresp_v;
  lsu_req_t      creq [NC];
  lsu_resp_t     cresp [NC];
  logic [31:0]   cpend [NC];
  logic [NR-1:0] mreq_v, mreq_r, mresp_v, mresp_r;
  tcdm_req_t     mreq [NR];
  tcdm_resp_t    mresp [NR];
  logic [NR-1:0] sreq_v, sreq_r, sresp_v, sresp_r;
  tcdm_req_t     sreq [NR];
  tcdm_resp_t    sresp [NR];
  logic          dma_v, dma_rv;
  dma_tile_req_t dma_req;
  logic [AxiDataWidth-1:0] dma_rdata;

  terapool_tile #(
    .NumCoresPerTile(NC), .BankingFactor(4), .NumTilesPerSubGroup(NT),
    .NumSubGroupsPerGroup(NSG), .NumGroups(NG), .BankNumWords(256),
    .SeqBytesPerTile(4096), .NumOutstanding(8)
  ) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .group_id_i(MyG), .subgroup_id_i(MySg), .tile_id_i(MyT),
    .core_req_valid_i(creq_v), .core_req_ready_o(creq_r), .core_req_i(creq),
    .core_resp_valid_o(cresp_v), .core_resp_o(cresp), .core_pending_o(cpend),
    .mst_req_valid_o(mreq_v), .mst_req_ready_i(mreq_r), .mst_req_o(mreq),
    .mst_resp_valid_i(mresp_v), .mst_resp_ready_o(mresp_r), .mst_resp_i(mresp),
    .slv_req_valid_i(sreq_v), .slv_req_ready_o(sreq_r), .slv_req_i(sreq),
    .slv_resp_valid_o(sresp_v), .slv_resp_ready_i(sresp_r), .slv_resp_o(sresp),
    .dma_req_valid_i(dma_v), .dma_req_i(dma_req),
    .dma_resp_valid_o(dma_rv), .dma_resp_rdata_o(dma_rdata));

  int checks = 0, failures = 0;
  int n_conflict = 0, n_dma_stall = 0, n_mst_bp = 0, n_resp_collide = 0, n_local = 0, n_remote = 0, n_seq = 0;
  bit run = 0;

  // ---------------- address helpers and reference memory ----------------
  function automatic logic [31:0] il_addr(int g, int sg, int t, int bank, int row);
    return 32'((row << 10) | (g << 9) | (sg << 8) | (t << 7) | (bank << 2));
  endfunction
  function automatic logic [31:0] seq_addr(int g, int sg, int t, int bank, int row);
    return 32'(((g * 4 + sg * 2 + t) << 12) | (row << 7) | (bank << 2));
  endfunction
  function automatic logic [31:0] init_val(logic [31:0] waddr);
    return waddr * 32'h9E37_79B9 + 32'h1234;
  endfunction
  function automatic bit is_local_w(logic [31:0] waddr);  // waddr = scrambled >> 2
    return waddr[7:5] == {MyG, MySg, MyT};
  endfunction

  logic [31:0] refm [int];   // reference, keyed by scrambled word address
  function automatic bit known(logic [31:0] w);
    return refm.exists(w) || !is_local_w(w);
  endfunction
  function automatic logic [31:0] refv(logic [31:0] w);
    return refm.exists(w) ? refm[w] : init_val(w);
  endfunction
  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] nw, logic [3:0] be);
    for (int k = 0; k < 4; k++) if (be[k]) old[8*k +: 8] = nw[8*k +: 8];
    return old;
  endfunction

  // ---------------- cores ----------------
  logic [31:0] pool_a [NC][24];   // address as issued
  logic [31:0] pool_w [NC][24];   // scrambled word address
  logic [31:0] exp_d  [NC][32];
  bit          exp_k  [NC][32];
  int          iss_cyc [NC][32];
  int          last_lat [NC];

  initial begin
    for (int c = 0; c < NC; c++) begin
      for (int k = 0; k < 24; k++) begin
        int g, sg, t, bank, row, kind;
        kind = k % 4;             // 0,1: own Tile interleaved; 2: own Tile sequential; 3: remote
        bank = (k < 12) ? $urandom_range(0, 15) : $urandom_range(0, 31);
        row  = 16 * $urandom_range(2, 15) + c;
        g = MyG; sg = MySg; t = MyT;
        if (kind == 2) begin
          row = 16 * $urandom_range(0, 1) + c;
          pool_a[c][k] = seq_addr(g, sg, t, bank, row);
        end else begin
          if (kind == 3) begin
            int which;
            which = (k / 4) % 3;
            if (which == 0) t = 0;                            // same SubGroup
            else if (which == 1) sg = 1;                      // other SubGroup
            else begin g = 0; sg = $urandom_range(0, 1); t = $urandom_range(0, 1); end  // other Group
          end
          pool_a[c][k] = il_addr(g, sg, t, bank, row);
        end
        pool_w[c][k] = il_addr(g, sg, t, bank, row) >> 2;
      end
      for (int r = 0; r < 32; r++) begin exp_k[c][r] = 0; exp_d[c][r] = 0; iss_cyc[c][r] = 0; end
      last_lat[c] = -1;
    end
  end

  int cur_k [NC];
  always @(negedge clk) begin
    for (int c = 0; c < NC; c++) begin
      if (!creq_v[c] && run && $urandom_range(0, 2) == 0) begin
        int k;
        k = $urandom_range(0, 23);
        cur_k[c] = k;
        creq_v[c] = 1;
        creq[c].addr = pool_a[c][k];
        creq[c].wen = !known(pool_w[c][k]) || ($urandom_range(0, 2) == 0);
        creq[c].be = known(pool_w[c][k]) ? 4'($urandom_range(1, 15)) : 4'hF;
        creq[c].wdata = $urandom;
        creq[c].rd = creq[c].wen ? 5'd0 : 5'($urandom_range(1, 6));
      end
    end
  end

  always @(posedge clk) begin
    for (int c = 0; c < NC; c++) begin
      if (rst_n && creq_v[c] && creq_r[c]) begin
        logic [31:0] w;
        w = pool_w[c][cur_k[c]];
        if (is_local_w(w)) n_local++; else n_remote++;
        if (creq[c].addr < 32'h8000) n_seq++;
        if (creq[c].wen) refm[w] = merge(refv(w), creq[c].wdata, creq[c].be);
        else begin
          exp_k[c][creq[c].rd] = known(w);
          exp_d[c][creq[c].rd] = refv(w);
          iss_cyc[c][creq[c].rd] = cyc;
        end
        creq_v[c] = 0;
      end
      if (rst_n && cresp_v[c] && !cresp[c].wen) begin
        if (exp_k[c][cresp[c].rd]) begin
          checks++;
          if (cresp[c].rdata != exp_d[c][cresp[c].rd]) begin
            failures++;
            $display("core %0d rd %0d: %h exp %h", c, cresp[c].rd, cresp[c].rdata, exp_d[c][cresp[c].rd]);
          end
        end
        last_lat[c] = cyc - iss_cyc[c][cresp[c].rd];
      end
    end
  end

  // ---------------- remote side behind the master ports ----------------
  typedef struct { tcdm_resp_t r; int due; } pend_t;
  pend_t mq [NR][$];
  logic [31:0] remm [int];
  bit mst_fixed = 0;   // zero-load phase: ready, delay 0
  always @(posedge clk) begin
    for (int p = 0; p < NR; p++) begin
      if (rst_n && mreq_v[p] && mreq_r[p]) begin
        logic [31:0] w;
        int tg, ts, tt, ep;
        pend_t it;
        w = mreq[p].addr >> 2;
        tt = int'(w[5]); ts = int'(w[6]); tg = int'(w[7]);
        ep = (tg != MyG) ? NSG - 1 + ((tg - MyG + NG) % NG) : (ts != MySg) ? (ts - MySg + NSG) % NSG : 0;
        checks++;
        if (ep != p || is_local_w(w)) begin
          failures++;
          $display("request for %h left on port %0d, expected %0d", mreq[p].addr, p, ep);
        end
        checks++;
        if (mreq[p].core_id[5:3] != {MyG, MySg, MyT}) begin
          failures++; $display("bad core id %h", mreq[p].core_id);
        end
        it.r = '0;
        it.r.core_id = mreq[p].core_id;
        it.r.tid = mreq[p].tid;
        it.r.wen = mreq[p].wen;
        // the remote memory is a separate copy, updated in arrival order
        if (!remm.exists(w)) remm[w] = init_val(w);
        if (mreq[p].wen) remm[w] = merge(remm[w], mreq[p].wdata, mreq[p].be);
        it.r.rdata = remm[w];
        it.due = cyc + (mst_fixed ? 0 : $urandom_range(0, 5));
        mq[p].push_back(it);
      end
      if (rst_n && mresp_v[p] && mresp_r[p]) void'(mq[p].pop_front());
      if (rst_n && mreq_v[p] && !mreq_r[p]) n_mst_bp++;
    end
  end
  always @(negedge clk) begin
    for (int p = 0; p < NR; p++) begin
      mreq_r[p] = mst_fixed || ($urandom_range(0, 3) != 0);
      mresp_v[p] = (mq[p].size() > 0) && (mq[p][0].due <= cyc);
      mresp[p] = (mq[p].size() > 0) ? mq[p][0].r : '0;
    end
  end

  // ---------------- remote initiators on the slave ports ----------------
  logic [31:0] s_exp [NR][8];
  bit          s_busy [NR][8];
  int          s_cyc [NR][8];
  int          s_last_lat [NR];
  logic [31:0] s_w [NR];
  logic [2:0]  s_tid_next [NR];
  bit          s_fixed = 0;
  always @(negedge clk) begin
    for (int p = 0; p < NR; p++) begin
      sresp_r[p] = s_fixed || ($urandom_range(0, 3) != 0);
      if (!sreq_v[p] && run && !s_busy[p][s_tid_next[p]] && $urandom_range(0, 2) == 0) begin
        int bank, row;
        bank = $urandom_range(0, 31);
        row = 16 * $urandom_range(0, 15) + 8 + p;
        s_w[p] = il_addr(MyG, MySg, MyT, bank, row) >> 2;
        sreq_v[p] = 1;
        sreq[p].addr = s_w[p] << 2;
        sreq[p].wen = !known(s_w[p]) || ($urandom_range(0, 1) == 0);
        sreq[p].be = 4'hF;
        sreq[p].wdata = $urandom;
        sreq[p].core_id = 10'(64 + p);
        sreq[p].tid = s_tid_next[p];
      end
    end
  end
  always @(posedge clk) begin
    for (int p = 0; p < NR; p++) begin
      if (rst_n && sreq_v[p] && sreq_r[p]) begin
        s_busy[p][sreq[p].tid] = 1;
        s_cyc[p][sreq[p].tid] = cyc;
        if (sreq[p].wen) begin
          refm[s_w[p]] = sreq[p].wdata;
          s_exp[p][sreq[p].tid] = 0;
        end else s_exp[p][sreq[p].tid] = refv(s_w[p]);
        s_tid_next[p] = s_tid_next[p] + 1;
        sreq_v[p] = 0;
      end
      if (rst_n && sresp_v[p] && sresp_r[p]) begin
        checks++;
        if (sresp[p].core_id != 10'(64 + p) || !s_busy[p][sresp[p].tid]) begin
          failures++; $display("slave port %0d: unexpected response id %0d tid %0d", p, sresp[p].core_id, sresp[p].tid);
        end else if (!sresp[p].wen && sresp[p].rdata != s_exp[p][sresp[p].tid]) begin
          failures++; $display("slave port %0d: data %h exp %h", p, sresp[p].rdata, s_exp[p][sresp[p].tid]);
        end
        s_busy[p][sresp[p].tid] = 0;
        s_last_lat[p] = cyc - s_cyc[p][sresp[p].tid];
      end
    end
  end

  // ---------------- DMA port ----------------
  logic [AxiDataWidth-1:0] dma_exp;
  bit dma_written [16][2];
  bit dma_rd_pending = 0;
  bit dma_go = 0;
  always @(negedge clk) begin
    dma_v = 0;
    if (dma_go && $urandom_range(0, 4) == 0) begin
      int r, s;
      r = 16 * $urandom_range(0, 15) + 11 + $urandom_range(0, 4);
      s = $urandom_range(0, 1);
      dma_v = 1;
      dma_req.row = 8'(r);
      dma_req.slot = 4'(s);
      dma_req.we = 1;
      for (int k = 0; k < 16; k++) dma_req.wdata[32*k +: 32] = $urandom;
      if ($urandom_range(0, 1) == 0) begin
        // read back a beat written earlier, if any
        dma_req.we = 0;
        for (int k = 0; k < 16; k++) begin
          logic [31:0] w;
          w = il_addr(MyG, MySg, MyT, 16 * s + k, r) >> 2;
          if (!refm.exists(w)) dma_req.we = 1;
        end
      end
    end
  end
  always @(posedge clk) begin
    if (rst_n && dma_rd_pending) begin
      checks++;
      if (!dma_rv || dma_rdata != dma_exp) begin
        failures++; $display("DMA read: valid %0d data mismatch", dma_rv);
      end
    end
    dma_rd_pending = 0;
    if (rst_n && dma_v) begin
      if ((dut.bk_valid & dut.dma_hit) != 0) n_dma_stall++;
      for (int k = 0; k < 16; k++) begin
        logic [31:0] w;
          w = il_addr(MyG, MySg, MyT, 16 * int'(dma_req.slot) + k, int'(dma_req.row)) >> 2;
        if (dma_req.we) refm[w] = dma_req.wdata[32*k +: 32];
        else dma_exp[32*k +: 32] = refm[w];
      end
      dma_rd_pending = !dma_req.we;
    end
    if (rst_n) begin
      // two or more local requests aimed at one bank in the same cycle
      for (int b = 0; b < 32; b++) begin
        int n;
        n = 0;
        for (int i = 0; i < NC + NR; i++) if (dut.lx_valid[i] && int'(dut.lx_sel[i]) == b) n++;
        if (n > 1) n_conflict++;
      end
      for (int c = 0; c < NC; c++) if (dut.rr_valid[c] && dut.rf_out_valid[c]) n_resp_collide++;
    end
  end

  // ---------------- sequence ----------------
  initial begin
    creq_v = '0; sreq_v = '0; dma_v = 0; mresp_v = '0; sresp_r = '0; mreq_r = '0;
    for (int c = 0; c < NC; c++) creq[c] = '0;
    for (int p = 0; p < NR; p++) begin
      sreq[p] = '0; mresp[p] = '0; s_tid_next[p] = 0; s_last_lat[p] = -1;
      for (int t = 0; t < 8; t++) begin s_busy[p][t] = 0; s_exp[p][t] = 0; s_cyc[p][t] = 0; end
    end
    dma_req = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    run = 1; dma_go = 1;
    repeat (6000) @(posedge clk);
    run = 0; dma_go = 0;
    repeat (200) @(posedge clk);
    checks++;
    for (int c = 0; c < NC; c++) if (cpend[c] != 0) begin failures++; $display("core %0d still has loads pending", c); break; end

    // zero-load latencies
    mst_fixed = 1; s_fixed = 1;
    @(negedge clk);
    creq_v[3] = 1; cur_k[3] = 0;               // pool entry 0 is a local interleaved word
    creq[3].addr = pool_a[3][0]; creq[3].wen = 0; creq[3].be = 4'hF; creq[3].rd = 5'd9;
    repeat (5) @(posedge clk);
    checks++;
    if (last_lat[3] != 1) begin failures++; $display("local load latency %0d, expected 1", last_lat[3]); end
    @(negedge clk);
    sreq_v[1] = 1; s_w[1] = pool_w[3][0];
    sreq[1].addr = s_w[1] << 2; sreq[1].wen = 0; sreq[1].core_id = 10'(65); sreq[1].tid = s_tid_next[1];
    repeat (6) @(posedge clk);
    checks++;
    if (s_last_lat[1] != 2) begin failures++; $display("slave port latency %0d, expected 2", s_last_lat[1]); end
    @(negedge clk);
    dma_v = 1; dma_req.we = 0; dma_req.row = 8'd11; dma_req.slot = 4'd0;
    @(posedge clk);
    // dma_rd_pending handles the data check; confirm it is in the cycle right after
    @(negedge clk) dma_v = 0;
    @(posedge clk);

    $display("conflicts %0d, dma stalls %0d, master back-pressure %0d, response collisions %0d, local %0d, remote %0d, seq %0d",
             n_conflict, n_dma_stall, n_mst_bp, n_resp_collide, n_local, n_remote, n_seq);
    checks += 6;
    if (n_conflict == 0) failures++;
    if (n_dma_stall == 0) failures++;
    if (n_mst_bp == 0) failures++;
    if (n_resp_collide == 0) failures++;
    if (n_local == 0 || n_remote == 0) failures++;
    if (n_seq == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
