// Behavioural traffic source standing in for the Snitch cores (testbench only).
//
// Drives the load/store ports of NumTilesDrv consecutive Tiles (8 cores each),
// starting at global Tile TileLo, with random loads and stores, and checks
// every load's data against a reference kept here. To keep the reference
// exact although 1024 cores run at once, every L1 word has one owner core,
// and a core only touches words it owns:
//   rows below SeqRows (the sequential region): the owner is core (bank mod 8)
//     of the Tile that holds the word, reached by its sequential address;
//   other rows: the owner is core (bank mod 8) of Tile ((T + row) mod Tiles),
//     where T is the Tile that holds the word, reached by its interleaved
//     address. A core therefore owns words in every Tile of the cluster.
// Each core draws from a small pool of its own words (its own Tile's
// sequential and interleaved words and words in other Tiles of the scope), so
// that words are reused, banks collide and every level of the hierarchy is
// exercised. Words of rows at or above MaxRow are left to the DMA.
// A word is first written before it is read. The bank/row layout used here is
// written out independently of the RTL's address decoder.
// A testbench can also queue probe loads (core, address, expected data) that
// are issued while random traffic is off; their latency is kept in last_lat.
module tb_core_driver
  import terapool_pkg::*;
#(
  parameter int NumTilesAll = 128,   // Tiles in the whole cluster (address map)
  parameter int TileLo      = 0,
  parameter int NumTilesDrv = 128,
  parameter int ScopeLo     = 0,     // Tiles that random traffic may target
  parameter int ScopeNum    = 128,
  parameter int MaxRow      = 256,
  parameter int PoolSize    = 16,
  parameter int SeqRows     = 32,
  parameter int TilesPerSg  = 8,
  parameter int TilesPerG   = 32,
  localparam int NumCDrv    = NumTilesDrv * 8,
  localparam int NumBanksAll = NumTilesAll * 32
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                enable_i,
  output logic [NumCDrv-1:0]  req_valid_o,
  input  logic [NumCDrv-1:0]  req_ready_i,
  output lsu_req_t            req_o      [NumCDrv],
  input  logic [NumCDrv-1:0]  resp_valid_i,
  input  lsu_resp_t           resp_i     [NumCDrv],
  input  logic [31:0]         pending_i  [NumCDrv]
);

  int checks = 0, failures = 0;
  int n_issued = 0, n_stall = 0, n_write = 0, n_load_checked = 0;
  int n_level [4];            // own Tile, own SubGroup, own Group, other Group
  int n_seq = 0;
  int last_lat [NumCDrv];

  logic [31:0] pool_a [NumCDrv][PoolSize];
  int          pool_w [NumCDrv][PoolSize];
  int          pool_lv [NumCDrv][PoolSize];
  logic [31:0] refm [int];
  logic [31:0] exp_d [NumCDrv][32];
  bit          exp_k [NumCDrv][32];
  int          iss_cyc [NumCDrv][32];
  int          cur_w [NumCDrv];
  int          cur_lv [NumCDrv];
  int          cyc = 0;

  // probe loads
  int          probe_n = 0, probe_next = 0;
  int          probe_c [8192];
  logic [31:0] probe_a [8192];
  logic [31:0] probe_e [8192];
  bit          probe_k [8192];
  bit          cur_probe [NumCDrv];
  int          cur_pi [NumCDrv];

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] nw, logic [3:0] be);
    for (int k = 0; k < 4; k++) if (be[k]) old[8*k +: 8] = nw[8*k +: 8];
    return old;
  endfunction

  function automatic int level(int ta, int tb);
    if (ta == tb) return 0;
    if (ta / TilesPerSg == tb / TilesPerSg) return 1;
    if (ta / TilesPerG == tb / TilesPerG) return 2;
    return 3;
  endfunction

  initial begin
    for (int i = 0; i < NumCDrv; i++) begin
      int tc, k;
      tc = TileLo + i / 8;
      k  = i % 8;
      last_lat[i] = -1;
      cur_probe[i] = 0;
      for (int r = 0; r < 32; r++) begin exp_k[i][r] = 0; exp_d[i][r] = 0; iss_cyc[i][r] = 0; end
      for (int p = 0; p < PoolSize; p++) begin
        int t, bank, row, kind, base;
        kind = p % 4;
        bank = k + 8 * $urandom_range(0, 3);
        if (kind == 0) begin                    // own Tile, sequential region
          t = tc;
          row = $urandom_range(0, SeqRows - 1);
          pool_a[i][p] = 32'(t * 4096 + row * 128 + bank * 4);
        end else begin
          t = (kind == 1) ? tc : ScopeLo + $urandom_range(0, ScopeNum - 1);
          base = ((tc - t) % NumTilesAll + NumTilesAll) % NumTilesAll;
          row = base;
          while (row < SeqRows) row += NumTilesAll;
          if (row >= MaxRow) begin                // no such row: fall back to the own Tile
            t = tc; row = 0;
            while (row < SeqRows) row += NumTilesAll;
          end
          pool_a[i][p] = 32'((row * NumBanksAll + t * 32 + bank) * 4);
        end
        pool_w[i][p]  = row * NumBanksAll + t * 32 + bank;
        pool_lv[i][p] = level(tc, t);
      end
    end
  end

  always @(posedge clk_i) cyc <= cyc + 1;

  // dense = 1: every core issues a store every cycle it can, so that
  // transaction tables fill up (set by the testbench)
  bit dense = 1'b0;

  always @(negedge clk_i) begin
    // probes first, one per cycle
    if (probe_next < probe_n && !req_valid_o[probe_c[probe_next]]) begin
      int c;
      c = probe_c[probe_next];
      req_valid_o[c] = 1'b1;
      req_o[c].addr = probe_a[probe_next];
      req_o[c].wen = 1'b0;
      req_o[c].be = 4'hF;
      req_o[c].wdata = '0;
      req_o[c].rd = 5'd31;
      cur_probe[c] = 1;
      cur_pi[c] = probe_next;
      probe_next++;
    end
    for (int c = 0; c < NumCDrv; c++) begin
      if (!req_valid_o[c] && enable_i && (dense || $urandom_range(0, 3) == 0)) begin
        int p, w;
        bit kn;
        p = $urandom_range(0, PoolSize - 1);
        if (dense)   // prefer the farthest words: long round trips fill the table
          for (int q = 0; q < PoolSize; q++)
            if (pool_lv[c][q] == 3) p = q;
        w = pool_w[c][p];
        kn = refm.exists(w);
        cur_w[c] = w;
        cur_lv[c] = pool_lv[c][p];
        cur_probe[c] = 0;
        req_valid_o[c] = 1'b1;
        req_o[c].addr = pool_a[c][p];
        req_o[c].wen = dense || !kn || ($urandom_range(0, 2) == 0);
        req_o[c].be = kn ? 4'($urandom_range(1, 15)) : 4'hF;
        req_o[c].wdata = $urandom;
        req_o[c].rd = req_o[c].wen ? 5'd0 : 5'($urandom_range(1, 7));
      end
    end
  end

  always @(posedge clk_i) begin
    if (rst_ni) begin
      for (int c = 0; c < NumCDrv; c++) begin
        if (req_valid_o[c] && !req_ready_i[c]) n_stall++;
        if (req_valid_o[c] && req_ready_i[c]) begin
          n_issued++;
          if (cur_probe[c]) begin
            exp_k[c][31] = probe_k[cur_pi[c]];
            exp_d[c][31] = probe_e[cur_pi[c]];
            iss_cyc[c][31] = cyc;
          end else begin
            int w;
            w = cur_w[c];
            n_level[cur_lv[c]]++;
            if (req_o[c].addr < 32'(NumTilesAll * 4096)) n_seq++;
            if (req_o[c].wen) begin
              refm[w] = merge(refm.exists(w) ? refm[w] : 32'h0, req_o[c].wdata, req_o[c].be);
              n_write++;
            end else begin
              exp_k[c][req_o[c].rd] = 1'b1;
              exp_d[c][req_o[c].rd] = refm[w];
              iss_cyc[c][req_o[c].rd] = cyc;
            end
          end
          req_valid_o[c] = 1'b0;
        end
        if (resp_valid_i[c] && !resp_i[c].wen) begin
          if (exp_k[c][resp_i[c].rd]) begin
            checks++;
            n_load_checked++;
            if (resp_i[c].rdata != exp_d[c][resp_i[c].rd]) begin
              failures++;
              if (failures < 10)
                $display("core %0d rd %0d: data %h, expected %h", TileLo * 8 + c, resp_i[c].rd,
                         resp_i[c].rdata, exp_d[c][resp_i[c].rd]);
            end
          end
          last_lat[c] = cyc - iss_cyc[c][resp_i[c].rd];
        end
      end
    end
  end

  initial begin
    req_valid_o = '0;
    for (int c = 0; c < NumCDrv; c++) req_o[c] = '0;
    for (int l = 0; l < 4; l++) n_level[l] = 0;
  end

  // all loads returned
  function automatic bit idle();
    for (int c = 0; c < NumCDrv; c++) if (pending_i[c] != 0 || req_valid_o[c]) return 1'b0;
    return probe_next == probe_n;
  endfunction

endmodule
