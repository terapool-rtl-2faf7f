// TeraPool Tile: the base block of the hierarchy.
//
// A Tile holds NumCoresPerTile core ports (8), BankingFactor x as many SPM banks
// (32 x 1 KiB) and the Tile's share of the L1 interconnect:
//  * a local crossbar ((cores + remote slave ports) x banks, round-robin per
//    bank) that gives a core one-cycle access to its own Tile's banks;
//  * a remote request crossbar (cores -> NumRemote master ports) and a remote
//    response crossbar (master ports -> cores), the "remote arbiters";
//  * NumRemote = 1 + (SubGroups-1) + (Groups-1) = 7 master and 7 slave ports:
//    port 0 goes to the other Tiles of the same SubGroup, ports 1..3 to the
//    SubGroup at offset 1..3 (mod 4) in the same Group, ports 4..6 to the Group
//    at offset 1..3 (mod 4). A request leaves on port p of the issuing Tile and
//    arrives on slave port p of the target Tile; its response returns the same
//    way.
//  * one LSU transaction table per core port (lsu_ttable), so the ports face the
//    core's load/store unit and the Tile tags and tracks outstanding requests.
//  * a wide DMA port that reads or writes one 512-bit beat (16 neighbouring
//    banks, one row) per cycle for the DMA backend of the SubGroup.
//
// Pipelining: a spill register on every outgoing master request and on every
// outgoing slave response. With the SRAM's one-cycle read this gives round
// trips of 1 cycle inside the Tile and 3 cycles to another Tile of the
// SubGroup; higher levels add their own registers (see terapool_group and
// terapool_cluster). The text also draws a register on the incoming slave
// request; it is left out here because the 3-cycle SubGroup latency of the text
// leaves room for only one register per direction.
//
// Flow control: every request gets one response. The Tile lets a request reach a
// bank only when the response FIFO of its initiator (a core or a slave port) has
// room for it (credit check), so a bank never has to hold data. The DMA port
// has priority: a bank the DMA uses in a cycle grants no other request. Core
// responses are always accepted by the transaction table; when a local and a
// remote response arrive for the same core in one cycle, a 2:1 round-robin
// arbiter picks one and the other waits.
//
// Left unconnected on purpose: the transaction tables' full flag (a full table
// already shows as a low request ready to the core) and their response ready
// (the Tile's response path never needs to stall a table), and the ready of
// the credit-protected response FIFOs, which cannot overflow.
module terapool_tile
  import terapool_pkg::*;
#(
  parameter int unsigned NumCoresPerTile      = 8,
  parameter int unsigned BankingFactor        = 4,
  parameter int unsigned NumTilesPerSubGroup  = 8,
  parameter int unsigned NumSubGroupsPerGroup = 4,
  parameter int unsigned NumGroups            = 4,
  parameter int unsigned BankNumWords         = 256,
  parameter int unsigned SeqBytesPerTile      = 4096,
  parameter int unsigned NumOutstanding       = 8,
  localparam int unsigned NumRemote  = NumSubGroupsPerGroup + NumGroups - 1,
  localparam int unsigned TileBits   = $clog2(NumTilesPerSubGroup),
  localparam int unsigned SgBits     = $clog2(NumSubGroupsPerGroup),
  localparam int unsigned GBits      = $clog2(NumGroups)
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic [GBits-1:0]      group_id_i,
  input  logic [SgBits-1:0]     subgroup_id_i,
  input  logic [TileBits-1:0]   tile_id_i,
  // core load/store ports
  input  logic [NumCoresPerTile-1:0] core_req_valid_i,
  output logic [NumCoresPerTile-1:0] core_req_ready_o,
  input  lsu_req_t                   core_req_i       [NumCoresPerTile],
  output logic [NumCoresPerTile-1:0] core_resp_valid_o,
  output lsu_resp_t                  core_resp_o      [NumCoresPerTile],
  output logic [31:0]                core_pending_o   [NumCoresPerTile],
  // remote master ports (requests out, responses in)
  output logic [NumRemote-1:0]  mst_req_valid_o,
  input  logic [NumRemote-1:0]  mst_req_ready_i,
  output tcdm_req_t             mst_req_o        [NumRemote],
  input  logic [NumRemote-1:0]  mst_resp_valid_i,
  output logic [NumRemote-1:0]  mst_resp_ready_o,
  input  tcdm_resp_t            mst_resp_i       [NumRemote],
  // remote slave ports (requests in, responses out)
  input  logic [NumRemote-1:0]  slv_req_valid_i,
  output logic [NumRemote-1:0]  slv_req_ready_o,
  input  tcdm_req_t             slv_req_i        [NumRemote],
  output logic [NumRemote-1:0]  slv_resp_valid_o,
  input  logic [NumRemote-1:0]  slv_resp_ready_i,
  output tcdm_resp_t            slv_resp_o       [NumRemote],
  // DMA port (always accepted, read data one cycle later)
  input  logic                  dma_req_valid_i,
  input  dma_tile_req_t         dma_req_i,
  output logic                  dma_resp_valid_o,
  output logic [AxiDataWidth-1:0] dma_resp_rdata_o
);

  localparam int unsigned NumBanks  = NumCoresPerTile * BankingFactor;
  localparam int unsigned NumInit   = NumCoresPerTile + NumRemote;
  localparam int unsigned InitBits  = $clog2(NumInit);
  localparam int unsigned BankBits  = $clog2(NumBanks);
  localparam int unsigned CoreBits  = $clog2(NumCoresPerTile);
  localparam int unsigned RowBits   = $clog2(BankNumWords);
  localparam int unsigned PortBits  = $clog2(NumRemote);
  localparam int unsigned ByteOff   = 2;
  localparam int unsigned TileLsb   = ByteOff + BankBits;
  localparam int unsigned SgLsb     = TileLsb + TileBits;
  localparam int unsigned GLsb      = SgLsb + SgBits;
  localparam int unsigned RowLsb    = GLsb + GBits;
  localparam int unsigned NumTilesAll = NumGroups * NumSubGroupsPerGroup * NumTilesPerSubGroup;
  localparam int unsigned RespFifoDepth = 2;
  localparam int unsigned LxWidth   = InitBits + TcdmReqWidth;

  // ---------------------------------------------------------------------------
  // Transaction tables and address decoding
  // ---------------------------------------------------------------------------
  logic      [NumCoresPerTile-1:0] tt_valid, tt_ready;
  tcdm_req_t                       tt_req_raw [NumCoresPerTile];
  tcdm_req_t                       tt_req     [NumCoresPerTile];
  logic      [NumCoresPerTile-1:0] cresp_valid;
  tcdm_resp_t                      cresp      [NumCoresPerTile];
  logic      [NumCoresPerTile-1:0] is_local;
  logic [NumCoresPerTile-1:0][PortBits-1:0] rport;

  for (genvar c = 0; c < NumCoresPerTile; c++) begin : gen_core
    logic [CoreIdWidth-1:0] cid;
    assign cid = CoreIdWidth'({group_id_i, subgroup_id_i, tile_id_i, CoreBits'(c)});

    lsu_ttable #(.NumOutstanding(NumOutstanding)) i_ttable (
      .clk_i, .rst_ni,
      .core_id_i        (cid),
      .req_valid_i      (core_req_valid_i[c]),
      .req_ready_o      (core_req_ready_o[c]),
      .req_i            (core_req_i[c]),
      .resp_valid_o     (core_resp_valid_o[c]),
      .resp_o           (core_resp_o[c]),
      .pending_o        (core_pending_o[c]),
      .full_o           (),
      .mem_req_valid_o  (tt_valid[c]),
      .mem_req_ready_i  (tt_ready[c]),
      .mem_req_o        (tt_req_raw[c]),
      .mem_resp_valid_i (cresp_valid[c]),
      .mem_resp_ready_o (),
      .mem_resp_i       (cresp[c])
    );

    logic [AddrWidth-1:0] saddr;
    addr_scrambler #(
      .AddrWidth(AddrWidth), .NumBanksPerTile(NumBanks),
      .NumTiles(NumTilesAll), .SeqBytesPerTile(SeqBytesPerTile)
    ) i_scr (.addr_i(tt_req_raw[c].addr), .addr_o(saddr));

    always_comb begin
      logic [TileBits-1:0] tt;
      logic [SgBits-1:0]   ts;
      logic [GBits-1:0]    tg;
      tt_req[c]      = tt_req_raw[c];
      tt_req[c].addr = saddr;
      tt = saddr[TileLsb +: TileBits];
      ts = saddr[SgLsb +: SgBits];
      tg = saddr[GLsb +: GBits];
      is_local[c] = (tg == group_id_i) && (ts == subgroup_id_i) && (tt == tile_id_i);
      if (tg != group_id_i) begin
        rport[c] = PortBits'(NumSubGroupsPerGroup - 1) + PortBits'(GBits'(tg - group_id_i));
      end else if (ts != subgroup_id_i) begin
        rport[c] = PortBits'(SgBits'(ts - subgroup_id_i));
      end else begin
        rport[c] = '0;
      end
    end
  end

  // ---------------------------------------------------------------------------
  // Response FIFOs (one per initiator of the local crossbar) and credits
  // ---------------------------------------------------------------------------
  logic [NumInit-1:0] rf_in_valid, rf_out_valid, rf_out_ready, credit_ok;
  tcdm_resp_t         rf_in  [NumInit];
  tcdm_resp_t         rf_out [NumInit];
  logic [$clog2(RespFifoDepth+1)-1:0] rf_count [NumInit];

  for (genvar i = 0; i < NumInit; i++) begin : gen_rf
    stream_fifo #(.Width(TcdmRespWidth), .Depth(RespFifoDepth)) i_fifo (
      .clk_i, .rst_ni,
      .valid_i (rf_in_valid[i]),
      .ready_o (),
      .data_i  (rf_in[i]),
      .valid_o (rf_out_valid[i]),
      .ready_i (rf_out_ready[i]),
      .data_o  (rf_out[i]),
      .count_o (rf_count[i])
    );
    assign credit_ok[i] = (int'(rf_count[i]) + int'(rf_in_valid[i])) < RespFifoDepth;
  end

  // ---------------------------------------------------------------------------
  // Local crossbar: cores and slave ports -> banks
  // ---------------------------------------------------------------------------
  logic [NumInit-1:0]                  lx_valid, lx_ready;
  logic [NumInit-1:0][BankBits-1:0]    lx_sel;
  logic [NumInit-1:0][LxWidth-1:0]     lx_data;
  logic [NumBanks-1:0]                 bk_valid, bk_ready;
  logic [NumBanks-1:0][LxWidth-1:0]    bk_data;

  for (genvar i = 0; i < NumInit; i++) begin : gen_lx_in
    tcdm_req_t r;
    logic      v;
    if (i < NumCoresPerTile) begin : gen_c
      assign r = tt_req[i];
      assign v = tt_valid[i] && is_local[i];
    end else begin : gen_s
      assign r = slv_req_i[i - NumCoresPerTile];
      assign v = slv_req_valid_i[i - NumCoresPerTile];
      assign slv_req_ready_o[i - NumCoresPerTile] = lx_ready[i];
    end
    assign lx_valid[i] = v && credit_ok[i];
    assign lx_sel[i]   = r.addr[ByteOff +: BankBits];
    assign lx_data[i]  = {InitBits'(i), r};
  end

  stream_xbar #(.NumIn(NumInit), .NumOut(NumBanks), .DataWidth(LxWidth)) i_local_xbar (
    .clk_i, .rst_ni,
    .in_valid_i  (lx_valid),
    .in_ready_o  (lx_ready),
    .in_sel_i    (lx_sel),
    .in_data_i   (lx_data),
    .out_valid_o (bk_valid),
    .out_ready_i (bk_ready),
    .out_data_o  (bk_data)
  );

  // ---------------------------------------------------------------------------
  // Banks
  // ---------------------------------------------------------------------------
  logic [NumBanks-1:0]                 dma_hit;
  logic [NumBanks-1:0]                 rvalid_q;
  logic [NumBanks-1:0][InitBits-1:0]   rsrc_q;
  tcdm_resp_t                          rmeta_q [NumBanks];
  logic [NumBanks-1:0][DataWidth-1:0]  bk_rdata;
  logic                                dma_rd_q;
  logic [3:0]                          dma_slot_q;

  for (genvar b = 0; b < NumBanks; b++) begin : gen_bank
    tcdm_req_t r;
    logic [InitBits-1:0] src;
    assign {src, r}    = bk_data[b];
    assign dma_hit[b]  = dma_req_valid_i && (int'(dma_req_i.slot) == b / DmaBeatWords);
    assign bk_ready[b] = !dma_hit[b];

    spm_bank #(.NumWords(BankNumWords), .DataWidth(DataWidth)) i_bank (
      .clk_i,
      .req_i   (dma_hit[b] || bk_valid[b]),
      .we_i    (dma_hit[b] ? dma_req_i.we : r.wen),
      .addr_i  (dma_hit[b] ? RowBits'(dma_req_i.row) : r.addr[RowLsb +: RowBits]),
      .be_i    (dma_hit[b] ? {BeWidth{1'b1}} : r.be),
      .wdata_i (dma_hit[b] ? dma_req_i.wdata[(b % DmaBeatWords) * DataWidth +: DataWidth] : r.wdata),
      .rdata_o (bk_rdata[b])
    );

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        rvalid_q[b] <= 1'b0;
        rsrc_q[b]   <= '0;
        rmeta_q[b]  <= '0;
      end else begin
        rvalid_q[b] <= bk_valid[b] && bk_ready[b];
        if (bk_valid[b] && bk_ready[b]) begin
          rsrc_q[b]          <= src;
          rmeta_q[b].wen     <= r.wen;
          rmeta_q[b].core_id <= r.core_id;
          rmeta_q[b].tid     <= r.tid;
          rmeta_q[b].rdata   <= '0;
        end
      end
    end
  end

  // Route bank responses to their initiators (at most one per initiator per cycle)
  always_comb begin
    for (int unsigned i = 0; i < NumInit; i++) begin
      rf_in_valid[i] = 1'b0;
      rf_in[i]       = '0;
      for (int unsigned b = 0; b < NumBanks; b++) begin
        if (rvalid_q[b] && int'(rsrc_q[b]) == int'(i)) begin
          rf_in_valid[i] = 1'b1;
          rf_in[i]       = rmeta_q[b];
          rf_in[i].rdata = bk_rdata[b];
        end
      end
    end
  end

  // DMA read data
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      dma_rd_q   <= 1'b0;
      dma_slot_q <= '0;
    end else begin
      dma_rd_q   <= dma_req_valid_i && !dma_req_i.we;
      dma_slot_q <= dma_req_i.slot;
    end
  end
  assign dma_resp_valid_o = dma_rd_q;
  always_comb begin
    dma_resp_rdata_o = '0;
    for (int unsigned k = 0; k < DmaBeatWords; k++) begin
      if (int'(dma_slot_q) * DmaBeatWords + k < NumBanks)
        dma_resp_rdata_o[k*DataWidth +: DataWidth] = bk_rdata[int'(dma_slot_q) * DmaBeatWords + k];
    end
  end

  // ---------------------------------------------------------------------------
  // Remote request arbiter: cores -> master ports, spill register per port
  // ---------------------------------------------------------------------------
  logic [NumCoresPerTile-1:0]               rq_valid, rq_ready;
  logic [NumCoresPerTile-1:0][TcdmReqWidth-1:0] rq_data;
  logic [NumRemote-1:0]                     mq_valid, mq_ready;
  logic [NumRemote-1:0][TcdmReqWidth-1:0]   mq_data;

  for (genvar c = 0; c < NumCoresPerTile; c++) begin : gen_rq
    assign rq_valid[c] = tt_valid[c] && !is_local[c];
    assign rq_data[c]  = tt_req[c];
    assign tt_ready[c] = is_local[c] ? lx_ready[c] : rq_ready[c];
  end

  stream_xbar #(.NumIn(NumCoresPerTile), .NumOut(NumRemote), .DataWidth(TcdmReqWidth)) i_remote_req_xbar (
    .clk_i, .rst_ni,
    .in_valid_i  (rq_valid),
    .in_ready_o  (rq_ready),
    .in_sel_i    (rport),
    .in_data_i   (rq_data),
    .out_valid_o (mq_valid),
    .out_ready_i (mq_ready),
    .out_data_o  (mq_data)
  );

  for (genvar p = 0; p < NumRemote; p++) begin : gen_mst
    spill_register #(.Width(TcdmReqWidth)) i_mst_req_reg (
      .clk_i, .rst_ni,
      .valid_i (mq_valid[p]),
      .ready_o (mq_ready[p]),
      .data_i  (mq_data[p]),
      .valid_o (mst_req_valid_o[p]),
      .ready_i (mst_req_ready_i[p]),
      .data_o  (mst_req_o[p])
    );
  end

  // ---------------------------------------------------------------------------
  // Remote response arbiter: master ports -> cores
  // ---------------------------------------------------------------------------
  logic [NumRemote-1:0][CoreBits-1:0]         ms_sel;
  logic [NumRemote-1:0][TcdmRespWidth-1:0]    ms_data;
  logic [NumCoresPerTile-1:0]                 rr_valid, rr_ready;
  logic [NumCoresPerTile-1:0][TcdmRespWidth-1:0] rr_data;

  for (genvar p = 0; p < NumRemote; p++) begin : gen_ms
    assign ms_sel[p]  = mst_resp_i[p].core_id[CoreBits-1:0];
    assign ms_data[p] = mst_resp_i[p];
  end

  stream_xbar #(.NumIn(NumRemote), .NumOut(NumCoresPerTile), .DataWidth(TcdmRespWidth)) i_remote_resp_xbar (
    .clk_i, .rst_ni,
    .in_valid_i  (mst_resp_valid_i),
    .in_ready_o  (mst_resp_ready_o),
    .in_sel_i    (ms_sel),
    .in_data_i   (ms_data),
    .out_valid_o (rr_valid),
    .out_ready_i (rr_ready),
    .out_data_o  (rr_data)
  );

  // Per core: local response FIFO vs. remote response
  for (genvar c = 0; c < NumCoresPerTile; c++) begin : gen_cresp
    logic [1:0] g;
    logic       idx;
    rr_arbiter #(.NumIn(2)) i_arb (
      .clk_i, .rst_ni,
      .req_i     ({rr_valid[c], rf_out_valid[c]}),
      .advance_i (1'b1),
      .gnt_o     (g),
      .idx_o     (idx),
      .valid_o   (cresp_valid[c])
    );
    assign rf_out_ready[c] = g[0];
    assign rr_ready[c]     = g[1];
    assign cresp[c]        = idx ? tcdm_resp_t'(rr_data[c]) : rf_out[c];
  end

  // ---------------------------------------------------------------------------
  // Slave responses: FIFO -> spill register -> slave port
  // ---------------------------------------------------------------------------
  for (genvar p = 0; p < NumRemote; p++) begin : gen_slv
    spill_register #(.Width(TcdmRespWidth)) i_slv_resp_reg (
      .clk_i, .rst_ni,
      .valid_i (rf_out_valid[NumCoresPerTile + p]),
      .ready_o (rf_out_ready[NumCoresPerTile + p]),
      .data_i  (rf_out[NumCoresPerTile + p]),
      .valid_o (slv_resp_valid_o[p]),
      .ready_i (slv_resp_ready_i[p]),
      .data_o  (slv_resp_o[p])
    );
  end

endmodule
