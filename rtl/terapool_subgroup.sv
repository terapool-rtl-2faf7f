// TeraPool SubGroup: 8 Tiles, the SubGroup-local crossbar and one DMA backend.
//
// Port 0 of every Tile (master and slave) meets the SubGroup-local crossbar
// here: a NumTiles x NumTiles request crossbar selected by the target Tile index
// of the address, and a response crossbar selected by the issuing Tile's index
// inside the returning core id. Both are combinational; the only registers on a
// SubGroup-internal round trip are the Tiles' master-request and
// slave-response spill registers, giving 3 cycles zero-load.
//
// The other Tile ports (1..NumRemote-1, towards the other SubGroups and Groups)
// are passed out flattened as index tile*NumExt + (port-1).
//
// The SubGroup also holds its DMA backend (one per SubGroup, as in the text):
// it moves pieces of a transfer between the SubGroup's 512-bit AXI master and
// the SubGroup's banks through the Tiles' wide DMA ports.
module terapool_subgroup
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
  localparam int unsigned NumExt     = NumRemote - 1,
  localparam int unsigned NumT       = NumTilesPerSubGroup,
  localparam int unsigned NumC       = NumTilesPerSubGroup * NumCoresPerTile,
  localparam int unsigned SgBits     = $clog2(NumSubGroupsPerGroup),
  localparam int unsigned GBits      = $clog2(NumGroups)
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [GBits-1:0]     group_id_i,
  input  logic [SgBits-1:0]    subgroup_id_i,
  // cores
  input  logic [NumC-1:0]      core_req_valid_i,
  output logic [NumC-1:0]      core_req_ready_o,
  input  lsu_req_t             core_req_i      [NumC],
  output logic [NumC-1:0]      core_resp_valid_o,
  output lsu_resp_t            core_resp_o     [NumC],
  output logic [31:0]          core_pending_o  [NumC],
  // Tile ports 1..NumRemote-1, flattened tile*NumExt + port-1
  output logic [NumT*NumExt-1:0] mst_req_valid_o,
  input  logic [NumT*NumExt-1:0] mst_req_ready_i,
  output tcdm_req_t              mst_req_o        [NumT*NumExt],
  input  logic [NumT*NumExt-1:0] mst_resp_valid_i,
  output logic [NumT*NumExt-1:0] mst_resp_ready_o,
  input  tcdm_resp_t             mst_resp_i       [NumT*NumExt],
  input  logic [NumT*NumExt-1:0] slv_req_valid_i,
  output logic [NumT*NumExt-1:0] slv_req_ready_o,
  input  tcdm_req_t              slv_req_i        [NumT*NumExt],
  output logic [NumT*NumExt-1:0] slv_resp_valid_o,
  input  logic [NumT*NumExt-1:0] slv_resp_ready_i,
  output tcdm_resp_t             slv_resp_o       [NumT*NumExt],
  // DMA backend: pieces from the midend, AXI master towards L2
  input  logic                 dma_piece_valid_i,
  output logic                 dma_piece_ready_o,
  input  dma_piece_t           dma_piece_i,
  output logic                 dma_piece_done_o,
  output logic                 axi_ar_valid_o,
  input  logic                 axi_ar_ready_i,
  output axi_ax_t              axi_ar_o,
  input  logic                 axi_r_valid_i,
  output logic                 axi_r_ready_o,
  input  axi_r_t               axi_r_i,
  output logic                 axi_aw_valid_o,
  input  logic                 axi_aw_ready_i,
  output axi_ax_t              axi_aw_o,
  output logic                 axi_w_valid_o,
  input  logic                 axi_w_ready_i,
  output axi_w_t               axi_w_o,
  input  logic                 axi_b_valid_i,
  output logic                 axi_b_ready_o,
  input  axi_b_t               axi_b_i
);

  localparam int unsigned TileBits = $clog2(NumT);
  localparam int unsigned CoreBits = $clog2(NumCoresPerTile);
  localparam int unsigned BankBits = $clog2(NumCoresPerTile * BankingFactor);
  localparam int unsigned TileLsb  = 2 + BankBits;

  logic [NumT-1:0][NumRemote-1:0] t_mreq_v, t_mreq_r, t_mresp_v, t_mresp_r;
  logic [NumT-1:0][NumRemote-1:0] t_sreq_v, t_sreq_r, t_sresp_v, t_sresp_r;
  tcdm_req_t  t_mreq  [NumT][NumRemote];
  tcdm_resp_t t_mresp [NumT][NumRemote];
  tcdm_req_t  t_sreq  [NumT][NumRemote];
  tcdm_resp_t t_sresp [NumT][NumRemote];

  logic [NumT-1:0]               t_dma_v, t_dma_rv;
  logic [NumT-1:0][AxiDataWidth-1:0] t_dma_rdata;
  dma_tile_req_t                 dma_req;

  for (genvar t = 0; t < NumT; t++) begin : gen_tile
    lsu_req_t  creq   [NumCoresPerTile];
    lsu_resp_t cresp  [NumCoresPerTile];
    logic [31:0] cpend [NumCoresPerTile];
    for (genvar c = 0; c < NumCoresPerTile; c++) begin : gen_c
      assign creq[c] = core_req_i[t*NumCoresPerTile + c];
      assign core_resp_o[t*NumCoresPerTile + c]    = cresp[c];
      assign core_pending_o[t*NumCoresPerTile + c] = cpend[c];
    end

    terapool_tile #(
      .NumCoresPerTile(NumCoresPerTile), .BankingFactor(BankingFactor),
      .NumTilesPerSubGroup(NumTilesPerSubGroup), .NumSubGroupsPerGroup(NumSubGroupsPerGroup),
      .NumGroups(NumGroups), .BankNumWords(BankNumWords), .SeqBytesPerTile(SeqBytesPerTile),
      .NumOutstanding(NumOutstanding)
    ) i_tile (
      .clk_i, .rst_ni,
      .group_id_i, .subgroup_id_i,
      .tile_id_i         (TileBits'(t)),
      .core_req_valid_i  (core_req_valid_i[t*NumCoresPerTile +: NumCoresPerTile]),
      .core_req_ready_o  (core_req_ready_o[t*NumCoresPerTile +: NumCoresPerTile]),
      .core_req_i        (creq),
      .core_resp_valid_o (core_resp_valid_o[t*NumCoresPerTile +: NumCoresPerTile]),
      .core_resp_o       (cresp),
      .core_pending_o    (cpend),
      .mst_req_valid_o   (t_mreq_v[t]),
      .mst_req_ready_i   (t_mreq_r[t]),
      .mst_req_o         (t_mreq[t]),
      .mst_resp_valid_i  (t_mresp_v[t]),
      .mst_resp_ready_o  (t_mresp_r[t]),
      .mst_resp_i        (t_mresp[t]),
      .slv_req_valid_i   (t_sreq_v[t]),
      .slv_req_ready_o   (t_sreq_r[t]),
      .slv_req_i         (t_sreq[t]),
      .slv_resp_valid_o  (t_sresp_v[t]),
      .slv_resp_ready_i  (t_sresp_r[t]),
      .slv_resp_o        (t_sresp[t]),
      .dma_req_valid_i   (t_dma_v[t]),
      .dma_req_i         (dma_req),
      .dma_resp_valid_o  (t_dma_rv[t]),
      .dma_resp_rdata_o  (t_dma_rdata[t])
    );

    // external ports 1..NumRemote-1
    for (genvar p = 1; p < NumRemote; p++) begin : gen_ext
      localparam int unsigned X = t*NumExt + p - 1;
      assign mst_req_valid_o[X] = t_mreq_v[t][p];
      assign mst_req_o[X]       = t_mreq[t][p];
      assign t_mreq_r[t][p]     = mst_req_ready_i[X];
      assign t_mresp_v[t][p]    = mst_resp_valid_i[X];
      assign t_mresp[t][p]      = mst_resp_i[X];
      assign mst_resp_ready_o[X] = t_mresp_r[t][p];
      assign t_sreq_v[t][p]     = slv_req_valid_i[X];
      assign t_sreq[t][p]       = slv_req_i[X];
      assign slv_req_ready_o[X] = t_sreq_r[t][p];
      assign slv_resp_valid_o[X] = t_sresp_v[t][p];
      assign slv_resp_o[X]      = t_sresp[t][p];
      assign t_sresp_r[t][p]    = slv_resp_ready_i[X];
    end
  end

  // ---------------------------------------------------------------------------
  // SubGroup-local crossbar (Tile port 0)
  // ---------------------------------------------------------------------------
  logic [NumT-1:0]                    lq_v, lq_r, lq_ov, lq_or;
  logic [NumT-1:0][TileBits-1:0]      lq_sel;
  logic [NumT-1:0][TcdmReqWidth-1:0]  lq_d, lq_od;
  logic [NumT-1:0]                    lp_v, lp_r, lp_ov, lp_or;
  logic [NumT-1:0][TileBits-1:0]      lp_sel;
  logic [NumT-1:0][TcdmRespWidth-1:0] lp_d, lp_od;

  for (genvar t = 0; t < NumT; t++) begin : gen_local
    assign lq_v[t]   = t_mreq_v[t][0];
    assign lq_d[t]   = t_mreq[t][0];
    assign lq_sel[t] = t_mreq[t][0].addr[TileLsb +: TileBits];
    assign t_mreq_r[t][0] = lq_r[t];
    assign t_sreq_v[t][0] = lq_ov[t];
    assign t_sreq[t][0]   = tcdm_req_t'(lq_od[t]);
    assign lq_or[t]       = t_sreq_r[t][0];

    assign lp_v[t]   = t_sresp_v[t][0];
    assign lp_d[t]   = t_sresp[t][0];
    assign lp_sel[t] = t_sresp[t][0].core_id[CoreBits +: TileBits];
    assign t_sresp_r[t][0] = lp_r[t];
    assign t_mresp_v[t][0] = lp_ov[t];
    assign t_mresp[t][0]   = tcdm_resp_t'(lp_od[t]);
    assign lp_or[t]        = t_mresp_r[t][0];
  end

  stream_xbar #(.NumIn(NumT), .NumOut(NumT), .DataWidth(TcdmReqWidth)) i_req_xbar (
    .clk_i, .rst_ni,
    .in_valid_i(lq_v), .in_ready_o(lq_r), .in_sel_i(lq_sel), .in_data_i(lq_d),
    .out_valid_o(lq_ov), .out_ready_i(lq_or), .out_data_o(lq_od)
  );

  stream_xbar #(.NumIn(NumT), .NumOut(NumT), .DataWidth(TcdmRespWidth)) i_resp_xbar (
    .clk_i, .rst_ni,
    .in_valid_i(lp_v), .in_ready_o(lp_r), .in_sel_i(lp_sel), .in_data_i(lp_d),
    .out_valid_o(lp_ov), .out_ready_i(lp_or), .out_data_o(lp_od)
  );

  // ---------------------------------------------------------------------------
  // DMA backend
  // ---------------------------------------------------------------------------
  dma_backend #(
    .NumCoresPerTile(NumCoresPerTile), .BankingFactor(BankingFactor),
    .NumTilesPerSubGroup(NumTilesPerSubGroup), .NumSubGroupsPerGroup(NumSubGroupsPerGroup),
    .NumGroups(NumGroups), .BankNumWords(BankNumWords), .SeqBytesPerTile(SeqBytesPerTile)
  ) i_dma_backend (
    .clk_i, .rst_ni,
    .piece_valid_i      (dma_piece_valid_i),
    .piece_ready_o      (dma_piece_ready_o),
    .piece_i            (dma_piece_i),
    .done_o             (dma_piece_done_o),
    .tile_req_valid_o   (t_dma_v),
    .tile_req_o         (dma_req),
    .tile_resp_valid_i  (t_dma_rv),
    .tile_resp_rdata_i  (t_dma_rdata),
    .ar_valid_o (axi_ar_valid_o), .ar_ready_i (axi_ar_ready_i), .ar_o (axi_ar_o),
    .r_valid_i  (axi_r_valid_i),  .r_ready_o  (axi_r_ready_o),  .r_i  (axi_r_i),
    .aw_valid_o (axi_aw_valid_o), .aw_ready_i (axi_aw_ready_i), .aw_o (axi_aw_o),
    .w_valid_o  (axi_w_valid_o),  .w_ready_i  (axi_w_ready_i),  .w_o  (axi_w_o),
    .b_valid_i  (axi_b_valid_i),  .b_ready_o  (axi_b_ready_o),  .b_i  (axi_b_i)
  );

endmodule
