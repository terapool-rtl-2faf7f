// TeraPool Group: 4 SubGroups and the inter-SubGroup crossbars.
//
// For every ordered pair (source SubGroup s, offset d = 1..NumSubGroups-1) there
// is one NumTiles x NumTiles request crossbar from port d of the Tiles of s to
// slave port d of the Tiles of SubGroup (s+d) mod NumSubGroups, and the matching
// response crossbar back (4 x 3 = 12 pairs of 8x8 crossbars by default, plus the
// four SubGroup-local ones inside the SubGroups). A spill register follows each
// crossbar output on both the request and the response path ("after the
// crossbar on outgoing master ports"), which brings an access to another
// SubGroup of the same Group to 5 cycles round trip zero-load.
//
// Tile ports towards the other Groups (NumSubGroups .. NumRemote-1) are passed
// out flattened as ((sg*NumTiles)+tile)*NumGExt + (port-NumSubGroups). The
// SubGroups' DMA piece inputs and AXI masters are passed out per SubGroup.
module terapool_group
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
  localparam int unsigned NumRemote = NumSubGroupsPerGroup + NumGroups - 1,
  localparam int unsigned NumExt    = NumRemote - 1,
  localparam int unsigned NumGExt   = NumGroups - 1,
  localparam int unsigned NumSg     = NumSubGroupsPerGroup,
  localparam int unsigned NumT      = NumTilesPerSubGroup,
  localparam int unsigned NumTG     = NumSg * NumT,
  localparam int unsigned NumCSg    = NumT * NumCoresPerTile,
  localparam int unsigned NumC      = NumSg * NumCSg,
  localparam int unsigned GBits     = $clog2(NumGroups)
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [GBits-1:0]     group_id_i,
  input  logic [NumC-1:0]      core_req_valid_i,
  output logic [NumC-1:0]      core_req_ready_o,
  input  lsu_req_t             core_req_i      [NumC],
  output logic [NumC-1:0]      core_resp_valid_o,
  output lsu_resp_t            core_resp_o     [NumC],
  output logic [31:0]          core_pending_o  [NumC],
  // Tile ports towards the other Groups
  output logic [NumTG*NumGExt-1:0] mst_req_valid_o,
  input  logic [NumTG*NumGExt-1:0] mst_req_ready_i,
  output tcdm_req_t                mst_req_o        [NumTG*NumGExt],
  input  logic [NumTG*NumGExt-1:0] mst_resp_valid_i,
  output logic [NumTG*NumGExt-1:0] mst_resp_ready_o,
  input  tcdm_resp_t               mst_resp_i       [NumTG*NumGExt],
  input  logic [NumTG*NumGExt-1:0] slv_req_valid_i,
  output logic [NumTG*NumGExt-1:0] slv_req_ready_o,
  input  tcdm_req_t                slv_req_i        [NumTG*NumGExt],
  output logic [NumTG*NumGExt-1:0] slv_resp_valid_o,
  input  logic [NumTG*NumGExt-1:0] slv_resp_ready_i,
  output tcdm_resp_t               slv_resp_o       [NumTG*NumGExt],
  // DMA, per SubGroup
  input  logic [NumSg-1:0]     dma_piece_valid_i,
  output logic [NumSg-1:0]     dma_piece_ready_o,
  input  dma_piece_t           dma_piece_i     [NumSg],
  output logic [NumSg-1:0]     dma_piece_done_o,
  output logic [NumSg-1:0]     axi_ar_valid_o,
  input  logic [NumSg-1:0]     axi_ar_ready_i,
  output axi_ax_t              axi_ar_o        [NumSg],
  input  logic [NumSg-1:0]     axi_r_valid_i,
  output logic [NumSg-1:0]     axi_r_ready_o,
  input  axi_r_t               axi_r_i         [NumSg],
  output logic [NumSg-1:0]     axi_aw_valid_o,
  input  logic [NumSg-1:0]     axi_aw_ready_i,
  output axi_ax_t              axi_aw_o        [NumSg],
  output logic [NumSg-1:0]     axi_w_valid_o,
  input  logic [NumSg-1:0]     axi_w_ready_i,
  output axi_w_t               axi_w_o         [NumSg],
  input  logic [NumSg-1:0]     axi_b_valid_i,
  output logic [NumSg-1:0]     axi_b_ready_o,
  input  axi_b_t               axi_b_i         [NumSg]
);

  localparam int unsigned SgBits   = $clog2(NumSg);
  localparam int unsigned TileBits = $clog2(NumT);
  localparam int unsigned CoreBits = $clog2(NumCoresPerTile);
  localparam int unsigned BankBits = $clog2(NumCoresPerTile * BankingFactor);
  localparam int unsigned TileLsb  = 2 + BankBits;

  // SubGroup-side signals, [sg][tile*NumExt + port-1]
  logic [NumSg-1:0][NumT*NumExt-1:0] s_mreq_v, s_mreq_r, s_mresp_v, s_mresp_r;
  logic [NumSg-1:0][NumT*NumExt-1:0] s_sreq_v, s_sreq_r, s_sresp_v, s_sresp_r;
  tcdm_req_t  s_mreq  [NumSg][NumT*NumExt];
  tcdm_resp_t s_mresp [NumSg][NumT*NumExt];
  tcdm_req_t  s_sreq  [NumSg][NumT*NumExt];
  tcdm_resp_t s_sresp [NumSg][NumT*NumExt];

  for (genvar s = 0; s < NumSg; s++) begin : gen_sg
    lsu_req_t  creq  [NumCSg];
    lsu_resp_t cresp [NumCSg];
    logic [31:0] cpend [NumCSg];
    for (genvar c = 0; c < NumCSg; c++) begin : gen_c
      assign creq[c] = core_req_i[s*NumCSg + c];
      assign core_resp_o[s*NumCSg + c]    = cresp[c];
      assign core_pending_o[s*NumCSg + c] = cpend[c];
    end

    terapool_subgroup #(
      .NumCoresPerTile(NumCoresPerTile), .BankingFactor(BankingFactor),
      .NumTilesPerSubGroup(NumTilesPerSubGroup), .NumSubGroupsPerGroup(NumSubGroupsPerGroup),
      .NumGroups(NumGroups), .BankNumWords(BankNumWords), .SeqBytesPerTile(SeqBytesPerTile),
      .NumOutstanding(NumOutstanding)
    ) i_subgroup (
      .clk_i, .rst_ni,
      .group_id_i,
      .subgroup_id_i     (SgBits'(s)),
      .core_req_valid_i  (core_req_valid_i[s*NumCSg +: NumCSg]),
      .core_req_ready_o  (core_req_ready_o[s*NumCSg +: NumCSg]),
      .core_req_i        (creq),
      .core_resp_valid_o (core_resp_valid_o[s*NumCSg +: NumCSg]),
      .core_resp_o       (cresp),
      .core_pending_o    (cpend),
      .mst_req_valid_o   (s_mreq_v[s]),
      .mst_req_ready_i   (s_mreq_r[s]),
      .mst_req_o         (s_mreq[s]),
      .mst_resp_valid_i  (s_mresp_v[s]),
      .mst_resp_ready_o  (s_mresp_r[s]),
      .mst_resp_i        (s_mresp[s]),
      .slv_req_valid_i   (s_sreq_v[s]),
      .slv_req_ready_o   (s_sreq_r[s]),
      .slv_req_i         (s_sreq[s]),
      .slv_resp_valid_o  (s_sresp_v[s]),
      .slv_resp_ready_i  (s_sresp_r[s]),
      .slv_resp_o        (s_sresp[s]),
      .dma_piece_valid_i (dma_piece_valid_i[s]),
      .dma_piece_ready_o (dma_piece_ready_o[s]),
      .dma_piece_i       (dma_piece_i[s]),
      .dma_piece_done_o  (dma_piece_done_o[s]),
      .axi_ar_valid_o (axi_ar_valid_o[s]), .axi_ar_ready_i (axi_ar_ready_i[s]), .axi_ar_o (axi_ar_o[s]),
      .axi_r_valid_i  (axi_r_valid_i[s]),  .axi_r_ready_o  (axi_r_ready_o[s]),  .axi_r_i  (axi_r_i[s]),
      .axi_aw_valid_o (axi_aw_valid_o[s]), .axi_aw_ready_i (axi_aw_ready_i[s]), .axi_aw_o (axi_aw_o[s]),
      .axi_w_valid_o  (axi_w_valid_o[s]),  .axi_w_ready_i  (axi_w_ready_i[s]),  .axi_w_o  (axi_w_o[s]),
      .axi_b_valid_i  (axi_b_valid_i[s]),  .axi_b_ready_o  (axi_b_ready_o[s]),  .axi_b_i  (axi_b_i[s])
    );

    // ports towards other Groups
    for (genvar t = 0; t < NumT; t++) begin : gen_t
      for (genvar p = NumSg; p < NumRemote; p++) begin : gen_p
        localparam int unsigned X = t*NumExt + p - 1;
        localparam int unsigned Y = (s*NumT + t)*NumGExt + p - NumSg;
        assign mst_req_valid_o[Y]  = s_mreq_v[s][X];
        assign mst_req_o[Y]        = s_mreq[s][X];
        assign s_mreq_r[s][X]      = mst_req_ready_i[Y];
        assign s_mresp_v[s][X]     = mst_resp_valid_i[Y];
        assign s_mresp[s][X]       = mst_resp_i[Y];
        assign mst_resp_ready_o[Y] = s_mresp_r[s][X];
        assign s_sreq_v[s][X]      = slv_req_valid_i[Y];
        assign s_sreq[s][X]        = slv_req_i[Y];
        assign slv_req_ready_o[Y]  = s_sreq_r[s][X];
        assign slv_resp_valid_o[Y] = s_sresp_v[s][X];
        assign slv_resp_o[Y]       = s_sresp[s][X];
        assign s_sresp_r[s][X]     = slv_resp_ready_i[Y];
      end
    end
  end

  // ---------------------------------------------------------------------------
  // Inter-SubGroup crossbars: source s, offset d, destination (s+d) mod NumSg
  // ---------------------------------------------------------------------------
  for (genvar s = 0; s < NumSg; s++) begin : gen_src
    for (genvar d = 1; d < NumSg; d++) begin : gen_off
      localparam int unsigned Dst = (s + d) % NumSg;

      logic [NumT-1:0]                    q_v, q_r, q_ov, q_or;
      logic [NumT-1:0][TileBits-1:0]      q_sel;
      logic [NumT-1:0][TcdmReqWidth-1:0]  q_d, q_od;
      logic [NumT-1:0]                    p_v, p_r, p_ov, p_or;
      logic [NumT-1:0][TileBits-1:0]      p_sel;
      logic [NumT-1:0][TcdmRespWidth-1:0] p_d, p_od;

      for (genvar t = 0; t < NumT; t++) begin : gen_t
        localparam int unsigned X = t*NumExt + d - 1;
        // request: master Tile t of s -> xbar -> spill -> slave Tile of Dst
        assign q_v[t]   = s_mreq_v[s][X];
        assign q_d[t]   = s_mreq[s][X];
        assign q_sel[t] = s_mreq[s][X].addr[TileLsb +: TileBits];
        assign s_mreq_r[s][X] = q_r[t];

        tcdm_req_t q_reg;
        spill_register #(.Width(TcdmReqWidth)) i_req_reg (
          .clk_i, .rst_ni,
          .valid_i (q_ov[t]), .ready_o (q_or[t]), .data_i (q_od[t]),
          .valid_o (s_sreq_v[Dst][X]), .ready_i (s_sreq_r[Dst][X]), .data_o (q_reg)
        );
        assign s_sreq[Dst][X] = q_reg;

        // response: slave Tile t of Dst -> xbar -> spill -> master Tile of s
        assign p_v[t]   = s_sresp_v[Dst][X];
        assign p_d[t]   = s_sresp[Dst][X];
        assign p_sel[t] = s_sresp[Dst][X].core_id[CoreBits +: TileBits];
        assign s_sresp_r[Dst][X] = p_r[t];

        tcdm_resp_t p_reg;
        spill_register #(.Width(TcdmRespWidth)) i_resp_reg (
          .clk_i, .rst_ni,
          .valid_i (p_ov[t]), .ready_o (p_or[t]), .data_i (p_od[t]),
          .valid_o (s_mresp_v[s][X]), .ready_i (s_mresp_r[s][X]), .data_o (p_reg)
        );
        assign s_mresp[s][X] = p_reg;
      end

      stream_xbar #(.NumIn(NumT), .NumOut(NumT), .DataWidth(TcdmReqWidth)) i_req_xbar (
        .clk_i, .rst_ni,
        .in_valid_i(q_v), .in_ready_o(q_r), .in_sel_i(q_sel), .in_data_i(q_d),
        .out_valid_o(q_ov), .out_ready_i(q_or), .out_data_o(q_od)
      );
      stream_xbar #(.NumIn(NumT), .NumOut(NumT), .DataWidth(TcdmRespWidth)) i_resp_xbar (
        .clk_i, .rst_ni,
        .in_valid_i(p_v), .in_ready_o(p_r), .in_sel_i(p_sel), .in_data_i(p_d),
        .out_valid_o(p_ov), .out_ready_i(p_or), .out_data_o(p_od)
      );
    end
  end

endmodule
