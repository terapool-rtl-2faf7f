// TeraPool Cluster: 4 Groups and the inter-Group crossbars (the shared-L1 cluster).
//
// For every ordered pair (source Group g, offset d = 1..NumGroups-1) one
// NumTilesPerGroup x NumTilesPerGroup crossbar (32x32 by default) carries
// requests from port NumSubGroups-1+d of all Tiles of g to the same slave port of
// the Tiles of Group (g+d) mod NumGroups, selected by the {SubGroup, Tile} bits
// of the address; a second one carries the responses back, selected by the
// {SubGroup, Tile} bits of the returning core id.
//
// The remote-Group round-trip latency is a design-time parameter,
// RemoteGroupLatency = 7, 9 or 11 cycles (the text's TeraPool_1-3-5-7/9/11),
// trading latency for clock frequency. On top of the Tiles' own spill registers
// (master request out, slave response out) each direction gets:
//   7 : the register after the crossbar and one register on the Cluster-level
//       slave port (2 per direction);
//   9 : plus a register on the Group-level slave port (3 per direction);
//  11 : plus a register on the Group-level master port (4 per direction).
// All of these registers are placed in this module as spill-register chains
// before and after each crossbar; only their number matters to function and
// latency. The default, 9, is the configuration the text finds best in energy
// x delay and uses for its kernel measurements.
module terapool_cluster
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
  parameter int unsigned RemoteGroupLatency   = 9,
  localparam int unsigned NumSg     = NumSubGroupsPerGroup,
  localparam int unsigned NumSgAll  = NumGroups * NumSubGroupsPerGroup,
  localparam int unsigned NumTG     = NumSubGroupsPerGroup * NumTilesPerSubGroup,
  localparam int unsigned NumCG     = NumTG * NumCoresPerTile,
  localparam int unsigned NumC      = NumGroups * NumCG
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [NumC-1:0]      core_req_valid_i,
  output logic [NumC-1:0]      core_req_ready_o,
  input  lsu_req_t             core_req_i      [NumC],
  output logic [NumC-1:0]      core_resp_valid_o,
  output lsu_resp_t            core_resp_o     [NumC],
  output logic [31:0]          core_pending_o  [NumC],
  // DMA, per SubGroup (index group*NumSubGroupsPerGroup + subgroup)
  input  logic [NumSgAll-1:0]  dma_piece_valid_i,
  output logic [NumSgAll-1:0]  dma_piece_ready_o,
  input  dma_piece_t           dma_piece_i     [NumSgAll],
  output logic [NumSgAll-1:0]  dma_piece_done_o,
  output logic [NumSgAll-1:0]  axi_ar_valid_o,
  input  logic [NumSgAll-1:0]  axi_ar_ready_i,
  output axi_ax_t              axi_ar_o        [NumSgAll],
  input  logic [NumSgAll-1:0]  axi_r_valid_i,
  output logic [NumSgAll-1:0]  axi_r_ready_o,
  input  axi_r_t               axi_r_i         [NumSgAll],
  output logic [NumSgAll-1:0]  axi_aw_valid_o,
  input  logic [NumSgAll-1:0]  axi_aw_ready_i,
  output axi_ax_t              axi_aw_o        [NumSgAll],
  output logic [NumSgAll-1:0]  axi_w_valid_o,
  input  logic [NumSgAll-1:0]  axi_w_ready_i,
  output axi_w_t               axi_w_o         [NumSgAll],
  input  logic [NumSgAll-1:0]  axi_b_valid_i,
  output logic [NumSgAll-1:0]  axi_b_ready_o,
  input  axi_b_t               axi_b_i         [NumSgAll]
);

  localparam int unsigned NumGExt  = NumGroups - 1;
  localparam int unsigned GBits    = $clog2(NumGroups);
  localparam int unsigned SelBits  = $clog2(NumTG);   // {subgroup, tile}
  localparam int unsigned CoreBits = $clog2(NumCoresPerTile);
  localparam int unsigned BankBits = $clog2(NumCoresPerTile * BankingFactor);
  localparam int unsigned TileLsb  = 2 + BankBits;
  localparam int unsigned ReqPre   = (RemoteGroupLatency >= 11) ? 1 : 0;
  localparam int unsigned ReqPost  = 2 + ((RemoteGroupLatency >= 9) ? 1 : 0);
  localparam int unsigned RespPre  = 1 + ((RemoteGroupLatency >= 9) ? 1 : 0);
  localparam int unsigned RespPost = 1 + ((RemoteGroupLatency >= 11) ? 1 : 0);

  logic [NumGroups-1:0][NumTG*NumGExt-1:0] g_mreq_v, g_mreq_r, g_mresp_v, g_mresp_r;
  logic [NumGroups-1:0][NumTG*NumGExt-1:0] g_sreq_v, g_sreq_r, g_sresp_v, g_sresp_r;
  tcdm_req_t  g_mreq  [NumGroups][NumTG*NumGExt];
  tcdm_resp_t g_mresp [NumGroups][NumTG*NumGExt];
  tcdm_req_t  g_sreq  [NumGroups][NumTG*NumGExt];
  tcdm_resp_t g_sresp [NumGroups][NumTG*NumGExt];

  for (genvar g = 0; g < NumGroups; g++) begin : gen_group
    lsu_req_t  creq  [NumCG];
    lsu_resp_t cresp [NumCG];
    logic [31:0] cpend [NumCG];
    dma_piece_t pc  [NumSg];
    axi_ax_t    ar  [NumSg];
    axi_r_t     r   [NumSg];
    axi_ax_t    aw  [NumSg];
    axi_w_t     w   [NumSg];
    axi_b_t     b   [NumSg];
    for (genvar c = 0; c < NumCG; c++) begin : gen_c
      assign creq[c] = core_req_i[g*NumCG + c];
      assign core_resp_o[g*NumCG + c]    = cresp[c];
      assign core_pending_o[g*NumCG + c] = cpend[c];
    end
    for (genvar s = 0; s < NumSg; s++) begin : gen_s
      assign pc[s] = dma_piece_i[g*NumSg + s];
      assign r[s]  = axi_r_i[g*NumSg + s];
      assign b[s]  = axi_b_i[g*NumSg + s];
      assign axi_ar_o[g*NumSg + s] = ar[s];
      assign axi_aw_o[g*NumSg + s] = aw[s];
      assign axi_w_o[g*NumSg + s]  = w[s];
    end

    terapool_group #(
      .NumCoresPerTile(NumCoresPerTile), .BankingFactor(BankingFactor),
      .NumTilesPerSubGroup(NumTilesPerSubGroup), .NumSubGroupsPerGroup(NumSubGroupsPerGroup),
      .NumGroups(NumGroups), .BankNumWords(BankNumWords), .SeqBytesPerTile(SeqBytesPerTile),
      .NumOutstanding(NumOutstanding)
    ) i_group (
      .clk_i, .rst_ni,
      .group_id_i        (GBits'(g)),
      .core_req_valid_i  (core_req_valid_i[g*NumCG +: NumCG]),
      .core_req_ready_o  (core_req_ready_o[g*NumCG +: NumCG]),
      .core_req_i        (creq),
      .core_resp_valid_o (core_resp_valid_o[g*NumCG +: NumCG]),
      .core_resp_o       (cresp),
      .core_pending_o    (cpend),
      .mst_req_valid_o   (g_mreq_v[g]),
      .mst_req_ready_i   (g_mreq_r[g]),
      .mst_req_o         (g_mreq[g]),
      .mst_resp_valid_i  (g_mresp_v[g]),
      .mst_resp_ready_o  (g_mresp_r[g]),
      .mst_resp_i        (g_mresp[g]),
      .slv_req_valid_i   (g_sreq_v[g]),
      .slv_req_ready_o   (g_sreq_r[g]),
      .slv_req_i         (g_sreq[g]),
      .slv_resp_valid_o  (g_sresp_v[g]),
      .slv_resp_ready_i  (g_sresp_r[g]),
      .slv_resp_o        (g_sresp[g]),
      .dma_piece_valid_i (dma_piece_valid_i[g*NumSg +: NumSg]),
      .dma_piece_ready_o (dma_piece_ready_o[g*NumSg +: NumSg]),
      .dma_piece_i       (pc),
      .dma_piece_done_o  (dma_piece_done_o[g*NumSg +: NumSg]),
      .axi_ar_valid_o (axi_ar_valid_o[g*NumSg +: NumSg]), .axi_ar_ready_i (axi_ar_ready_i[g*NumSg +: NumSg]), .axi_ar_o (ar),
      .axi_r_valid_i  (axi_r_valid_i[g*NumSg +: NumSg]),  .axi_r_ready_o  (axi_r_ready_o[g*NumSg +: NumSg]),  .axi_r_i  (r),
      .axi_aw_valid_o (axi_aw_valid_o[g*NumSg +: NumSg]), .axi_aw_ready_i (axi_aw_ready_i[g*NumSg +: NumSg]), .axi_aw_o (aw),
      .axi_w_valid_o  (axi_w_valid_o[g*NumSg +: NumSg]),  .axi_w_ready_i  (axi_w_ready_i[g*NumSg +: NumSg]),  .axi_w_o  (w),
      .axi_b_valid_i  (axi_b_valid_i[g*NumSg +: NumSg]),  .axi_b_ready_o  (axi_b_ready_o[g*NumSg +: NumSg]),  .axi_b_i  (b)
    );
  end

  // ---------------------------------------------------------------------------
  // Inter-Group crossbars: source g, offset d, destination (g+d) mod NumGroups
  // ---------------------------------------------------------------------------
  for (genvar g = 0; g < NumGroups; g++) begin : gen_src
    for (genvar d = 1; d < NumGroups; d++) begin : gen_off
      localparam int unsigned Dst = (g + d) % NumGroups;

      logic [NumTG-1:0]                    q_v, q_r, q_xv, q_xr, q_ov, q_or;
      logic [NumTG-1:0][SelBits-1:0]       q_sel;
      logic [NumTG-1:0][TcdmReqWidth-1:0]  q_xd, q_od;
      logic [NumTG-1:0]                    p_v, p_r, p_xv, p_xr, p_ov, p_or;
      logic [NumTG-1:0][SelBits-1:0]       p_sel;
      logic [NumTG-1:0][TcdmRespWidth-1:0] p_xd, p_od;

      for (genvar t = 0; t < NumTG; t++) begin : gen_t
        localparam int unsigned Y = t*NumGExt + d - 1;
        tcdm_req_t  q_pre, q_post;
        tcdm_resp_t p_pre, p_post;

        // request: Group master port -> [pre] -> xbar -> [post] -> slave port
        spill_chain #(.Width(TcdmReqWidth), .NumStages(ReqPre)) i_req_pre (
          .clk_i, .rst_ni,
          .valid_i (g_mreq_v[g][Y]), .ready_o (g_mreq_r[g][Y]), .data_i (g_mreq[g][Y]),
          .valid_o (q_v[t]), .ready_i (q_r[t]), .data_o (q_pre)
        );
        assign q_sel[t] = q_pre.addr[TileLsb +: SelBits];
        spill_chain #(.Width(TcdmReqWidth), .NumStages(ReqPost)) i_req_post (
          .clk_i, .rst_ni,
          .valid_i (q_ov[t]), .ready_o (q_or[t]), .data_i (q_od[t]),
          .valid_o (g_sreq_v[Dst][Y]), .ready_i (g_sreq_r[Dst][Y]), .data_o (q_post)
        );
        assign g_sreq[Dst][Y] = q_post;
        assign q_xv[t] = q_v[t];
        assign q_r[t]  = q_xr[t];

        // response: slave port -> [pre] -> xbar -> [post] -> master port
        spill_chain #(.Width(TcdmRespWidth), .NumStages(RespPre)) i_resp_pre (
          .clk_i, .rst_ni,
          .valid_i (g_sresp_v[Dst][Y]), .ready_o (g_sresp_r[Dst][Y]), .data_i (g_sresp[Dst][Y]),
          .valid_o (p_v[t]), .ready_i (p_r[t]), .data_o (p_pre)
        );
        assign p_sel[t] = p_pre.core_id[CoreBits +: SelBits];
        spill_chain #(.Width(TcdmRespWidth), .NumStages(RespPost)) i_resp_post (
          .clk_i, .rst_ni,
          .valid_i (p_ov[t]), .ready_o (p_or[t]), .data_i (p_od[t]),
          .valid_o (g_mresp_v[g][Y]), .ready_i (g_mresp_r[g][Y]), .data_o (p_post)
        );
        assign g_mresp[g][Y] = p_post;
        assign p_xv[t] = p_v[t];
        assign p_r[t]  = p_xr[t];

        assign q_xd[t] = q_pre;
        assign p_xd[t] = p_pre;
      end

      stream_xbar #(.NumIn(NumTG), .NumOut(NumTG), .DataWidth(TcdmReqWidth)) i_req_xbar (
        .clk_i, .rst_ni,
        .in_valid_i(q_xv), .in_ready_o(q_xr), .in_sel_i(q_sel), .in_data_i(q_xd),
        .out_valid_o(q_ov), .out_ready_i(q_or), .out_data_o(q_od)
      );
      stream_xbar #(.NumIn(NumTG), .NumOut(NumTG), .DataWidth(TcdmRespWidth)) i_resp_xbar (
        .clk_i, .rst_ni,
        .in_valid_i(p_xv), .in_ready_o(p_xr), .in_sel_i(p_sel), .in_data_i(p_xd),
        .out_valid_o(p_ov), .out_ready_i(p_or), .out_data_o(p_od)
      );
    end
  end

`ifndef SYNTHESIS
  initial begin
    assert (RemoteGroupLatency == 7 || RemoteGroupLatency == 9 || RemoteGroupLatency == 11)
      else $error("terapool_cluster: RemoteGroupLatency must be 7, 9 or 11");
  end
`endif

endmodule
