// TeraPool top level: the 1024-core shared-L1 cluster and its DMA memory link.
//
// Instantiates the cluster (4 Groups x 4 SubGroups x 8 Tiles x 8 core ports,
// 4096 banks / 4 MiB of L1, hierarchical crossbars with 1/3/5/9-cycle zero-load
// round trips by default) and the DMA frontend and midend; the 16 DMA backends
// sit inside the SubGroups. Outside connections, brought out as ports:
//  * one load/store port per core, facing the core's LSU (request with
//    destination register, response with register and data, scoreboard bits).
//    The cores themselves (Snitch with its integer and FP units) are not part
//    of this RTL;
//  * the DMA frontend's register port, which the cores reach over the system
//    interconnect in the full system;
//  * one 512-bit AXI master per SubGroup (16) towards L2 / HBM main memory.
//    In this RTL only the DMA backends use them; the AXI traffic of the cores
//    (instruction refills, non-L1 accesses) and the system demultiplexer that
//    steers it are not included.
module terapool
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
  localparam int unsigned NumSgAll = NumGroups * NumSubGroupsPerGroup,
  localparam int unsigned NumC     = NumSgAll * NumTilesPerSubGroup * NumCoresPerTile
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // core load/store ports
  input  logic [NumC-1:0]      core_req_valid_i,
  output logic [NumC-1:0]      core_req_ready_o,
  input  lsu_req_t             core_req_i      [NumC],
  output logic [NumC-1:0]      core_resp_valid_o,
  output lsu_resp_t            core_resp_o     [NumC],
  output logic [31:0]          core_pending_o  [NumC],
  // DMA configuration registers
  input  logic                 dma_cfg_valid_i,
  output logic                 dma_cfg_ready_o,
  input  logic                 dma_cfg_we_i,
  input  logic [7:0]           dma_cfg_addr_i,
  input  logic [31:0]          dma_cfg_wdata_i,
  output logic [31:0]          dma_cfg_rdata_o,
  // AXI masters towards main memory, one per SubGroup
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

  logic          job_valid, job_ready, job_done, mid_busy;
  dma_job_t      job;
  logic [NumSgAll-1:0] pc_valid, pc_ready, pc_done;
  dma_piece_t    pc;
  dma_piece_t    pc_arr [NumSgAll];

  dma_frontend i_dma_frontend (
    .clk_i, .rst_ni,
    .cfg_valid_i (dma_cfg_valid_i),
    .cfg_ready_o (dma_cfg_ready_o),
    .cfg_we_i    (dma_cfg_we_i),
    .cfg_addr_i  (dma_cfg_addr_i),
    .cfg_wdata_i (dma_cfg_wdata_i),
    .cfg_rdata_o (dma_cfg_rdata_o),
    .job_valid_o (job_valid),
    .job_ready_i (job_ready),
    .job_o       (job),
    .job_done_i  (job_done),
    .busy_i      (mid_busy)
  );

  dma_midend #(
    .NumCoresPerTile(NumCoresPerTile), .BankingFactor(BankingFactor),
    .NumTilesPerSubGroup(NumTilesPerSubGroup), .NumSubGroupsPerGroup(NumSubGroupsPerGroup),
    .NumGroups(NumGroups), .BankNumWords(BankNumWords), .SeqBytesPerTile(SeqBytesPerTile)
  ) i_dma_midend (
    .clk_i, .rst_ni,
    .job_valid_i   (job_valid),
    .job_ready_o   (job_ready),
    .job_i         (job),
    .job_done_o    (job_done),
    .busy_o        (mid_busy),
    .piece_valid_o (pc_valid),
    .piece_ready_i (pc_ready),
    .piece_o       (pc),
    .piece_done_i  (pc_done)
  );

  for (genvar s = 0; s < NumSgAll; s++) begin : gen_pc
    assign pc_arr[s] = pc;
  end

  terapool_cluster #(
    .NumCoresPerTile(NumCoresPerTile), .BankingFactor(BankingFactor),
    .NumTilesPerSubGroup(NumTilesPerSubGroup), .NumSubGroupsPerGroup(NumSubGroupsPerGroup),
    .NumGroups(NumGroups), .BankNumWords(BankNumWords), .SeqBytesPerTile(SeqBytesPerTile),
    .NumOutstanding(NumOutstanding), .RemoteGroupLatency(RemoteGroupLatency)
  ) i_cluster (
    .clk_i, .rst_ni,
    .core_req_valid_i, .core_req_ready_o, .core_req_i,
    .core_resp_valid_o, .core_resp_o, .core_pending_o,
    .dma_piece_valid_i (pc_valid),
    .dma_piece_ready_o (pc_ready),
    .dma_piece_i       (pc_arr),
    .dma_piece_done_o  (pc_done),
    .axi_ar_valid_o, .axi_ar_ready_i, .axi_ar_o,
    .axi_r_valid_i,  .axi_r_ready_o,  .axi_r_i,
    .axi_aw_valid_o, .axi_aw_ready_i, .axi_aw_o,
    .axi_w_valid_o,  .axi_w_ready_i,  .axi_w_o,
    .axi_b_valid_i,  .axi_b_ready_o,  .axi_b_i
  );

endmodule
