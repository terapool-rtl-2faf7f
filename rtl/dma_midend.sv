// DMA midend: splits a transfer into SubGroup-sized pieces and distributes them.
//
// Accepts one transfer (source, destination, size) at a time from the frontend.
// The side that lies in the L1 (addresses below the L1 size) decides the
// direction. The transfer is cut at every SubGroup row boundary of the L1
// (ChunkBytes = Tiles per SubGroup x banks per Tile x 4 B = 1 KiB): such a
// piece lies entirely in the banks of one SubGroup, both in the interleaved
// region and in the sequential region (where it lies inside one Tile). Each
// piece goes to the backend of that SubGroup, found from the scrambled address.
// One piece is issued per cycle when its backend is ready; pieces to different
// backends therefore run in parallel. job_done_o pulses once every piece has
// reported done. Sizes and addresses are assumed to be multiples of 64 bytes
// (one AXI beat); this is this design's restriction, not the text's.
// In the text the midend has a cluster-level splitter/distributor and a
// distribution stage per Group; both levels are merged here into one.
module dma_midend
  import terapool_pkg::*;
#(
  parameter int unsigned NumCoresPerTile      = 8,
  parameter int unsigned BankingFactor        = 4,
  parameter int unsigned NumTilesPerSubGroup  = 8,
  parameter int unsigned NumSubGroupsPerGroup = 4,
  parameter int unsigned NumGroups            = 4,
  parameter int unsigned BankNumWords         = 256,
  parameter int unsigned SeqBytesPerTile      = 4096,
  localparam int unsigned NumSgAll = NumGroups * NumSubGroupsPerGroup
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                job_valid_i,
  output logic                job_ready_o,
  input  dma_job_t            job_i,
  output logic                job_done_o,
  output logic                busy_o,
  output logic [NumSgAll-1:0] piece_valid_o,
  input  logic [NumSgAll-1:0] piece_ready_i,
  output dma_piece_t          piece_o,
  input  logic [NumSgAll-1:0] piece_done_i
);

  localparam int unsigned NumBanks   = NumCoresPerTile * BankingFactor;
  localparam int unsigned BankBits   = $clog2(NumBanks);
  localparam int unsigned TileBits   = $clog2(NumTilesPerSubGroup);
  localparam int unsigned SgAllBits  = $clog2(NumSgAll);
  localparam int unsigned SgLsb      = 2 + BankBits + TileBits;
  localparam int unsigned NumTilesAll = NumSgAll * NumTilesPerSubGroup;
  localparam int unsigned ChunkBytes = NumTilesPerSubGroup * NumBanks * 4;
  localparam logic [AddrWidth-1:0] L1Bytes = AddrWidth'(NumTilesAll * NumBanks * BankNumWords * 4);

  logic                 busy_q, dir_q;
  logic [AddrWidth-1:0] l1_q, l2_q, rem_q;
  logic [15:0]          outstanding_q;

  logic [AddrWidth-1:0] room, nbytes, saddr;
  logic [SgAllBits-1:0] sg;
  logic                 issue;
  logic [15:0]          ndone;

  assign room   = AddrWidth'(ChunkBytes) - (l1_q % AddrWidth'(ChunkBytes));
  assign nbytes = (rem_q < room) ? rem_q : room;

  addr_scrambler #(
    .AddrWidth(AddrWidth), .NumBanksPerTile(NumBanks),
    .NumTiles(NumTilesAll), .SeqBytesPerTile(SeqBytesPerTile)
  ) i_scr (.addr_i(l1_q), .addr_o(saddr));
  assign sg = saddr[SgLsb +: SgAllBits];

  always_comb begin
    piece_o           = '0;
    piece_o.l1_to_l2  = dir_q;
    piece_o.l1_addr   = l1_q;
    piece_o.l2_addr   = l2_q;
    piece_o.num_bytes = 11'(nbytes);
    piece_valid_o     = '0;
    if (busy_q && rem_q != '0) piece_valid_o[sg] = 1'b1;
  end

  assign issue       = busy_q && (rem_q != '0) && piece_ready_i[sg];
  assign job_ready_o = !busy_q;
  assign busy_o      = busy_q;

  always_comb begin
    ndone = '0;
    for (int unsigned i = 0; i < NumSgAll; i++) ndone += 16'(piece_done_i[i]);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q        <= 1'b0;
      dir_q         <= 1'b0;
      l1_q          <= '0;
      l2_q          <= '0;
      rem_q         <= '0;
      outstanding_q <= '0;
      job_done_o    <= 1'b0;
    end else begin
      job_done_o    <= 1'b0;
      outstanding_q <= outstanding_q + 16'(issue) - ndone;
      if (!busy_q) begin
        if (job_valid_i) begin
          busy_q <= 1'b1;
          dir_q  <= (job_i.src < L1Bytes);
          l1_q   <= (job_i.src < L1Bytes) ? job_i.src : job_i.dst;
          l2_q   <= (job_i.src < L1Bytes) ? job_i.dst : job_i.src;
          rem_q  <= job_i.num_bytes;
        end
      end else if (issue) begin
        l1_q  <= l1_q + nbytes;
        l2_q  <= l2_q + nbytes;
        rem_q <= rem_q - nbytes;
      end else if (rem_q == '0 && outstanding_q == '0) begin
        busy_q     <= 1'b0;
        job_done_o <= 1'b1;
      end
    end
  end

endmodule
