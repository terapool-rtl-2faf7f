// TeraPool shared constants and bundle types.
//
// The default hierarchy is 4 Groups x 4 SubGroups x 8 Tiles x 8 cores, each Tile
// holding 32 single-port SPM banks of 256 x 32-bit words (1 KiB), i.e. 1024 cores
// sharing 4 MiB in 4096 banks. Module parameters default to these numbers; the
// bundle types below are sized for this largest configuration, and smaller
// configurations (used by the unit testbenches) simply leave upper bits at zero.
//
// L1 address map (a design choice, the text gives the sizes but no bit layout):
// the L1 occupies byte addresses [0, 4 MiB). After the sequential-region
// scrambling (see addr_scrambler) a word address is split, from the LSB, into
// byte offset (2 b), bank-in-Tile, Tile-in-SubGroup, SubGroup, Group, and row.
// Consecutive words therefore walk across all 4096 banks before the row changes.
//
// Every request carries the issuing core's global id and a transaction id, so
// that responses can be routed back through the hierarchy and retired out of
// order by the core's transaction table. Every request, load or store, receives
// exactly one response.
package terapool_pkg;

  // Hierarchy (paper defaults)
  localparam int unsigned CfgNumGroups            = 4;
  localparam int unsigned CfgNumSubGroupsPerGroup = 4;
  localparam int unsigned CfgNumTilesPerSubGroup  = 8;
  localparam int unsigned CfgNumCoresPerTile      = 8;
  localparam int unsigned CfgBankingFactor        = 4;
  localparam int unsigned CfgNumBanksPerTile      = CfgNumCoresPerTile * CfgBankingFactor;   // 32
  localparam int unsigned CfgBankNumWords         = 256;                               // 1 KiB
  localparam int unsigned CfgNumTiles             = CfgNumGroups * CfgNumSubGroupsPerGroup * CfgNumTilesPerSubGroup;
  localparam int unsigned CfgNumCores             = CfgNumTiles * CfgNumCoresPerTile;        // 1024
  localparam int unsigned CfgNumSubGroups         = CfgNumGroups * CfgNumSubGroupsPerGroup;  // 16

  // Sequential region: 512 KiB in total, 4 KiB per Tile
  localparam int unsigned CfgSeqBytesPerTile      = 4096;

  // Remote-Group round-trip latency configuration: 7, 9 or 11 cycles
  localparam int unsigned CfgRemoteGroupLatency   = 9;

  // LSU
  localparam int unsigned CfgNumOutstanding       = 8;

  // Widths
  localparam int unsigned AddrWidth  = 32;
  localparam int unsigned DataWidth  = 32;
  localparam int unsigned BeWidth    = DataWidth / 8;
  localparam int unsigned CoreIdWidth = $clog2(CfgNumCores);        // 10
  localparam int unsigned TidWidth   = $clog2(CfgNumOutstanding);   // 3
  localparam int unsigned RegAddrWidth = 5;

  // Memory link
  localparam int unsigned AxiDataWidth  = 512;
  localparam int unsigned AxiStrbWidth  = AxiDataWidth / 8;
  localparam int unsigned DmaBeatWords  = AxiDataWidth / DataWidth;   // 16 words per beat
  localparam int unsigned DmaChunkBytes = CfgNumTilesPerSubGroup * CfgNumBanksPerTile * (DataWidth / 8); // 1 KiB
  localparam logic [AddrWidth-1:0] L2BaseAddr = 32'h8000_0000;

  // Core-side load/store (between a core and its transaction table)
  typedef struct packed {
    logic [AddrWidth-1:0]    addr;
    logic                    wen;
    logic [BeWidth-1:0]      be;
    logic [DataWidth-1:0]    wdata;
    logic [RegAddrWidth-1:0] rd;
  } lsu_req_t;

  typedef struct packed {
    logic [DataWidth-1:0]    rdata;
    logic                    wen;
    logic [RegAddrWidth-1:0] rd;
  } lsu_resp_t;

  // L1 interconnect request / response
  typedef struct packed {
    logic [AddrWidth-1:0]   addr;
    logic                   wen;
    logic [BeWidth-1:0]     be;
    logic [DataWidth-1:0]   wdata;
    logic [CoreIdWidth-1:0] core_id;
    logic [TidWidth-1:0]    tid;
  } tcdm_req_t;

  typedef struct packed {
    logic [DataWidth-1:0]   rdata;
    logic                   wen;
    logic [CoreIdWidth-1:0] core_id;
    logic [TidWidth-1:0]    tid;
  } tcdm_resp_t;

  localparam int unsigned TcdmReqWidth  = $bits(tcdm_req_t);
  localparam int unsigned TcdmRespWidth = $bits(tcdm_resp_t);

  // Wide DMA access into one Tile: one 512-bit beat, 16 neighbouring banks, one row
  typedef struct packed {
    logic                      we;
    logic [7:0]                row;
    logic [3:0]                slot;   // which group of 16 banks inside the Tile
    logic [AxiDataWidth-1:0]   wdata;
  } dma_tile_req_t;

  // Reduced AXI4 (single ID, INCR bursts) used by the memory link
  typedef struct packed {
    logic [AddrWidth-1:0] addr;
    logic [7:0]           len;     // beats - 1
    logic [2:0]           size;    // log2(bytes per beat)
    logic [1:0]           burst;   // 2'b01 INCR
  } axi_ax_t;

  typedef struct packed {
    logic [AxiDataWidth-1:0] data;
    logic [AxiStrbWidth-1:0] strb;
    logic                    last;
  } axi_w_t;

  typedef struct packed {
    logic [AxiDataWidth-1:0] data;
    logic [1:0]              resp;
    logic                    last;
  } axi_r_t;

  typedef struct packed {
    logic [1:0] resp;
  } axi_b_t;

  // DMA transfer descriptor (frontend -> midend) and piece (midend -> backend)
  typedef struct packed {
    logic [AddrWidth-1:0] src;
    logic [AddrWidth-1:0] dst;
    logic [AddrWidth-1:0] num_bytes;
  } dma_job_t;

  typedef struct packed {
    logic                 l1_to_l2;  // 1: read L1, write L2
    logic [AddrWidth-1:0] l1_addr;   // unscrambled L1 byte address, 64 B aligned
    logic [AddrWidth-1:0] l2_addr;
    logic [10:0]          num_bytes; // multiple of 64, at most DmaChunkBytes
  } dma_piece_t;

endpackage
