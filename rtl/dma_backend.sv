// DMA backend of one SubGroup.
//
// Executes one piece of a DMA transfer at a time. A piece (from the midend) is
// at most one SubGroup row of the interleaved L1 (1 KiB, 256 words: the largest
// contiguous block that lies in one SubGroup) and is moved as a single AXI INCR
// burst of 512-bit beats, which is the burst length the text derives.
//  * L2 -> L1: one AR burst; every R beat is written straight into 16
//    neighbouring banks of one Tile through that Tile's wide DMA port (the port
//    always accepts, so R is never back-pressured).
//  * L1 -> L2: one AW burst; beats are read from the Tiles (one-cycle latency)
//    into a two-entry FIFO that feeds W, so a beat can leave every cycle while
//    W is ready; the piece ends with the B response.
// done_o pulses for one cycle when a piece has completed.
// The L1 address of each beat goes through the same sequential/interleaved
// scrambling as core addresses. Requirements (this design's choice): addresses
// and sizes are multiples of 64 bytes; the midend never sends a piece that
// crosses a SubGroup row. Only one AXI ID is used and responses are not checked.
//
// The protocol assertion is disabled while the asynchronous reset is active;
// lint therefore sees the reset also used as a clocked signal, which is intended.
module dma_backend
  import terapool_pkg::*;
#(
  parameter int unsigned NumCoresPerTile      = 8,
  parameter int unsigned BankingFactor        = 4,
  parameter int unsigned NumTilesPerSubGroup  = 8,
  parameter int unsigned NumSubGroupsPerGroup = 4,
  parameter int unsigned NumGroups            = 4,
  parameter int unsigned BankNumWords         = 256,
  parameter int unsigned SeqBytesPerTile      = 4096,
  localparam int unsigned NumT = NumTilesPerSubGroup
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 piece_valid_i,
  output logic                 piece_ready_o,
  input  dma_piece_t           piece_i,
  output logic                 done_o,
  // Tile DMA ports
  output logic [NumT-1:0]      tile_req_valid_o,
  output dma_tile_req_t        tile_req_o,
  input  logic [NumT-1:0]      tile_resp_valid_i,
  input  logic [NumT-1:0][AxiDataWidth-1:0] tile_resp_rdata_i,
  // AXI master
  output logic                 ar_valid_o,
  input  logic                 ar_ready_i,
  output axi_ax_t              ar_o,
  input  logic                 r_valid_i,
  output logic                 r_ready_o,
  input  axi_r_t               r_i,
  output logic                 aw_valid_o,
  input  logic                 aw_ready_i,
  output axi_ax_t              aw_o,
  output logic                 w_valid_o,
  input  logic                 w_ready_i,
  output axi_w_t               w_o,
  input  logic                 b_valid_i,
  output logic                 b_ready_o,
  input  axi_b_t               b_i
);

  localparam int unsigned NumBanks = NumCoresPerTile * BankingFactor;
  localparam int unsigned BankBits = $clog2(NumBanks);
  localparam int unsigned TileBits = $clog2(NumT);
  localparam int unsigned SgBits   = $clog2(NumSubGroupsPerGroup);
  localparam int unsigned GBits    = $clog2(NumGroups);
  localparam int unsigned RowBits  = $clog2(BankNumWords);
  localparam int unsigned TileLsb  = 2 + BankBits;
  localparam int unsigned RowLsb   = TileLsb + TileBits + SgBits + GBits;
  localparam int unsigned NumTilesAll = NumGroups * NumSubGroupsPerGroup * NumT;
  localparam int unsigned BeatBytes = AxiDataWidth / 8;

  typedef enum logic [2:0] {Idle, SendAr, RecvR, SendAw, SendW, WaitB} state_e;
  state_e state_q;

  dma_piece_t  piece_q;
  logic [5:0]  nbeats_q;        // beats in the piece (1..16)
  logic [5:0]  rcnt_q, wcnt_q;  // beats read from / written to L1 or W
  logic        rd_inflight_q;
  logic [TileBits-1:0] rd_tile_q;

  // L1 location of the current beat
  logic [AddrWidth-1:0] beat_addr, beat_saddr;
  logic [5:0]           beat_idx;
  assign beat_idx  = (state_q == RecvR) ? wcnt_q : rcnt_q;
  assign beat_addr = piece_q.l1_addr + AddrWidth'(beat_idx) * BeatBytes;

  addr_scrambler #(
    .AddrWidth(AddrWidth), .NumBanksPerTile(NumBanks),
    .NumTiles(NumTilesAll), .SeqBytesPerTile(SeqBytesPerTile)
  ) i_scr (.addr_i(beat_addr), .addr_o(beat_saddr));

  logic [TileBits-1:0] beat_tile;
  assign beat_tile = beat_saddr[TileLsb +: TileBits];

  always_comb begin
    tile_req_o       = '0;
    tile_req_o.row   = 8'(beat_saddr[RowLsb +: RowBits]);
    tile_req_o.slot  = 4'(beat_saddr[2 +: BankBits] / DmaBeatWords);
    tile_req_o.we    = (state_q == RecvR);
    tile_req_o.wdata = r_i.data;
  end

  // W FIFO for L1 -> L2
  logic        wf_in_valid, wf_out_valid;
  logic [1:0]  wf_count;
  logic [AxiDataWidth-1:0] wf_in, wf_out;
  logic        rd_issue;

  assign rd_issue    = (state_q == SendW) && (rcnt_q < nbeats_q) &&
                       (int'(wf_count) + int'(rd_inflight_q) < 2);
  assign wf_in_valid = rd_inflight_q;
  assign wf_in       = tile_resp_rdata_i[rd_tile_q];

  stream_fifo #(.Width(AxiDataWidth), .Depth(2)) i_wfifo (
    .clk_i, .rst_ni,
    .valid_i (wf_in_valid),
    .ready_o (),
    .data_i  (wf_in),
    .valid_o (wf_out_valid),
    .ready_i (w_ready_i && state_q == SendW),
    .data_o  (wf_out),
    .count_o (wf_count)
  );

  always_comb begin
    tile_req_valid_o = '0;
    if ((state_q == RecvR && r_valid_i) || rd_issue) tile_req_valid_o[beat_tile] = 1'b1;
  end

  assign piece_ready_o = (state_q == Idle);
  assign ar_valid_o    = (state_q == SendAr);
  assign aw_valid_o    = (state_q == SendAw);
  assign r_ready_o     = (state_q == RecvR);
  assign b_ready_o     = (state_q == WaitB);
  assign w_valid_o     = (state_q == SendW) && wf_out_valid;
  assign w_o.data      = wf_out;
  assign w_o.strb      = '1;
  assign w_o.last      = (wcnt_q == nbeats_q - 1);

  always_comb begin
    ar_o       = '0;
    ar_o.addr  = piece_q.l2_addr;
    ar_o.len   = 8'(nbeats_q - 1);
    ar_o.size  = 3'($clog2(BeatBytes));
    ar_o.burst = 2'b01;
    aw_o       = ar_o;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q       <= Idle;
      piece_q       <= '0;
      nbeats_q      <= '0;
      rcnt_q        <= '0;
      wcnt_q        <= '0;
      rd_inflight_q <= 1'b0;
      rd_tile_q     <= '0;
      done_o        <= 1'b0;
    end else begin
      done_o        <= 1'b0;
      rd_inflight_q <= rd_issue;
      if (rd_issue) begin
        rd_tile_q <= beat_tile;
        rcnt_q    <= rcnt_q + 1'b1;
      end
      unique case (state_q)
        Idle: if (piece_valid_i) begin
          piece_q  <= piece_i;
          nbeats_q <= 6'(piece_i.num_bytes / BeatBytes);
          rcnt_q   <= '0;
          wcnt_q   <= '0;
          state_q  <= piece_i.l1_to_l2 ? SendAw : SendAr;
        end
        SendAr: if (ar_ready_i) state_q <= RecvR;
        RecvR: if (r_valid_i) begin
          wcnt_q <= wcnt_q + 1'b1;
          if (r_i.last) begin
            state_q <= Idle;
            done_o  <= 1'b1;
          end
        end
        SendAw: if (aw_ready_i) state_q <= SendW;
        SendW: if (w_valid_o && w_ready_i) begin
          wcnt_q <= wcnt_q + 1'b1;
          if (w_o.last) state_q <= WaitB;
        end
        WaitB: if (b_valid_i) begin
          state_q <= Idle;
          done_o  <= 1'b1;
        end
        default: state_q <= Idle;
      endcase
    end
  end

  // AXI response codes are not acted upon
  logic unused;
  assign unused = ^{b_i, r_i.resp, tile_resp_valid_i};

`ifndef SYNTHESIS
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    (piece_valid_i && piece_ready_o) |-> (piece_i.num_bytes != '0 && piece_i.num_bytes[$clog2(BeatBytes)-1:0] == '0))
    else $error("dma_backend: piece size must be a non-zero multiple of 64 bytes");
`endif

endmodule
