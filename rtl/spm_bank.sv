// One L1 scratchpad (SPM) bank.
//
// A single-port memory of NumWords x DataWidth bits with byte-enabled writes and
// a registered read port: a read issued in cycle t returns its word in cycle t+1,
// which gives the one-cycle zero-load access of a core to a bank of its own Tile.
// The default is the 1 KiB bank of the text (256 rows of 32-bit words); the
// silicon uses an SRAM macro with clock gating, which is written here as a plain
// synthesizable array. Contents are not reset. A write does not update rdata_o.
module spm_bank #(
  parameter int unsigned NumWords  = 256,
  parameter int unsigned DataWidth = 32,
  localparam int unsigned AddrW    = $clog2(NumWords),
  localparam int unsigned BeW      = DataWidth / 8
) (
  input  logic                 clk_i,
  input  logic                 req_i,
  input  logic                 we_i,
  input  logic [AddrW-1:0]     addr_i,
  input  logic [BeW-1:0]       be_i,
  input  logic [DataWidth-1:0] wdata_i,
  output logic [DataWidth-1:0] rdata_o
);

  logic [DataWidth-1:0] mem [NumWords];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < BeW; b++) begin
          if (be_i[b]) mem[addr_i][b*8 +: 8] <= wdata_i[b*8 +: 8];
        end
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end

endmodule
