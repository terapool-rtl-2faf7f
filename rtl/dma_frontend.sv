// DMA frontend: the register interface through which software starts transfers.
//
// A simple 32-bit register port (request with write enable, combinational read
// data). Registers (byte offsets):
//   0x00 SRC        source byte address
//   0x04 DST        destination byte address
//   0x08 NUM_BYTES  transfer size in bytes
//   0x0C LAUNCH     write: hand {SRC, DST, NUM_BYTES} to the midend; the write
//                   is held (cfg_ready_o low) while the midend is busy.
//                   read: id the next launched transfer will get
//   0x10 DONE       number of completed transfers (software polls it)
//   0x14 BUSY       1 while a transfer is in progress
// The text specifies only that the frontend takes source, destination and
// size; the register map and the completion counter are this design's choice.
module dma_frontend
  import terapool_pkg::*;
(
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 cfg_valid_i,
  output logic                 cfg_ready_o,
  input  logic                 cfg_we_i,
  input  logic [7:0]           cfg_addr_i,
  input  logic [31:0]          cfg_wdata_i,
  output logic [31:0]          cfg_rdata_o,
  output logic                 job_valid_o,
  input  logic                 job_ready_i,
  output dma_job_t             job_o,
  input  logic                 job_done_i,
  input  logic                 busy_i
);

  logic [31:0] src_q, dst_q, len_q, next_id_q, done_q;
  logic        launch;

  assign launch      = cfg_valid_i && cfg_we_i && (cfg_addr_i == 8'h0C);
  assign job_valid_o = launch;
  assign job_o       = '{src: src_q, dst: dst_q, num_bytes: len_q};
  assign cfg_ready_o = launch ? job_ready_i : 1'b1;

  always_comb begin
    unique case (cfg_addr_i)
      8'h00:   cfg_rdata_o = src_q;
      8'h04:   cfg_rdata_o = dst_q;
      8'h08:   cfg_rdata_o = len_q;
      8'h0C:   cfg_rdata_o = next_id_q;
      8'h10:   cfg_rdata_o = done_q;
      8'h14:   cfg_rdata_o = {31'b0, busy_i};
      default: cfg_rdata_o = '0;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      src_q     <= '0;
      dst_q     <= '0;
      len_q     <= '0;
      next_id_q <= '0;
      done_q    <= '0;
    end else begin
      if (cfg_valid_i && cfg_we_i) begin
        unique case (cfg_addr_i)
          8'h00: src_q <= cfg_wdata_i;
          8'h04: dst_q <= cfg_wdata_i;
          8'h08: len_q <= cfg_wdata_i;
          default: ;
        endcase
      end
      if (launch && job_ready_i) next_id_q <= next_id_q + 1;
      if (job_done_i)            done_q    <= done_q + 1;
    end
  end

endmodule
