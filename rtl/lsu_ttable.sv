// LSU transaction table with load scoreboard (the memory side of a Snitch core).
//
// Lets a core keep up to NumOutstanding loads and stores in flight. Each accepted
// request takes a free table entry; the entry index travels with the request as
// its transaction id (tid) and the entry remembers the destination register.
// Responses may come back in any order (the L1 is NUMA: 1 to 11 cycles); the
// matching entry is freed at once and the load data is handed to the core
// together with its register. pending_o is the scoreboard: one bit per register
// with a load in flight, which the core uses to stall an instruction that reads
// that register. A load to a register that already has a load pending is held
// back, so at most one load per register is ever outstanding and write-back
// order per register is that of the program. x0 is never marked pending.
//
// Handshake: req_valid_i/req_ready_o (ready low when the table is full, the
// target register is pending or the interconnect stalls), mem_req valid/ready
// to the interconnect (combinational pass-through), responses always accepted.
// The table size (8) follows the text; the WAW hold and the allocation order
// (lowest free entry) are this design's choices.
//
// The protocol assertion is disabled while the asynchronous reset is active;
// lint therefore sees the reset also used as a clocked signal, which is intended.
module lsu_ttable
  import terapool_pkg::*;
#(
  parameter int unsigned NumOutstanding = 8,
  localparam int unsigned IdxW = (NumOutstanding > 1) ? $clog2(NumOutstanding) : 1
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic [CoreIdWidth-1:0] core_id_i,
  // core side
  input  logic                   req_valid_i,
  output logic                   req_ready_o,
  input  lsu_req_t               req_i,
  output logic                   resp_valid_o,
  output lsu_resp_t              resp_o,
  output logic [31:0]            pending_o,
  output logic                   full_o,
  // interconnect side
  output logic                   mem_req_valid_o,
  input  logic                   mem_req_ready_i,
  output tcdm_req_t              mem_req_o,
  input  logic                   mem_resp_valid_i,
  output logic                   mem_resp_ready_o,
  input  tcdm_resp_t             mem_resp_i
);

  logic [NumOutstanding-1:0]                   busy_q;
  logic [NumOutstanding-1:0][RegAddrWidth-1:0] rd_q;
  logic [NumOutstanding-1:0]                   is_load_q;
  logic [31:0]                                 pending_q;

  logic [IdxW-1:0] free_idx;
  logic            has_free, hazard, fire;

  always_comb begin
    free_idx = '0;
    has_free = 1'b0;
    for (int i = NumOutstanding - 1; i >= 0; i--) begin
      if (!busy_q[i]) begin
        free_idx = IdxW'(i);
        has_free = 1'b1;
      end
    end
  end

  assign hazard          = !req_i.wen && pending_q[req_i.rd];
  assign full_o          = !has_free;
  assign mem_req_valid_o = req_valid_i && has_free && !hazard;
  assign req_ready_o     = mem_req_ready_i && has_free && !hazard;
  assign fire            = mem_req_valid_o && mem_req_ready_i;

  always_comb begin
    mem_req_o         = '0;
    mem_req_o.addr    = req_i.addr;
    mem_req_o.wen     = req_i.wen;
    mem_req_o.be      = req_i.be;
    mem_req_o.wdata   = req_i.wdata;
    mem_req_o.core_id = core_id_i;
    mem_req_o.tid     = TidWidth'(free_idx);
  end

  assign mem_resp_ready_o = 1'b1;
  assign resp_valid_o     = mem_resp_valid_i;
  assign resp_o.rdata     = mem_resp_i.rdata;
  assign resp_o.wen       = !is_load_q[mem_resp_i.tid[IdxW-1:0]];
  assign resp_o.rd        = rd_q[mem_resp_i.tid[IdxW-1:0]];
  assign pending_o        = pending_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q    <= '0;
      rd_q      <= '0;
      is_load_q <= '0;
      pending_q <= '0;
    end else begin
      logic [31:0] pend_n;
      pend_n = pending_q;
      if (mem_resp_valid_i) begin
        busy_q[mem_resp_i.tid[IdxW-1:0]] <= 1'b0;
        if (is_load_q[mem_resp_i.tid[IdxW-1:0]]) pend_n[rd_q[mem_resp_i.tid[IdxW-1:0]]] = 1'b0;
      end
      if (fire) begin
        busy_q[free_idx]    <= 1'b1;
        rd_q[free_idx]      <= req_i.rd;
        is_load_q[free_idx] <= !req_i.wen;
        if (!req_i.wen && req_i.rd != '0) pend_n[req_i.rd] = 1'b1;
      end
      pending_q <= pend_n;
    end
  end

`ifndef SYNTHESIS
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    mem_resp_valid_i |-> busy_q[mem_resp_i.tid[IdxW-1:0]])
    else $error("lsu_ttable: response for a free entry");
`endif

endmodule
