// Round-robin arbiter.
//
// Grants one of NumIn requesters per cycle. The search starts at the input after
// the one granted last, so every requester is served within NumIn handshakes.
// The grant is combinational in req_i; the priority pointer moves only when the
// winner's transfer completes (advance_i), so a stalled grant stays stable, as a
// valid/ready stream requires. Round-robin is the arbitration policy the text
// names for every switch of the interconnect.
//
// The search index is a 32-bit integer of which only the low bits are used;
// lint lists its upper bits as unused, which is harmless.
module rr_arbiter #(
  parameter int unsigned NumIn = 4,
  localparam int unsigned IdxW = (NumIn > 1) ? $clog2(NumIn) : 1
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [NumIn-1:0] req_i,
  input  logic             advance_i,
  output logic [NumIn-1:0] gnt_o,
  output logic [IdxW-1:0]  idx_o,
  output logic             valid_o
);

  logic [IdxW-1:0] ptr_q;

  always_comb begin
    logic found;
    int unsigned cand;
    found   = 1'b0;
    idx_o   = '0;
    gnt_o   = '0;
    for (int unsigned k = 0; k < NumIn; k++) begin
      cand = (int'(ptr_q) + k) % NumIn;
      if (!found && req_i[cand]) begin
        found = 1'b1;
        idx_o = IdxW'(cand);
      end
    end
    if (found) gnt_o[idx_o] = 1'b1;
    valid_o = found;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ptr_q <= '0;
    end else if (advance_i && valid_o) begin
      ptr_q <= (int'(idx_o) == NumIn - 1) ? '0 : idx_o + 1'b1;
    end
  end

endmodule
