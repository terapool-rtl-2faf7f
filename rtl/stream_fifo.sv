// Small fall-through FIFO for a valid/ready stream.
//
// Depth entries; when empty, an incoming item is visible at the output in the
// same cycle (no added latency). count_o reports the occupancy so that a
// producer can reserve space ahead of time (credit-based flow control), which
// is how the Tile guarantees room for a bank's response before it lets a request
// reach the bank.
module stream_fifo #(
  parameter int unsigned Width = 32,
  parameter int unsigned Depth = 2,
  localparam int unsigned CntW = $clog2(Depth + 1),
  localparam int unsigned PtrW = (Depth > 1) ? $clog2(Depth) : 1
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             valid_i,
  output logic             ready_o,
  input  logic [Width-1:0] data_i,
  output logic             valid_o,
  input  logic             ready_i,
  output logic [Width-1:0] data_o,
  output logic [CntW-1:0]  count_o
);

  logic [Width-1:0] mem_q [Depth];
  logic [PtrW-1:0]  rd_q, wr_q;
  logic [CntW-1:0]  cnt_q;
  logic             empty, push, pop, bypass;

  assign empty   = (cnt_q == '0);
  assign ready_o = (cnt_q != CntW'(Depth));
  assign valid_o = !empty || valid_i;
  assign data_o  = empty ? data_i : mem_q[rd_q];
  assign bypass  = empty && valid_i && ready_i;
  assign push    = valid_i && ready_o && !bypass;
  assign pop     = !empty && ready_i;
  assign count_o = cnt_q;

  function automatic logic [PtrW-1:0] incr(logic [PtrW-1:0] p);
    return (int'(p) == Depth - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= incr(wr_q);
      if (pop)  rd_q <= incr(rd_q);
      cnt_q <= cnt_q + CntW'(push) - CntW'(pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem_q[wr_q] <= data_i;
  end

endmodule
