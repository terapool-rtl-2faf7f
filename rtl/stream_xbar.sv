// Fully connected crossbar for valid/ready streams (the "logarithmic crossbar").
//
// NumIn inputs, NumOut outputs. Each input presents a payload and the index of
// the output it wants (in_sel_i); each output has its own round-robin arbiter
// over the inputs that target it. The path is purely combinational, so an
// uncontended transfer crosses the crossbar in the cycle it is issued; an
// input that loses arbitration keeps valid high and waits (in_ready_o low).
// The same module carries requests (selected by target bank/Tile) and responses
// (selected by the issuing core's position), giving the full arbitration in both
// directions that the text describes. The text builds it as a tree of 2:1
// demultiplexers and arbitration switches; it is written here as one demux and
// one N:1 round-robin arbiter per output, which has the same behaviour.
//
// The protocol assertion is disabled while the asynchronous reset is active;
// lint therefore sees the reset also used as a clocked signal, which is intended.
module stream_xbar #(
  parameter int unsigned NumIn     = 8,
  parameter int unsigned NumOut    = 8,
  parameter int unsigned DataWidth = 32,
  localparam int unsigned SelW     = (NumOut > 1) ? $clog2(NumOut) : 1
) (
  input  logic                           clk_i,
  input  logic                           rst_ni,
  input  logic [NumIn-1:0]               in_valid_i,
  output logic [NumIn-1:0]               in_ready_o,
  input  logic [NumIn-1:0][SelW-1:0]     in_sel_i,
  input  logic [NumIn-1:0][DataWidth-1:0] in_data_i,
  output logic [NumOut-1:0]              out_valid_o,
  input  logic [NumOut-1:0]              out_ready_i,
  output logic [NumOut-1:0][DataWidth-1:0] out_data_o
);

  localparam int unsigned IdxW = (NumIn > 1) ? $clog2(NumIn) : 1;

  logic [NumOut-1:0][NumIn-1:0] req, gnt;
  logic [NumOut-1:0][IdxW-1:0]  idx;

  always_comb begin
    for (int unsigned o = 0; o < NumOut; o++) begin
      for (int unsigned i = 0; i < NumIn; i++) begin
        req[o][i] = in_valid_i[i] && (int'(in_sel_i[i]) == int'(o));
      end
    end
  end

  for (genvar o = 0; o < NumOut; o++) begin : gen_out
    rr_arbiter #(.NumIn(NumIn)) i_arb (
      .clk_i, .rst_ni,
      .req_i     (req[o]),
      .advance_i (out_ready_i[o]),
      .gnt_o     (gnt[o]),
      .idx_o     (idx[o]),
      .valid_o   (out_valid_o[o])
    );
    assign out_data_o[o] = in_data_i[idx[o]];
  end

  always_comb begin
    for (int unsigned i = 0; i < NumIn; i++) begin
      in_ready_o[i] = 1'b0;
      for (int unsigned o = 0; o < NumOut; o++) begin
        if (int'(in_sel_i[i]) == int'(o)) in_ready_o[i] = gnt[o][i] && out_ready_i[o];
      end
    end
  end

`ifndef SYNTHESIS
  // An input must not withdraw or change a pending request (stream rule).
  for (genvar i = 0; i < NumIn; i++) begin : gen_assert
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      (in_valid_i[i] && !in_ready_o[i]) |=> in_valid_i[i])
      else $error("stream_xbar: input %0d dropped valid before ready", i);
  end
`endif

endmodule
