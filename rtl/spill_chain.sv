// A chain of NumStages spill registers (NumStages = 0 is a plain wire).
//
// Used where the number of pipeline stages on a hierarchy path is a design-time
// parameter, such as the remote-Group paths whose latency is configured as 7, 9
// or 11 cycles. Adds NumStages cycles of latency at full throughput.
module spill_chain #(
  parameter int unsigned Width     = 32,
  parameter int unsigned NumStages = 1
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             valid_i,
  output logic             ready_o,
  input  logic [Width-1:0] data_i,
  output logic             valid_o,
  input  logic             ready_i,
  output logic [Width-1:0] data_o
);

  logic             v [NumStages+1];
  logic             r [NumStages+1];
  logic [Width-1:0] d [NumStages+1];

  assign v[0]    = valid_i;
  assign d[0]    = data_i;
  assign ready_o = r[0];
  assign valid_o = v[NumStages];
  assign data_o  = d[NumStages];
  assign r[NumStages] = ready_i;

  for (genvar s = 0; s < NumStages; s++) begin : gen_stage
    spill_register #(.Width(Width)) i_reg (
      .clk_i, .rst_ni,
      .valid_i(v[s]), .ready_o(r[s]), .data_i(d[s]),
      .valid_o(v[s+1]), .ready_i(r[s+1]), .data_o(d[s+1])
    );
  end

endmodule
