// Spill register: a two-slot elastic pipeline stage for a valid/ready stream.
//
// Both the forward path (valid, data) and the backward path (ready) are
// registered, so the stage cuts every combinational path through it while still
// accepting one item per cycle. An item entering in cycle t leaves at the
// earliest in cycle t+1. These stages are what the text places at the
// hierarchy boundaries of the L1 interconnect; their count sets the NUMA
// latencies (1/3/5/7-9-11 cycles). Order is preserved.
module spill_register #(
  parameter int unsigned Width = 32
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

  // Slot a is the output slot, slot b holds an item that could not move on.
  logic             a_full_q, b_full_q;
  logic [Width-1:0] a_data_q, b_data_q;

  assign valid_o = a_full_q;
  assign data_o  = a_data_q;
  assign ready_o = !b_full_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      a_full_q <= 1'b0;
      b_full_q <= 1'b0;
      a_data_q <= '0;
      b_data_q <= '0;
    end else begin
      logic a_out, in_fire;
      a_out   = a_full_q && ready_i;
      in_fire = valid_i && !b_full_q;
      if (!a_full_q || a_out) begin
        // slot a frees up: refill from b first, then from the input
        if (b_full_q) begin
          a_data_q <= b_data_q;
          a_full_q <= 1'b1;
          b_full_q <= 1'b0;
          if (in_fire) begin
            b_data_q <= data_i;
            b_full_q <= 1'b1;
          end
        end else begin
          a_full_q <= in_fire;
          if (in_fire) a_data_q <= data_i;
        end
      end else if (in_fire) begin
        // slot a is stuck: park the new item in b
        b_data_q <= data_i;
        b_full_q <= 1'b1;
      end
    end
  end

endmodule
