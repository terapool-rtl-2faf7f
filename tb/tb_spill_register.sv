// Testbench for spill_register: a numbered stream under random valid/ready.
// Checks order and completeness, one-cycle latency, and one item per cycle
// when the sink is always ready.
module tb_spill_register;
  logic clk = 0, rst_n = 0;
  logic vi, ri, vo, ro;
  logic [15:0] di, dout;
  int checks = 0, failures = 0;
  int sent = 0, recv = 0;
  bit rnd_src = 1, rnd_snk = 1;

  always #5 clk = ~clk;

  spill_register #(.Width(16)) dut (
    .clk_i(clk), .rst_ni(rst_n), .valid_i(vi), .ready_o(ri), .data_i(di),
    .valid_o(vo), .ready_i(ro), .data_o(dout));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // source
  always_ff @(posedge clk) begin
    if (rst_n && vi && ri) sent <= sent + 1;
  end
  always_comb begin
    di = 16'(sent);
  end
  initial vi = 0;
  always @(negedge clk) vi <= rst_n && (!rnd_src || ($urandom_range(0, 3) != 0)) && sent < 4000;
  always @(negedge clk) ro <= !rnd_snk || ($urandom_range(0, 2) != 0);

  // sink
  always @(posedge clk) begin
    if (rst_n && vo && ro) begin
      checks++;
      if (dout != 16'(recv)) begin
        failures++;
        $display("order error: got %0d exp %0d", dout, recv);
      end
      recv++;
    end
  end

  initial begin
    ro = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (recv == 2000);
    // throughput / latency phase: always-valid source, always-ready sink
    @(negedge clk);
    rnd_src = 0; rnd_snk = 0;
    wait (recv == 2100);
    begin
      int r0;
      @(negedge clk);
      r0 = recv;
      repeat (100) @(negedge clk);
      checks++;
      if (recv - r0 != 100) begin
        failures++;
        $display("throughput: %0d items in 100 cycles", recv - r0);
      end
    end
    wait (recv == 4000);
    repeat (5) @(posedge clk);
    checks++;
    if (sent != 4000 || recv != 4000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
