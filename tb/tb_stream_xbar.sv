// Testbench for stream_xbar (4 inputs x 3 outputs). Each input sends numbered
// items to random outputs under random back-pressure; every output checks that
// items from each input arrive complete and in order (per input/output pair).
// A second phase lets all inputs hammer output 0 with an always-ready sink and
// checks round-robin fairness: every window of 4 grants serves all 4 inputs.
module tb_stream_xbar;
  localparam int NI = 4, NO = 3, W = 16;
  logic clk = 0, rst_n = 0;
  logic [NI-1:0] iv, ir;
  logic [NI-1:0][1:0] isel;
  logic [NI-1:0][W-1:0] id;
  logic [NO-1:0] ov, orr;
  logic [NO-1:0][W-1:0] od;
  int checks = 0, failures = 0;
  int seq [NI][NO];       // next sequence number to send per pair
  int exp_seq [NI][NO];   // next expected per pair
  int total = 0;
  bit fair_phase = 0;
  int last_src [$];

  always #5 clk = ~clk;

  stream_xbar #(.NumIn(NI), .NumOut(NO), .DataWidth(W)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(iv), .in_ready_o(ir), .in_sel_i(isel), .in_data_i(id),
    .out_valid_o(ov), .out_ready_i(orr), .out_data_o(od));

  // payload: {src[3:0], seq[11:0]}
  initial begin
    iv = '0; isel = '0; id = '0; orr = '0;
    for (int i = 0; i < NI; i++) for (int o = 0; o < NO; o++) begin seq[i][o] = 0; exp_seq[i][o] = 0; end
  end

  always @(negedge clk) begin
    if (rst_n) begin
      for (int o = 0; o < NO; o++) orr[o] <= fair_phase ? 1'b1 : ($urandom_range(0, 2) != 0);
    end
  end

  // drive inputs: hold item until accepted
  always @(posedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < NI; i++) begin
        if (iv[i] && ir[i]) begin
          seq[i][isel[i]]++;
          iv[i] <= 1'b0;
        end
      end
    end
  end
  always @(negedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < NI; i++) begin
        if (!iv[i] && (fair_phase || $urandom_range(0, 1))) begin
          int unsigned o;
          o = fair_phase ? 0 : $urandom_range(0, NO-1);
          isel[i] <= 2'(o);
          id[i]   <= {4'(i), 12'(seq[i][o])};
          iv[i]   <= 1'b1;
        end
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      for (int o = 0; o < NO; o++) begin
        if (ov[o] && orr[o]) begin
          int s;
          s = od[o][15:12];
          checks++;
          total++;
          if (od[o][11:0] != 12'(exp_seq[s][o])) begin
            failures++;
            $display("out %0d: from %0d got seq %0d exp %0d", o, s, od[o][11:0], exp_seq[s][o]);
          end
          exp_seq[s][o]++;
          if (fair_phase && o == 0) last_src.push_back(s);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (total >= 3000);
    @(negedge clk);
    fair_phase = 1;
    repeat (20) @(posedge clk);
    last_src.delete();
    repeat (80) @(posedge clk);
    for (int k = 0; k + 4 <= last_src.size(); k += 4) begin
      bit [3:0] seen;
      seen = '0;
      for (int j = 0; j < 4; j++) seen[last_src[k+j]] = 1'b1;
      checks++;
      if (seen != 4'hF) begin
        failures++;
        $display("round-robin window %0d not fair: %b", k, seen);
      end
    end
    checks++;
    if (last_src.size() < 70) begin
      failures++;
      $display("output 0 served only %0d items in 80 cycles", last_src.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
