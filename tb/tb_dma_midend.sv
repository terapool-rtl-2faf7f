// Testbench for dma_midend at the full size (16 SubGroups, 1 KiB SubGroup rows).
// Sixteen backend stand-ins take pieces when ready (random) and report done
// after a random time. For every transfer the testbench checks that the pieces
// tile the transfer exactly and in order on both the L1 and the L2 side, that
// none crosses a 1 KiB L1 boundary, that each goes to the SubGroup that owns
// its L1 address (decoded independently here for both L1 regions), that the
// direction follows the side that lies in L1, and that the transfer is
// reported done only after its last piece finished. It also counts cycles in
// which pieces were running at several backends at once.
module tb_dma_midend;
  import terapool_pkg::*;
  localparam int NSG = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic jv, jr, jdone, busy;
  dma_job_t job;
  logic [NSG-1:0] pv, pr, pdone;
  dma_piece_t piece;

  dma_midend dut (
    .clk_i(clk), .rst_ni(rst_n), .job_valid_i(jv), .job_ready_o(jr), .job_i(job),
    .job_done_o(jdone), .busy_o(busy), .piece_valid_o(pv), .piece_ready_i(pr),
    .piece_o(piece), .piece_done_i(pdone));

  int checks = 0, failures = 0, parallel = 0;
  int timer [NSG];
  bit in_use [NSG];
  logic [31:0] next_l1, next_l2, left;
  bit exp_dir;

  function automatic int owner(logic [31:0] a);
    if (a < 32'h8_0000) return int'((a >> 15) & 15);   // Tile (a >> 12) of 128; SubGroup = Tile / 8
    return int'((a >> 10) & 15);
  endfunction

  always @(negedge clk) begin
    for (int s = 0; s < NSG; s++) pr[s] = !in_use[s] && ($urandom_range(0, 2) != 0);
  end

  always @(posedge clk) begin
    int active;
    active = 0;
    pdone <= '0;
    for (int s = 0; s < NSG; s++) begin
      if (in_use[s]) begin
        active++;
        timer[s]--;
        if (timer[s] == 0) begin in_use[s] = 0; pdone[s] <= 1'b1; end
      end
    end
    if (active > 1) parallel++;
    if (rst_n && pv != 0) begin
      checks++;
      if ($countones(pv) != 1) begin failures++; $display("several backends selected"); end
    end
    for (int s = 0; s < NSG; s++) begin
      if (rst_n && pv[s] && pr[s]) begin
        checks += 5;
        if (s != owner(piece.l1_addr)) begin failures++; $display("piece at %h sent to %0d", piece.l1_addr, s); end
        if (piece.l1_addr != next_l1 || piece.l2_addr != next_l2) begin
          failures++; $display("piece %h/%h expected %h/%h", piece.l1_addr, piece.l2_addr, next_l1, next_l2);
        end
        if (piece.num_bytes == 0 || 32'(piece.num_bytes) > left) begin failures++; $display("bad size"); end
        if ((piece.l1_addr >> 10) != ((piece.l1_addr + 32'(piece.num_bytes) - 1) >> 10)) begin
          failures++; $display("piece crosses a 1 KiB boundary");
        end
        if (piece.l1_to_l2 != exp_dir) failures++;
        next_l1 += 32'(piece.num_bytes);
        next_l2 += 32'(piece.num_bytes);
        left -= 32'(piece.num_bytes);
        in_use[s] = 1;
        timer[s] = $urandom_range(1, 40);
      end
    end
  end

  initial begin
    jv = 0; job = '0; pdone = '0;
    for (int s = 0; s < NSG; s++) begin in_use[s] = 0; timer[s] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 150; n++) begin
      logic [31:0] l1, l2;
      int nb;
      l1 = 32'(64 * $urandom_range(0, 65535));
      l2 = L2BaseAddr + 32'(64 * $urandom_range(0, 65535));
      nb = 64 * $urandom_range(1, (n % 10 == 0) ? 1024 : 64);
      if (l1 + 32'(nb) > 32'h40_0000) l1 = 32'h40_0000 - 32'(nb);
      exp_dir = $urandom_range(0, 1);
      @(negedge clk);
      jv = 1;
      job.src = exp_dir ? l1 : l2;
      job.dst = exp_dir ? l2 : l1;
      job.num_bytes = 32'(nb);
      next_l1 = l1; next_l2 = l2; left = 32'(nb);
      @(posedge clk);
      while (!jr) @(posedge clk);
      @(negedge clk) jv = 0;
      @(posedge clk);
      while (!jdone) begin
        @(posedge clk);
      end
      checks += 2;
      if (left != 0) begin failures++; $display("done with %0d bytes left", left); end
      for (int s = 0; s < NSG; s++) if (in_use[s]) begin failures++; $display("done while piece running"); break; end
    end
    checks++;
    if (parallel == 0) begin failures++; $display("pieces never ran in parallel"); end
    $display("cycles with parallel pieces: %0d", parallel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
