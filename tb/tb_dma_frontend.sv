// Testbench for dma_frontend. A small midend stand-in accepts a job only when
// idle, stays busy for a random time and then pulses done. The test programs
// random transfers through the register port and checks: register read-back,
// that each launch hands exactly the programmed source/destination/size to the
// midend, that a launch is held while the midend is busy (the stall must
// happen), the id counter, and the DONE counter after all transfers finished.
module tb_dma_frontend;
  import terapool_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cv, cr, cwe;
  logic [7:0] caddr;
  logic [31:0] cwdata, crdata;
  logic jv, jr, jdone, busy;
  dma_job_t job;

  dma_frontend dut (
    .clk_i(clk), .rst_ni(rst_n), .cfg_valid_i(cv), .cfg_ready_o(cr), .cfg_we_i(cwe),
    .cfg_addr_i(caddr), .cfg_wdata_i(cwdata), .cfg_rdata_o(crdata),
    .job_valid_o(jv), .job_ready_i(jr), .job_o(job), .job_done_i(jdone), .busy_i(busy));

  int checks = 0, failures = 0, held = 0, launched = 0, finished = 0;
  dma_job_t expect_job;
  int busy_left = 0;

  // midend stand-in
  assign jr = !busy;
  always @(posedge clk) begin
    jdone <= 1'b0;
    if (!rst_n) busy <= 1'b0;
    else if (jv && jr) begin
      checks++;
      if (job != expect_job) begin failures++; $display("job mismatch"); end
      launched++;
      busy <= 1'b1;
      busy_left = $urandom_range(2, 30);
    end else if (busy) begin
      busy_left--;
      if (busy_left == 0) begin busy <= 1'b0; jdone <= 1'b1; finished++; end
    end
    if (rst_n && jv && !jr) held++;
  end

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    cv = 1; cwe = 1; caddr = a; cwdata = d;
    @(posedge clk);
    while (!cr) @(posedge clk);
    @(negedge clk) cv = 0;
  endtask

  task automatic rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    cv = 1; cwe = 0; caddr = a;
    #1 d = crdata;
    @(posedge clk);
    @(negedge clk) cv = 0;
  endtask

  initial begin
    logic [31:0] v;
    cv = 0; cwe = 0; caddr = 0; cwdata = 0; busy = 0; jdone = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      expect_job.src = $urandom; expect_job.dst = $urandom; expect_job.num_bytes = $urandom;
      wr(8'h00, expect_job.src);
      wr(8'h04, expect_job.dst);
      wr(8'h08, expect_job.num_bytes);
      rd(8'h00, v); checks++; if (v != expect_job.src) failures++;
      rd(8'h04, v); checks++; if (v != expect_job.dst) failures++;
      rd(8'h08, v); checks++; if (v != expect_job.num_bytes) failures++;
      rd(8'h0C, v); checks++; if (v != 32'(n)) begin failures++; $display("id %0d exp %0d", v, n); end
      wr(8'h0C, 32'h1);
      @(negedge clk);
      cv = 1; cwe = 0; caddr = 8'h14;
      #1 checks++;
      if (crdata != 32'(busy)) begin failures++; $display("BUSY reads %0d", crdata); end
      @(negedge clk) cv = 0;
    end
    repeat (40) @(posedge clk);
    rd(8'h10, v);
    checks++;
    if (v != 32'(finished) || finished != 200 || launched != 200) begin
      failures++; $display("done %0d finished %0d launched %0d", v, finished, launched);
    end
    checks++;
    if (held == 0) begin failures++; $display("launch was never held"); end
    $display("held launch cycles %0d", held);
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
