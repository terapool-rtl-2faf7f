// Testbench for lsu_ttable. A memory model answers accepted requests after a
// random delay of 1..12 cycles, so responses return out of order. Checks: the
// load data and destination register returned to the core, the scoreboard bit
// of a register while its load is in flight, at most 8 requests outstanding
// (the table full stall must happen), and the hold of a second load to a
// register whose load is still pending.
module tb_lsu_ttable;
  import terapool_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, resp_valid, full;
  lsu_req_t req;
  lsu_resp_t resp;
  logic [31:0] pending;
  logic mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready;
  tcdm_req_t mem_req;
  tcdm_resp_t mem_resp;
  int checks = 0, failures = 0;
  int full_stalls = 0, waw_stalls = 0, max_out = 0;

  always #5 clk = ~clk;

  lsu_ttable #(.NumOutstanding(8)) dut (
    .clk_i(clk), .rst_ni(rst_n), .core_id_i(10'd77),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .resp_valid_o(resp_valid), .resp_o(resp), .pending_o(pending), .full_o(full),
    .mem_req_valid_o(mem_req_valid), .mem_req_ready_i(mem_req_ready), .mem_req_o(mem_req),
    .mem_resp_valid_i(mem_resp_valid), .mem_resp_ready_o(mem_resp_ready), .mem_resp_i(mem_resp));

  // memory model: pending responses with a due time
  typedef struct { tcdm_resp_t r; int due; } item_t;
  item_t inflight [$];
  int cyc = 0;
  int outstanding = 0;
  logic [31:0] expected_data [32];
  bit          load_pending [32];

  assign mem_req_ready = 1'b1;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && mem_req_valid && mem_req_ready) begin
      item_t it;
      it.r = '0;
      it.r.core_id = mem_req.core_id;
      it.r.tid = mem_req.tid;
      it.r.wen = mem_req.wen;
      it.r.rdata = mem_req.addr ^ 32'hA5A5_0000;
      it.due = cyc + $urandom_range(1, 12);
      inflight.push_back(it);
      checks++;
      if (mem_req.core_id != 10'd77) failures++;
      // no two in-flight requests may share a tid
      for (int k = 0; k < inflight.size() - 1; k++) if (inflight[k].r.tid == mem_req.tid) begin
        failures++; $display("tid %0d reused while in flight", mem_req.tid);
      end
    end
  end

  // present one due response per cycle
  always @(negedge clk) begin
    mem_resp_valid <= 1'b0;
    for (int k = 0; k < inflight.size(); k++) begin
      if (inflight[k].due <= cyc) begin
        mem_resp_valid <= 1'b1;
        mem_resp <= inflight[k].r;
        inflight.delete(k);
        break;
      end
    end
  end

  // check responses delivered to the core
  always @(posedge clk) begin
    if (rst_n && resp_valid && !resp.wen) begin
      checks++;
      if (resp.rdata != expected_data[resp.rd]) begin
        failures++;
        $display("rd %0d: data %h exp %h", resp.rd, resp.rdata, expected_data[resp.rd]);
      end
      if (!pending[resp.rd] && resp.rd != 0) begin
        failures++;
        $display("rd %0d returned but was not pending", resp.rd);
      end
      load_pending[resp.rd] = 0;
    end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      int o;
      o = $countones(~{8{1'b0}} & dut.busy_q);
      if (o > max_out) max_out = o;
      if (req_valid && full) full_stalls++;
      if (req_valid && !full && !req.wen && pending[req.rd] && !req_ready) waw_stalls++;
    end
  end

  initial begin
    req_valid = 0; req = '0;
    for (int i = 0; i < 32; i++) begin expected_data[i] = 0; load_pending[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      req_valid = 1;
      req.wen = ($urandom_range(0, 3) == 0);
      req.addr = $urandom & 32'hFFFF_FFFC;
      req.rd = 5'($urandom_range(1, (n < 1500) ? 31 : 3));
      req.be = 4'hF;
      req.wdata = $urandom;
      // wait for acceptance
      @(posedge clk);
      while (!req_ready) @(posedge clk);
      if (!req.wen) begin
        expected_data[req.rd] = req.addr ^ 32'hA5A5_0000;
        load_pending[req.rd] = 1;
        #1;
        checks++;
        if (!pending[req.rd]) begin failures++; $display("rd %0d not marked pending", req.rd); end
      end
    end
    @(negedge clk) req_valid = 0;
    repeat (40) @(posedge clk);
    checks++;
    if (pending != 0) begin failures++; $display("scoreboard not empty at end: %h", pending); end
    checks++;
    if (max_out != 8) begin failures++; $display("max outstanding %0d, expected 8", max_out); end
    checks++;
    if (full_stalls == 0) begin failures++; $display("table-full stall never happened"); end
    checks++;
    if (waw_stalls == 0) begin failures++; $display("pending-register hold never happened"); end
    $display("full stalls %0d, register holds %0d", full_stalls, waw_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
