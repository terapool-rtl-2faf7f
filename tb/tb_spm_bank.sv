// Testbench for spm_bank: random byte-enabled writes and reads against a
// reference array; checks that read data appears exactly one cycle after the
// request and that unselected bytes keep their value.
module tb_spm_bank;
  localparam int unsigned NumWords = 256;
  logic clk = 0, req, we;
  logic [7:0] addr;
  logic [3:0] be;
  logic [31:0] wdata, rdata;
  logic [31:0] ref_mem [NumWords];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  spm_bank #(.NumWords(NumWords), .DataWidth(32)) dut (
    .clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr), .be_i(be), .wdata_i(wdata), .rdata_o(rdata));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = 0; we = 0; addr = 0; be = 0; wdata = 0;
    // initialise every word
    for (int i = 0; i < NumWords; i++) begin
      @(negedge clk);
      req = 1; we = 1; addr = 8'(i); be = 4'hF; wdata = $urandom; ref_mem[i] = wdata;
    end
    @(negedge clk); req = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      req = 1; addr = 8'($urandom_range(0, NumWords-1));
      we = $urandom_range(0, 1);
      be = 4'($urandom); wdata = $urandom;
      if (we) begin
        for (int b = 0; b < 4; b++) if (be[b]) ref_mem[addr][b*8 +: 8] = wdata[b*8 +: 8];
      end else begin
        logic [31:0] exp;
        exp = ref_mem[addr];
        @(negedge clk);
        req = 0;
        checks++;
        if (rdata !== exp) begin
          failures++;
          $display("mismatch addr %0d: got %h exp %h", addr, rdata, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
