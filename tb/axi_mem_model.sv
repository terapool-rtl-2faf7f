// Behavioural model of one main-memory channel behind a 512-bit AXI4 port
// (testbench only, not synthesizable). It stands in for the HBM2E controller
// and DRAM, which are bought parts and not designed here.
//
// Reads: an accepted AR burst returns len+1 R beats, the first one Latency
// cycles after the AR handshake, then one beat per cycle (gaps are inserted at
// random while stall_en, initialised from RandomStall, is set). Writes: W beats are stored into the burst
// of the oldest accepted AW; after the last beat a B response follows Latency
// cycles later. The content is kept per 64-byte beat in an associative array;
// a word never written reads as init_word(byte address), so a testbench can
// work out expected data without preloading. AR/AW/W readiness is random when
// RandomStall is set, otherwise always 1. Bursts are INCR, 64 bytes per beat.
module axi_mem_model
  import terapool_pkg::*;
#(
  parameter int unsigned Latency     = 8,
  parameter bit          RandomStall = 1'b1
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  input  logic    ar_valid_i,
  output logic    ar_ready_o,
  input  axi_ax_t ar_i,
  output logic    r_valid_o,
  input  logic    r_ready_i,
  output axi_r_t  r_o,
  input  logic    aw_valid_i,
  output logic    aw_ready_o,
  input  axi_ax_t aw_i,
  input  logic    w_valid_i,
  output logic    w_ready_o,
  input  axi_w_t  w_i,
  output logic    b_valid_o,
  input  logic    b_ready_i,
  output axi_b_t  b_o
);

  typedef struct { logic [AddrWidth-1:0] addr; int beats; int due; } burst_t;

  logic [AxiDataWidth-1:0] mem [longint];
  burst_t ar_q [$];
  burst_t aw_q [$];
  int     b_q  [$];
  int     cyc = 0;
  int     r_beat = 0, w_beat = 0;
  int     n_ar = 0, n_aw = 0, n_r = 0, n_w = 0;
  bit     stall_en = RandomStall;   // a testbench may clear it for timing checks

  function automatic logic [31:0] init_word(logic [AddrWidth-1:0] a);
    return (a >> 2) * 32'h9E37_79B1 ^ 32'h0BAD_F00D;
  endfunction

  function automatic logic [AxiDataWidth-1:0] read_beat(logic [AddrWidth-1:0] a);
    logic [AxiDataWidth-1:0] d;
    longint k;
    k = longint'(a >> 6);
    if (mem.exists(k)) return mem[k];
    for (int i = 0; i < 16; i++) d[32*i +: 32] = init_word({a[AddrWidth-1:6], 6'(4 * i)});
    return d;
  endfunction

  function automatic logic [31:0] read_word(logic [AddrWidth-1:0] a);
    logic [AxiDataWidth-1:0] d;
    d = read_beat(a);
    return d[32 * int'(a[5:2]) +: 32];
  endfunction

  always @(posedge clk_i) begin
    cyc <= cyc + 1;
    if (rst_ni) begin
      if (ar_valid_i && ar_ready_o) begin
        burst_t b;
        b.addr = ar_i.addr; b.beats = int'(ar_i.len) + 1; b.due = cyc + int'(Latency);
        ar_q.push_back(b);
        n_ar++;
      end
      if (r_valid_o && r_ready_i) begin
        n_r++;
        r_beat++;
        if (r_beat == ar_q[0].beats) begin r_beat = 0; void'(ar_q.pop_front()); end
      end
      if (aw_valid_i && aw_ready_o) begin
        burst_t b;
        b.addr = aw_i.addr; b.beats = int'(aw_i.len) + 1; b.due = 0;
        aw_q.push_back(b);
        n_aw++;
      end
      if (w_valid_i && w_ready_o) begin
        logic [AddrWidth-1:0] a;
        logic [AxiDataWidth-1:0] d;
        a = aw_q[0].addr + AddrWidth'(64 * w_beat);
        d = read_beat(a);
        for (int i = 0; i < AxiStrbWidth; i++) if (w_i.strb[i]) d[8*i +: 8] = w_i.data[8*i +: 8];
        mem[longint'(a >> 6)] = d;
        n_w++;
        w_beat++;
        if (w_beat == aw_q[0].beats) begin
          w_beat = 0;
          void'(aw_q.pop_front());
          b_q.push_back(cyc + int'(Latency));
        end
      end
      if (b_valid_o && b_ready_i) void'(b_q.pop_front());
    end
  end

  always @(negedge clk_i) begin
    ar_ready_o <= !stall_en || ($urandom_range(0, 3) != 0);
    aw_ready_o <= !stall_en || ($urandom_range(0, 3) != 0);
    // a W beat is accepted only while its AW is known
    w_ready_o  <= (aw_q.size() > 0) && (!stall_en || ($urandom_range(0, 3) != 0));
    if (ar_q.size() > 0 && ar_q[0].due <= cyc && (!stall_en || $urandom_range(0, 4) != 0)) begin
      r_valid_o <= 1'b1;
      r_o.data  <= read_beat(ar_q[0].addr + AddrWidth'(64 * r_beat));
      r_o.resp  <= 2'b00;
      r_o.last  <= (r_beat == ar_q[0].beats - 1);
    end else begin
      r_valid_o <= 1'b0;
      r_o       <= '0;
    end
    b_valid_o <= (b_q.size() > 0) && (b_q[0] <= cyc);
    b_o       <= '0;
  end

  initial begin
    ar_ready_o = 1'b0; aw_ready_o = 1'b0; w_ready_o = 1'b0;
    r_valid_o = 1'b0; r_o = '0; b_valid_o = 1'b0; b_o = '0;
  end

endmodule
