// tb_spm_bank: self-checking test of one 16 KB scratchpad bank.
//
// Fills every word, then runs random reads and byte-masked writes against a
// reference array kept by the testbench. Each read must return the reference
// word exactly one cycle after it is issued, and rdata must hold its value across
// writes and idle cycles.
module tb_spm_bank;
  localparam int unsigned WORDS = ndft_pkg::BANK_WORDS;
  localparam int unsigned WIDTH = ndft_pkg::DATA_W;
  localparam int unsigned AW = $clog2(WORDS);
  localparam int unsigned BW = WIDTH / 8;

  logic clk = 1'b0;
  logic en, we;
  logic [BW-1:0] be;
  logic [AW-1:0] addr;
  logic [WIDTH-1:0] wdata, rdata;

  spm_bank dut (.*);

  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  logic [WIDTH-1:0] ref_mem [WORDS];
  logic [WIDTH-1:0] last_read;

  function automatic logic [WIDTH-1:0] rnd64();
    return {$urandom(), $urandom()};
  endfunction

  function automatic logic [WIDTH-1:0] merge(logic [WIDTH-1:0] old, logic [WIDTH-1:0] nw,
                                             logic [BW-1:0] m);
    logic [WIDTH-1:0] r = old;
    for (int i = 0; i < BW; i++) if (m[i]) r[i*8 +: 8] = nw[i*8 +: 8];
    return r;
  endfunction

  task automatic check(string what, logic [WIDTH-1:0] got, logic [WIDTH-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    en = 0; we = 0; be = '0; addr = '0; wdata = '0;
    // fill
    for (int unsigned a = 0; a < WORDS; a++) begin
      @(negedge clk);
      en = 1; we = 1; be = '1; addr = AW'(a); wdata = rnd64();
      ref_mem[a] = wdata;
    end
    @(negedge clk); en = 0;
    // read everything back, one per cycle, checking the one-cycle latency
    for (int unsigned a = 0; a < WORDS; a++) begin
      @(negedge clk);
      en = 1; we = 0; addr = AW'(a);
      @(negedge clk);
      en = 0;
      check("fill readback", rdata, ref_mem[a]);
    end
    // random traffic
    last_read = rdata;
    for (int n = 0; n < 6000; n++) begin
      int unsigned kind;
      logic [AW-1:0] a;
      kind = $urandom_range(0, 3);
      a = AW'($urandom_range(0, WORDS - 1));
      @(negedge clk);
      check("rdata held", rdata, last_read);
      if (kind == 0) begin
        en = 0; we = $urandom_range(0, 1) == 1; addr = a; wdata = rnd64(); be = BW'($urandom());
      end else if (kind == 1) begin
        en = 1; we = 1; addr = a; wdata = rnd64(); be = BW'($urandom());
        ref_mem[a] = merge(ref_mem[a], wdata, be);
      end else begin
        en = 1; we = 0; addr = a;
        @(negedge clk);
        en = 0;
        check("random read", rdata, ref_mem[a]);
        last_read = ref_mem[a];
      end
    end
    @(negedge clk); en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
