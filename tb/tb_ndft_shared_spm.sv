// tb_ndft_shared_spm: self-checking test of one stack's shared scratchpad.
//
// Every core has a request queue. At each falling clock edge the testbench
// presents the head of every queue, lets the crossbar settle, and takes the
// accepted requests (valid and ready) into a reference memory of its own; a
// read's expected data is the reference word at acceptance. One cycle later the
// response must be valid with that data, and at no other time. Three phases:
//   1. each core fills its own slice: no conflicts, all 16 accepted every cycle;
//   2. all 16 cores read one bank at once: exactly one accepted per cycle, all
//      16 done in 16 cycles, each core waiting at most 15 cycles;
//   3. random reads and byte-masked writes of any core to any slice.
// It also checks that every bank that is asked for accepts someone (no idle
// bank cycle while requests wait).
module tb_ndft_shared_spm;
  localparam int unsigned N  = ndft_pkg::CORES_PER_STACK;
  localparam int unsigned BWORDS = ndft_pkg::BANK_WORDS;
  localparam int unsigned DW = ndft_pkg::DATA_W;
  localparam int unsigned OW = $clog2(BWORDS);
  localparam int unsigned CW = $clog2(N);
  localparam int unsigned AW = CW + OW;
  localparam int unsigned BW = DW / 8;

  typedef struct {
    logic          we;
    logic [BW-1:0] be;
    logic [AW-1:0] addr;
    logic [DW-1:0] wdata;
  } op_t;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0]  req_valid, req_ready, req_we, rsp_valid;
  logic [BW-1:0] req_be [N];
  logic [AW-1:0] req_addr [N];
  logic [DW-1:0] req_wdata [N];
  logic [DW-1:0] rsp_rdata [N];

  ndft_shared_spm dut (.*);

  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  logic [DW-1:0] ref_mem [N * BWORDS];
  op_t           q [N][$];
  logic [N-1:0]  exp_valid;
  logic [DW-1:0] exp_data [N];
  int unsigned   wait_cyc [N];
  int unsigned   max_wait = 0, stalls = 0, n_cross = 0, busiest = 0;

  task automatic fail(string msg);
    failures++;
    if (failures < 12) $display("FAIL %s", msg);
  endtask

  // One clock cycle of the protocol; returns how many requests were accepted.
  task automatic cycle(output int unsigned accepted);
    logic [N-1:0] bank_asked;
    logic [N-1:0] bank_took;
    @(negedge clk);
    // responses of the requests accepted in the previous cycle
    for (int unsigned c = 0; c < N; c++) begin
      checks++;
      if (rsp_valid[c] !== exp_valid[c]) fail($sformatf("core %0d rsp_valid %b expected %b", c, rsp_valid[c], exp_valid[c]));
      else if (exp_valid[c] && rsp_rdata[c] !== exp_data[c])
        fail($sformatf("core %0d read %h expected %h", c, rsp_rdata[c], exp_data[c]));
    end
    for (int unsigned c = 0; c < N; c++) begin
      if (q[c].size() > 0) begin
        req_valid[c] = 1'b1;
        req_we[c] = q[c][0].we; req_be[c] = q[c][0].be;
        req_addr[c] = q[c][0].addr; req_wdata[c] = q[c][0].wdata;
      end else begin
        req_valid[c] = 1'b0; req_we[c] = 1'b0;
      end
    end
    #1;
    accepted = 0; exp_valid = '0; bank_asked = '0; bank_took = '0;
    for (int unsigned c = 0; c < N; c++) begin
      if (req_valid[c]) bank_asked[req_addr[c][AW-1:OW]] = 1'b1;
      if (req_valid[c] && req_ready[c]) begin
        op_t o = q[c].pop_front();
        int unsigned a = int'(o.addr);
        if (bank_took[o.addr[AW-1:OW]]) fail($sformatf("bank %0d accepted two cores", o.addr[AW-1:OW]));
        bank_took[o.addr[AW-1:OW]] = 1'b1;
        if (o.addr[AW-1:OW] != CW'(c)) n_cross++;
        if (o.we) begin
          for (int i = 0; i < BW; i++) if (o.be[i]) ref_mem[a][i*8 +: 8] = o.wdata[i*8 +: 8];
        end else begin
          exp_valid[c] = 1'b1; exp_data[c] = ref_mem[a];
        end
        if (wait_cyc[c] > max_wait) max_wait = wait_cyc[c];
        wait_cyc[c] = 0;
        accepted++;
      end else if (req_valid[c]) begin
        wait_cyc[c]++; stalls++;
      end else if (req_ready[c]) begin
        fail($sformatf("core %0d ready without valid", c));
      end
    end
    checks++;
    if (bank_took !== bank_asked) fail($sformatf("banks asked %h but only %h accepted", bank_asked, bank_took));
    if (accepted > busiest) busiest = accepted;
  endtask

  function automatic bit all_empty();
    for (int unsigned c = 0; c < N; c++) if (q[c].size() > 0) return 0;
    return 1;
  endfunction

  task automatic drain(output int unsigned ncycles);
    int unsigned acc;
    ncycles = 0;
    while (!all_empty()) begin cycle(acc); ncycles++; end
    cycle(acc); // collect the last responses
  endtask

  function automatic op_t mk(bit we, int unsigned bank, int unsigned off, logic [BW-1:0] be);
    op_t o;
    o.we = we; o.be = be; o.addr = {CW'(bank), OW'(off)}; o.wdata = {$urandom(), $urandom()};
    return o;
  endfunction

  initial begin
    int unsigned nc;
    req_valid = '0; req_we = '0; exp_valid = '0;
    for (int unsigned c = 0; c < N; c++) begin
      req_be[c] = '0; req_addr[c] = '0; req_wdata[c] = '0; wait_cyc[c] = 0; exp_data[c] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. each core fills its own slice
    for (int unsigned c = 0; c < N; c++)
      for (int unsigned w = 0; w < BWORDS; w++) q[c].push_back(mk(1, c, w, '1));
    drain(nc);
    checks++;
    if (nc != BWORDS) fail($sformatf("fill took %0d cycles, expected %0d", nc, BWORDS));
    checks++;
    if (busiest != N) fail($sformatf("at most %0d accepted per cycle, expected %0d", busiest, N));
    // and reads its own slice back, again without conflicts
    for (int unsigned c = 0; c < N; c++)
      for (int unsigned w = 0; w < 64; w++) q[c].push_back(mk(0, c, w * 7, '0));
    drain(nc);
    checks++;
    if (nc != 64) fail($sformatf("own-slice reads took %0d cycles, expected 64", nc));

    // 2. everyone reads bank 3 at once
    max_wait = 0;
    for (int unsigned c = 0; c < N; c++) q[c].push_back(mk(0, 3, c, '0));
    drain(nc);
    checks++;
    if (nc != N) fail($sformatf("hot-bank reads took %0d cycles, expected %0d", nc, N));
    checks++;
    if (max_wait != N - 1) fail($sformatf("longest wait %0d, expected %0d", max_wait, N - 1));

    // 3. random traffic, any core to any slice
    max_wait = 0;
    for (int unsigned c = 0; c < N; c++)
      for (int n = 0; n < 400; n++)
        q[c].push_back(mk($urandom_range(0, 2) == 0, $urandom_range(0, N - 1),
                          $urandom_range(0, 31), BW'($urandom())));
    drain(nc);
    checks++;
    if (max_wait > N - 1) fail($sformatf("a core waited %0d cycles", max_wait));
    checks++;
    if (stalls == 0 || n_cross == 0) fail("no bank conflict or no cross-slice access happened");
    $display("stalls=%0d cross_slice=%0d max_wait=%0d", stalls, n_cross, max_wait);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
