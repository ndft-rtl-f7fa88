// tb_ndft_ndp_system: end-to-end test of the 16-stack system at full size.
//
// The testbench plays the 256 NDP cores (16 per stack) and the inter-stack
// memory network, and runs the shared-pseudopotential flow on every stack at
// once, with all parameters at their defaults:
//   A. every process writes the pseudopotential block it owns into its own
//      16 KB slice (the whole 256 KB of every stack is written);
//   B. every process reads part of every other process's block in place
//      (cross-slice reads), rotated so that most cycles are conflict-free,
//      then all processes of a stack read the same block at once (bank
//      conflicts, round-robin stalls);
//   C. remote read: the communication process (core COMM_CORE) of stack d
//      reads a block of its own stack for stack s = d-1; the testbench carries
//      the words across the network; the communication process of stack s
//      writes them into its slice; process 0 of stack s reads them there and
//      must see stack d's data;
//   D. byte-masked partial writes into a neighbour's slice, read back.
// Every accepted request updates a reference memory of the testbench; each read
// must return the reference word exactly one cycle after acceptance. Data is a
// fixed function of (stack, core, word), so the remote copy is also checked
// against the generator directly. The run fails if any mechanism never happened:
// bank-conflict stall, 16 accepts in one cycle in a stack, cross-slice read,
// remote copy, partial write.
module tb_ndft_ndp_system;
  localparam int unsigned S  = ndft_pkg::N_STACKS;
  localparam int unsigned N  = ndft_pkg::CORES_PER_STACK;
  localparam int unsigned BWORDS = ndft_pkg::BANK_WORDS;
  localparam int unsigned DW = ndft_pkg::DATA_W;
  localparam int unsigned OW = $clog2(BWORDS);
  localparam int unsigned CW = $clog2(N);
  localparam int unsigned AW = CW + OW;
  localparam int unsigned BW = DW / 8;
  localparam int unsigned COMM = ndft_pkg::COMM_CORE;
  localparam int unsigned BLK = 64;            // words of a block read by others
  localparam int unsigned REMOTE_OFF = 1024;   // where the comm process puts remote data

  typedef struct {
    logic          we;
    logic [BW-1:0] be;
    logic [AW-1:0] addr;
    logic [DW-1:0] wdata;
    int            cap;    // >= 0: keep the read data in net_buf[stack][cap]
  } op_t;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0]  req_valid [S];
  logic [N-1:0]  req_ready [S];
  logic [N-1:0]  req_we    [S];
  logic [BW-1:0] req_be    [S][N];
  logic [AW-1:0] req_addr  [S][N];
  logic [DW-1:0] req_wdata [S][N];
  logic [N-1:0]  rsp_valid [S];
  logic [DW-1:0] rsp_rdata [S][N];

  ndft_ndp_system dut (.*);

  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  logic [DW-1:0] ref_mem [S][N * BWORDS];
  op_t           q [S][N][$];
  logic [N-1:0]  exp_valid [S];
  logic [DW-1:0] exp_data [S][N];
  int            exp_cap [S][N];
  logic [DW-1:0] net_buf [S][BLK];
  longint unsigned n_stall = 0, n_cross = 0, n_full = 0, n_remote = 0, n_partial = 0;
  longint unsigned n_cycles = 0;

  function automatic logic [DW-1:0] gen(int unsigned s, int unsigned c, int unsigned w);
    logic [31:0] h = 32'(s) * 32'h9E3779B1 ^ 32'(c) * 32'h85EBCA77 ^ 32'(w) * 32'hC2B2AE3D;
    return {8'(s), 8'(c), 16'(w), h};
  endfunction

  task automatic fail(string msg);
    failures++;
    if (failures < 12) $display("FAIL %s", msg);
  endtask

  task automatic cycle();
    @(negedge clk);
    n_cycles++;
    for (int unsigned s = 0; s < S; s++)
      for (int unsigned c = 0; c < N; c++) begin
        if (rsp_valid[s][c] !== exp_valid[s][c]) begin
          checks++;
          fail($sformatf("stack %0d core %0d rsp_valid %b expected %b", s, c, rsp_valid[s][c], exp_valid[s][c]));
        end else if (exp_valid[s][c]) begin
          checks++;
          if (rsp_rdata[s][c] !== exp_data[s][c])
            fail($sformatf("stack %0d core %0d read %h expected %h", s, c, rsp_rdata[s][c], exp_data[s][c]));
          if (exp_cap[s][c] >= 0) net_buf[s][exp_cap[s][c]] = rsp_rdata[s][c];
        end
      end
    for (int unsigned s = 0; s < S; s++)
      for (int unsigned c = 0; c < N; c++) begin
        if (q[s][c].size() > 0) begin
          req_valid[s][c] = 1'b1;
          req_we[s][c] = q[s][c][0].we; req_be[s][c] = q[s][c][0].be;
          req_addr[s][c] = q[s][c][0].addr; req_wdata[s][c] = q[s][c][0].wdata;
        end else begin
          req_valid[s][c] = 1'b0; req_we[s][c] = 1'b0;
        end
      end
    #1;
    for (int unsigned s = 0; s < S; s++) begin
      int unsigned acc = 0;
      exp_valid[s] = '0;
      for (int unsigned c = 0; c < N; c++) begin
        if (req_valid[s][c] && req_ready[s][c]) begin
          op_t o = q[s][c].pop_front();
          int unsigned a = int'(o.addr);
          if (o.addr[AW-1:OW] != CW'(c) && !o.we) n_cross++;
          if (o.we) begin
            if (o.be != '1) n_partial++;
            for (int i = 0; i < BW; i++) if (o.be[i]) ref_mem[s][a][i*8 +: 8] = o.wdata[i*8 +: 8];
          end else begin
            exp_valid[s][c] = 1'b1; exp_data[s][c] = ref_mem[s][a]; exp_cap[s][c] = o.cap;
          end
          acc++;
        end else if (req_valid[s][c]) begin
          n_stall++;
        end else if (req_ready[s][c]) begin
          fail($sformatf("stack %0d core %0d ready without valid", s, c));
        end
      end
      if (acc == N) n_full++;
    end
  endtask

  function automatic bit all_empty();
    for (int unsigned s = 0; s < S; s++)
      for (int unsigned c = 0; c < N; c++) if (q[s][c].size() > 0) return 0;
    return 1;
  endfunction

  task automatic drain();
    while (!all_empty()) cycle();
    cycle();
  endtask

  function automatic op_t mk(bit we, int unsigned bank, int unsigned off, logic [BW-1:0] be,
                             logic [DW-1:0] d, int cap);
    op_t o;
    o.we = we; o.be = be; o.addr = {CW'(bank), OW'(off)}; o.wdata = d; o.cap = cap;
    return o;
  endfunction

  initial begin
    longint unsigned t0;
    for (int unsigned s = 0; s < S; s++) begin
      req_valid[s] = '0; req_we[s] = '0; exp_valid[s] = '0;
      for (int unsigned c = 0; c < N; c++) begin
        req_be[s][c] = '0; req_addr[s][c] = '0; req_wdata[s][c] = '0;
        exp_data[s][c] = '0; exp_cap[s][c] = -1;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // A. every process writes its own block into its slice
    for (int unsigned s = 0; s < S; s++)
      for (int unsigned c = 0; c < N; c++)
        for (int unsigned w = 0; w < BWORDS; w++) q[s][c].push_back(mk(1, c, w, '1, gen(s, c, w), -1));
    t0 = n_cycles;
    drain();
    checks++;
    if (n_cycles - t0 != BWORDS + 1) fail($sformatf("phase A took %0d cycles, expected %0d", n_cycles - t0, BWORDS + 1));

    // B. cross-slice reads, rotated, then one hot block read by all
    for (int unsigned s = 0; s < S; s++)
      for (int unsigned c = 0; c < N; c++) begin
        for (int unsigned j = 1; j < N; j++)
          for (int unsigned w = 0; w < BLK; w++) q[s][c].push_back(mk(0, (c + j) % N, w, '0, '0, -1));
        for (int unsigned w = 0; w < 16; w++) q[s][c].push_back(mk(0, s % N, w, '0, '0, -1));
      end
    t0 = n_cycles;
    drain();
    // rotated part needs (N-1)*BLK cycles; the hot block 16 reads by N cores on one bank
    checks++;
    if (n_cycles - t0 != (N - 1) * BLK + 16 * N + 1)
      fail($sformatf("phase B took %0d cycles, expected %0d", n_cycles - t0, (N - 1) * BLK + 16 * N + 1));

    // C. remote read through the communication processes
    for (int unsigned d = 0; d < S; d++)
      for (int unsigned w = 0; w < BLK; w++) q[d][COMM].push_back(mk(0, 1, w, '0, '0, int'(w)));
    drain();
    for (int unsigned s = 0; s < S; s++)
      for (int unsigned w = 0; w < BLK; w++)
        q[s][COMM].push_back(mk(1, COMM, REMOTE_OFF + w, '1, net_buf[(s + 1) % S][w], -1));
    drain();
    for (int unsigned s = 0; s < S; s++)
      for (int unsigned w = 0; w < BLK; w++) q[s][0].push_back(mk(0, COMM, REMOTE_OFF + w, '0, '0, int'(w)));
    drain();
    for (int unsigned s = 0; s < S; s++)
      for (int unsigned w = 0; w < BLK; w++) begin
        checks++;
        if (net_buf[s][w] !== gen((s + 1) % S, 1, w))
          fail($sformatf("stack %0d remote word %0d = %h, expected %h", s, w, net_buf[s][w], gen((s + 1) % S, 1, w)));
        else n_remote++;
      end

    // D. partial writes into the neighbour's slice, then read back
    for (int unsigned s = 0; s < S; s++)
      for (int unsigned c = 0; c < N; c++) begin
        for (int unsigned w = 0; w < 32; w++)
          q[s][c].push_back(mk(1, (c + 1) % N, 512 + c * 32 + w, BW'($urandom_range(1, 254)),
                               {$urandom(), $urandom()}, -1));
        for (int unsigned w = 0; w < 32; w++)
          q[s][c].push_back(mk(0, (c + 1) % N, 512 + c * 32 + w, '0, '0, -1));
      end
    drain();

    $display("cycles=%0d stalls=%0d full_cycles=%0d cross_reads=%0d remote_words=%0d partial_writes=%0d",
             n_cycles, n_stall, n_full, n_cross, n_remote, n_partial);
    checks++; if (n_stall == 0)   fail("no bank-conflict stall happened");
    checks++; if (n_full == 0)    fail("no cycle accepted all cores of a stack");
    checks++; if (n_cross == 0)   fail("no cross-slice read happened");
    checks++; if (n_remote == 0)  fail("no remote copy happened");
    checks++; if (n_partial == 0) fail("no partial write happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
