// tb_pseudo_sharing_si: the pseudopotential-sharing flow on one stack for each
// evaluated silicon system size (16, 32, 64, 128, 256, 1024 and 2048 atoms).
//
// With 16 stacks, a stack holds ATOMS/16 atoms (at least one). Atom a of the
// stack belongs to the process on core a mod 16. For every size the testbench:
//   1. lets every owner compute the size of each of its atoms' blocks and
//      allocate consecutive space for them in its own slice (a bump pointer),
//      then write the blocks there;
//   2. gives every process the table of block addresses (the index);
//   3. lets every process, for one local wavefunction, read every atom's block
//      through that index and fold it into a running sum, which is compared
//      with a sum computed from the data generator alone.
// The block size per atom is 128 words, or less where the slice of a core
// would overflow; the real blocks are larger, so this is the access pattern at
// a reduced size, not the full data. Only the atoms of one stack are shared
// here; atoms of other stacks would be copied in by the communication process
// first (see tb_ndft_ndp_system). The cycle count of step 3 must lie between
// the lower bound set by the busiest bank or core and the fully serial count.
module tb_pseudo_sharing_si;
  localparam int unsigned N  = ndft_pkg::CORES_PER_STACK;
  localparam int unsigned BWORDS = ndft_pkg::BANK_WORDS;
  localparam int unsigned DW = ndft_pkg::DATA_W;
  localparam int unsigned OW = $clog2(BWORDS);
  localparam int unsigned CW = $clog2(N);
  localparam int unsigned AW = CW + OW;
  localparam int unsigned BW = DW / 8;
  localparam int unsigned MAX_BLK = 128;
  localparam int unsigned N_SIZES = 7;
  localparam int unsigned SIZES [N_SIZES] = '{16, 32, 64, 128, 256, 1024, 2048};

  typedef struct {
    logic          we;
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
  op_t           q [N][$];
  logic [N-1:0]  pend;
  logic [DW-1:0] acc [N];      // per-process running sum of all data read
  int unsigned   base [$];     // index: word address of each atom's block

  function automatic logic [DW-1:0] gen(int unsigned atoms, int unsigned a, int unsigned w);
    logic [31:0] h = 32'(atoms) * 32'h27D4EB2F ^ 32'(a) * 32'h9E3779B1 ^ 32'(w) * 32'h85EBCA77;
    return {h ^ 32'h5bd1e995, 16'(a), 16'(w)};
  endfunction

  task automatic fail(string msg);
    failures++;
    if (failures < 12) $display("FAIL %s", msg);
  endtask

  task automatic cycle();
    @(negedge clk);
    if (rsp_valid !== pend) fail($sformatf("rsp_valid %h expected %h", rsp_valid, pend));
    for (int unsigned c = 0; c < N; c++) if (pend[c]) acc[c] = acc[c] + rsp_rdata[c];
    for (int unsigned c = 0; c < N; c++) begin
      req_valid[c] = q[c].size() > 0;
      if (q[c].size() > 0) begin
        req_we[c] = q[c][0].we; req_addr[c] = q[c][0].addr; req_wdata[c] = q[c][0].wdata;
      end else req_we[c] = 1'b0;
      req_be[c] = '1;
    end
    #1;
    for (int unsigned c = 0; c < N; c++) begin
      pend[c] = req_valid[c] && req_ready[c] && !req_we[c];
      if (req_valid[c] && req_ready[c]) void'(q[c].pop_front());
    end
  endtask

  function automatic bit all_empty();
    for (int unsigned c = 0; c < N; c++) if (q[c].size() > 0) return 0;
    return 1;
  endfunction

  task automatic drain(output int unsigned n);
    n = 0;
    while (!all_empty()) begin cycle(); n++; end
    cycle();
  endtask

  initial begin
    pend = '0; req_valid = '0; req_we = '0;
    for (int unsigned c = 0; c < N; c++) begin
      req_be[c] = '1; req_addr[c] = '0; req_wdata[c] = '0; acc[c] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    foreach (SIZES[si]) begin
      int unsigned atoms, per_core, blk, ncyc, lower, serial;
      int unsigned next_free [N];
      int unsigned bank_load [N];
      logic [DW-1:0] want;
      atoms    = (SIZES[si] / ndft_pkg::N_STACKS > 0) ? SIZES[si] / ndft_pkg::N_STACKS : 1;
      per_core = (atoms + N - 1) / N;
      blk      = (BWORDS / per_core < MAX_BLK) ? BWORDS / per_core : MAX_BLK;
      base.delete();
      for (int unsigned c = 0; c < N; c++) begin next_free[c] = 0; bank_load[c] = 0; end

      // 1. size, allocate and write every atom's block in its owner's slice
      for (int unsigned a = 0; a < atoms; a++) begin
        int unsigned owner;
        op_t o;
        owner = a % N;
        base.push_back(owner * BWORDS + next_free[owner]);
        for (int unsigned w = 0; w < blk; w++) begin
          o.we = 1'b1; o.addr = AW'(base[a] + w); o.wdata = gen(atoms, a, w);
          q[owner].push_back(o);
        end
        next_free[owner] += blk;
      end
      drain(ncyc);
      checks++;
      if (ncyc != per_core * blk) fail($sformatf("Si_%0d: writing took %0d cycles, expected %0d", SIZES[si], ncyc, per_core * blk));

      // 2./3. every process reads every block through the index, rotated by core
      for (int unsigned c = 0; c < N; c++) begin
        acc[c] = '0;
        for (int unsigned k = 0; k < atoms; k++) begin
          int unsigned a;
          op_t o;
          a = (c + k) % atoms;
          for (int unsigned w = 0; w < blk; w++) begin
            o.we = 1'b0; o.addr = AW'(base[a] + w); o.wdata = '0;
            q[c].push_back(o);
          end
          bank_load[a % N] += blk;
        end
      end
      drain(ncyc);
      want = '0;
      for (int unsigned a = 0; a < atoms; a++)
        for (int unsigned w = 0; w < blk; w++) want = want + gen(atoms, a, w);
      for (int unsigned c = 0; c < N; c++) begin
        checks++;
        if (acc[c] !== want) fail($sformatf("Si_%0d: process %0d sum %h expected %h", SIZES[si], c, acc[c], want));
      end
      lower = atoms * blk;
      for (int unsigned b = 0; b < N; b++) if (bank_load[b] > lower) lower = bank_load[b];
      serial = N * atoms * blk;
      checks++;
      if (ncyc < lower || ncyc > serial)
        fail($sformatf("Si_%0d: sharing took %0d cycles, outside [%0d, %0d]", SIZES[si], ncyc, lower, serial));
      $display("Si_%0d: %0d atoms per stack, %0d-word blocks, sharing reads %0d cycles (bound %0d, serial %0d)",
               SIZES[si], atoms, blk, ncyc, lower, serial);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
