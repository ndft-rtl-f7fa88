// ndft_shared_spm: the shared scratchpad in the logic layer of one memory stack.
//
// All N_CORES cores of a stack (8 NDP units x 2 cores) reach one scratchpad made
// of N_CORES banks, one bank per core. Bank i is core i's 16 KB slice: the
// process on core i writes the pseudopotential blocks it owns there, and any
// other process of the stack reads them in place through their address instead
// of holding its own copy. A word address is {owner core, offset in its slice},
// so the upper CW bits of req_addr choose the bank.
//
// Each core has a request port (req_valid/req_ready, req_we, req_be, req_addr,
// req_wdata) and a response port (rsp_valid, rsp_rdata). A request is accepted
// in the cycle in which req_valid and req_ready are both high. A core must hold
// its request unchanged until it is accepted. The data of an accepted read comes
// back on rsp_valid/rsp_rdata exactly one cycle later; a write gets no response.
// Requests of different cores to different banks are all accepted in the same
// cycle. When several cores address the same bank, a round-robin arbiter of that
// bank accepts one of them and the others see req_ready low (a bank-conflict
// stall) until their turn.
//
// What follows the paper: one SPM per stack shared by all its cores, 16 KB per
// core, 256 KB per stack, each process's data kept in its own region and read by
// the others. What is this design's own choice: the 64-bit word, banking by
// owner core, the crossbar, round-robin arbitration, the valid/ready handshake
// and the one-cycle read latency.
module ndft_shared_spm #(
  parameter int unsigned N_CORES    = ndft_pkg::CORES_PER_STACK,
  parameter int unsigned BANK_WORDS = ndft_pkg::BANK_WORDS,
  parameter int unsigned DATA_W     = ndft_pkg::DATA_W,
  localparam int unsigned CW = $clog2(N_CORES),
  localparam int unsigned OW = $clog2(BANK_WORDS),
  localparam int unsigned AW = CW + OW,
  localparam int unsigned BW = DATA_W / 8
) (
  input  logic                clk,
  input  logic                rst_n,
  // request side, one per core
  input  logic [N_CORES-1:0]  req_valid,
  output logic [N_CORES-1:0]  req_ready,
  input  logic [N_CORES-1:0]  req_we,
  input  logic [BW-1:0]       req_be    [N_CORES],
  input  logic [AW-1:0]       req_addr  [N_CORES],
  input  logic [DATA_W-1:0]   req_wdata [N_CORES],
  // read response side, one per core
  output logic [N_CORES-1:0]  rsp_valid,
  output logic [DATA_W-1:0]   rsp_rdata [N_CORES]
);

  // Requests sorted by bank: bank_req[b][c] is core c asking for bank b.
  logic [N_CORES-1:0] bank_req  [N_CORES];
  logic [N_CORES-1:0] bank_gnt  [N_CORES];
  logic [CW-1:0]      bank_gidx [N_CORES];
  logic [DATA_W-1:0]  bank_rdata [N_CORES];

  always_comb begin
    for (int unsigned b = 0; b < N_CORES; b++) begin
      for (int unsigned c = 0; c < N_CORES; c++) begin
        bank_req[b][c] = req_valid[c] && (req_addr[c][AW-1:OW] == CW'(b));
      end
    end
  end

  for (genvar b = 0; b < N_CORES; b++) begin : g_bank
    logic en;
    assign en = |bank_req[b];

    rr_arbiter #(.N(N_CORES)) u_arb (
      .clk     (clk),
      .rst_n   (rst_n),
      .req     (bank_req[b]),
      .advance (1'b1),
      .gnt     (bank_gnt[b]),
      .gnt_idx (bank_gidx[b])
    );

    spm_bank #(.WORDS(BANK_WORDS), .WIDTH(DATA_W)) u_bank (
      .clk   (clk),
      .en    (en),
      .we    (req_we[bank_gidx[b]]),
      .be    (req_be[bank_gidx[b]]),
      .addr  (req_addr[bank_gidx[b]][OW-1:0]),
      .wdata (req_wdata[bank_gidx[b]]),
      .rdata (bank_rdata[b])
    );
  end

  // A core is accepted when the bank it addresses grants it.
  always_comb begin
    req_ready = '0;
    for (int unsigned b = 0; b < N_CORES; b++) req_ready |= bank_gnt[b];
  end

  // Read responses: remember which bank each accepted read went to.
  logic [CW-1:0] rsp_bank_q [N_CORES];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rsp_valid <= '0;
      for (int unsigned c = 0; c < N_CORES; c++) rsp_bank_q[c] <= '0;
    end else begin
      for (int unsigned c = 0; c < N_CORES; c++) begin
        rsp_valid[c] <= req_valid[c] && req_ready[c] && !req_we[c];
        if (req_valid[c] && req_ready[c]) rsp_bank_q[c] <= req_addr[c][AW-1:OW];
      end
    end
  end

  always_comb begin
    for (int unsigned c = 0; c < N_CORES; c++) rsp_rdata[c] = bank_rdata[rsp_bank_q[c]];
  end

  // Handshake rule: a stalled request stays valid and unchanged.
  logic [N_CORES-1:0] stalled_q;
  logic [N_CORES-1:0] we_q;
  logic [AW-1:0]      addr_q  [N_CORES];
  logic [DATA_W-1:0]  wdata_q [N_CORES];
  logic [BW-1:0]      be_q    [N_CORES];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      stalled_q <= '0;
    end else begin
      stalled_q <= req_valid & ~req_ready;
    end
  end

  always_ff @(posedge clk) begin
    we_q    <= req_we;
    addr_q  <= req_addr;
    wdata_q <= req_wdata;
    be_q    <= req_be;
  end

  for (genvar c = 0; c < N_CORES; c++) begin : g_hold
    a_hold : assert property (@(posedge clk) disable iff (!rst_n)
      stalled_q[c] |-> (req_valid[c] && req_we[c] == we_q[c] && req_addr[c] == addr_q[c] &&
                        req_be[c] == be_q[c] && req_wdata[c] == wdata_q[c]))
      else $error("ndft_shared_spm: core %0d changed a stalled request", c);
  end

endmodule
