// ndft_ndp_system: the logic-layer shared memories of the whole near-data system.
//
// The system is a MESH_X x MESH_Y mesh of HBM2 stacks (4 x 4 in the published
// configuration). Each stack carries one ndft_shared_spm that its 16 NDP cores
// share; the stacks' scratchpads are independent of each other. Data that a
// process needs from another stack does not travel through the scratchpads: the
// communication process of the requesting stack (by convention on core
// ndft_pkg::COMM_CORE) exchanges it with the communication process of the other
// stack over the memory network and writes it into its own stack's scratchpad,
// where the requesting process then reads it. The cores, the DRAM dies and the
// mesh network are outside this RTL, so every stack's core ports are ports of
// this module, indexed [stack][core]; the port protocol is that of
// ndft_shared_spm (valid/ready request, read data one cycle after acceptance).
//
// What follows the paper: the number of stacks, one shared scratchpad per stack,
// 16 KB per core and 256 KB per stack. This design's own choice: port widths,
// the handshake and the placement of the communication process on the last core.
module ndft_ndp_system #(
  parameter int unsigned N_STACKS   = ndft_pkg::N_STACKS,
  parameter int unsigned N_CORES    = ndft_pkg::CORES_PER_STACK,
  parameter int unsigned BANK_WORDS = ndft_pkg::BANK_WORDS,
  parameter int unsigned DATA_W     = ndft_pkg::DATA_W,
  localparam int unsigned AW = $clog2(N_CORES) + $clog2(BANK_WORDS),
  localparam int unsigned BW = DATA_W / 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_CORES-1:0] req_valid [N_STACKS],
  output logic [N_CORES-1:0] req_ready [N_STACKS],
  input  logic [N_CORES-1:0] req_we    [N_STACKS],
  input  logic [BW-1:0]      req_be    [N_STACKS][N_CORES],
  input  logic [AW-1:0]      req_addr  [N_STACKS][N_CORES],
  input  logic [DATA_W-1:0]  req_wdata [N_STACKS][N_CORES],
  output logic [N_CORES-1:0] rsp_valid [N_STACKS],
  output logic [DATA_W-1:0]  rsp_rdata [N_STACKS][N_CORES]
);

  for (genvar s = 0; s < N_STACKS; s++) begin : g_stack
    ndft_shared_spm #(
      .N_CORES    (N_CORES),
      .BANK_WORDS (BANK_WORDS),
      .DATA_W     (DATA_W)
    ) u_spm (
      .clk       (clk),
      .rst_n     (rst_n),
      .req_valid (req_valid[s]),
      .req_ready (req_ready[s]),
      .req_we    (req_we[s]),
      .req_be    (req_be[s]),
      .req_addr  (req_addr[s]),
      .req_wdata (req_wdata[s]),
      .rsp_valid (rsp_valid[s]),
      .rsp_rdata (rsp_rdata[s])
    );
  end

endmodule
