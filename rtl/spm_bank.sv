// spm_bank: one core's slice of a stack's shared scratchpad.
//
// A single-port synchronous SRAM of WORDS words of WIDTH bits. When en is high a
// write (we = 1) stores the bytes of wdata whose bit in be is set, and a read
// (we = 0) returns mem[addr] on rdata at the next rising clock edge; rdata keeps
// its value until the next read. A write does not change rdata.
//
// The 16 KB size (2048 x 64 bits) is the published per-core share of the stack
// SPM. The word width, the byte enables and the one-cycle read latency are this
// design's choices; the memory is written as an array so that a synthesis flow
// can map it onto an SRAM macro.
module spm_bank #(
  parameter int unsigned WORDS = ndft_pkg::BANK_WORDS,
  parameter int unsigned WIDTH = ndft_pkg::DATA_W,
  localparam int unsigned AW = $clog2(WORDS),
  localparam int unsigned BW = WIDTH / 8
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [BW-1:0]    be,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int i = 0; i < BW; i++) begin
          if (be[i]) mem[addr][i*8 +: 8] <= wdata[i*8 +: 8];
        end
      end else begin
        rdata <= mem[addr];
      end
    end
  end

endmodule
