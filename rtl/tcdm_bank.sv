// tcdm_bank: one bank of the cluster's shared L1 data memory (TCDM).
//
// The 128 kB L1 is split into 32 banks of 32-bit words, 4 kB (1024 words)
// each. A bank serves one access per cycle: a request with we_i = 1 writes
// the bytes selected by be_i, otherwise it reads; read data appears on
// rdata_o in the next cycle. On the chip this is an SRAM macro; here it is a
// plain array with the same single-port behaviour, which synthesis maps to
// the target memory. The contents are not reset.
//
// Follows the paper: bank count and total capacity. Own choices: byte enables,
// one-cycle read latency, no reset of the contents.
module tcdm_bank #(
  parameter int unsigned WORDS = 1024
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [$clog2(WORDS)-1:0] addr_i,
  input  logic [3:0]               be_i,
  input  logic [31:0]              wdata_i,
  output logic [31:0]              rdata_o
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++)
          if (be_i[b]) mem[addr_i][b*8 +: 8] <= wdata_i[b*8 +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end

endmodule
