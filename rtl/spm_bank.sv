// spm_bank -- one bank of the cluster scratchpad memory (SPM).
//
// A single-port synchronous SRAM of WORDS 32-bit words with byte enables,
// written as an array. A read returns its data one cycle after the request;
// a write updates the selected bytes at the clock edge. The default depth
// follows the paper's cluster: 128 kB of SPM in 32 banks = 1024 words per
// bank. In silicon this is an SRAM macro; its ports here are the
// generic ones a macro wrapper would expose.
module spm_bank #(
  parameter int unsigned WORDS = 1024,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk_i,
  input  logic          req_i,
  input  logic          we_i,
  input  logic [3:0]    be_i,
  input  logic [AW-1:0] addr_i,
  input  logic [31:0]   wdata_i,
  output logic [31:0]   rdata_o
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule
