// tcdm_bank: one bank of the cluster's tightly coupled data memory.
//
// WORDS words of 64 bits with a single port: when req_i is high the word at addr_i is
// written (we_i) or read; read data appears on rdata_o in the next cycle and is held
// until the next read. This array stands for an SRAM macro; the Dual-Core cluster has 16
// of them, 8 KiB each (128 KiB in all). The contents are not reset.
module tcdm_bank #(
  parameter int unsigned WORDS = 1024
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [$clog2(WORDS)-1:0] addr_i,
  input  logic [63:0]              wdata_i,
  output logic [63:0]              rdata_o
);
  logic [63:0] mem_q [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) mem_q[addr_i] <= wdata_i;
      else      rdata_o       <= mem_q[addr_i];
    end
  end

endmodule
