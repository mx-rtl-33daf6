// spatz_vrf: vector register file of the MX-ready vector unit.
//
// 32 registers of 512 bits (eight 64-bit elements), 2 KiB in all, split into two banks:
// elements 0-3 of every register sit in bank 0 and elements 4-7 in bank 1, so a
// register read returns one 256-bit word from each bank. NR_RD read ports return a whole
// register combinationally; NR_WR write ports write any subset of a register's eight
// elements (wr_mask_i) at the clock edge. When two write ports hit the same element in
// one cycle the higher-numbered port wins.
//
// In this design ports 0-2 feed the VFU (A, B and C/D operands) and port 3 the VLSU;
// write port 0 belongs to the VFU and port 1 to the VLSU. The paper shows the two banks
// and the three VRF-to-VFU paths; the port counts, the flip-flop storage and the absence
// of bank conflicts are this design's choices.
module spatz_vrf #(
  parameter int unsigned NR_VREGS = 32,
  parameter int unsigned NR_RD    = 4,
  parameter int unsigned NR_WR    = 2
) (
  input  logic                               clk_i,
  input  logic                               rst_ni,
  input  logic [NR_RD-1:0][4:0]              rd_addr_i,
  output mx_pkg::vword_t [NR_RD-1:0]         rd_data_o,
  input  logic [NR_WR-1:0]                   wr_en_i,
  input  logic [NR_WR-1:0][4:0]              wr_addr_i,
  input  logic [NR_WR-1:0][7:0]              wr_mask_i,
  input  mx_pkg::vword_t [NR_WR-1:0]         wr_data_i
);
  import mx_pkg::*;

  localparam int unsigned HALF = VLEN / 2;

  // Two banks, each holding half of every register.
  logic [NR_VREGS-1:0][HALF-1:0] bank0_q, bank1_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      bank0_q <= '0;
      bank1_q <= '0;
    end else begin
      for (int unsigned p = 0; p < NR_WR; p++)
        if (wr_en_i[p])
          for (int unsigned e = 0; e < EPR; e++)
            if (wr_mask_i[p][e]) begin
              if (e < EPR / 2)
                bank0_q[wr_addr_i[p]][ELEN*e +: ELEN] <= wr_data_i[p][ELEN*e +: ELEN];
              else
                bank1_q[wr_addr_i[p]][ELEN*(e-EPR/2) +: ELEN] <= wr_data_i[p][ELEN*e +: ELEN];
            end
    end
  end

  always_comb
    for (int unsigned p = 0; p < NR_RD; p++)
      rd_data_o[p] = {bank1_q[rd_addr_i[p]], bank0_q[rd_addr_i[p]]};

endmodule
