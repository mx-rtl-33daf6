// mx_row_buffer_b: holds one row of the B sub-tile for the MX datapath.
//
// At the start of each k step the buffer takes row k of the B sub-tile, n' (4 or 8)
// contiguous elements of a vector register (B is kept row-major). The row then stays put
// while the m' elements of the matching A column stream past, so every B element read
// from the register file is reused m' times. Each cycle N_FPU of the held elements go to
// the FPU lanes; blk_i selects which group of N_FPU columns (0 for columns 0-3, 1 for
// 4-7 when n' = 8).
//
// Interface: ld_en_i loads N_MAX elements of ld_vreg_i from element ld_off_i (wrapping);
// lanes_o is combinational from blk_i. The paper names this buffer in its datapath
// figure only; its width and lane selection are this design's choice.
module mx_row_buffer_b #(
  parameter int unsigned N_MAX = 8,
  parameter int unsigned N_FPU = 4
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  ld_en_i,
  input  mx_pkg::vword_t        ld_vreg_i,
  input  logic [2:0]            ld_off_i,
  input  logic                  blk_i,
  output mx_pkg::elem_t [N_FPU-1:0] lanes_o
);
  import mx_pkg::*;

  elem_t [N_MAX-1:0] row_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) row_q <= '0;
    else if (ld_en_i)
      for (int unsigned i = 0; i < N_MAX; i++)
        row_q[i] <= ld_vreg_i[ELEN*((32'(ld_off_i) + i) % EPR) +: ELEN];
  end

  always_comb
    for (int unsigned l = 0; l < N_FPU; l++)
      lanes_o[l] = row_q[(32'(blk_i) * N_FPU + l) % N_MAX];

endmodule
