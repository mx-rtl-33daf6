// mx_row_buffer_a: the A-operand broadcast register of the MX datapath.
//
// At the start of each k step of a matrix multiply-accumulate the register takes one
// column of the A sub-tile, m' (4 or 8) elements that sit next to each other in a vector
// register because the A sub-tile is kept column-major. While the step runs, the
// streaming multiplexer hands out one element per cycle, selected by sel_i, and that
// element is broadcast to every FPU lane, so each A element read from the register
// file feeds n' multiply-adds.
//
// Interface: ld_en_i loads the eight elements of ld_vreg_i starting at element ld_off_i
// (wrapping inside the register); the new column is visible the cycle after the load.
// bcast_o is combinational from sel_i. This matches the paper's "register and some
// multiplexers"; splitting the column out of a whole 512-bit register read is this
// design's choice.
module mx_row_buffer_a #(
  parameter int unsigned M_MAX = 8
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               ld_en_i,
  input  mx_pkg::vword_t     ld_vreg_i,
  input  logic [2:0]         ld_off_i,
  input  logic [$clog2(M_MAX)-1:0] sel_i,
  output mx_pkg::elem_t      bcast_o
);
  import mx_pkg::*;

  elem_t [M_MAX-1:0] col_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) col_q <= '0;
    else if (ld_en_i)
      for (int unsigned i = 0; i < M_MAX; i++)
        col_q[i] <= ld_vreg_i[ELEN*((32'(ld_off_i) + i) % EPR) +: ELEN];
  end

  assign bcast_o = col_q[sel_i];

endmodule
