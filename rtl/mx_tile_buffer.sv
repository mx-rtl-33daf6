// mx_tile_buffer: the near-FPU result tile buffer of MX.
//
// It holds the partial sums of the m' x n' output sub-tile (at most ENTRIES = 32 elements
// of 64 bits, i.e. 256 bytes, one eighth of the vector register file) while a matrix
// multiply-accumulate runs over its k' steps, so that they never travel back to the
// register file between steps. Entry i*n' + j holds element (i, j).
//
// Ports, all synchronous writes and combinational reads:
//   clr_i                      C-tile reset: every entry becomes zero.
//   rd_idx_i/rd_data_o          the N_FPU accumulator operands of the current cycle.
//   wr_en_i/wr_idx_i/wr_data_i  FPU results, one enable per lane, N_FPU entries.
// Lane indices must be multiples of N_FPU. If clr_i and a write coincide, the write wins.
// A value written at a clock edge is visible on rd_data_o right after it.
//
// The paper builds this buffer from latches; this version uses flip-flops so that it
// can be simulated cycle-accurately in a two-state simulator. Size and role follow the
// paper. The initial C and the final D pass between the FPUs and the register file
// directly (see spatz_vfu), so the buffer has no port of its own towards the register file.
module mx_tile_buffer #(
  parameter int unsigned ENTRIES = 32,
  parameter int unsigned N_FPU   = 4
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  logic                         clr_i,
  input  logic [$clog2(ENTRIES)-1:0]   rd_idx_i,
  output mx_pkg::elem_t [N_FPU-1:0]    rd_data_o,
  input  logic [N_FPU-1:0]             wr_en_i,
  input  logic [$clog2(ENTRIES)-1:0]   wr_idx_i,
  input  mx_pkg::elem_t [N_FPU-1:0]    wr_data_i
);
  import mx_pkg::*;

  elem_t [ENTRIES-1:0] buf_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) buf_q <= '0;
    else begin
      if (clr_i) buf_q <= '0;
      for (int unsigned l = 0; l < N_FPU; l++)
        if (wr_en_i[l]) buf_q[(32'(wr_idx_i) + l) % ENTRIES] <= wr_data_i[l];
    end
  end

  always_comb
    for (int unsigned l = 0; l < N_FPU; l++)
      rd_data_o[l] = buf_q[(32'(rd_idx_i) + l) % ENTRIES];

endmodule
