// spatz_vfu: vector functional unit with the MX matrix datapath.
//
// Two kinds of operation run here, one at a time.
//
// Matrix multiply-accumulate (mxfmacc in FP64, mxmacc in 64-bit integer):
//   D(m' x n') = A(m' x k') * B(k' x n') + C, where A is the register group at vs1
//   (column-major, element k*m' + i), B the group at vs2 (row-major, k*n' + j) and C/D
//   the group at vd (row-major, i*n' + j). Phases:
//   FETCH   one cycle: the row buffers take A column 0 and B row 0; on a C-tile reset
//           (zero_c) the tile buffer is cleared.
//   COMPUTE for every k, for every group of N_FPU columns, for every row i, the N_FPU
//           lanes compute acc[i][j] += A[i][k] * B[k][j]: the A element is broadcast
//           from row buffer A, the B elements come from row buffer B. One slice per
//           cycle, m'k'ceil(n'/N_FPU) cycles in all. In the last cycle of a step the row
//           buffers load the next A column and B row, so the lanes never wait.
//           The accumulator operand comes from the register file (C, read port 2) in
//           step k = 0, from the tile buffer otherwise (zero after a C-tile reset).
//           Results of the last step go straight to vd in the register file (four
//           elements per write, element-masked); all others go to the tile buffer.
//   DRAIN   wait for the FPU pipeline to empty (LAT cycles).
//   An instruction therefore takes 1 + m'k'ceil(n'/N_FPU) + LAT cycles. An accumulator
//   is reused at the earliest m'*ceil(n'/N_FPU) >= 4 cycles after it was read, so the
//   FPU latency must stay at or below 3 cycles (checked at elaboration).
//
// Element-wise vfmacc.vv / vfmacc.vf (the path that bypasses the MX buffers): four
//   elements per cycle, operands straight from the register file (or the scalar
//   operand), results written straight back to vd as they leave the FPUs.
//
// Interface: req_valid_i/req_ready_o hand over one vfu_req_t (ready only when idle);
// done_o pulses in the cycle in which the last result is written. VRF read ports 0, 1, 2
// carry A/vs1, B/vs2 and C/vd; one VRF write port carries results. fpu_issue_o shows
// which lanes took an operation this cycle.
//
// What follows the paper: the row buffers with the broadcast of A elements, the tile
// buffer holding the result sub-tile over the k' steps, the FPUs feeding back into the
// tile buffer and the multiplexers that let ordinary vector operations bypass it. The
// loop order, the phase structure, the data layouts and taking C / giving D directly
// from / to the register file (instead of copying them through the tile buffer, with the
// same number of register-file accesses) are this design's choices.
module spatz_vfu #(
  parameter int unsigned N_FPU = 4,
  parameter int unsigned LAT   = 3
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 req_valid_i,
  output logic                 req_ready_o,
  input  mx_pkg::vfu_req_t     req_i,
  output logic                 done_o,
  output logic [2:0][4:0]      vrf_rd_addr_o,
  input  mx_pkg::vword_t [2:0] vrf_rd_data_i,
  output logic                 vrf_wr_en_o,
  output logic [4:0]           vrf_wr_addr_o,
  output logic [7:0]           vrf_wr_mask_o,
  output mx_pkg::vword_t       vrf_wr_data_o,
  output logic [N_FPU-1:0]     fpu_issue_o
);
  import mx_pkg::*;

  localparam int unsigned TAGW = 8;
  localparam int unsigned TIW  = $clog2(TILE_ELEMS);

  initial begin
    assert (LAT + 1 <= 4)
      else $fatal(1, "accumulator reuse distance (4 cycles) is shorter than the FPU latency");
    assert (N_FPU == 4) else $fatal(1, "the lane mapping assumes four FPUs");
  end

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_COMP, S_VEC, S_DRAIN} state_e;
  state_e state_q, state_d;

  vfu_req_t r_q;
  logic [3:0] k_q, i_q;
  logic       jb_q;
  logic [VL_W-1:0] e_q;    // element counter of vector operations
  logic [3:0] pend_q;      // issue cycles whose results are still in the FPUs

  // Derived sizes of the current matrix operation.
  logic       nb2;         // n' spans two groups of N_FPU columns
  assign nb2 = (r_q.tn > 4'(N_FPU));
  logic is_mx;
  assign is_mx = (r_q.op == VFU_MXFMACC) || (r_q.op == VFU_MXMACC);

  // ---------------------------------------------------------------- row buffers
  logic [3:0] k_ld;         // step whose A column / B row is loaded this cycle
  logic [6:0] a_el, b_el;   // first element of that column / row
  logic       rb_ld;
  always_comb begin
    k_ld = (state_q == S_FETCH) ? 4'd0 : k_q + 4'd1;
    a_el = 7'(k_ld) * 7'(r_q.tm);
    b_el = 7'(k_ld) * 7'(r_q.tn);
  end

  logic last_slice;   // last cycle of the current k step
  assign last_slice = (i_q == r_q.tm - 4'd1) && (jb_q == nb2);
  assign rb_ld = (state_q == S_FETCH) ||
                 (state_q == S_COMP && last_slice && k_q != r_q.tk - 4'd1);

  elem_t              a_bcast;
  elem_t [N_FPU-1:0]  b_lanes;

  mx_row_buffer_a #(.M_MAX(8)) i_rowbuf_a (
    .clk_i, .rst_ni, .ld_en_i(rb_ld), .ld_vreg_i(vrf_rd_data_i[0]),
    .ld_off_i(a_el[2:0]), .sel_i(i_q[2:0]), .bcast_o(a_bcast));

  mx_row_buffer_b #(.N_MAX(8), .N_FPU(N_FPU)) i_rowbuf_b (
    .clk_i, .rst_ni, .ld_en_i(rb_ld), .ld_vreg_i(vrf_rd_data_i[1]),
    .ld_off_i(b_el[2:0]), .blk_i(jb_q), .lanes_o(b_lanes));

  // ---------------------------------------------------------------- tile buffer
  logic [TIW-1:0]     acc_idx;
  elem_t [N_FPU-1:0]  acc_rd;
  logic [N_FPU-1:0]   res_valid;
  elem_t [N_FPU-1:0]  res;
  logic [N_FPU-1:0][TAGW-1:0] res_tag;

  assign acc_idx = TIW'(7'(i_q) * 7'(r_q.tn) + (jb_q ? 7'(N_FPU) : 7'd0));

  mx_tile_buffer #(.ENTRIES(TILE_ELEMS), .N_FPU(N_FPU)) i_tile_buf (
    .clk_i, .rst_ni,
    .clr_i     (state_q == S_FETCH && r_q.zero_c),
    .rd_idx_i  (acc_idx),
    .rd_data_o (acc_rd),
    .wr_en_i   ((is_mx && !res_tag[0][TAGW-1]) ? res_valid : '0),
    .wr_idx_i  (res_tag[0][TIW-1:0]),
    .wr_data_i (res));

  // ---------------------------------------------------------------- VRF reads
  logic [VL_W-1:0] e_reg;
  logic            e_half;
  assign e_reg  = e_q >> 3;
  assign e_half = e_q[2];
  always_comb begin
    if (state_q == S_VEC) begin
      vrf_rd_addr_o[0] = r_q.vs1 + 5'(e_reg);
      vrf_rd_addr_o[1] = r_q.vs2 + 5'(e_reg);
      vrf_rd_addr_o[2] = r_q.vd  + 5'(e_reg);
    end else begin
      vrf_rd_addr_o[0] = r_q.vs1 + 5'(a_el >> 3);
      vrf_rd_addr_o[1] = r_q.vs2 + 5'(b_el >> 3);
      vrf_rd_addr_o[2] = r_q.vd  + 5'(acc_idx >> 3);
    end
  end

  // ---------------------------------------------------------------- operand muxes
  logic [N_FPU-1:0]  issue;
  elem_t [N_FPU-1:0] op_a, op_b, op_c;
  logic [TAGW-1:0]   tag;
  always_comb begin
    issue = '0;
    tag   = '0;
    for (int unsigned l = 0; l < N_FPU; l++) begin
      if (state_q == S_COMP) begin
        op_a[l]  = a_bcast;
        op_b[l]  = b_lanes[l];
        op_c[l]  = (k_q == '0 && !r_q.zero_c)
                 ? vrf_rd_data_i[2][ELEN*(32'(acc_idx[2])*4 + l) +: ELEN] : acc_rd[l];
        issue[l] = ((jb_q ? N_FPU : 0) + l) < 32'(r_q.tn);
      end else begin
        op_a[l]  = (r_q.op == VFU_VFMACC_VF) ? r_q.scalar
                                             : vrf_rd_data_i[0][ELEN*(32'(e_half)*4 + l) +: ELEN];
        op_b[l]  = vrf_rd_data_i[1][ELEN*(32'(e_half)*4 + l) +: ELEN];
        op_c[l]  = vrf_rd_data_i[2][ELEN*(32'(e_half)*4 + l) +: ELEN];
        issue[l] = (state_q == S_VEC) && (32'(e_q) + l < 32'(r_q.vl));
      end
    end
    // Matrix results carry their accumulator index and, in the top bit, whether they
    // belong to the last k step (and so go to the register file).
    tag = (state_q == S_COMP) ? {k_q == r_q.tk - 4'd1, (TAGW-1)'(acc_idx)} : TAGW'(e_q);
  end
  assign fpu_issue_o = issue;

  fpu_op_e fop;
  assign fop = (r_q.op == VFU_MXMACC) ? FPU_IMAC : FPU_FMA;

  for (genvar l = 0; l < N_FPU; l++) begin : g_fpu
    mx_fpu #(.LAT(LAT), .TAGW(TAGW)) i_fpu (
      .clk_i, .rst_ni,
      .in_valid_i (issue[l]),
      .in_op_i    (fop),
      .in_a_i     (op_a[l]),
      .in_b_i     (op_b[l]),
      .in_c_i     (op_c[l]),
      .in_tag_i   (tag),
      .out_valid_o(res_valid[l]),
      .out_res_o  (res[l]),
      .out_tag_o  (res_tag[l]));
  end

  // ---------------------------------------------------------------- VRF write
  always_comb begin
    vrf_wr_en_o   = 1'b0;
    vrf_wr_addr_o = r_q.vd;
    vrf_wr_mask_o = 8'h00;
    vrf_wr_data_o = '0;
    if (res_valid[0] && (!is_mx || res_tag[0][TAGW-1])) begin
      vrf_wr_en_o   = 1'b1;
      vrf_wr_addr_o = r_q.vd + 5'(res_tag[0][TAGW-2:0] >> 3);
      vrf_wr_mask_o = res_tag[0][2] ? {res_valid, 4'b0} : {4'b0, res_valid};
      for (int unsigned e = 0; e < 8; e++) vrf_wr_data_o[ELEN*e +: ELEN] = res[e % 4];
    end
  end

  // ---------------------------------------------------------------- control
  assign req_ready_o = (state_q == S_IDLE);

  always_comb begin
    state_d = state_q;
    done_o  = 1'b0;
    unique case (state_q)
      S_IDLE:
        if (req_valid_i)
          state_d = (req_i.op == VFU_MXFMACC || req_i.op == VFU_MXMACC) ? S_FETCH : S_VEC;
      S_FETCH:
        state_d = S_COMP;
      S_COMP:
        if (last_slice && k_q == r_q.tk - 4'd1) state_d = S_DRAIN;
      S_VEC:
        if (32'(e_q) + N_FPU >= 32'(r_q.vl)) state_d = S_DRAIN;
      S_DRAIN:
        if (pend_q == 4'd0 || (pend_q == 4'd1 && res_valid[0])) begin
          state_d = S_IDLE;
          done_o  = 1'b1;
        end
      default: state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      r_q     <= '0;
      k_q     <= '0;
      i_q     <= '0;
      jb_q    <= 1'b0;
      e_q     <= '0;
      pend_q  <= '0;
    end else begin
      state_q <= state_d;
      pend_q  <= pend_q + 4'(issue[0]) - 4'(res_valid[0]);
      unique case (state_q)
        S_IDLE: if (req_valid_i) begin
          r_q   <= req_i;
          k_q   <= '0;
          i_q   <= '0;
          jb_q  <= 1'b0;
          e_q   <= '0;
        end
        S_COMP: begin
          if (i_q == r_q.tm - 4'd1) begin
            i_q <= '0;
            if (jb_q == nb2) begin
              jb_q <= 1'b0;
              k_q  <= k_q + 4'd1;
            end else jb_q <= 1'b1;
          end else i_q <= i_q + 4'd1;
        end
        S_VEC: e_q <= e_q + VL_W'(N_FPU);
        default: ;
      endcase
    end
  end

  // A matrix operation must fit the tile buffer.
  property p_tile_fits;
    @(posedge clk_i) disable iff (!rst_ni)
      (req_valid_i && req_ready_o && (req_i.op == VFU_MXFMACC || req_i.op == VFU_MXMACC))
        |-> (32'(req_i.tm) * 32'(req_i.tn) <= TILE_ELEMS);
  endproperty
  assert property (p_tile_fits);

endmodule
