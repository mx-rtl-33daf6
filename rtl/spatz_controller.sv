// spatz_controller: front end of the MX-ready vector unit.
//
// It takes the operations the scalar core offloads (one offload_req_t per handshake, in
// program order) and
//   - executes configuration operations itself: vsetvl sets vl; msettilem, msettilen and
//     msettilek set the sub-tile sizes m', n', k' (4 or 8), and setting m' or k' also sets
//     vl = m'k', the rule "m'k' = vl" of the extension;
//   - turns memory operations into VLSU block requests (rows, columns, stride, layout) and
//     arithmetic operations into VFU requests, carrying the current vl and m', n', k';
//   - keeps one scoreboard entry per unit: the registers the operation in flight reads
//     and writes. An operation is held back (hazard_stall_o) while it would write a
//     register the other unit reads or writes, or read a register it writes. It is also
//     held while its own unit is busy. Entries are released by the units' done pulses.
// Because each unit holds at most one operation and dispatch is in order, loads of the
// next tiles overlap with matrix arithmetic whenever their registers are disjoint.
//
// Interface: off_valid_i/off_ready_o with off_req_i; vlsu_/vfu_ valid/ready/req for
// dispatch and vlsu_done_i/vfu_done_i for completion; busy_o while anything is in flight.
// Dispatch is combinational from the handshake inputs; CSRs update at the clock edge.
// Most fields of vlsu_req_o and vfu_req_o (register numbers, base, stride, scalar
// operand, zero_c) are copied straight from off_req_i; the controller adds the block
// shape, the layout flag, vl and the sub-tile sizes.
//
// The instruction set and the m'k' = vl rule are the paper's; the decoded-operation
// interface, which instruction writes vl and the scoreboard are this design's choices.
module spatz_controller (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 off_valid_i,
  output logic                 off_ready_o,
  input  mx_pkg::offload_req_t off_req_i,
  output logic                 vlsu_valid_o,
  input  logic                 vlsu_ready_i,
  output mx_pkg::vlsu_req_t    vlsu_req_o,
  input  logic                 vlsu_done_i,
  output logic                 vfu_valid_o,
  input  logic                 vfu_ready_i,
  output mx_pkg::vfu_req_t     vfu_req_o,
  input  logic                 vfu_done_i,
  output logic                 busy_o,
  output logic                 hazard_stall_o
);
  import mx_pkg::*;

  logic [VL_W-1:0] vl_q;
  logic [3:0]      tm_q, tn_q, tk_q;

  // Scoreboard entries: [0] VLSU, [1] VFU.
  logic [1:0]                   sb_busy_q;
  logic [1:0][NR_VREGS-1:0]     sb_rd_q, sb_wr_q;

  // ------------------------------------------------------------------ decode
  logic               is_cfg, to_vlsu, to_vfu;
  logic [NR_VREGS-1:0] rd_m, wr_m;
  int unsigned        n_a, n_b, n_c, n_v;
  always_comb begin
    is_cfg  = 1'b0;
    to_vlsu = 1'b0;
    to_vfu  = 1'b0;
    rd_m    = '0;
    wr_m    = '0;
    n_a = nregs(32'(tm_q) * 32'(tk_q));
    n_b = nregs(32'(tk_q) * 32'(tn_q));
    n_c = nregs(32'(tm_q) * 32'(tn_q));
    n_v = nregs(32'(vl_q));

    vlsu_req_o           = '0;
    vlsu_req_o.vreg      = off_req_i.vd;
    vlsu_req_o.base      = AW'(off_req_i.rs1);
    vlsu_req_o.stride    = AW'(off_req_i.rs2);
    vfu_req_o            = '0;
    vfu_req_o.vd         = off_req_i.vd;
    vfu_req_o.vs1        = off_req_i.vs1;
    vfu_req_o.vs2        = off_req_i.vs2;
    vfu_req_o.zero_c     = off_req_i.zero_c;
    vfu_req_o.scalar     = off_req_i.rs1;
    vfu_req_o.vl         = vl_q;
    vfu_req_o.tm         = tm_q;
    vfu_req_o.tn         = tn_q;
    vfu_req_o.tk         = tk_q;

    unique case (off_req_i.op)
      OP_VSETVL, OP_MSETTILEM, OP_MSETTILEN, OP_MSETTILEK: is_cfg = 1'b1;
      OP_VLE, OP_VSE: begin
        to_vlsu = 1'b1;
        vlsu_req_o.rows = VL_W'(1);
        vlsu_req_o.cols = vl_q;
      end
      OP_VLSE, OP_VSSE: begin
        to_vlsu = 1'b1;
        vlsu_req_o.rows      = vl_q;
        vlsu_req_o.cols      = VL_W'(1);
        vlsu_req_o.transpose = 1'b1;
      end
      OP_MLDA: begin
        to_vlsu = 1'b1;
        vlsu_req_o.rows      = VL_W'(tm_q);
        vlsu_req_o.cols      = VL_W'(tk_q);
        vlsu_req_o.transpose = 1'b1;
        wr_m = group_mask(off_req_i.vd, n_a);
      end
      OP_MLDB: begin
        to_vlsu = 1'b1;
        vlsu_req_o.rows = VL_W'(tk_q);
        vlsu_req_o.cols = VL_W'(tn_q);
        wr_m = group_mask(off_req_i.vd, n_b);
      end
      OP_MSTC: begin
        to_vlsu = 1'b1;
        vlsu_req_o.store = 1'b1;
        vlsu_req_o.rows  = VL_W'(tm_q);
        vlsu_req_o.cols  = VL_W'(tn_q);
        rd_m = group_mask(off_req_i.vd, n_c);
      end
      OP_MXFMACC, OP_MXMACC: begin
        to_vfu = 1'b1;
        vfu_req_o.op = (off_req_i.op == OP_MXFMACC) ? VFU_MXFMACC : VFU_MXMACC;
        rd_m = group_mask(off_req_i.vs1, n_a) | group_mask(off_req_i.vs2, n_b) |
               (off_req_i.zero_c ? '0 : group_mask(off_req_i.vd, n_c));
        wr_m = group_mask(off_req_i.vd, n_c);
      end
      OP_VFMACC_VV, OP_VFMACC_VF: begin
        to_vfu = 1'b1;
        vfu_req_o.op = (off_req_i.op == OP_VFMACC_VV) ? VFU_VFMACC_VV : VFU_VFMACC_VF;
        rd_m = group_mask(off_req_i.vs2, n_v) | group_mask(off_req_i.vd, n_v) |
               ((off_req_i.op == OP_VFMACC_VV) ? group_mask(off_req_i.vs1, n_v) : '0);
        wr_m = group_mask(off_req_i.vd, n_v);
      end
      default: is_cfg = 1'b1;
    endcase
    // Unit-stride and strided accesses: the group spans vl elements.
    if (off_req_i.op inside {OP_VLE, OP_VLSE}) wr_m = group_mask(off_req_i.vd, n_v);
    if (off_req_i.op inside {OP_VSE, OP_VSSE}) begin
      vlsu_req_o.store = 1'b1;
      rd_m = group_mask(off_req_i.vd, n_v);
    end
  end

  // ------------------------------------------------------------------ hazards
  logic [NR_VREGS-1:0] o_rd, o_wr;   // registers of the other unit's operation
  logic hazard, unit_ready;
  always_comb begin
    o_rd = '0;
    o_wr = '0;
    if (to_vlsu && sb_busy_q[1] && !vfu_done_i)  begin o_rd = sb_rd_q[1]; o_wr = sb_wr_q[1]; end
    if (to_vfu  && sb_busy_q[0] && !vlsu_done_i) begin o_rd = sb_rd_q[0]; o_wr = sb_wr_q[0]; end
    hazard     = ((wr_m & (o_rd | o_wr)) | (rd_m & o_wr)) != '0;
    unit_ready = to_vlsu ? vlsu_ready_i : vfu_ready_i;
  end

  assign vlsu_valid_o   = off_valid_i && to_vlsu && !hazard;
  assign vfu_valid_o    = off_valid_i && to_vfu && !hazard;
  assign off_ready_o    = is_cfg || (unit_ready && !hazard);
  assign hazard_stall_o = off_valid_i && !is_cfg && hazard;
  assign busy_o         = |sb_busy_q;

  // ------------------------------------------------------------------ state
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      vl_q <= '0;
      tm_q <= 4'd4;
      tn_q <= 4'd4;
      tk_q <= 4'd4;
      sb_busy_q <= '0;
      sb_rd_q   <= '0;
      sb_wr_q   <= '0;
    end else begin
      if (vlsu_done_i) sb_busy_q[0] <= 1'b0;
      if (vfu_done_i)  sb_busy_q[1] <= 1'b0;
      if (off_valid_i && is_cfg) begin
        unique case (off_req_i.op)
          OP_VSETVL:    vl_q <= (off_req_i.rs1 > 64'd64) ? VL_W'(64) : VL_W'(off_req_i.rs1);
          OP_MSETTILEM: begin
            tm_q <= 4'(off_req_i.rs1);
            vl_q <= VL_W'(off_req_i.rs1[3:0] * tk_q);
          end
          OP_MSETTILEN: tn_q <= 4'(off_req_i.rs1);
          OP_MSETTILEK: begin
            tk_q <= 4'(off_req_i.rs1);
            vl_q <= VL_W'(tm_q * off_req_i.rs1[3:0]);
          end
          default: ;
        endcase
      end
      if (vlsu_valid_o && vlsu_ready_i) begin
        sb_busy_q[0] <= 1'b1; sb_rd_q[0] <= rd_m; sb_wr_q[0] <= wr_m;
      end
      if (vfu_valid_o && vfu_ready_i) begin
        sb_busy_q[1] <= 1'b1; sb_rd_q[1] <= rd_m; sb_wr_q[1] <= wr_m;
      end
    end
  end

  // Sub-tile sizes are 4 or 8 and the result sub-tile must fit the tile buffer.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    (off_valid_i && (off_req_i.op inside {OP_MSETTILEM, OP_MSETTILEN, OP_MSETTILEK}))
      |-> (off_req_i.rs1 == 64'd4 || off_req_i.rs1 == 64'd8));
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    (off_valid_i && (off_req_i.op inside {OP_MXFMACC, OP_MXMACC}))
      |-> (32'(tm_q) * 32'(tn_q) <= TILE_ELEMS));

endmodule
