// spatz_vlsu: vector load/store unit with MX matrix accesses.
//
// Every operation moves an R x C block of 64-bit elements between memory and a group of
// vector registers. Element (r, c) lives at base + r*stride + 8*c; in the register group
// it is element r*C + c, or c*R + r for a transposed block. The operations map onto this
// as follows (the controller fills in R, C and the flag):
//   vle / vse     R = 1,  C = vl           unit stride
//   vlse / vsse   R = vl, C = 1, transposed stride from rs2
//   mld.a         R = m', C = k', transposed  the A sub-tile, column-major in the VRF
//   mld.b         R = k', C = n'            the B sub-tile, row-major
//   mst.c         R = m', C = n'            the C/D sub-tile, row-major
// A row counter and a column counter walk the block, and the four memory ports serve four
// elements per beat that are adjacent in the register group: four consecutive rows of
// one column for transposed blocks (four accesses a stride apart, which spreads them
// over the banks), four consecutive columns of one row otherwise.
//
// Memory protocol per port: mem_req_o with address, write enable and data is held until
// mem_gnt_i; read data arrives with mem_rvalid_i exactly one cycle after the grant. Each
// port of a beat is granted independently; the next beat starts once all lanes of the
// current one were granted. Load data is written into the register file as it returns,
// with an element mask. done_o pulses once, when the last element has been written (or,
// for a store, the cycle after the last grant). stall_o flags a cycle in which a request
// was refused.
//
// The paper gives the row/column counters, the base address and the matrix stride of
// this unit and its four ports; the beat order, the stride in bytes and the
// one-cycle memory response are this design's choices.
module spatz_vlsu #(
  parameter int unsigned N_PORTS = 4
) (
  input  logic                                clk_i,
  input  logic                                rst_ni,
  input  logic                                req_valid_i,
  output logic                                req_ready_o,
  input  mx_pkg::vlsu_req_t                   req_i,
  output logic                                done_o,
  output logic                                stall_o,
  output logic [N_PORTS-1:0]                  mem_req_o,
  input  logic [N_PORTS-1:0]                  mem_gnt_i,
  output logic [N_PORTS-1:0][mx_pkg::AW-1:0]  mem_addr_o,
  output logic [N_PORTS-1:0]                  mem_we_o,
  output logic [N_PORTS-1:0][63:0]            mem_wdata_o,
  input  logic [N_PORTS-1:0]                  mem_rvalid_i,
  input  logic [N_PORTS-1:0][63:0]            mem_rdata_i,
  output logic [4:0]                          vrf_rd_addr_o,
  input  mx_pkg::vword_t                      vrf_rd_data_i,
  output logic                                vrf_wr_en_o,
  output logic [4:0]                          vrf_wr_addr_o,
  output logic [7:0]                          vrf_wr_mask_o,
  output mx_pkg::vword_t                      vrf_wr_data_o
);
  import mx_pkg::*;

  initial assert (N_PORTS == 4) else $fatal(1, "beats are four elements wide");

  vlsu_req_t        r_q;
  logic             busy_q, issued_q;
  logic [VL_W-1:0]  row_cnt_q, col_cnt_q;   // first element of the current beat
  logic [N_PORTS-1:0] pend_q;               // lanes of the beat not yet granted
  logic [N_PORTS-1:0] exp_q;                // load responses due this cycle
  logic [N_PORTS-1:0][4:0] rsp_reg_q;
  logic [N_PORTS-1:0][2:0] rsp_slot_q;

  // Fast and slow dimension of the walk.
  logic [VL_W-1:0] fast, fast_max, slow, slow_max;
  always_comb begin
    fast     = r_q.transpose ? row_cnt_q : col_cnt_q;
    slow     = r_q.transpose ? col_cnt_q : row_cnt_q;
    fast_max = r_q.transpose ? r_q.rows : r_q.cols;
    slow_max = r_q.transpose ? r_q.cols : r_q.rows;
  end

  // Register-group element of lane 0.
  logic [2*VL_W-1:0] e0;
  assign e0 = (2*VL_W)'(slow) * (2*VL_W)'(fast_max) + (2*VL_W)'(fast);

  // Lanes that exist in the beat starting at fast index f.
  function automatic logic [N_PORTS-1:0] lanes_of(logic [VL_W-1:0] f, logic [VL_W-1:0] fm);
    logic [N_PORTS-1:0] m;
    for (int unsigned p = 0; p < N_PORTS; p++) m[p] = (32'(f) + p) < 32'(fm);
    return m;
  endfunction

  // Addresses and store data.
  assign vrf_rd_addr_o = r_q.vreg + 5'(e0 >> 3);
  always_comb begin
    for (int unsigned p = 0; p < N_PORTS; p++) begin
      logic [AW-1:0] rr, cc;
      rr = r_q.transpose ? AW'(row_cnt_q) + AW'(p) : AW'(row_cnt_q);
      cc = r_q.transpose ? AW'(col_cnt_q) : AW'(col_cnt_q) + AW'(p);
      mem_addr_o[p]  = r_q.base + rr * r_q.stride + (cc << 3);
      mem_we_o[p]    = r_q.store;
      mem_wdata_o[p] = vrf_rd_data_i[ELEN*((32'(e0) + p) % EPR) +: ELEN];
    end
  end
  assign mem_req_o   = busy_q ? pend_q : '0;
  assign req_ready_o = !busy_q;
  assign stall_o     = busy_q && ((pend_q & ~mem_gnt_i) != '0);

  // Beat bookkeeping.
  logic [N_PORTS-1:0] pend_next;
  logic               last_beat;
  assign pend_next = pend_q & ~mem_gnt_i;
  assign last_beat = (32'(fast) + N_PORTS >= 32'(fast_max)) && (slow == slow_max - VL_W'(1));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      r_q <= '0; busy_q <= 1'b0; issued_q <= 1'b0;
      row_cnt_q <= '0; col_cnt_q <= '0; pend_q <= '0; exp_q <= '0;
      rsp_reg_q <= '0; rsp_slot_q <= '0;
    end else begin
      exp_q <= '0;
      if (!busy_q) begin
        if (req_valid_i) begin
          r_q       <= req_i;
          busy_q    <= 1'b1;
          issued_q  <= 1'b0;
          row_cnt_q <= '0;
          col_cnt_q <= '0;
          pend_q    <= lanes_of('0, req_i.transpose ? req_i.rows : req_i.cols);
        end
      end else if (!issued_q) begin
        for (int unsigned p = 0; p < N_PORTS; p++)
          if (pend_q[p] && mem_gnt_i[p]) begin
            exp_q[p]      <= !r_q.store;
            rsp_reg_q[p]  <= r_q.vreg + 5'(e0 >> 3);
            rsp_slot_q[p] <= 3'((32'(e0) + p) % EPR);
          end
        pend_q <= pend_next;
        if (pend_next == '0) begin
          if (last_beat) issued_q <= 1'b1;
          else begin
            // Next beat: step the fast counter, wrap it into the slow one.
            logic [VL_W-1:0] nf, ns;
            nf = fast + VL_W'(N_PORTS);
            ns = slow;
            if (32'(nf) >= 32'(fast_max)) begin
              nf = '0;
              ns = slow + VL_W'(1);
            end
            if (r_q.transpose) begin row_cnt_q <= nf; col_cnt_q <= ns; end
            else               begin col_cnt_q <= nf; row_cnt_q <= ns; end
            pend_q <= lanes_of(nf, fast_max);
          end
        end
      end else begin
        busy_q <= 1'b0;
      end
    end
  end
  assign done_o = busy_q && issued_q;

  // Returning load data goes straight into the register file.
  always_comb begin
    vrf_wr_en_o   = 1'b0;
    vrf_wr_addr_o = '0;
    vrf_wr_mask_o = '0;
    vrf_wr_data_o = '0;
    for (int unsigned p = 0; p < N_PORTS; p++)
      if (exp_q[p]) begin
        vrf_wr_en_o                                   = 1'b1;
        vrf_wr_addr_o                                 = rsp_reg_q[p];
        vrf_wr_mask_o[rsp_slot_q[p]]                  = 1'b1;
        vrf_wr_data_o[ELEN*rsp_slot_q[p] +: ELEN]     = mem_rdata_i[p];
      end
  end

  // Responses come exactly one cycle after the grant, and all responses of one cycle
  // belong to the same register.
  for (genvar p = 0; p < N_PORTS; p++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni) exp_q[p] |-> mem_rvalid_i[p]);
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     (exp_q[p] && exp_q[0]) |-> rsp_reg_q[p] == rsp_reg_q[0]);
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     (mem_req_o[p] && !mem_gnt_i[p]) |=> mem_req_o[p] && $stable(mem_addr_o[p]));
  end

endmodule
