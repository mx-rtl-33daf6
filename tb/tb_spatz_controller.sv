// tb_spatz_controller: self-checking test of the vector unit's controller.
//
// The testbench plays the scalar core on the offload port and plays both execution units
// (their ready and done signals). It checks that
//   - msettile[m,n,k] set the sub-tile sizes seen in later requests and set vl = m'k';
//   - mld.a / mld.b / mst.c / vle / vlse become VLSU blocks of the right shape and layout;
//   - an mxfmacc that reads a register group still being loaded is held back until the
//     load reports done, and one with disjoint registers is dispatched at once;
//   - a load into a group that an in-flight mxfmacc reads is held back (WAR);
//   - an operation waits while its own unit is busy.
module tb_spatz_controller;
  import mx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic off_valid, off_ready;
  offload_req_t off;
  logic vlsu_valid, vlsu_ready, vlsu_done, vfu_valid, vfu_ready, vfu_done, busy, hstall;
  vlsu_req_t vlsu_req;
  vfu_req_t vfu_req;

  spatz_controller dut (
    .clk_i(clk), .rst_ni(rst_n), .off_valid_i(off_valid), .off_ready_o(off_ready),
    .off_req_i(off), .vlsu_valid_o(vlsu_valid), .vlsu_ready_i(vlsu_ready),
    .vlsu_req_o(vlsu_req), .vlsu_done_i(vlsu_done), .vfu_valid_o(vfu_valid),
    .vfu_ready_i(vfu_ready), .vfu_req_o(vfu_req), .vfu_done_i(vfu_done), .busy_o(busy),
    .hazard_stall_o(hstall));

  int checks = 0, failures = 0;
  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic offload_req_t mk(op_e op, int vd, int vs1, int vs2, longint rs1, longint rs2);
    offload_req_t r;
    r = '0;
    r.op = op; r.vd = 5'(vd); r.vs1 = 5'(vs1); r.vs2 = 5'(vs2);
    r.rs1 = 64'(rs1); r.rs2 = 64'(rs2);
    return r;
  endfunction

  // Present an operation; return after it was accepted, with the number of cycles waited.
  task automatic send(offload_req_t r, output int waited);
    @(negedge clk);
    off = r; off_valid = 1; waited = 0;
    #1;
    while (!off_ready) begin
      @(negedge clk);
      #1 waited++;
    end
    done_at_accept = {vlsu_done, vfu_done};
    @(posedge clk);
    #1 off_valid = 0;
  endtask

  logic [1:0] done_at_accept;   // {vlsu_done, vfu_done} when the operation was taken
  vlsu_req_t last_vlsu;
  vfu_req_t  last_vfu;
  always @(posedge clk) begin
    if (vlsu_valid && vlsu_ready) last_vlsu <= vlsu_req;
    if (vfu_valid && vfu_ready)   last_vfu  <= vfu_req;
  end

  int w;
  initial begin
    off_valid = 0; off = '0;
    vlsu_ready = 1; vfu_ready = 1; vlsu_done = 0; vfu_done = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Configuration: m' = 8, n' = 4, k' = 4.
    send(mk(OP_MSETTILEM, 0, 0, 0, 8, 0), w);
    send(mk(OP_MSETTILEN, 0, 0, 0, 4, 0), w);
    send(mk(OP_MSETTILEK, 0, 0, 0, 4, 0), w);
    check("vl = m'k'", 32'(dut.vl_q), 32);
    // mld.a into v16: VLSU block 8 x 4, transposed, stride from rs2.
    send(mk(OP_MLDA, 16, 0, 0, 'h100, 512), w);
    check("mld.a accepted at once", w, 0);
    vlsu_ready = 0;                       // the VLSU is now busy
    #2;
    check("mld.a rows", 32'(last_vlsu.rows), 8);
    check("mld.a cols", 32'(last_vlsu.cols), 4);
    check("mld.a transposed", 32'(last_vlsu.transpose), 1);
    check("mld.a stride", 32'(last_vlsu.stride), 512);
    check("mld.a base", 32'(last_vlsu.base), 'h100);
    // mxfmacc reading v16 must wait for the load (RAW).
    fork
      send(mk(OP_MXFMACC, 0, 16, 24, 0, 0), w);
      begin
        repeat (5) @(posedge clk);
        check("hazard stall shown", 32'(hstall), 1);
        @(negedge clk); vlsu_done = 1;
        @(negedge clk); vlsu_done = 0; vlsu_ready = 1;
      end
    join
    check("RAW held until the load is done", 32'(w > 2 && done_at_accept == 2'b10), 1);
    check("mxfmacc tile m'", 32'(last_vfu.tm), 8);
    check("mxfmacc op", 32'(last_vfu.op), 32'(VFU_MXFMACC));
    vfu_ready = 0;                        // the VFU is busy with it
    // mld.b into v24 while mxfmacc reads v24-v25: WAR, must wait.
    fork
      send(mk(OP_MLDB, 24, 0, 0, 'h200, 256), w);
      begin
        repeat (3) @(posedge clk);
        @(negedge clk); vfu_done = 1;
        @(negedge clk); vfu_done = 0; vfu_ready = 1;
      end
    join
    check("WAR held until the matrix operation is done", 32'(w > 1 && done_at_accept == 2'b01), 1);
    check("mld.b rows", 32'(last_vlsu.rows), 4);
    check("mld.b transposed", 32'(last_vlsu.transpose), 0);
    vlsu_ready = 0;
    // mxfmacc on disjoint registers goes at once, while the load is in flight.
    send(mk(OP_MXFMACC, 4, 20, 28, 0, 0), w);
    check("independent mxfmacc not held", w, 0);
    vfu_ready = 0;
    // A second matrix operation waits for the busy VFU.
    fork
      send(mk(OP_MXFMACC, 8, 20, 28, 0, 0), w);
      begin
        repeat (2) @(posedge clk);
        @(negedge clk); vfu_done = 1;
        @(negedge clk); vfu_done = 0; vfu_ready = 1;
      end
    join
    check("held while the VFU is busy", 32'(w >= 2), 1);
    @(negedge clk); vlsu_done = 1; @(negedge clk); vlsu_done = 0; vlsu_ready = 1;
    // Unit-stride and strided accesses use vl.
    send(mk(OP_VSETVL, 0, 0, 0, 13, 0), w);
    send(mk(OP_VLE, 2, 0, 0, 'h300, 0), w);
    #2;
    check("vle rows", 32'(last_vlsu.rows), 1);
    check("vle cols", 32'(last_vlsu.cols), 13);
    send(mk(OP_VLSE, 2, 0, 0, 'h300, 24), w);
    #2;
    check("vlse rows", 32'(last_vlsu.rows), 13);
    check("vlse transposed", 32'(last_vlsu.transpose), 1);
    send(mk(OP_MSTC, 0, 0, 0, 'h400, 256), w);
    #2;
    check("mst.c store", 32'(last_vlsu.store), 1);
    check("mst.c cols", 32'(last_vlsu.cols), 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
