// tb_spatz_mx: self-checking test of one MX-ready vector unit.
//
// The testbench gives the unit a 32 KiB memory behind its four ports (read data one
// cycle after the grant) and acts as the scalar core on the offload port. It runs a
// complete GEMM D(8x8) = A(8x8) * B(8x8) with m', n', k' = 8, 4, 4: two k steps, each an
// mld.a of the 8x4 A sub-tile (register groups v16 and v20 in turn) and, per 4-column
// sub-tile, an mld.b and an mxfmacc (C-tile reset on the first step, C fetched from the
// register file on the second), then two mst.c. Matrices have a row pitch of 16 words.
// Results are compared with a product computed here; entries are small integers held as
// doubles, so the results are exact. The GEMM runs three times: with every memory request
// granted at once, with grants withheld at random, and with a 16-bank memory that grants
// one port per bank. Hazard stalls and refused memory requests must both have occurred.
module tb_spatz_mx;
  import mx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic off_valid, off_ready, busy, hstall, lstall;
  offload_req_t off_req;
  logic [3:0] mreq, mgnt, mwe, mrvalid, fpu_issue;
  logic [3:0][31:0] maddr;
  logic [3:0][63:0] mwdata, mrdata;

  spatz_mx dut (
    .clk_i(clk), .rst_ni(rst_n), .off_valid_i(off_valid), .off_ready_o(off_ready),
    .off_req_i(off_req), .busy_o(busy), .mem_req_o(mreq), .mem_gnt_i(mgnt),
    .mem_addr_o(maddr), .mem_we_o(mwe), .mem_wdata_o(mwdata), .mem_rvalid_i(mrvalid),
    .mem_rdata_i(mrdata), .hazard_stall_o(hstall), .vlsu_stall_o(lstall),
    .fpu_issue_o(fpu_issue));

  logic [63:0] mem[4096];
    logic [3:0] gnt_rand;
  // Mode 1: grants withheld at random. Mode 2: banked memory (16 word-interleaved
  // banks, the lowest-numbered port wins a bank).
  int gnt_mode;
  always_comb
    for (int p = 0; p < 4; p++) begin
      mgnt[p] = mreq[p] && (gnt_mode != 1 || gnt_rand[p]);
      if (gnt_mode == 2)
        for (int q = 0; q < p; q++)
          if (mreq[q] && maddr[q][6:3] == maddr[p][6:3]) mgnt[p] = 1'b0;
    end
  always @(posedge clk) begin
    gnt_rand <= 4'($urandom);
    for (int p = 0; p < 4; p++) begin
      mrvalid[p] <= mgnt[p];
      if (mgnt[p]) begin
        if (mwe[p]) mem[maddr[p][14:3]] <= mwdata[p];
        else        mrdata[p] <= mem[maddr[p][14:3]];
      end
    end
  end

  int checks = 0, failures = 0, hz = 0, ls = 0;
  always @(posedge clk) begin
    if (hstall) hz <= hz + 1;
    if (lstall) ls <= ls + 1;
  end

  task automatic offload(op_e op, int vd, int vs1, int vs2, longint rs1, longint rs2, bit zc);
    offload_req_t r;
    r = '0;
    r.op = op; r.vd = 5'(vd); r.vs1 = 5'(vs1); r.vs2 = 5'(vs2);
    r.rs1 = 64'(rs1); r.rs2 = 64'(rs2); r.zero_c = zc;
    @(negedge clk);
    off_req = r; off_valid = 1;
    #1;
    while (!off_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 off_valid = 0;
  endtask

  localparam int S = 8, P = 16, AB = 0, BB = 1024, DB = 3072;
  longint A[S][S], B[S][S];

  task automatic gemm();
    for (int i = 0; i < S; i++) for (int j = 0; j < S; j++) begin
      A[i][j] = longint'($urandom_range(0, 20)) - 10;
      B[i][j] = longint'($urandom_range(0, 20)) - 10;
      mem[(AB + 8 * (i * P + j)) / 8] = $realtobits(real'(A[i][j]));
      mem[(BB + 8 * (i * P + j)) / 8] = $realtobits(real'(B[i][j]));
    end
    offload(OP_MSETTILEM, 0, 0, 0, 8, 0, 0);
    offload(OP_MSETTILEN, 0, 0, 0, 4, 0, 0);
    offload(OP_MSETTILEK, 0, 0, 0, 4, 0, 0);
    // Accumulators: sub-tile b (columns 4b..4b+3) in v[4b..4b+3].
    for (int kt = 0; kt < S; kt += 4) begin
      offload(OP_MLDA, 16 + 4 * (kt / 4), 0, 0, AB + 8 * kt, P * 8, 0);
      for (int b = 0; b < 2; b++) begin
        offload(OP_MLDB, 24 + 2 * b, 0, 0, BB + 8 * (kt * P + 4 * b), P * 8, 0);
        offload(OP_MXFMACC, 4 * b, 16 + 4 * (kt / 4), 24 + 2 * b, 0, 0, kt == 0);
      end
    end
    for (int b = 0; b < 2; b++) offload(OP_MSTC, 4 * b, 0, 0, DB + 8 * 4 * b, P * 8, 0);
    @(negedge clk);
    while (busy) @(negedge clk);
    for (int i = 0; i < S; i++) for (int j = 0; j < S; j++) begin
      longint r;
      r = 0;
      for (int k = 0; k < S; k++) r += A[i][k] * B[k][j];
      checks++;
      if (mem[(DB + 8 * (i * P + j)) / 8] !== $realtobits(real'(r))) begin
        failures++;
        $display("FAIL D[%0d][%0d]: got %f expected %0d", i, j,
                 $bitstoreal(mem[(DB + 8 * (i * P + j)) / 8]), r);
      end
    end
  endtask

  initial begin
    off_valid = 0; off_req = '0; gnt_mode = 0;
    for (int i = 0; i < 4096; i++) mem[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    gemm();
    gnt_mode = 1;
    gemm();
    gnt_mode = 2;
    gemm();
    checks++;
    if (hz == 0 || ls == 0) begin
      failures++;
      $display("FAIL hazard stalls %0d, VLSU stalls %0d: both must occur", hz, ls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
