// tb_mx_cluster: end-to-end test of the Dual-Core MX cluster at its default size.
//
// The testbench plays the two scalar cores. Through their memory ports it writes the
// input matrices into the shared TCDM; through their offload ports it issues the MX
// matrix-multiplication kernel, each core computing half of the output rows; at the end
// it reads the result back and compares it with a product computed here. Matrix entries
// are small integers stored as doubles, so the FP64 results are exact.
//
// Kernel (tile m, n, k = m', 16, 4; sub-tile m', n', k' = m', 4, 4; B = n/n' = 4):
//   for each m'-row block, for each 16-column block:
//     for each k step of 4: mld.a the m'x4 A sub-tile (two register groups used in
//       turn), then for each of the four 4-column sub-tiles: mld.b the 4x4 B sub-tile and
//       mxfmacc into that sub-tile's accumulator group (C-tile reset on the first step)
//     mst.c the four m'x4 result sub-tiles.
// It runs on 16x16x16, 32x32x32 and 64x64x64 matrices, and once more on 16x16x16 with
// m' = 4 (tile 4,16,4, sub-tile 4,4,4). A short vle / vfmacc.vf /
// vfmacc.vv / vse sequence checks the element-wise path that bypasses the MX buffers.
//
// Checked besides the numbers: the memory-to-register-file element transfers counted at
// the vector units' ports equal the MX count of the paper's Table 2 (N/(Bn')MK + M/m'NK
// + MN, e.g. 1024 for 16^3 and 53248 for 64^3 with m' = 8, 1536 for 16^3 with m' = 4); and each mechanism happened
// at least once: C-tile reset, C fetch from the register file, hazard stalls, bank
// conflicts that refused a VLSU request, transposed and row-major matrix loads, matrix
// stores, and the bypass path. FPU utilisation is printed.
module tb_mx_cluster;
  import mx_pkg::*;
  localparam int NC = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NC-1:0] off_valid, off_ready, busy;
  offload_req_t [NC-1:0] off_req;
  logic [NC-1:0] scl_req, scl_gnt, scl_we, scl_rvalid, hstall, lstall;
  logic [NC-1:0][31:0] scl_addr;
  logic [NC-1:0][63:0] scl_wdata, scl_rdata;
  logic [NC-1:0][3:0] fpu_issue;

  mx_cluster dut (
    .clk_i(clk), .rst_ni(rst_n),
    .off_valid_i(off_valid), .off_ready_o(off_ready), .off_req_i(off_req), .busy_o(busy),
    .scl_req_i(scl_req), .scl_gnt_o(scl_gnt), .scl_addr_i(scl_addr), .scl_we_i(scl_we),
    .scl_wdata_i(scl_wdata), .scl_rvalid_o(scl_rvalid), .scl_rdata_o(scl_rdata),
    .hazard_stall_o(hstall), .vlsu_stall_o(lstall), .fpu_issue_o(fpu_issue));

  int checks = 0, failures = 0;
  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // ------------------------------------------------------------- event counters
  longint transfers, hazard_cycles, conflict_cycles, lane_busy, cycles;
  int n_zero_c, n_fetch_c, n_mlda, n_mldb, n_mstc, n_bypass;
  always @(posedge clk) if (rst_n) begin
    automatic int t = 0, h = 0, l = 0, u = 0;
    cycles <= cycles + 1;
    for (int c = 0; c < NC; c++) begin
      for (int p = 0; p < 4; p++)
        if (dut.m_req[c*5+p] && dut.m_gnt[c*5+p]) t++;
      if (hstall[c]) h++;
      if (lstall[c]) l++;
      u += $countones(fpu_issue[c]);
      if (off_valid[c] && off_ready[c]) begin
        case (off_req[c].op)
          OP_MXFMACC: if (off_req[c].zero_c) n_zero_c++;
                      else n_fetch_c++;
          OP_MLDA: n_mlda++;
          OP_MLDB: n_mldb++;
          OP_MSTC: n_mstc++;
          OP_VFMACC_VV, OP_VFMACC_VF: n_bypass++;
          default: ;
        endcase
      end
    end
    transfers       <= transfers + t;
    hazard_cycles   <= hazard_cycles + h;
    conflict_cycles <= conflict_cycles + l;
    lane_busy       <= lane_busy + u;
  end

  // ------------------------------------------------------------- scalar-core helpers
  task automatic scl_write(int c, int addr, logic [63:0] d);
    @(negedge clk);
    scl_req[c] = 1; scl_we[c] = 1; scl_addr[c] = 32'(addr); scl_wdata[c] = d;
    #1;
    while (!scl_gnt[c]) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 scl_req[c] = 0;
  endtask

  task automatic scl_read(int c, int addr, output logic [63:0] d);
    @(negedge clk);
    scl_req[c] = 1; scl_we[c] = 0; scl_addr[c] = 32'(addr);
    #1;
    while (!scl_gnt[c]) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 scl_req[c] = 0;
    if (!scl_rvalid[c]) begin
      failures++;
      $display("FAIL scalar read without rvalid");
    end
    d = scl_rdata[c];
  endtask

  task automatic offload(int c, op_e op, int vd, int vs1, int vs2, longint rs1, longint rs2,
                         bit zc);
    offload_req_t r;
    r = '0;
    r.op = op; r.vd = 5'(vd); r.vs1 = 5'(vs1); r.vs2 = 5'(vs2);
    r.rs1 = 64'(rs1); r.rs2 = 64'(rs2); r.zero_c = zc;
    @(negedge clk);
    off_req[c] = r; off_valid[c] = 1;
    #1;
    while (!off_ready[c]) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 off_valid[c] = 0;
  endtask

  task automatic wait_idle(int c);
    @(negedge clk);
    while (busy[c]) @(negedge clk);
  endtask

  // ------------------------------------------------------------- matrices
  longint A[64][64], B[64][64];

  // The MX kernel on one core: output rows [r0, r1).
  task automatic mx_kernel(int c, int M, int N, int K, int r0, int r1, int a_base, int b_base,
                           int c_base, int tm);
    offload(c, OP_MSETTILEM, 0, 0, 0, tm, 0, 0);
    offload(c, OP_MSETTILEN, 0, 0, 0, 4, 0, 0);
    offload(c, OP_MSETTILEK, 0, 0, 0, 4, 0, 0);
    for (int mt = r0; mt < r1; mt += tm)
      for (int nt = 0; nt < N; nt += 16) begin
        for (int kt = 0; kt < K; kt += 4) begin
          int abuf;
          abuf = ((kt / 4) % 2 == 1) ? 20 : 16;
          offload(c, OP_MLDA, abuf, 0, 0, a_base + (mt * K + kt) * 8, K * 8, 0);
          for (int b = 0; b < 4; b++) begin
            offload(c, OP_MLDB, 24 + 2 * b, 0, 0, b_base + (kt * N + nt + 4 * b) * 8, N * 8, 0);
            offload(c, OP_MXFMACC, 4 * b, abuf, 24 + 2 * b, 0, 0, kt == 0);
          end
        end
        for (int b = 0; b < 4; b++)
          offload(c, OP_MSTC, 4 * b, 0, 0, c_base + (mt * N + nt + 4 * b) * 8, N * 8, 0);
      end
    wait_idle(c);
  endtask

  task automatic matmul(int S, int tm);
    int a_base, b_base, c_base;
    longint t0, x0, expect_transfers;
    real util;
    a_base = 0; b_base = S * S * 8; c_base = 2 * S * S * 8;
    for (int i = 0; i < S; i++) for (int j = 0; j < S; j++) begin
      A[i][j] = longint'($urandom_range(0, 16)) - 8;
      B[i][j] = longint'($urandom_range(0, 16)) - 8;
    end
    // Two scalar cores fill A and B in parallel.
    fork
      for (int i = 0; i < S * S; i++) scl_write(0, a_base + 8 * i, $realtobits(real'(A[i / S][i % S])));
      for (int i = 0; i < S * S; i++) scl_write(1, b_base + 8 * i, $realtobits(real'(B[i / S][i % S])));
    join
    t0 = cycles; x0 = transfers; lane_busy = 0;
    fork
      mx_kernel(0, S, S, S, 0, S / 2, a_base, b_base, c_base, tm);
      mx_kernel(1, S, S, S, S / 2, S, a_base, b_base, c_base, tm);
    join
    expect_transfers = longint'(S / 16) * S * S + longint'(S / tm) * S * S + S * S;
    check($sformatf("%0d^3 memory-VRF transfers", S), transfers - x0, expect_transfers);
    util = real'(lane_busy) / (8.0 * real'(cycles - t0));
    $display("matmul %0dx%0dx%0d, tile %0d,16,4, sub-tile %0d,4,4: %0d cycles, %0d transfers, FPU utilisation %0.1f%%",
             S, S, S, tm, tm, cycles - t0, transfers - x0, 100.0 * util);
    // Read back and compare, split over both scalar ports.
    fork
      for (int i = 0; i < S * S / 2; i++) begin
        logic [63:0] d; longint ref_v;
        scl_read(0, c_base + 8 * i, d);
        ref_v = 0;
        for (int k = 0; k < S; k++) ref_v += A[i / S][k] * B[k][i % S];
        check($sformatf("C[%0d][%0d]", i / S, i % S), longint'($bitstoreal(d)), ref_v);
      end
      for (int i = S * S / 2; i < S * S; i++) begin
        logic [63:0] d; longint ref_v;
        scl_read(1, c_base + 8 * i, d);
        ref_v = 0;
        for (int k = 0; k < S; k++) ref_v += A[i / S][k] * B[k][i % S];
        check($sformatf("C[%0d][%0d]", i / S, i % S), longint'($bitstoreal(d)), ref_v);
      end
    join
  endtask

  // Element-wise path: y = a*x + y, then y = x*x + y, on 13 elements.
  task automatic bypass_test();
    real x[13], y[13], a;
    logic [63:0] d;
    a = 3.0;
    for (int e = 0; e < 13; e++) begin
      x[e] = real'(e) - 4.0; y[e] = real'(2 * e) + 0.5;
      scl_write(0, 'h1000 + 8 * e, $realtobits(x[e]));
      scl_write(0, 'h2000 + 8 * e, $realtobits(y[e]));
    end
    offload(0, OP_VSETVL, 0, 0, 0, 13, 0, 0);
    offload(0, OP_VLE, 0, 0, 0, 'h1000, 0, 0);
    offload(0, OP_VLE, 2, 0, 0, 'h2000, 0, 0);
    offload(0, OP_VFMACC_VF, 2, 0, 0, $realtobits(a), 0, 0);  // vs2 = v0
    offload(0, OP_VFMACC_VV, 2, 0, 0, 0, 0, 0);
    offload(0, OP_VSE, 2, 0, 0, 'h3000, 0, 0);
    wait_idle(0);
    for (int e = 0; e < 13; e++) begin
      scl_read(0, 'h3000 + 8 * e, d);
      check($sformatf("bypass y[%0d] (x1000)", e), longint'($bitstoreal(d) * 1000.0),
            longint'((a * x[e] + y[e] + x[e] * x[e]) * 1000.0));
    end
  endtask

  initial begin
    off_valid = '0; off_req = '0; scl_req = '0; scl_we = '0; scl_addr = '0; scl_wdata = '0;
    transfers = 0; hazard_cycles = 0; conflict_cycles = 0; lane_busy = 0; cycles = 0;
    n_zero_c = 0; n_fetch_c = 0; n_mlda = 0; n_mldb = 0; n_mstc = 0; n_bypass = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    bypass_test();
    matmul(16, 8);
    matmul(16, 4);
    matmul(32, 8);
    matmul(64, 8);
    $display("events: C-tile resets %0d, C fetches %0d, mld.a %0d, mld.b %0d, mst.c %0d, bypass %0d",
             n_zero_c, n_fetch_c, n_mlda, n_mldb, n_mstc, n_bypass);
    $display("events: hazard-stall cycles %0d, refused VLSU request cycles %0d",
             hazard_cycles, conflict_cycles);
    check("C-tile reset happened", n_zero_c > 0, 1);
    check("C fetch happened", n_fetch_c > 0, 1);
    check("mld.a happened", n_mlda > 0, 1);
    check("mld.b happened", n_mldb > 0, 1);
    check("mst.c happened", n_mstc > 0, 1);
    check("bypass path happened", n_bypass > 0, 1);
    check("hazard stall happened", hazard_cycles > 0, 1);
    check("bank conflict happened", conflict_cycles > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
