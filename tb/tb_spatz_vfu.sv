// tb_spatz_vfu: self-checking test of the vector functional unit with MX.
//
// The testbench plays the register file (a plain array with combinational reads and
// masked writes). It fills A, B and C sub-tiles with small integers stored as doubles,
// so every product and sum is exact, runs mxfmacc / mxmacc for the sub-tile shapes the
// paper allows that fit the 256-byte tile buffer (m', n', k' in {4, 8}, m'n' <= 32),
// with and without C-tile reset, and compares every D element with a reference product
// computed here. Element-wise vfmacc.vv and vfmacc.vf are checked with a vector length
// that leaves a partial last group. The cycle count of each matrix operation is checked
// against 1 + m'k'ceil(n'/4) + LAT (one cycle to load the row buffers, the compute
// slices, the FPU pipeline draining while the last results go to the register file), and
// the number of cycles in which the lanes were busy against m'k'ceil(n'/4).
module tb_spatz_vfu;
  import mx_pkg::*;
  localparam int unsigned LAT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, done;
  vfu_req_t req;
  logic [2:0][4:0] rd_addr;
  vword_t [2:0] rd_data;
  logic wr_en;
  logic [4:0] wr_addr;
  logic [7:0] wr_mask;
  vword_t wr_data;
  logic [3:0] issue;

  spatz_vfu #(.N_FPU(4), .LAT(LAT)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .done_o(done), .vrf_rd_addr_o(rd_addr), .vrf_rd_data_i(rd_data), .vrf_wr_en_o(wr_en),
    .vrf_wr_addr_o(wr_addr), .vrf_wr_mask_o(wr_mask), .vrf_wr_data_o(wr_data),
    .fpu_issue_o(issue));

  // Register file model: element e of register v.
  logic [63:0] rf[32][8];
  always_comb for (int p = 0; p < 3; p++)
    for (int e = 0; e < 8; e++) rd_data[p][64*e +: 64] = rf[rd_addr[p]][e];
  always @(posedge clk)
    if (wr_en) for (int e = 0; e < 8; e++) if (wr_mask[e]) rf[wr_addr][e] <= wr_data[64*e +: 64];

  int checks = 0, failures = 0;
  int busy_cycles, issue_cycles;
  always @(posedge clk) begin
    if (dut.state_q != dut.S_IDLE) busy_cycles <= busy_cycles + 1;
    if (issue != 0) issue_cycles <= issue_cycles + 1;
  end

  function automatic void put(int base, int idx, logic [63:0] v);
    rf[base + idx / 8][idx % 8] = v;
  endfunction
  function automatic logic [63:0] get(int base, int idx);
    return rf[base + idx / 8][idx % 8];
  endfunction

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic run(vfu_req_t rq);
    busy_cycles = 0; issue_cycles = 0;
    @(negedge clk);
    req = rq; req_valid = 1;
    @(posedge clk);
    @(negedge clk);
    req_valid = 0;
    while (!done) @(negedge clk);
    @(posedge clk);
    @(negedge clk);
  endtask

  // A at v8 (column-major), B at v16 (row-major), C/D at v0 (row-major).
  task automatic mx_case(int tm, int tn, int tk, bit zero_c, bit integer_op);
    longint a[8][8], b[8][8], c[8][8], d;
    vfu_req_t rq;
    int nb, exp_cyc;
    for (int i = 0; i < tm; i++) for (int k = 0; k < tk; k++) begin
      a[i][k] = longint'($urandom_range(0, 40)) - 20;
      put(8, k * tm + i, integer_op ? 64'(a[i][k]) : $realtobits(real'(a[i][k])));
    end
    for (int k = 0; k < tk; k++) for (int j = 0; j < tn; j++) begin
      b[k][j] = longint'($urandom_range(0, 40)) - 20;
      put(16, k * tn + j, integer_op ? 64'(b[k][j]) : $realtobits(real'(b[k][j])));
    end
    for (int i = 0; i < tm; i++) for (int j = 0; j < tn; j++) begin
      c[i][j] = longint'($urandom_range(0, 2000)) - 1000;
      put(0, i * tn + j, integer_op ? 64'(c[i][j]) : $realtobits(real'(c[i][j])));
    end
    rq = '0;
    rq.op = integer_op ? VFU_MXMACC : VFU_MXFMACC;
    rq.vd = 0; rq.vs1 = 8; rq.vs2 = 16; rq.zero_c = zero_c;
    rq.tm = 4'(tm); rq.tn = 4'(tn); rq.tk = 4'(tk);
    run(rq);
    for (int i = 0; i < tm; i++) for (int j = 0; j < tn; j++) begin
      d = zero_c ? 0 : c[i][j];
      for (int k = 0; k < tk; k++) d += a[i][k] * b[k][j];
      check($sformatf("D[%0d][%0d] of %0dx%0dx%0d", i, j, tm, tn, tk), get(0, i * tn + j),
            integer_op ? 64'(d) : $realtobits(real'(d)));
    end
    nb = (tn + 3) / 4;
    exp_cyc = 1 + tm * tk * nb + LAT;
    checks++;
    if (busy_cycles != exp_cyc) begin
      failures++;
      $display("FAIL cycles %0dx%0dx%0d: %0d expected %0d", tm, tn, tk, busy_cycles, exp_cyc);
    end
    checks++;
    if (issue_cycles != tm * tk * nb) begin
      failures++;
      $display("FAIL busy lanes %0d expected %0d", issue_cycles, tm * tk * nb);
    end
  endtask

  task automatic vec_case(bit vf, int vl);
    real x[64], y[64], z[64], s;
    vfu_req_t rq;
    s = real'($urandom_range(0, 16)) - 8.0;
    for (int e = 0; e < 24; e++) begin
      x[e] = real'($urandom_range(0, 200)) - 100.0;
      y[e] = real'($urandom_range(0, 200)) - 100.0;
      z[e] = real'($urandom_range(0, 200)) - 100.0;
      put(8, e, $realtobits(x[e])); put(16, e, $realtobits(y[e])); put(0, e, $realtobits(z[e]));
    end
    rq = '0;
    rq.op = vf ? VFU_VFMACC_VF : VFU_VFMACC_VV;
    rq.vd = 0; rq.vs1 = 8; rq.vs2 = 16; rq.vl = VL_W'(vl); rq.scalar = $realtobits(s);
    run(rq);
    for (int e = 0; e < 24; e++)
      check($sformatf("vfmacc e%0d", e), get(0, e),
            e < vl ? $realtobits((vf ? s : x[e]) * y[e] + z[e]) : $realtobits(z[e]));
  endtask

  initial begin
    req_valid = 0; req = '0;
    for (int v = 0; v < 32; v++) for (int e = 0; e < 8; e++) rf[v][e] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    mx_case(8, 4, 4, 0, 0);
    mx_case(8, 4, 4, 1, 0);
    mx_case(4, 4, 4, 0, 0);
    mx_case(4, 8, 4, 0, 0);
    mx_case(8, 4, 8, 0, 0);
    mx_case(4, 8, 8, 1, 0);
    mx_case(4, 4, 8, 0, 1);
    mx_case(8, 4, 4, 0, 1);
    vec_case(0, 13);
    vec_case(1, 20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
