// tb_spatz_vlsu: self-checking test of the vector load/store unit.
//
// The testbench provides a word-addressed memory with a one-cycle read response and a
// register-file model. It runs mld.a, mld.b, mst.c and unit-stride / strided vector loads
// and stores, first with every request granted at once and then with grants withheld at
// random. Loaded register elements are compared with the memory image according to the
// layout rules (A column-major, B and C row-major); stored memory words are compared
// with the register contents, and words next to the stored block must stay untouched.
// With all grants given, an operation on E elements must take ceil(E/4) beats plus the
// cycle that reports completion.
module tb_spatz_vlsu;
  import mx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, done, stall;
  vlsu_req_t req;
  logic [3:0] mreq, mgnt, mwe, mrvalid;
  logic [3:0][31:0] maddr;
  logic [3:0][63:0] mwdata, mrdata;
  logic [4:0] rd_addr;
  vword_t rd_data;
  logic wr_en;
  logic [4:0] wr_addr;
  logic [7:0] wr_mask;
  vword_t wr_data;

  spatz_vlsu #(.N_PORTS(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .done_o(done), .stall_o(stall), .mem_req_o(mreq), .mem_gnt_i(mgnt), .mem_addr_o(maddr),
    .mem_we_o(mwe), .mem_wdata_o(mwdata), .mem_rvalid_i(mrvalid), .mem_rdata_i(mrdata),
    .vrf_rd_addr_o(rd_addr), .vrf_rd_data_i(rd_data), .vrf_wr_en_o(wr_en),
    .vrf_wr_addr_o(wr_addr), .vrf_wr_mask_o(wr_mask), .vrf_wr_data_o(wr_data));

  logic [63:0] mem[4096];       // 32 KiB
  logic [63:0] rf[32][8];
  bit random_gnt;

  always_comb for (int e = 0; e < 8; e++) rd_data[64*e +: 64] = rf[rd_addr][e];
  always_comb for (int p = 0; p < 4; p++) mgnt[p] = mreq[p] && (!random_gnt || gnt_rand[p]);
  logic [3:0] gnt_rand;
  always @(posedge clk) begin
    gnt_rand <= 4'($urandom);
    for (int p = 0; p < 4; p++) begin
      mrvalid[p] <= mgnt[p];
      if (mgnt[p]) begin
        if (mwe[p]) mem[maddr[p][14:3]] <= mwdata[p];
        else        mrdata[p] <= mem[maddr[p][14:3]];
      end
    end
    if (wr_en) for (int e = 0; e < 8; e++) if (wr_mask[e]) rf[wr_addr][e] <= wr_data[64*e +: 64];
  end

  int checks = 0, failures = 0, cyc, stalls = 0;
  always @(posedge clk) if (stall) stalls <= stalls + 1;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic run(vlsu_req_t rq);
    @(negedge clk);
    req = rq; req_valid = 1;
    cyc = 0;
    @(posedge clk);
    @(negedge clk);
    req_valid = 0;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    @(negedge clk);
  endtask

  function automatic vlsu_req_t mk(bit st, int vreg, int base, int stride, int rows, int cols,
                                   bit tr);
    vlsu_req_t r;
    r.store = st; r.vreg = 5'(vreg); r.base = 32'(base); r.stride = 32'(stride);
    r.rows = VL_W'(rows); r.cols = VL_W'(cols); r.transpose = tr;
    return r;
  endfunction

  // Load an R x C block and check the register group against memory.
  task automatic load_case(int vreg, int base, int stride, int rows, int cols, bit tr);
    int e, nbeats;
    run(mk(0, vreg, base, stride, rows, cols, tr));
    for (int r = 0; r < rows; r++) for (int c = 0; c < cols; c++) begin
      e = tr ? c * rows + r : r * cols + c;
      check($sformatf("load %0dx%0d el (%0d,%0d)", rows, cols, r, c),
            rf[vreg + e / 8][e % 8], mem[(base + r * stride + 8 * c) / 8]);
    end
    nbeats = tr ? cols * ((rows + 3) / 4) : rows * ((cols + 3) / 4);
    if (!random_gnt) begin
      checks++;
      if (cyc != nbeats) begin
        failures++;
        $display("FAIL beats %0d expected %0d", cyc, nbeats);
      end
    end
  endtask

  task automatic store_case(int vreg, int base, int stride, int rows, int cols, bit tr);
    int e;
    logic [63:0] before_word;
    before_word = mem[base / 8 - 1];
    run(mk(1, vreg, base, stride, rows, cols, tr));
    for (int r = 0; r < rows; r++) for (int c = 0; c < cols; c++) begin
      e = tr ? c * rows + r : r * cols + c;
      check($sformatf("store %0dx%0d el (%0d,%0d)", rows, cols, r, c),
            mem[(base + r * stride + 8 * c) / 8], rf[vreg + e / 8][e % 8]);
    end
    check("word before block", mem[base / 8 - 1], before_word);
  endtask

  initial begin
    req_valid = 0; req = '0; random_gnt = 0;
    for (int i = 0; i < 4096; i++) mem[i] = {32'(i), $urandom};
    for (int v = 0; v < 32; v++) for (int e = 0; e < 8; e++) rf[v][e] = {$urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      random_gnt = (pass == 1);
      load_case(16, 1024, 64 * 8, 8, 4, 1);   // mld.a 8x4 of a 64-wide matrix
      load_case(20, 2048, 64 * 8, 4, 8, 1);   // mld.a 4x8
      load_case(24, 4096, 64 * 8, 4, 4, 0);   // mld.b 4x4
      load_case(26, 4096 + 64, 32 * 8, 8, 4, 0);
      load_case(8, 8, 0, 1, 13, 0);          // vle, vl = 13
      load_case(10, 16, 40, 11, 1, 1);       // vlse, stride 40 bytes
      for (int v = 0; v < 8; v++) for (int e = 0; e < 8; e++) rf[v][e] = {$urandom, $urandom};
      store_case(0, 16384, 64 * 8, 8, 4, 0);  // mst.c 8x4
      store_case(4, 24576, 16 * 8, 4, 8, 0);  // mst.c 4x8
      store_case(6, 30000 & ~7, 24, 6, 1, 1); // vsse
    end
    checks++;
    if (stalls == 0) begin
      failures++;
      $display("FAIL no refused request was seen");
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
