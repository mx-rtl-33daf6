// tb_tcdm_xbar: self-checking test of the TCDM crossbar with its 16 banks.
//
// Ten masters issue random reads and writes to a 128 KiB word-interleaved memory. Each
// master keeps its request until granted. The testbench checks that
//   - no bank grants two masters in one cycle and a bank with requests grants one of them;
//   - read data arrives with rvalid exactly one cycle after the grant and equals a reference
//     memory updated in grant order;
//   - round-robin fairness: a master that keeps asking is granted within NR_MASTERS cycles;
//   - bank conflicts occur (several masters on one bank in one cycle).
module tb_tcdm_xbar;
  localparam int NM = 10, NB = 16, BAW = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NM-1:0] req, gnt, we, rvalid;
  logic [NM-1:0][31:0] addr;
  logic [NM-1:0][63:0] wdata, rdata;
  logic [NB-1:0] b_req, b_we;
  logic [NB-1:0][BAW-1:0] b_addr;
  logic [NB-1:0][63:0] b_wdata, b_rdata;

  tcdm_xbar dut (.clk_i(clk), .rst_ni(rst_n), .m_req_i(req), .m_gnt_o(gnt), .m_addr_i(addr),
    .m_we_i(we), .m_wdata_i(wdata), .m_rvalid_o(rvalid), .m_rdata_o(rdata), .b_req_o(b_req),
    .b_we_o(b_we), .b_addr_o(b_addr), .b_wdata_o(b_wdata), .b_rdata_i(b_rdata));

  for (genvar b = 0; b < NB; b++) begin : g_bank
    tcdm_bank #(.WORDS(1 << BAW)) i_bank (.clk_i(clk), .req_i(b_req[b]), .we_i(b_we[b]),
      .addr_i(b_addr[b]), .wdata_i(b_wdata[b]), .rdata_o(b_rdata[b]));
  end

  logic [63:0] ref_q[16384];
  logic [63:0] exp_rd[NM];
  int wait_cnt[NM];
  int checks = 0, failures = 0, conflicts = 0, max_wait = 0;

  task automatic fail(string s);
    failures++;
    if (failures < 20) $display("FAIL %s", s);
  endtask

  initial begin
    req = '0; we = '0; addr = '0; wdata = '0;
    for (int m = 0; m < NM; m++) wait_cnt[m] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Initialise memory through master 0.
    for (int i = 0; i < 16384; i++) begin
      @(negedge clk);
      req[0] = 1; we[0] = 1; addr[0] = 32'(8 * i); wdata[0] = {$urandom, $urandom};
      ref_q[i] = wdata[0];
      #1;
      if (!gnt[0]) fail("lone master not granted");
    end
    @(negedge clk);
    req = '0;
    for (int t = 0; t < 6000; t++) begin
      int per_bank[NB];
      logic [NM-1:0] granted, was_we;
      @(negedge clk);
      // Masters without a pending request may start a new one; half of the addresses go
      // to two banks to cause conflicts.
      for (int m = 0; m < NM; m++)
        if (!req[m] && $urandom_range(0, 2) != 0) begin
          req[m] = 1;
          we[m] = ($urandom_range(0, 3) == 0);
          addr[m] = ($urandom_range(0, 1) == 0) ? 32'(8 * ($urandom_range(0, 1023) * 16 + $urandom_range(0, 1)))
                                                : 32'(8 * $urandom_range(0, 16383));
          wdata[m] = {$urandom, $urandom};
        end
      #1;
      for (int b = 0; b < NB; b++) per_bank[b] = 0;
      for (int m = 0; m < NM; m++) if (req[m]) per_bank[addr[m][6:3]]++;
      for (int b = 0; b < NB; b++) if (per_bank[b] > 1) conflicts++;
      for (int b = 0; b < NB; b++) begin
        int g;
        g = 0;
        for (int m = 0; m < NM; m++) if (req[m] && gnt[m] && addr[m][6:3] == 4'(b)) g++;
        checks++;
        if (g != (per_bank[b] > 0 ? 1 : 0)) fail($sformatf("bank %0d granted %0d of %0d", b, g, per_bank[b]));
      end
      // Reference update in grant order (one grant per bank, so no two grants share a word).
      granted = gnt & req;
      was_we = we;
      for (int m = 0; m < NM; m++) begin
        if (granted[m]) begin
          if (we[m]) ref_q[addr[m][16:3]] = wdata[m];
          else       exp_rd[m] = ref_q[addr[m][16:3]];
          wait_cnt[m] = 0;
        end else if (req[m]) begin
          wait_cnt[m]++;
          if (wait_cnt[m] > max_wait) max_wait = wait_cnt[m];
        end
      end
      @(posedge clk);
      #1;
      req = req & ~granted;
      for (int m = 0; m < NM; m++) begin
        checks++;
        if (rvalid[m] !== granted[m]) fail($sformatf("t%0d master %0d rvalid %0b", t, m, rvalid[m]));
        else if (granted[m] && !was_we[m]) begin
          checks++;
          if (rdata[m] !== exp_rd[m]) fail($sformatf("t%0d master %0d rdata %h expected %h", t, m, rdata[m], exp_rd[m]));
        end
      end
    end
    checks++;
    if (conflicts == 0) fail("no bank conflict happened");
    checks++;
    if (max_wait >= NM) fail($sformatf("a master waited %0d cycles", max_wait));
    $display("conflicted bank-cycles %0d, longest wait %0d", conflicts, max_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
