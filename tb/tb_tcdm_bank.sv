// tb_tcdm_bank: self-checking test of one TCDM SRAM bank.
//
// Random reads and writes against a reference array. A read returns the word on rdata one
// cycle after the request edge and rdata holds it until the next read; a write changes
// only its word. The whole bank is written first, so every read has a known value.
module tb_tcdm_bank;
  logic clk = 0;
  always #5 clk = ~clk;

  logic req, we;
  logic [9:0] addr;
  logic [63:0] wdata, rdata;

  tcdm_bank dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr), .wdata_i(wdata),
                 .rdata_o(rdata));

  logic [63:0] ref_q[1024];
  logic [63:0] last_read;
  int checks = 0, failures = 0;

  initial begin
    req = 0; we = 0; addr = 0; wdata = 0; last_read = 0;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk);
      req = 1; we = 1; addr = 10'(i); wdata = {$urandom, $urandom};
      ref_q[i] = wdata;
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      req = ($urandom_range(0, 3) != 0);
      we = ($urandom_range(0, 2) == 0);
      addr = 10'($urandom);
      wdata = {$urandom, $urandom};
      @(posedge clk);
      #1;
      if (req && !we) last_read = ref_q[addr];
      if (req && we) ref_q[addr] = wdata;
      checks++;
      if (rdata !== last_read) begin
        failures++;
        if (failures < 10) $display("FAIL t%0d: rdata %h expected %h", t, rdata, last_read);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
