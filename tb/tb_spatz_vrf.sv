// tb_spatz_vrf: self-checking test of the 32 x 512-bit vector register file.
//
// Every cycle both write ports write random registers with random element masks (never
// the same register in the same cycle) and all four read ports read random registers.
// A reference model follows the writes; reads are combinational, so the data written at
// an edge must be visible on the read ports right after it, and masked-off elements must
// keep their old values.
module tb_spatz_vrf;
  import mx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0][4:0] rd_addr;
  vword_t [3:0] rd_data;
  logic [1:0] wr_en;
  logic [1:0][4:0] wr_addr;
  logic [1:0][7:0] wr_mask;
  vword_t [1:0] wr_data;

  spatz_vrf dut (.clk_i(clk), .rst_ni(rst_n), .rd_addr_i(rd_addr), .rd_data_o(rd_data),
                 .wr_en_i(wr_en), .wr_addr_i(wr_addr), .wr_mask_i(wr_mask), .wr_data_i(wr_data));

  vword_t ref_q[32];
  int checks = 0, failures = 0;

  initial begin
    rd_addr = '0; wr_en = '0; wr_addr = '0; wr_mask = '0; wr_data = '0;
    foreach (ref_q[i]) ref_q[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      wr_en = 2'($urandom);
      wr_addr[0] = 5'($urandom);
      wr_addr[1] = wr_addr[0] + 5'($urandom_range(1, 31));
      for (int p = 0; p < 2; p++) begin
        wr_mask[p] = (t < 64) ? 8'hff : 8'($urandom);
        for (int e = 0; e < 16; e++) wr_data[p][32*e +: 32] = $urandom;
        if (wr_en[p])
          for (int e = 0; e < 8; e++)
            if (wr_mask[p][e]) ref_q[wr_addr[p]][64*e +: 64] = wr_data[p][64*e +: 64];
      end
      @(posedge clk);
      #1 wr_en = '0;
      for (int p = 0; p < 4; p++) rd_addr[p] = 5'($urandom);
      #1;
      for (int p = 0; p < 4; p++) begin
        checks++;
        if (rd_data[p] !== ref_q[rd_addr[p]]) begin
          failures++;
          if (failures < 10) $display("FAIL t%0d port %0d v%0d", t, p, rd_addr[p]);
        end
      end
    end
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
