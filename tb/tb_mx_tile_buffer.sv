// tb_mx_tile_buffer: self-checking test of the 32-entry result tile buffer.
//
// A reference array follows every operation: clear (sometimes together with writes,
// which must win) and per-lane accumulator writes with random lane enables. After every
// cycle all eight 4-entry groups are read back and must match the reference (reads are
// combinational, so values written at an edge are visible right after it).
module tb_mx_tile_buffer;
  import mx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clr;
  logic [4:0] rd_idx, wr_idx;
  elem_t [3:0] rd_data, wr_data;
  logic [3:0] wr_en;

  mx_tile_buffer dut (.clk_i(clk), .rst_ni(rst_n), .clr_i(clr), .rd_idx_i(rd_idx),
    .rd_data_o(rd_data), .wr_en_i(wr_en), .wr_idx_i(wr_idx), .wr_data_i(wr_data));

  elem_t ref_q[32];
  int checks = 0, failures = 0;
  task automatic check(string what, elem_t got, elem_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    clr = 0; rd_idx = 0; wr_idx = 0; wr_data = '0; wr_en = '0;
    foreach (ref_q[i]) ref_q[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      clr = ($urandom_range(0, 40) == 0);
      wr_idx = 5'(4 * $urandom_range(0, 7));
      wr_en = 4'($urandom);
      for (int l = 0; l < 4; l++) wr_data[l] = {$urandom, $urandom};
      // Reference update at the coming edge (clear first, then the writes).
      if (clr) foreach (ref_q[i]) ref_q[i] = '0;
      for (int l = 0; l < 4; l++) if (wr_en[l]) ref_q[(wr_idx + l) % 32] = wr_data[l];
      @(posedge clk);
      #1;
      clr = 0; wr_en = '0;
      for (int g = 0; g < 8; g++) begin
        rd_idx = 5'(4 * g);
        #1;
        for (int l = 0; l < 4; l++)
          check($sformatf("t%0d rd[%0d]", t, 32'(rd_idx) + l), rd_data[l], ref_q[(rd_idx + l) % 32]);
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
