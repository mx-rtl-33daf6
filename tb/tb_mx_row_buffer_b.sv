// tb_mx_row_buffer_b: self-checking test of the B-row buffer that feeds the FPU lanes.
//
// Random register words are loaded at random element offsets; lane l must then present
// element (offset + 4*blk + l) mod 8 of the loaded word for both lane blocks blk = 0, 1.
// Contents must hold while ld_en is low and be zero after reset.
module tb_mx_row_buffer_b;
  import mx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ld_en, blk;
  vword_t ld_vreg;
  logic [2:0] ld_off;
  elem_t [3:0] lanes;

  mx_row_buffer_b dut (.clk_i(clk), .rst_ni(rst_n), .ld_en_i(ld_en), .ld_vreg_i(ld_vreg),
                       .ld_off_i(ld_off), .blk_i(blk), .lanes_o(lanes));

  int checks = 0, failures = 0;
  task automatic check(string what, elem_t got, elem_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  vword_t w;
  int off;
  initial begin
    ld_en = 0; ld_vreg = '0; ld_off = 0; blk = 0;
    repeat (2) @(posedge clk);
    #1;
    for (int l = 0; l < 4; l++) check("reset clears", lanes[l], '0);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      for (int e = 0; e < 16; e++) w[32*e +: 32] = $urandom;
      off = $urandom_range(0, 7);
      @(negedge clk);
      ld_en = 1; ld_vreg = w; ld_off = 3'(off);
      @(negedge clk);
      ld_en = 0; ld_vreg = ~w;
      repeat ($urandom_range(0, 2)) @(negedge clk);
      for (int b = 0; b < 2; b++) begin
        blk = b[0];
        #1;
        for (int l = 0; l < 4; l++)
          check($sformatf("load %0d blk %0d lane %0d", t, b, l), lanes[l],
                w[64*((off + 4 * b + l) % 8) +: 64]);
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
