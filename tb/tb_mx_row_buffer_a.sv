// tb_mx_row_buffer_a: self-checking test of the A-column broadcast buffer.
//
// Random register words are loaded at random element offsets; after each load every
// selection 0..7 must broadcast element (offset + sel) mod 8 of the loaded word, one cycle
// after the load edge. A cycle without ld_en must keep the contents, and reset must clear
// them.
module tb_mx_row_buffer_a;
  import mx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ld_en;
  vword_t ld_vreg;
  logic [2:0] ld_off, sel;
  elem_t bcast;

  mx_row_buffer_a dut (.clk_i(clk), .rst_ni(rst_n), .ld_en_i(ld_en), .ld_vreg_i(ld_vreg),
                       .ld_off_i(ld_off), .sel_i(sel), .bcast_o(bcast));

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
    ld_en = 0; ld_vreg = '0; ld_off = 0; sel = 0;
    repeat (2) @(posedge clk);
    #1;
    for (int s = 0; s < 8; s++) begin sel = 3'(s); #1 check("reset clears", bcast, '0); end
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      for (int e = 0; e < 16; e++) w[32*e +: 32] = $urandom;
      off = $urandom_range(0, 7);
      @(negedge clk);
      ld_en = 1; ld_vreg = w; ld_off = 3'(off);
      @(negedge clk);
      ld_en = ($urandom_range(0, 1) == 0);   // maybe a second load of other data, below
      ld_vreg = ~w;
      if (ld_en) begin
        @(negedge clk);
        ld_en = 0;
        w = ~w;
      end
      ld_vreg = '1;                          // must be ignored now
      @(negedge clk);
      for (int s = 0; s < 8; s++) begin
        sel = 3'(s);
        #1 check($sformatf("load %0d sel %0d", t, s), bcast, w[64*((off + s) % 8) +: 64]);
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
