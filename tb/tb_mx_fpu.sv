// tb_mx_fpu: self-checking test of one FPU lane.
//
// Random FMA operands are chosen so that a*b + c is exact in double precision (products
// of 12-bit significands plus an addend on the same grid); the expected bits then come
// from the simulator's own real arithmetic. A second random set has an exact product
// (26-bit significands) and a full-precision addend, so the sum must be rounded once,
// which the simulator's real arithmetic also does. Hand-worked rounding cases check the
// single rounding of the fused operation (ties to even, round up past a tie) and
// cancellation.
// Integer multiply-adds are compared with 64-bit arithmetic. The latency is checked to
// be exactly LAT cycles with one operation issued per cycle.
module tb_mx_fpu;
  import mx_pkg::*;
  localparam int unsigned LAT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid;
  fpu_op_e     in_op;
  logic [63:0] a, b, c;
  logic [7:0]  tag;
  logic        out_valid;
  logic [63:0] res;
  logic [7:0]  out_tag;

  mx_fpu #(.LAT(LAT), .TAGW(8)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_op_i(in_op),
    .in_a_i(a), .in_b_i(b), .in_c_i(c), .in_tag_i(tag),
    .out_valid_o(out_valid), .out_res_o(res), .out_tag_o(out_tag));

  int checks = 0, failures = 0;
  logic [63:0] exp_q[$];
  int          issue_cyc[$];
  int          cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // Compare results as they come out.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      logic [63:0] e;
      int ic;
      e  = exp_q.pop_front();
      ic = issue_cyc.pop_front();
      checks++;
      if (res !== e) begin
        failures++;
        $display("FAIL tag %0d: got %h expected %h", out_tag, res, e);
      end
      checks++;
      if (cyc - ic != LAT + 1) begin  // issue edge to sampling edge
        failures++;
        $display("FAIL latency %0d", cyc - ic);
      end
    end
  end

  task automatic issue(fpu_op_e op, logic [63:0] x, logic [63:0] y, logic [63:0] z,
                       logic [63:0] e);
    in_valid <= 1; in_op <= op; a <= x; b <= y; c <= z; tag <= tag + 1;
    exp_q.push_back(e);
    issue_cyc.push_back(cyc);
    @(posedge clk);
  endtask

  function automatic real rnd_real(int bits, int scale);
    int n;
    n = int'($urandom_range(0, (1 << bits) - 1)) - (1 << (bits - 1));
    return real'(n) / real'(scale);
  endfunction

  initial begin
    in_valid = 0; in_op = FPU_FMA; a = 0; b = 0; c = 0; tag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // Rounding cases worked out by hand.
    issue(FPU_FMA, 64'h3CA0_0000_0000_0000, 64'h3FF0_0000_0000_0000, 64'h3FF0_0000_0000_0000,
          64'h3FF0_0000_0000_0000);  // 1 + 2^-53: tie, stays 1.0 (even)
    issue(FPU_FMA, 64'h3CA8_0000_0000_0000, 64'h3FF0_0000_0000_0000, 64'h3FF0_0000_0000_0000,
          64'h3FF0_0000_0000_0001);  // 1 + 1.5*2^-53: rounds up
    issue(FPU_FMA, 64'h3FF0_0000_0040_0000, 64'h3FF0_0000_0040_0000, 64'hBFF0_0000_0000_0000,
          64'h3E20_0000_0020_0000);  // (1+2^-30)^2 - 1 = 2^-29 + 2^-60, exact only when fused
    issue(FPU_FMA, 64'h4000_0000_0000_0000, 64'h4008_0000_0000_0000, 64'hC018_0000_0000_0000,
          64'h0000_0000_0000_0000);  // 2*3 - 6 = +0
    issue(FPU_FMA, 64'h0000_0000_0000_0000, 64'h4008_0000_0000_0000, 64'h4014_0000_0000_0000,
          64'h4014_0000_0000_0000);  // 0*3 + 5 = 5
    issue(FPU_FMA, 64'h7FF0_0000_0000_0000, 64'h0000_0000_0000_0000, 64'h0,
          64'h7FF8_0000_0000_0000);  // inf * 0 = NaN
    // Exact random cases.
    for (int i = 0; i < 2000; i++) begin
      real x, y, z;
      x = rnd_real(13, 16);
      y = rnd_real(13, 16);
      z = (i % 7 == 0) ? -x * y : rnd_real(24, 256);
      issue(FPU_FMA, $realtobits(x), $realtobits(y), $realtobits(z), $realtobits(x * y + z));
    end
    // Inexact cases: x and y have at most 26 significant bits, so x*y is exact and the
    // host's x*y + z is rounded once, like the fused operation.
    for (int i = 0; i < 1000; i++) begin
      real x, y, z;
      x = real'(int'($urandom_range(0, (1 << 26) - 1)) - (1 << 25)) / real'(1 << $urandom_range(0, 20));
      y = real'(int'($urandom_range(0, (1 << 26) - 1)) - (1 << 25)) / real'(1 << $urandom_range(0, 20));
      z = (real'({$urandom, $urandom} >> 11) / 7.0) * ((i % 2 == 0) ? 1.0 : -1.0e-3);
      issue(FPU_FMA, $realtobits(x), $realtobits(y), $realtobits(z), $realtobits(x * y + z));
    end
    // Integer multiply-add.
    for (int i = 0; i < 500; i++) begin
      logic [63:0] x, y, z;
      x = {$urandom, $urandom}; y = {$urandom, $urandom}; z = {$urandom, $urandom};
      issue(FPU_IMAC, x, y, z, x * y + z);
    end
    in_valid <= 0;
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", exp_q.size());
    end
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
