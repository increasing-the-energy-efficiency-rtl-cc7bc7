// tb_prau_conv: self-checking testbench of prau_conv.
//
// Posit to integer: every one of the 65536 posit16 encodings, to signed and
// unsigned 32-bit integers (result sign-extended to 64 bits) and to signed
// and unsigned 64-bit integers, against a real-number reference that rounds
// to nearest even and saturates. Integer to posit: directed values (0, +-1,
// extremes, ties) and random integers of random magnitude, 32-bit (with
// random upper bits, which must be ignored) and 64-bit, signed and unsigned,
// against the reference rounding of posit_ref_pkg. One vector per clock; a
// watchdog bounds the run.
module tb_prau_conv;
  import posit_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic        to_int, uns, lng;
  logic [15:0] p;
  logic [63:0] x, y, exp_y;

  prau_conv #(.N(16)) dut (.to_int(to_int), .is_unsigned(uns), .is_long(lng), .posit_in(p), .int_in(x), .result(y));

  task automatic check(string what);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %s p=%h x=%h uns=%0d got=%h exp=%h", what, p, x, uns, y, exp_y);
    end
  endtask

  function automatic logic [63:0] sext(logic [31:0] v);
    return {{32{v[31]}}, v};
  endfunction

  logic [63:0] x_dir[12] = '{64'h0, 64'h1, 64'hffff_ffff, 64'h8000_0000, 64'h7fff_ffff, 64'd4097, 64'd4099,
                             64'd12345678, 64'hffff_ffff_ffff_ffff, 64'h8000_0000_0000_0000,
                             64'h7fff_ffff_ffff_ffff, 64'h0100_0000_0000_0001};

  initial begin
    x = 0; p = 0; uns = 0; to_int = 1; lng = 0;
    for (int i = 0; i < 65536; i++) begin
      p = 16'(i);
      lng = 0;
      uns = 0; @(posedge clk); exp_y = sext(ref_p2i(p, 0)); check("p2i");
      uns = 1; @(posedge clk); exp_y = sext(ref_p2i(p, 1)); check("p2u");
      lng = 1;
      uns = 0; @(posedge clk); exp_y = ref_p2l(p, 0); check("p2l");
      uns = 1; @(posedge clk); exp_y = ref_p2l(p, 1); check("p2lu");
    end
    to_int = 0;
    foreach (x_dir[i]) begin
      x = x_dir[i];
      lng = 0;
      uns = 0; @(posedge clk); exp_y = {48'h0, ref_i2p(x[31:0], 0)}; check("i2p");
      uns = 1; @(posedge clk); exp_y = {48'h0, ref_i2p(x[31:0], 1)}; check("u2p");
      lng = 1;
      uns = 0; @(posedge clk); exp_y = {48'h0, ref_l2p(x, 0)}; check("l2p");
      uns = 1; @(posedge clk); exp_y = {48'h0, ref_l2p(x, 1)}; check("lu2p");
    end
    for (int i = 0; i < 40000; i++) begin
      lng = 1'(i & 1);
      x = {$urandom, $urandom} >> $urandom_range(0, lng ? 63 : 31);
      if ($urandom_range(0, 1) != 0) x = ~x + 1;
      if (!lng) x[63:32] = $urandom;
      uns = 1'($urandom_range(0, 1));
      @(posedge clk);
      exp_y = {48'h0, lng ? ref_l2p(x, uns) : ref_i2p(x[31:0], uns)};
      check(lng ? "x2p64" : "x2p32");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
