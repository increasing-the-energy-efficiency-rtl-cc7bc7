// tb_coprosit_exec: self-checking testbench of coprosit_exec.
//
// Random posit instructions are decoded (by the decoder) and executed with
// random register-file operands, random x[rs1] values and random forwarding
// selects. Results are compared with the reference posit model applied to
// the operands the stage should have chosen; for loads and stores the
// address x[rs1]+offset and the store data are checked, and the handshake
// must answer in the same cycle.
module tb_coprosit_exec;
  import posit_ref_pkg::*;
  import coprosit_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0] instr, xrs1, res, addr, wdata, exp_r;
  logic [15:0] ra, rb, fd, a, b;
  logic        fa, fb, iv, ir, ov, ordy;
  decoded_t    dec;

  coprosit_decoder u_dec (.instr_i(instr), .dec_o(dec));
  coprosit_exec #(.N(16)) dut (.dec_i(dec), .xrs1_i(xrs1), .rdata_a_i(ra), .rdata_b_i(rb),
    .fwd_a_i(fa), .fwd_b_i(fb), .fwd_data_i(fd), .in_valid_i(iv), .in_ready_o(ir), .out_valid_o(ov),
    .out_ready_i(ordy), .result_o(res), .mem_addr_o(addr), .mem_wdata_o(wdata));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s instr=%h a=%h b=%h x=%h res=%h exp=%h", what, instr, a, b, xrs1, res, exp_r);
    end
  endtask

  function automatic bit less(logic [15:0] u, logic [15:0] v);
    if (is_nar(u)) return !is_nar(v);
    if (is_nar(v)) return 0;
    return to_real(17'(u), 16) < to_real(17'(v), 16);
  endfunction

  initial begin
    logic [4:0] f5;
    logic [2:0] f3;
    logic [11:0] imm;
    logic [4:0] f5s[13] = '{5'b00000, 5'b00001, 5'b00010, 5'b00011, 5'b01011, 5'b00100, 5'b00101,
                            5'b10100, 5'b11000, 5'b11010, 5'b11100, 5'b11110, 5'b11111};
    instr = 0; xrs1 = 0; ra = 0; rb = 0; fd = 0; fa = 0; fb = 0; iv = 0; ordy = 1;
    for (int i = 0; i < 20000; i++) begin
      ra = rand_posit(); rb = rand_posit(); fd = rand_posit();
      fa = 1'($urandom_range(0, 3) == 0); fb = 1'($urandom_range(0, 3) == 0);
      xrs1 = $urandom >> $urandom_range(0, 31);
      iv = 1'($urandom_range(0, 1)); ordy = 1'($urandom_range(0, 1));
      a = fa ? fd : ra; b = fb ? fd : rb;
      f5 = f5s[$urandom_range(0, 11)];
      f3 = 3'($urandom_range(0, 2));
      if (f5 == 5'b00101) f3 = 3'($urandom_range(0, 1));
      if (f5 == 5'b11100) f3 = 0;
      if (f5 == 5'b11110) f3 = 0;
      imm = 12'($urandom);
      if ($urandom_range(0, 5) == 0) begin
        instr = {imm[11:5], 5'd2, 5'd1, 3'b001, imm[4:0], 7'b0101011};       // PSH
        #1;
        exp_r = xrs1 + {{20{imm[11]}}, imm};
        chk(addr == exp_r, "store address");
        chk(wdata == {16'h0, b}, "store data");
      end else begin
        instr = {f5, 2'b01, 5'($urandom_range(0, 1)), 5'd1, f3, 5'd3, 7'b1011011};
        if (f5 == 5'b01011) instr[24:20] = 0;
        #1;
        case (f5)
          5'b00000: exp_r = {16'h0, ref_add(a, b)};
          5'b00001: exp_r = {16'h0, ref_add(a, neg(b))};
          5'b00010: exp_r = {16'h0, ref_mul(a, b)};
          5'b00011: exp_r = {16'h0, ref_div(a, b)};
          5'b01011: exp_r = {16'h0, ref_sqrt(a)};
          5'b00100: exp_r = {16'h0, (f3 == 0) ? ((a[15] == b[15]) ? a : neg(a)) :
                                    (f3 == 1) ? ((a[15] != b[15]) ? a : neg(a)) : (b[15] ? neg(a) : a)};
          5'b00101: exp_r = {16'h0, (f3 == 0) ? (less(b, a) ? b : a) : (less(a, b) ? b : a)};
          5'b10100: exp_r = (f3 == 2) ? 32'(a == b) : (f3 == 1) ? 32'(less(a, b)) : 32'(!less(b, a));
          5'b11000: exp_r = ref_p2i(a, instr[20]);
          5'b11010: exp_r = {16'h0, ref_i2p(xrs1, instr[20])};
          5'b11100: exp_r = {{16{a[15]}}, a};
          default:  exp_r = {16'h0, xrs1[15:0]};
        endcase
        chk(res == exp_r, "result");
        chk(ov == iv && ir == ordy, "handshake");
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
