// tb_prau: self-checking testbench of the PRAU.
//
// Sends random operations of every operator through the handshake, with
// out_ready toggled at random, and checks that: a result is presented in the
// cycle the operation is offered (combinational unit, zero-cycle latency),
// in_ready follows out_ready, and the result equals the reference model for
// that operator, including the 64-bit integer conversions and the
// sign extension of 32-bit integer results to the 64-bit result port.
module tb_prau;
  import posit_ref_pkg::*;
  import coprosit_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic        in_valid, in_ready, out_valid, out_ready;
  prau_op_e    op;
  logic [15:0] a, b;
  logic [63:0] x, y, exp_y;

  prau #(.N(16)) dut (.in_valid(in_valid), .in_ready(in_ready), .op(op), .operand_a(a), .operand_b(b),
                      .operand_int(x), .out_valid(out_valid), .out_ready(out_ready), .result(y));

  function automatic logic [63:0] model(prau_op_e o, logic [15:0] u, logic [15:0] v, logic [63:0] w);
    case (o)
      PRAU_ADD:  return {48'h0, ref_add(u, v)};
      PRAU_SUB:  return {48'h0, ref_add(u, neg(v))};
      PRAU_MUL:  return {48'h0, ref_mul(u, v)};
      PRAU_DIV:  return {48'h0, ref_div(u, v)};
      PRAU_SQRT: return {48'h0, ref_sqrt(u)};
      PRAU_P2I:  return 64'(signed'(ref_p2i(u, 0)));
      PRAU_P2U:  return 64'(signed'(ref_p2i(u, 1)));
      PRAU_I2P:  return {48'h0, ref_i2p(w[31:0], 0)};
      PRAU_U2P:  return {48'h0, ref_i2p(w[31:0], 1)};
      PRAU_P2L:  return ref_p2l(u, 0);
      PRAU_P2LU: return ref_p2l(u, 1);
      PRAU_L2P:  return {48'h0, ref_l2p(w, 0)};
      PRAU_LU2P: return {48'h0, ref_l2p(w, 1)};
      PRAU_SGNJ: return {48'h0, (u[15] == v[15]) ? u : neg(u)};
      PRAU_SGNJN: return {48'h0, (u[15] != v[15]) ? u : neg(u)};
      PRAU_SGNJX: return {48'h0, v[15] ? neg(u) : u};
      PRAU_MVXP: return {{48{u[15]}}, u};
      default:   return {48'h0, w[15:0]};
    endcase
  endfunction

  initial begin
    in_valid = 0; out_ready = 1; op = PRAU_ADD; a = 0; b = 0; x = 0;
    for (int i = 0; i < 20000; i++) begin
      op = prau_op_e'($urandom_range(0, 17));
      a = rand_posit(); b = rand_posit(); x = {$urandom, $urandom} >> $urandom_range(0, 63);
      in_valid  = 1'($urandom_range(0, 3) != 0);
      out_ready = 1'($urandom_range(0, 3) != 0);
      @(posedge clk);
      checks++;
      if (out_valid !== in_valid || in_ready !== out_ready) begin
        failures++;
        $display("FAIL handshake");
      end
      if (in_valid) begin
        exp_y = model(op, a, b, x);
        checks++;
        if (y !== exp_y) begin
          failures++;
          if (failures < 10) $display("FAIL %s a=%h b=%h x=%h got=%h exp=%h", op.name(), a, b, x, y, exp_y);
        end
      end
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
