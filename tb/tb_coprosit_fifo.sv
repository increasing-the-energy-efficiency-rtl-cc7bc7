// tb_coprosit_fifo: self-checking testbench of coprosit_fifo.
//
// Two instances, DEPTH=1 (the input buffer) and DEPTH=2 (memory stream and
// result FIFOs), get random push and pop traffic. A queue model checks the
// data order, pop_valid, push_ready (room, or full with a pop in the same
// cycle) and the occupancy count. The one-entry buffer must also sustain one
// item per cycle when pushed and popped every cycle.
module tb_coprosit_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        pv1, pr1, ov1, or1, pv2, pr2, ov2, or2;
  logic [31:0] pd1, od1, pd2, od2;
  logic [1:0]  c1, c2;
  logic [31:0] q1[$], q2[$];
  int          moved = 0;

  coprosit_fifo #(.T(logic [31:0]), .DEPTH(1)) f1 (.clk_i(clk), .rst_ni(rst_n),
    .push_valid_i(pv1), .push_ready_o(pr1), .push_data_i(pd1), .pop_valid_o(ov1), .pop_ready_i(or1),
    .pop_data_o(od1), .count_o(c1));
  coprosit_fifo #(.T(logic [31:0]), .DEPTH(2)) f2 (.clk_i(clk), .rst_ni(rst_n),
    .push_valid_i(pv2), .push_ready_o(pr2), .push_data_i(pd2), .pop_valid_o(ov2), .pop_ready_i(or2),
    .pop_data_o(od2), .count_o(c2));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic step(int depth, ref logic [31:0] q[$], input logic pv, pr, ov, orr, logic [31:0] od, logic [1:0] c);
    chk(ov == (q.size() > 0), "pop_valid");
    chk(pr == (q.size() < depth || orr), "push_ready");
    chk(int'(c) == q.size(), "count");
    if (ov) chk(od == q[0], "data order");
  endtask

  initial begin
    pv1 = 0; or1 = 0; pv2 = 0; or2 = 0; pd1 = 0; pd2 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      @(negedge clk);
      if (i < 5000) begin
        pv1 = 1'($urandom_range(0, 1)); or1 = 1'($urandom_range(0, 1)); pd1 = $urandom;
        pv2 = 1'($urandom_range(0, 1)); or2 = 1'($urandom_range(0, 2) == 0); pd2 = $urandom;
      end else begin                          // streaming through the one-entry buffer
        pv1 = 1; or1 = 1; pd1 = $urandom;
        pv2 = 0; or2 = 1;
      end
      #1;
      step(1, q1, pv1, pr1, ov1, or1, od1, c1);
      step(2, q2, pv2, pr2, ov2, or2, od2, c2);
      @(posedge clk);
      if (ov1 && or1) void'(q1.pop_front());
      if (pv1 && pr1) begin q1.push_back(pd1); if (i >= 5001) moved++; end
      if (ov2 && or2) void'(q2.pop_front());
      if (pv2 && pr2) q2.push_back(pd2);
    end
    chk(moved == 999, "one item per cycle through DEPTH=1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
