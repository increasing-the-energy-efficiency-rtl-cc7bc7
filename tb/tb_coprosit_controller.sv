// tb_coprosit_controller: self-checking testbench of coprosit_controller.
//
// Directed scenarios drive the head of the input buffer (an instruction word
// decoded by the decoder, plus its id), the commit interface, the memory
// handshake, the memory result and the FIFO status inputs. After each
// change of inputs every control output is compared with its expected value:
// waiting for commit (commit before and while the head waits; a commit
// counts from the cycle after it arrives), kill
// without result, memory request held until accepted, load scoreboard with
// stall of dependent reads and writes, forwarding when the load completes,
// stall on a full result FIFO and on a full memory stream FIFO, and integer
// destinations that do not write the posit register file.
module tb_coprosit_controller;
  import coprosit_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        head_valid, commit_valid, mem_ready, memfifo_ready, mem_result_valid;
  logic        resfifo_ready, resfifo_space, ex_ready;
  x_id_t       head_id;
  x_commit_t   commit;
  mem_entry_t  mem_head;
  logic [31:0] instr;
  decoded_t    dec;
  logic head_pop, ex_valid, fwd_a, fwd_b, rf_we_ex, mem_valid, memfifo_push, rf_we_mem, memfifo_pop,
        resfifo_push, stall, kill;

  coprosit_decoder u_dec (.instr_i(instr), .dec_o(dec));
  coprosit_controller dut (
    .clk_i(clk), .rst_ni(rst_n),
    .head_valid_i(head_valid), .head_id_i(head_id), .dec_i(dec), .head_pop_o(head_pop),
    .commit_valid_i(commit_valid), .commit_i(commit),
    .ex_valid_o(ex_valid), .ex_ready_i(ex_ready), .fwd_a_o(fwd_a), .fwd_b_o(fwd_b), .rf_we_ex_o(rf_we_ex),
    .mem_valid_o(mem_valid), .mem_ready_i(mem_ready), .memfifo_ready_i(memfifo_ready),
    .memfifo_push_o(memfifo_push),
    .mem_result_valid_i(mem_result_valid), .mem_head_i(mem_head), .rf_we_mem_o(rf_we_mem),
    .memfifo_pop_o(memfifo_pop),
    .resfifo_ready_i(resfifo_ready), .resfifo_space_i(resfifo_space), .resfifo_push_o(resfifo_push),
    .stall_o(stall), .kill_o(kill));

  function automatic logic [31:0] padd(int rd, int rs1, int rs2);
    return {5'b00000, 2'b01, 5'(rs2), 5'(rs1), 3'b000, 5'(rd), 7'b1011011};
  endfunction
  function automatic logic [31:0] pcmp(int rd, int rs1, int rs2);
    return {5'b10100, 2'b01, 5'(rs2), 5'(rs1), 3'b010, 5'(rd), 7'b1011011};
  endfunction
  function automatic logic [31:0] plh(int rd, int off);
    return {12'(off), 5'd10, 3'b001, 5'(rd), 7'b0001011};
  endfunction
  function automatic logic [31:0] psh(int rs2, int off);
    return {7'(off >> 5), 5'(rs2), 5'd10, 3'b001, 5'(off), 7'b0101011};
  endfunction

  // expected outputs, as a string of flags:
  // {head_pop, ex_valid, fwd_a, fwd_b, rf_we_ex, mem_valid, memfifo_push, rf_we_mem, memfifo_pop,
  //  resfifo_push, stall, kill}
  task automatic expect_out(logic [11:0] e, string what);
    logic [11:0] g;
    #1;
    g = {head_pop, ex_valid, fwd_a, fwd_b, rf_we_ex, mem_valid, memfifo_push, rf_we_mem, memfifo_pop,
         resfifo_push, stall, kill};
    for (int i = 0; i < 12; i++) begin
      checks++;
      if (g[i] !== e[i]) begin
        failures++;
        $display("FAIL %s: outputs %b expected %b (bit %0d)", what, g, e, i);
      end
    end
  endtask

  task automatic idle();
    head_valid = 0; commit_valid = 0; mem_result_valid = 0; mem_ready = 0;
    commit = '0; mem_head = '0; instr = padd(0, 0, 0); head_id = 0;
    resfifo_ready = 1; resfifo_space = 1; memfifo_ready = 1; ex_ready = 1;
  endtask

  task automatic tick(); @(posedge clk); @(negedge clk); endtask

  // a commit is presented for one cycle; it must not release the head in
  // that same cycle (it counts from the next one)
  task automatic commit_tick(x_id_t cid, bit k);
    commit_valid = 1; commit = '{id: cid, commit_kill: k};
    #1;
    checks++;
    if (head_pop || ex_valid || mem_valid || kill) begin
      failures++;
      $display("FAIL commit acted in its own cycle");
    end
    tick();
    commit_valid = 0;
  endtask

  initial begin
    idle();
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int rep = 0; rep < 50; rep++) begin
      x_id_t id;
      int r;
      id = x_id_t'(rep);
      r = 1 + rep % 30;
      // 1. head waits for its commit, then fires when the commit arrives
      idle(); head_valid = 1; head_id = id; instr = padd(3, 1, 2);
      expect_out(12'b0000_0000_0000, "no commit yet");
      tick();
      expect_out(12'b0000_0000_0000, "still no commit");
      commit_tick(id, 0);
      expect_out(12'b1100_1000_0100, "commit in the previous cycle");
      tick(); idle();
      // 2. commit before the instruction reaches the head
      commit_tick(id + 1, 0);
      expect_out(12'b0000_0000_0000, "commit, empty head");
      tick(); idle();
      head_valid = 1; head_id = id + 1; instr = pcmp(5, 1, 2);
      expect_out(12'b1100_0000_0100, "earlier commit, integer result");
      tick(); idle();
      // 3. kill: dropped without a result (commit earlier and in the same cycle)
      commit_tick(id + 2, 1);
      tick(); idle();
      head_valid = 1; head_id = id + 2; instr = padd(3, 1, 2);
      expect_out(12'b1000_0000_0001, "kill recorded earlier");
      tick(); idle();
      head_valid = 1; head_id = id + 3; instr = plh(4, 8);
      commit_tick(id + 3, 1);
      expect_out(12'b1000_0000_0001, "kill in the previous cycle");
      tick(); idle();
      // the old ids must be clear again: a new instruction with id waits
      head_valid = 1; head_id = id; instr = padd(3, 1, 2);
      expect_out(12'b0000_0000_0000, "id reused after pop");
      commit_tick(id, 0);
      expect_out(12'b1100_1000_0100, "id reused, committed");
      tick(); idle();
      // 4. load: request held until accepted, then rd pending
      head_valid = 1; head_id = id; instr = plh(r, 4);
      commit_tick(id, 0);
      expect_out(12'b0000_0100_0010, "load waits for mem_ready");
      tick(); commit_valid = 0;
      expect_out(12'b0000_0100_0010, "load request held");
      mem_ready = 1;
      expect_out(12'b1000_0110_0100, "load accepted");
      tick(); idle();
      // 5. a reader of the pending register stalls (both operands), and a writer too
      head_valid = 1; head_id = id + 1; instr = padd(0, r, 0);
      commit_tick(id + 1, 0);
      expect_out(12'b0000_0000_0010, "RAW on rs1 stalls");
      instr = padd(0, 0, r);
      expect_out(12'b0000_0000_0010, "RAW on rs2 stalls");
      instr = padd(r, 0, 0);
      expect_out(12'b0000_0000_0010, "WAW stalls");
      instr = padd(0, 0, 0);
      expect_out(12'b1100_1000_0100, "independent op proceeds");
      tick(); idle();
      // a store of the pending register also waits (it reads it)
      head_valid = 1; head_id = id + 2; instr = psh(r, 2);
      commit_tick(id + 2, 0);
      expect_out(12'b0000_0000_0010, "store of pending register stalls");
      // the load completes in this cycle: the store is still blocked in the
      // memory path (no forwarding to store data); check forwarding with an op
      tick(); idle();
      head_valid = 1; head_id = id + 2; instr = padd(7, r, r);
      mem_result_valid = 1; mem_head = '{id: id, rd: 5'(r), is_load: 1};
      expect_out(12'b1111_1001_1100, "forwarding on both operands");
      tick(); idle();
      head_valid = 1; head_id = id + 3; instr = padd(0, r, 0);
      commit_tick(id + 3, 0);
      expect_out(12'b1100_1000_0100, "register no longer pending");
      tick(); idle();
      // 6. a store result: no pending register, memory result without a write
      head_valid = 1; head_id = id + 4; instr = psh(r, 2);
      commit_tick(id + 4, 0); mem_ready = 1;
      expect_out(12'b1000_0110_0100, "store accepted");
      tick(); idle();
      head_valid = 1; head_id = id + 5; instr = padd(0, r, 0);
      commit_tick(id + 5, 0);
      mem_result_valid = 1; mem_head = '{id: id + 4, rd: 5'(r), is_load: 0};
      expect_out(12'b1100_1000_1100, "store completion, no forwarding");
      tick(); idle();
      // 7. full result FIFO and full memory stream FIFO
      head_valid = 1; head_id = id + 6; instr = padd(3, 1, 2);
      commit_tick(id + 6, 0);
      resfifo_ready = 0; resfifo_space = 0;
      expect_out(12'b0000_0000_0010, "result FIFO full");
      tick(); resfifo_ready = 1;
      expect_out(12'b1100_1000_0100, "result FIFO frees by a pop");
      tick(); idle();
      head_valid = 1; head_id = id + 7; instr = plh(r, 0); mem_ready = 1;
      commit_tick(id + 7, 0);
      memfifo_ready = 0;
      expect_out(12'b0000_0000_0010, "memory stream FIFO full");
      memfifo_ready = 1; resfifo_space = 0;
      expect_out(12'b0000_0000_0010, "no strict result room for memory request");
      resfifo_space = 1;
      expect_out(12'b1000_0110_0100, "memory request proceeds");
      tick(); idle();
      // the load is pending: a load to the same rd waits, completion releases it
      head_valid = 1; head_id = id + 8; instr = plh(r, 2); mem_ready = 1;
      commit_tick(id + 8, 0);
      expect_out(12'b0000_0000_0010, "load WAW stalls");
      mem_result_valid = 1; mem_head = '{id: id + 7, rd: 5'(r), is_load: 1};
      expect_out(12'b1000_0111_1100, "load WAW resolved by completion");
      tick(); idle();
      mem_result_valid = 1; mem_head = '{id: id + 8, rd: 5'(r), is_load: 1};
      expect_out(12'b0000_0001_1000, "drain second load");
      tick(); idle();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
