// tb_coprosit: end-to-end testbench of the Coprosit coprocessor.
//
// The testbench plays the CPU side of the CV-X-IF:
//  * it offers a random stream of posit instructions (arithmetic, square
//    root, sign injection, comparisons, min/max, conversions, moves, posit
//    loads and stores, plus some non-posit words that must be rejected),
//    holding each offer until it is taken, sometimes withholding x[rs1];
//  * it commits the accepted instructions in order after random delays and
//    kills about one in ten;
//  * it serves memory requests from a 256-byte memory with random ready
//    delays and returns memory results in order after random latencies;
//  * it accepts results with random backpressure.
// A reference model executes each instruction when it is committed (not
// killed), in program order, with the real-number posit model, and every
// result transaction is compared with it (id, write flag, integer data). At
// the end the posit register file and the memory are compared with the
// model. Phase two sends independent additions back to back with immediate
// commit and no backpressure and checks one instruction per cycle.
// Every mechanism of the design (issue backpressure, reject, kill, stall on
// a pending load, forwarding of load data, result FIFO full, memory wait) is
// counted and must occur at least once.
module tb_coprosit;
  import posit_ref_pkg::*;
  import coprosit_pkg::*;

  localparam int NUM_INSTR = 4000;
  localparam int FAST_N    = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- DUT
  logic          issue_valid, issue_ready, commit_valid, mem_valid, mem_ready;
  logic          mem_result_valid, result_valid, result_ready;
  x_issue_req_t  issue_req;
  x_issue_resp_t issue_resp;
  x_commit_t     commit, commit_dut;
  logic          commit_valid_dut;
  x_mem_req_t    mem_req;
  x_mem_resp_t   mem_resp;
  x_mem_result_t mem_result;
  x_result_t     result;

  coprosit dut (
    .clk_i(clk), .rst_ni(rst_n),
    .x_issue_valid_i(issue_valid), .x_issue_ready_o(issue_ready), .x_issue_req_i(issue_req), .x_issue_resp_o(issue_resp),
    .x_commit_valid_i(commit_valid_dut), .x_commit_i(commit_dut),
    .x_mem_valid_o(mem_valid), .x_mem_ready_i(mem_ready), .x_mem_req_o(mem_req), .x_mem_resp_i(mem_resp),
    .x_mem_result_valid_i(mem_result_valid), .x_mem_result_i(mem_result),
    .x_result_valid_o(result_valid), .x_result_ready_i(result_ready), .x_result_o(result));

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0t %s", $time, msg);
  endtask

  // ---------------------------------------------------------------- instruction encoding
  function automatic logic [31:0] r_type(logic [4:0] f5, logic [2:0] f3, logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    return {f5, 2'b01, rs2, rs1, f3, rd, OPC_POP};
  endfunction

  typedef struct {
    logic [31:0] instr;
    x_id_t       id;
    logic [31:0] xrs1;
  } issued_t;

  typedef struct {
    x_id_t       id;
    logic        we;
    logic [31:0] data;
    logic [4:0]  rd;
  } exp_t;

  // random instruction; returns whether it is a posit instruction
  function automatic logic [31:0] rand_instr(output bit is_posit);
    logic [4:0] rd, rs1, rs2;
    int k;
    rd  = 5'($urandom_range(0, 7));
    rs1 = 5'($urandom_range(0, 7));
    rs2 = 5'($urandom_range(0, 7));
    is_posit = 1;
    k = $urandom_range(0, 19);
    case (k)
      0, 1:  return r_type(F5_ADD, 3'd0, rd, rs1, rs2);
      2:     return r_type(F5_SUB, 3'd0, rd, rs1, rs2);
      3, 4:  return r_type(F5_MUL, 3'd0, rd, rs1, rs2);
      5:     return r_type(F5_DIV, 3'd0, rd, rs1, rs2);
      6:     return r_type(F5_SQRT, 3'd0, rd, rs1, 5'd0);
      7:     return r_type(F5_SGNJ, 3'($urandom_range(0, 2)), rd, rs1, rs2);
      8:     return r_type(F5_MINMAX, 3'($urandom_range(0, 1)), rd, rs1, rs2);
      9:     return r_type(F5_CMP, 3'($urandom_range(0, 2)), rd, rs1, rs2);
      10:    return r_type(F5_P2I, 3'd0, rd, rs1, 5'($urandom_range(0, 1)));
      11:    return r_type(F5_I2P, 3'd0, rd, rs1, 5'($urandom_range(0, 1)));
      12:    return r_type(F5_MVXP, 3'd0, rd, rs1, 5'd0);
      13:    return r_type(F5_MVPX, 3'd0, rd, rs1, 5'd0);
      14, 15, 16: return {12'($urandom_range(0, 31) * 2), rs1, F3_HALF, rd, OPC_PLOAD};  // PLH rd, imm(rs1)
      17, 18: begin                                                                  // PSH rs2, imm(rs1)
        logic [11:0] imm;
        imm = 12'($urandom_range(0, 31) * 2);
        return {imm[11:5], rs2, rs1, F3_HALF, imm[4:0], OPC_PSTORE};
      end
      default: begin
        is_posit = 0;
        return 32'h0000_0033 | ($urandom & 32'h01ff_ff80);                       // an RV32I ADD-type word
      end
    endcase
  endfunction

  // ---------------------------------------------------------------- reference model
  logic [15:0] prf_ref [32];
  logic [15:0] mem_ref [128];
  logic [15:0] mem_dut [128];

  function automatic bit less(logic [15:0] u, logic [15:0] v);
    if (is_nar(u)) return !is_nar(v);
    if (is_nar(v)) return 0;
    return to_real(17'(u), 16) < to_real(17'(v), 16);
  endfunction

  function automatic exp_t ref_exec(issued_t it);
    exp_t e;
    logic [31:0] in;
    logic [4:0]  f5, rd, rs1, rs2;
    logic [2:0]  f3;
    logic [15:0] a, b, p;
    logic [31:0] addr;
    in = it.instr; f5 = in[31:27]; f3 = in[14:12]; rd = in[11:7]; rs1 = in[19:15]; rs2 = in[24:20];
    a = prf_ref[rs1]; b = prf_ref[rs2];
    e.id = it.id; e.we = 0; e.data = 0; e.rd = rd;
    if (in[6:0] == OPC_PLOAD) begin
      addr = it.xrs1 + {{20{in[31]}}, in[31:20]};
      prf_ref[rd] = mem_ref[addr[7:1]];
      return e;
    end
    if (in[6:0] == OPC_PSTORE) begin
      addr = it.xrs1 + {{20{in[31]}}, in[31:25], in[11:7]};
      mem_ref[addr[7:1]] = b;
      return e;
    end
    p = 'x;
    case (f5)
      F5_ADD:  p = ref_add(a, b);
      F5_SUB:  p = ref_add(a, neg(b));
      F5_MUL:  p = ref_mul(a, b);
      F5_DIV:  p = ref_div(a, b);
      F5_SQRT: p = ref_sqrt(a);
      F5_SGNJ: begin
        bit want;
        want = (f3 == 0) ? b[15] : (f3 == 1) ? !b[15] : a[15] ^ b[15];
        p = (a[15] == want) ? a : neg(a);
      end
      F5_MINMAX: p = (f3 == 0) ? (less(b, a) ? b : a) : (less(a, b) ? b : a);
      F5_CMP: begin
        e.we = 1;
        e.data = (f3 == 2) ? 32'(a == b) : (f3 == 1) ? 32'(less(a, b)) : 32'(!less(b, a));
      end
      F5_P2I:  begin e.we = 1; e.data = ref_p2i(a, rs2[0]); end
      F5_I2P:  p = ref_i2p(it.xrs1, rs2[0]);
      F5_MVXP: begin e.we = 1; e.data = {{16{a[15]}}, a}; end
      F5_MVPX: p = it.xrs1[15:0];
      default: ;
    endcase
    if (!e.we) prf_ref[rd] = p;
    return e;
  endfunction

  // ---------------------------------------------------------------- CPU model
  issued_t commit_q[$];
  exp_t    exp_q[$];
  int      n_issued = 0, n_results = 0, n_committed = 0, outstanding = 0;
  x_id_t   next_id = 0;
  bit      offer_posit;
  bit      fast = 0, stop_issue = 0;
  int      p_commit = 50, p_kill = 10, p_res_ready = 70, p_mem_ready = 60, p_rs_valid = 85;
  int      mem_lat_max = 4;

  // mechanism counters
  int c_issue_bp = 0, c_reject = 0, c_kill = 0, c_load_stall = 0, c_forward = 0,
      c_resfifo_full = 0, c_mem_wait = 0, c_commit_wait = 0;

  function automatic bit chance(int pct);
    return $urandom_range(0, 99) < pct;
  endfunction

  function automatic x_issue_req_t new_offer(x_id_t id, output bit p);
    x_issue_req_t r;
    logic [31:0] w;
    w = rand_instr(p);
    r.instr    = w;
    r.id       = id;
    r.rs0      = ($urandom_range(0, 1)) ? 32'($urandom_range(0, 63) * 2) : ($urandom >> $urandom_range(0, 31));
    if (w[6:0] == OPC_PLOAD || w[6:0] == OPC_PSTORE) r.rs0 = 32'($urandom_range(0, 63) * 2);
    r.rs1      = $urandom;
    r.rs_valid = {1'b1, 1'(chance(p_rs_valid))};
    return r;
  endfunction

  // issue: all updates of the offered request are non-blocking, so the DUT
  // samples the request that was handshaken
  always @(posedge clk) begin
    if (rst_n) begin
      x_id_t        id;
      x_issue_req_t nxt;
      bit           p, took;
      took = issue_valid && issue_ready;
      id   = next_id;
      if (issue_valid && !issue_ready) c_issue_bp++;
      if (took) begin
        checks++;
        if (issue_resp.accept !== offer_posit) fail($sformatf("accept=%0d for %h", issue_resp.accept, issue_req.instr));
        if (issue_resp.accept) begin
          if (fast) exp_q.push_back(ref_exec('{issue_req.instr, issue_req.id, issue_req.rs0}));
          else      commit_q.push_back('{issue_req.instr, issue_req.id, issue_req.rs0});
          n_issued++;
          outstanding++;
          id = next_id + 1'b1;
          next_id <= id;
        end else c_reject++;
        issue_valid <= 1'b0;
      end
      if ((!issue_valid || took) && !stop_issue && outstanding < 6 &&
          n_issued < (fast ? NUM_INSTR + FAST_N : NUM_INSTR) && (fast || chance(70))) begin
        nxt = new_offer(id, p);
        if (fast) begin
          nxt.instr    = r_type(F5_ADD, 3'd0, 5'(8 + n_issued % 8), 5'd16, 5'd17);
          nxt.rs_valid = 2'b11;
          p = 1;
        end
        offer_posit <= p;
        issue_req   <= nxt;
        issue_valid <= 1'b1;
      end else if (issue_valid && !issue_ready && !issue_req.rs_valid[0]) begin
        issue_req.rs_valid[0] <= 1'b1;                       // the CPU delivers x[rs1] later
      end
    end
  end

  // commit: after a random delay, or (phase two) in the issue cycle itself
  assign commit_valid_dut = fast ? (issue_valid && issue_ready && issue_resp.accept) : commit_valid;
  assign commit_dut       = fast ? '{id: issue_req.id, commit_kill: 1'b0} : commit;
  always @(posedge clk) begin
    commit_valid <= 1'b0;
    if (rst_n && commit_q.size() > 0 && (fast || chance(p_commit))) begin
      issued_t it;
      bit k;
      it = commit_q.pop_front();
      k  = !fast && chance(p_kill);
      commit_valid <= 1'b1;
      commit       <= '{id: it.id, commit_kill: k};
      n_committed++;
      if (k) begin
        c_kill++;
        outstanding--;
      end else exp_q.push_back(ref_exec(it));
    end
  end

  // memory
  typedef struct { x_id_t id; logic [31:0] rdata; int due; } mres_t;
  mres_t mres_q[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n) begin
      if (mem_valid && !mem_ready) c_mem_wait++;
      if (mem_valid && mem_ready) begin
        logic [31:0] rd;
        rd = {16'h0, mem_dut[mem_req.addr[7:1]]};
        checks++;
        if (mem_req.size != 2'd1 || mem_req.addr[0]) fail("memory request size/alignment");
        if (mem_req.we) mem_dut[mem_req.addr[7:1]] <= mem_req.wdata[15:0];
        mres_q.push_back('{mem_req.id, rd, cyc + $urandom_range(0, fast ? 0 : mem_lat_max)});
      end
      mem_ready <= fast || chance(p_mem_ready);
      mem_result_valid <= 1'b0;
      if (mres_q.size() > 0 && mres_q[0].due <= cyc && !(mem_result_valid)) begin
        mres_t m;
        m = mres_q.pop_front();
        mem_result_valid <= 1'b1;
        mem_result <= '{id: m.id, rdata: m.rdata, err: 1'b0};
      end
    end
  end

  // results
  always @(posedge clk) begin
    if (rst_n) begin
      if (result_valid && result_ready) begin
        exp_t e;
        n_results++;
        outstanding--;
        checks++;
        if (exp_q.size() == 0) fail("result without a committed instruction");
        else begin
          e = exp_q.pop_front();
          if (result.id !== e.id || result.we !== e.we || (e.we && (result.data !== e.data || result.rd !== e.rd)) ||
              result.exc)
            fail($sformatf("result id=%0d we=%0d data=%h rd=%0d, expected id=%0d we=%0d data=%h rd=%0d",
                           result.id, result.we, result.data, result.rd, e.id, e.we, e.data, e.rd));
        end
      end
      result_ready <= fast || chance(p_res_ready);
    end
  end

  // mechanism observation
  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.u_controller.stall_o && (dut.u_controller.haz_a || dut.u_controller.haz_b || dut.u_controller.haz_d))
        c_load_stall++;
      if (dut.u_controller.ex_valid_o && (dut.u_controller.fwd_a_o || dut.u_controller.fwd_b_o)) c_forward++;
      if (dut.u_controller.head_valid_i && dut.u_controller.committed && !dut.resfifo_ready) c_resfifo_full++;
      if (dut.u_controller.head_valid_i && !dut.u_controller.committed && !dut.u_controller.killed) c_commit_wait++;
    end
  end

  task automatic expect_seen(string name, int n);
    checks++;
    $display("  %-22s %0d", name, n);
    if (n == 0) fail({"mechanism never exercised: ", name});
  endtask

  // ---------------------------------------------------------------- sequence
  initial begin
    int t0, t1, r0;
    issue_valid = 0; commit_valid = 0; mem_ready = 0; mem_result_valid = 0; result_ready = 0;
    issue_req = '0; commit = '0; mem_resp = '0; mem_result = '0;
    for (int i = 0; i < 32; i++) prf_ref[i] = 16'h0;
    for (int i = 0; i < 128; i++) begin
      mem_ref[i] = rand_posit();
      mem_dut[i] = mem_ref[i];
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // phase 1: random traffic
    wait (n_issued == NUM_INSTR);
    wait (commit_q.size() == 0 && exp_q.size() == 0 && outstanding == 0 && !issue_valid);
    repeat (5) @(posedge clk);
    for (int i = 0; i < 32; i++) begin
      checks++;
      if (dut.u_regfile.regs_q[i] !== prf_ref[i])
        fail($sformatf("p%0d = %h, expected %h", i, dut.u_regfile.regs_q[i], prf_ref[i]));
    end
    for (int i = 0; i < 128; i++) begin
      checks++;
      if (mem_dut[i] !== mem_ref[i]) fail($sformatf("mem[%0d] = %h, expected %h", 2 * i, mem_dut[i], mem_ref[i]));
    end

    // phase 2: throughput, one independent addition per cycle
    @(negedge clk);
    fast = 1;
    r0 = n_results;
    wait (issue_valid);
    @(posedge clk); t0 = cyc;
    wait (n_results == r0 + FAST_N);
    t1 = cyc;
    checks++;
    $display("  %0d back-to-back additions took %0d cycles", FAST_N, t1 - t0);
    if (t1 - t0 > FAST_N + 3) fail("throughput below one instruction per cycle");

    $display("mechanisms:");
    expect_seen("issue backpressure", c_issue_bp);
    expect_seen("reject (not posit)", c_reject);
    expect_seen("kill", c_kill);
    expect_seen("wait for commit", c_commit_wait);
    expect_seen("stall on pending load", c_load_stall);
    expect_seen("load data forwarding", c_forward);
    expect_seen("result FIFO full", c_resfifo_full);
    expect_seen("memory wait", c_mem_wait);
    $display("instructions issued %0d, results %0d", n_issued, n_results);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: issued %0d committed %0d results %0d outstanding %0d", n_issued, n_committed, n_results, outstanding);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
