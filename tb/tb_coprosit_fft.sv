// tb_coprosit_fft: workload testbench, a 4096-point complex FFT in posit16
// run through the Coprosit coprocessor at its default parameters.
//
// The FFT is the main kernel of the cough-detection application and the
// benchmark the coprocessor is evaluated with (4096 elements). The testbench
// plays a simple in-order host core on the CV-X-IF: it offers one posit
// instruction after another, commits each in the cycle it is accepted,
// serves the memory interface from a halfword array (always ready, results
// returned one cycle later) and always takes results. The integer work of
// the host (loop counters, address arithmetic, the bit-reversal permutation)
// is done by the testbench itself: each posit load or store gets its final
// address in x[rs1] with a zero offset.
//
// The kernel is an iterative radix-2 decimation-in-time FFT over twelve
// stages. Each butterfly is 20 instructions:
//   PLH  ar, ai, br, bi, wr, wi
//   PMUL t1=br*wr; PMUL t2=bi*wi; PSUB tr=t1-t2
//   PMUL t3=br*wi; PMUL t4=bi*wr; PADD ti=t3+t4
//   PSUB, PSUB (b outputs), PADD, PADD (a outputs)
//   PSH  four results
// Memory layout (halfword index): re[0..N), im[N..2N), twiddle cos[2N..2N+N/2),
// twiddle -sin[2N+N/2..3N). The input is a sum of three tones and a small
// pseudo-random noise.
//
// Checks:
//  * the memory after the run equals, bit for bit, the same FFT computed with
//    the reference posit model in the same operation order;
//  * the posit16 FFT is close to a double-precision FFT of the same input
//    (relative RMS error below 1%);
//  * every accepted instruction returns one result transaction, in order,
//    with no integer write and no exception;
//  * the kernel sustains at least one instruction every two cycles.
// The cycle count is printed; the host core's own instructions are not
// modelled, so it is a lower bound of what a real core would take.
module tb_coprosit_fft;
  import posit_ref_pkg::*;
  import coprosit_pkg::*;

  localparam int NPT    = 4096;
  localparam int LOGN   = 12;
  localparam int MEMSZ  = 3 * NPT;
  localparam int RE0 = 0, IM0 = NPT, WR0 = 2 * NPT, WI0 = 2 * NPT + NPT / 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- DUT
  logic          issue_valid, issue_ready, commit_valid, mem_valid, mem_ready;
  logic          mem_result_valid, result_valid, result_ready;
  x_issue_req_t  issue_req;
  x_issue_resp_t issue_resp;
  x_commit_t     commit;
  x_mem_req_t    mem_req;
  x_mem_resp_t   mem_resp;
  x_mem_result_t mem_result;
  x_result_t     result;

  coprosit dut (
    .clk_i(clk), .rst_ni(rst_n),
    .x_issue_valid_i(issue_valid), .x_issue_ready_o(issue_ready), .x_issue_req_i(issue_req), .x_issue_resp_o(issue_resp),
    .x_commit_valid_i(commit_valid), .x_commit_i(commit),
    .x_mem_valid_o(mem_valid), .x_mem_ready_i(mem_ready), .x_mem_req_o(mem_req), .x_mem_resp_i(mem_resp),
    .x_mem_result_valid_i(mem_result_valid), .x_mem_result_i(mem_result),
    .x_result_valid_o(result_valid), .x_result_ready_i(result_ready), .x_result_o(result));

  // ---------------------------------------------------------------- program
  typedef struct packed {
    logic [31:0] instr;
    logic [31:0] xaddr;
  } prog_t;

  prog_t       prog[$];
  logic [15:0] mem[MEMSZ];
  logic [15:0] refm[MEMSZ];
  real         dre[NPT], dim[NPT];

  function automatic logic [31:0] i_plh(int pd);
    return {12'h000, 5'd10, 3'b001, 5'(pd), 7'b0001011};
  endfunction
  function automatic logic [31:0] i_psh(int ps);
    return {7'h00, 5'(ps), 5'd10, 3'b001, 5'h00, 7'b0101011};
  endfunction
  function automatic logic [31:0] i_op(logic [4:0] f5, int pd, int pa, int pb);
    return {f5, 2'b01, 5'(pb), 5'(pa), 3'b000, 5'(pd), 7'b1011011};
  endfunction

  function automatic int bitrev(int i);
    int r = 0;
    for (int b = 0; b < LOGN; b++) r |= ((i >> b) & 1) << (LOGN - 1 - b);
    return r;
  endfunction

  // ---------------------------------------------------------------- host model
  int unsigned pc = 0, n_results = 0, cycles = 0;
  bit          running = 0;
  x_id_t       next_id = 0, exp_id = 0;
  logic        pend_valid = 0;
  logic [15:0] pend_data;
  x_id_t       pend_id;

  assign issue_valid  = running && (pc < unsigned'(prog.size()));
  always_comb begin
    issue_req          = '0;
    issue_req.id       = next_id;
    issue_req.rs_valid = 2'b11;
    if (pc < unsigned'(prog.size())) begin
      issue_req.instr = prog[pc].instr;
      issue_req.rs0   = prog[pc].xaddr;
    end
  end
  // commit in the cycle of acceptance
  assign commit_valid = issue_valid && issue_ready && issue_resp.accept;
  assign commit       = '{id: next_id, commit_kill: 1'b0};
  assign mem_ready    = 1'b1;
  assign mem_resp     = '0;
  assign result_ready = 1'b1;
  assign mem_result_valid = pend_valid;
  assign mem_result       = '{id: pend_id, rdata: {16'h0, pend_data}, err: 1'b0};

  always @(posedge clk) begin
    if (running) cycles <= cycles + 1;
    if (issue_valid && issue_ready) begin
      checks++;
      if (!issue_resp.accept) begin
        failures++;
        $display("FAIL instruction %0d rejected", pc);
      end
      pc      <= pc + 1;
      next_id <= next_id + 1'b1;
    end
    // memory: accept every request, answer loads one cycle later
    pend_valid <= 1'b0;
    if (rst_n && mem_valid && mem_ready) begin
      pend_valid <= 1'b1;
      pend_id    <= mem_req.id;
      pend_data  <= mem[32'(mem_req.addr[31:1]) % MEMSZ];
      if (mem_req.we) mem[32'(mem_req.addr[31:1]) % MEMSZ] <= mem_req.wdata[15:0];
    end
    if (rst_n && result_valid && result_ready) begin
      n_results <= n_results + 1;
      checks++;
      if (result.id != exp_id || result.we || result.exc) begin
        failures++;
        if (failures < 10) $display("FAIL result %0d: id %0d (expected %0d) we %b exc %b",
                                    n_results, result.id, exp_id, result.we, result.exc);
      end
      exp_id <= exp_id + 1'b1;
    end
  end

  // ---------------------------------------------------------------- test
  initial begin
    real x, err2, sig2, ang;
    int  half, span, a, b, k;
    logic [15:0] ar, ai, br, bi, wr, wi, tr, ti;

    // input: three tones plus noise, stored in bit-reversed order
    for (int i = 0; i < NPT; i++) begin
      x = 0.5 * $cos(2.0 * 3.14159265358979 * 37.0 * i / NPT)
        + 0.25 * $sin(2.0 * 3.14159265358979 * 401.0 * i / NPT)
        + 0.125 * $cos(2.0 * 3.14159265358979 * 1500.0 * i / NPT)
        + 0.01 * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0);
      mem[RE0 + bitrev(i)] = from_real(x);
      mem[IM0 + bitrev(i)] = 16'h0000;
    end
    for (int i = 0; i < NPT / 2; i++) begin
      ang = 2.0 * 3.14159265358979 * i / NPT;
      mem[WR0 + i] = from_real($cos(ang));
      mem[WI0 + i] = from_real(-$sin(ang));
    end
    for (int i = 0; i < MEMSZ; i++) refm[i] = mem[i];
    for (int i = 0; i < NPT; i++) begin
      dre[i] = to_real(17'(mem[RE0 + i]), 16);
      dim[i] = 0.0;
    end

    // program, reference posit FFT and double-precision FFT, stage by stage
    for (int s = 1; s <= LOGN; s++) begin
      span = 1 << s;
      half = span / 2;
      for (int g = 0; g < NPT; g += span) begin
        for (int j = 0; j < half; j++) begin
          real cr, ci, er, ei, fr, fi;
          a = g + j;
          b = a + half;
          k = j * (NPT / span);
          prog.push_back('{i_plh(1), 32'(2 * (RE0 + a))});
          prog.push_back('{i_plh(2), 32'(2 * (IM0 + a))});
          prog.push_back('{i_plh(3), 32'(2 * (RE0 + b))});
          prog.push_back('{i_plh(4), 32'(2 * (IM0 + b))});
          prog.push_back('{i_plh(5), 32'(2 * (WR0 + k))});
          prog.push_back('{i_plh(6), 32'(2 * (WI0 + k))});
          prog.push_back('{i_op(F5_MUL, 7, 3, 5), 32'h0});
          prog.push_back('{i_op(F5_MUL, 8, 4, 6), 32'h0});
          prog.push_back('{i_op(F5_SUB, 7, 7, 8), 32'h0});
          prog.push_back('{i_op(F5_MUL, 9, 3, 6), 32'h0});
          prog.push_back('{i_op(F5_MUL, 10, 4, 5), 32'h0});
          prog.push_back('{i_op(F5_ADD, 9, 9, 10), 32'h0});
          prog.push_back('{i_op(F5_SUB, 11, 1, 7), 32'h0});
          prog.push_back('{i_op(F5_SUB, 12, 2, 9), 32'h0});
          prog.push_back('{i_op(F5_ADD, 13, 1, 7), 32'h0});
          prog.push_back('{i_op(F5_ADD, 14, 2, 9), 32'h0});
          prog.push_back('{i_psh(13), 32'(2 * (RE0 + a))});
          prog.push_back('{i_psh(14), 32'(2 * (IM0 + a))});
          prog.push_back('{i_psh(11), 32'(2 * (RE0 + b))});
          prog.push_back('{i_psh(12), 32'(2 * (IM0 + b))});
          // the same butterfly in the reference posit model
          ar = refm[RE0 + a]; ai = refm[IM0 + a]; br = refm[RE0 + b]; bi = refm[IM0 + b];
          wr = refm[WR0 + k]; wi = refm[WI0 + k];
          tr = ref_add(ref_mul(br, wr), neg(ref_mul(bi, wi)));
          ti = ref_add(ref_mul(br, wi), ref_mul(bi, wr));
          refm[RE0 + a] = ref_add(ar, tr);
          refm[IM0 + a] = ref_add(ai, ti);
          refm[RE0 + b] = ref_add(ar, neg(tr));
          refm[IM0 + b] = ref_add(ai, neg(ti));
          // and in double precision with exact twiddles
          cr = $cos(2.0 * 3.14159265358979 * k / NPT);
          ci = -$sin(2.0 * 3.14159265358979 * k / NPT);
          er = dre[b] * cr - dim[b] * ci;
          ei = dre[b] * ci + dim[b] * cr;
          fr = dre[a]; fi = dim[a];
          dre[a] = fr + er; dim[a] = fi + ei;
          dre[b] = fr - er; dim[b] = fi - ei;
        end
      end
    end
    $display("FFT program: %0d instructions (%0d butterflies)", prog.size(), prog.size() / 20);

    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    running <= 1'b1;
    wait (pc == unsigned'(prog.size()) && n_results == unsigned'(prog.size()));
    repeat (5) @(posedge clk);
    running <= 1'b0;

    // bit-exact against the reference posit FFT
    begin
      int bad;
      bad = 0;
      for (int i = 0; i < MEMSZ; i++) begin
        checks++;
        if (mem[i] != refm[i]) begin
          bad++;
          failures++;
          if (bad < 10) $display("FAIL mem[%0d] = %h, reference %h", i, mem[i], refm[i]);
        end
      end
    end
    // accuracy against double precision
    err2 = 0.0; sig2 = 0.0;
    for (int i = 0; i < NPT; i++) begin
      real er, ei;
      er = to_real(17'(mem[RE0 + i]), 16) - dre[i];
      ei = to_real(17'(mem[IM0 + i]), 16) - dim[i];
      err2 += er * er + ei * ei;
      sig2 += dre[i] * dre[i] + dim[i] * dim[i];
    end
    $display("posit16 FFT relative RMS error vs double: %f", $sqrt(err2 / sig2));
    checks++;
    if ($sqrt(err2 / sig2) > 0.01) begin
      failures++;
      $display("FAIL relative RMS error too large");
    end
    $display("cycles for %0d instructions: %0d (%f instructions per cycle)", prog.size(), cycles,
             real'(prog.size()) / real'(cycles));
    checks++;
    if (cycles > 2 * prog.size()) begin
      failures++;
      $display("FAIL throughput below one instruction every two cycles");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired at instruction %0d", pc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
