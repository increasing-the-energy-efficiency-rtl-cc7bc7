// tb_coprosit_kmeans: workload testbench, the k-means clustering step of an
// R-peak detector in posit16, run through the Coprosit coprocessor at its
// default parameters.
//
// The R-peak detector splits ECG samples into a baseline cluster and an
// R-peak cluster with two-centroid k-means. Unlike the FFT, the host here
// depends on the coprocessor's integer results: every assignment is a
// posit comparison (PLT) whose result comes back on the result interface and
// steers the host's branch. The testbench plays such a host. It issues one
// instruction at a time, commits it with the issue handshake, waits for its
// result transaction and uses the returned integer. The memory interface is
// served from a halfword array (always ready, results one cycle later).
//
// Per sample and iteration (p10, p11 hold the centroids; p12, p13 the sums):
//   PLH  p1, x[i]
//   PSUB p2 = p1 - p10;  PMUL p2 = p2*p2
//   PSUB p3 = p1 - p11;  PMUL p3 = p3*p3
//   PLT  xd = p3 < p2            (host reads xd and branches)
//   PADD p12 = p12 + p1  or  PADD p13 = p13 + p1
// After each pass the host converts its two counts with PCVT.P.W and
// divides (PDIV) to get the new centroids. At the end PMV.X.P returns them.
// The sums restart from zero by PSUB p12 = p12 - p12.
//
// Checks:
//  * every returned comparison, and the final centroids, equal the same
//    computation done with the reference posit model;
//  * the posit16 centroids lie within 2% of a double-precision k-means on
//    the same samples, and the assignments agree in at least 99% of cases;
//  * every instruction is accepted and answers with its own id.
module tb_coprosit_kmeans;
  import posit_ref_pkg::*;
  import coprosit_pkg::*;

  localparam int NS    = 512;    // samples in one analysis window (own choice)
  localparam int ITERS = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          issue_valid = 0, mem_result_valid;
  logic          issue_ready, commit_valid, mem_valid, result_valid;
  x_issue_req_t  issue_req = '0;
  x_issue_resp_t issue_resp;
  x_commit_t     commit;
  x_mem_req_t    mem_req;
  x_mem_result_t mem_result;
  x_result_t     result;

  coprosit dut (
    .clk_i(clk), .rst_ni(rst_n),
    .x_issue_valid_i(issue_valid), .x_issue_ready_o(issue_ready), .x_issue_req_i(issue_req), .x_issue_resp_o(issue_resp),
    .x_commit_valid_i(commit_valid), .x_commit_i(commit),
    .x_mem_valid_o(mem_valid), .x_mem_ready_i(1'b1), .x_mem_req_o(mem_req), .x_mem_resp_i('0),
    .x_mem_result_valid_i(mem_result_valid), .x_mem_result_i(mem_result),
    .x_result_valid_o(result_valid), .x_result_ready_i(1'b1), .x_result_o(result));

  assign commit_valid = issue_valid && issue_ready && issue_resp.accept;
  assign commit       = '{id: issue_req.id, commit_kill: 1'b0};

  // ---------------------------------------------------------------- memory
  logic [15:0] mem[NS];
  logic        pend_valid = 0;
  logic [15:0] pend_data;
  x_id_t       pend_id;
  assign mem_result_valid = pend_valid;
  assign mem_result       = '{id: pend_id, rdata: {16'h0, pend_data}, err: 1'b0};

  always @(posedge clk) begin
    pend_valid <= 1'b0;
    if (rst_n && mem_valid) begin
      pend_valid <= 1'b1;
      pend_id    <= mem_req.id;
      pend_data  <= mem[32'(mem_req.addr[31:1]) % NS];
      if (mem_req.we) mem[32'(mem_req.addr[31:1]) % NS] <= mem_req.wdata[15:0];
    end
  end

  // ---------------------------------------------------------------- host
  x_id_t next_id = 0;
  int unsigned n_instr = 0;

  // issue one instruction, commit it with the handshake, wait for its result
  task automatic exec(input logic [31:0] instr, input logic [31:0] xv, output logic [31:0] data);
    @(negedge clk);
    issue_valid     = 1'b1;
    issue_req.instr = instr;
    issue_req.id    = next_id;
    issue_req.rs0   = xv;
    issue_req.rs_valid = 2'b11;
    #1;
    while (!issue_ready) begin
      @(negedge clk);
      #1;
    end
    checks++;
    if (!issue_resp.accept) begin
      failures++;
      $display("FAIL instruction %h rejected", instr);
    end
    @(posedge clk);
    #1;
    issue_valid = 1'b0;
    while (!result_valid) begin
      @(negedge clk);
    end
    checks++;
    if (result.id != next_id) begin
      failures++;
      $display("FAIL result id %0d, expected %0d", result.id, next_id);
    end
    data = result.data;
    @(posedge clk);
    next_id = next_id + 1'b1;
    n_instr++;
  endtask

  function automatic logic [31:0] i_op(logic [4:0] f5, logic [2:0] f3, int rd, int pa, int pb);
    return {f5, 2'b01, 5'(pb), 5'(pa), f3, 5'(rd), 7'b1011011};
  endfunction
  function automatic logic [31:0] i_plh(int pd);
    return {12'h000, 5'd10, 3'b001, 5'(pd), 7'b0001011};
  endfunction

  function automatic real absr(real r);
    return (r < 0.0) ? -r : r;
  endfunction

  // ---------------------------------------------------------------- test
  initial begin
    logic [31:0] d;
    logic [15:0] x[NS];
    logic [15:0] rc0, rc1, rs0, rs1, t0, t1;
    real         dc0, dc1, ds0, ds1, v;
    int          n0, n1, dn0, dn1, agree;
    bit          lt, rlt, dlt;

    // ECG-like samples: baseline wander and noise, with an R peak every 80 samples
    for (int i = 0; i < NS; i++) begin
      v = 0.05 * $sin(2.0 * 3.14159265358979 * i / 200.0) + 0.02 * (real'($urandom_range(0, 1000)) / 1000.0 - 0.5);
      if (i % 80 >= 38 && i % 80 <= 42) v += 0.9 - 0.15 * ((i % 80) - 40) * ((i % 80) - 40);
      x[i]   = from_real(v);
      mem[i] = x[i];
    end

    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // initial centroids: the first sample and the largest one
    rc0 = x[0]; rc1 = x[0];
    for (int i = 0; i < NS; i++) if ($signed(x[i]) > $signed(rc1)) rc1 = x[i];
    exec(i_plh(10), 32'(0), d);
    exec(i_op(F5_MVPX, 3'b000, 11, 0, 0), {16'h0, rc1}, d);
    dc0 = to_real(17'(rc0), 16); dc1 = to_real(17'(rc1), 16);
    agree = 0;

    for (int it = 0; it < ITERS; it++) begin
      exec(i_op(F5_SUB, 3'b000, 12, 12, 12), 32'h0, d);   // p12 = 0 (x - x)
      exec(i_op(F5_SUB, 3'b000, 13, 13, 13), 32'h0, d);
      rs0 = 16'h0; rs1 = 16'h0; n0 = 0; n1 = 0;
      ds0 = 0.0; ds1 = 0.0; dn0 = 0; dn1 = 0;
      for (int i = 0; i < NS; i++) begin
        exec(i_plh(1), 32'(2 * i), d);
        exec(i_op(F5_SUB, 3'b000, 2, 1, 10), 32'h0, d);
        exec(i_op(F5_MUL, 3'b000, 2, 2, 2), 32'h0, d);
        exec(i_op(F5_SUB, 3'b000, 3, 1, 11), 32'h0, d);
        exec(i_op(F5_MUL, 3'b000, 3, 3, 3), 32'h0, d);
        exec(i_op(F5_CMP, 3'b001, 5, 3, 2), 32'h0, d);      // PLT x5 = d1 < d0
        lt = d[0];
        // reference posit model of the same steps
        t0 = ref_add(x[i], neg(rc0)); t0 = ref_mul(t0, t0);
        t1 = ref_add(x[i], neg(rc1)); t1 = ref_mul(t1, t1);
        rlt = $signed(t1) < $signed(t0);
        checks++;
        if (d[31:1] != 0 || lt != rlt) begin
          failures++;
          if (failures < 10) $display("FAIL PLT at it %0d sample %0d: %h, reference %0d", it, i, d, rlt);
        end
        if (lt) begin
          exec(i_op(F5_ADD, 3'b000, 13, 13, 1), 32'h0, d);
          rs1 = ref_add(rs1, x[i]); n1++;
        end else begin
          exec(i_op(F5_ADD, 3'b000, 12, 12, 1), 32'h0, d);
          rs0 = ref_add(rs0, x[i]); n0++;
        end
        // double precision
        v = to_real(17'(x[i]), 16);
        dlt = (v - dc1) * (v - dc1) < (v - dc0) * (v - dc0);
        if (dlt) begin ds1 += v; dn1++; end else begin ds0 += v; dn0++; end
        if (it == ITERS - 1 && dlt == lt) agree++;
      end
      // new centroids: sum / count
      if (n0 > 0) begin
        exec(i_op(F5_I2P, 3'b000, 14, 0, 0), 32'(n0), d);
        exec(i_op(F5_DIV, 3'b000, 10, 12, 14), 32'h0, d);
        rc0 = ref_div(rs0, ref_i2p(32'(n0), 1'b0));
      end
      if (n1 > 0) begin
        exec(i_op(F5_I2P, 3'b000, 14, 0, 0), 32'(n1), d);
        exec(i_op(F5_DIV, 3'b000, 11, 13, 14), 32'h0, d);
        rc1 = ref_div(rs1, ref_i2p(32'(n1), 1'b0));
      end
      if (dn0 > 0) dc0 = ds0 / dn0;
      if (dn1 > 0) dc1 = ds1 / dn1;
      $display("iteration %0d: clusters %0d / %0d, centroids %f / %f (double %f / %f)", it, n0, n1,
               to_real(17'(rc0), 16), to_real(17'(rc1), 16), dc0, dc1);
    end

    // read the centroids back into integer registers
    exec(i_op(F5_MVXP, 3'b000, 6, 10, 0), 32'h0, d);
    checks++;
    if (d[15:0] != rc0) begin failures++; $display("FAIL centroid 0 %h, reference %h", d[15:0], rc0); end
    exec(i_op(F5_MVXP, 3'b000, 6, 11, 0), 32'h0, d);
    checks++;
    if (d[15:0] != rc1) begin failures++; $display("FAIL centroid 1 %h, reference %h", d[15:0], rc1); end
    checks++;
    if (absr(to_real(17'(rc0), 16) - dc0) > 0.02 * absr(dc1) ||
        absr(to_real(17'(rc1), 16) - dc1) > 0.02 * absr(dc1)) begin
      failures++;
      $display("FAIL centroids too far from double precision");
    end
    checks++;
    if (agree < NS * 99 / 100) begin
      failures++;
      $display("FAIL only %0d of %0d assignments agree with double precision", agree, NS);
    end
    $display("%0d instructions, %0d of %0d final assignments agree with double precision", n_instr, agree, NS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired after %0d instructions", n_instr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
