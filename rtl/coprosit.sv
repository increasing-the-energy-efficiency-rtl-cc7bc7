// coprosit: posit16 coprocessor attached to a RISC-V CPU through the CV-X-IF.
//
// Datapath and control, in the order an instruction meets them:
//  1. Issue: the predecoder tells the CPU in the same cycle whether the
//     offered instruction is a posit instruction (accept), whether it writes
//     an integer register and whether it uses memory. An accepted instruction
//     is stored with its id and x[rs1] in the one-entry input buffer.
//     issue_ready is low while the buffer cannot take it, or while an
//     instruction that needs x[rs1] is offered without that value.
//  2. The decoder decodes the buffer head; the controller waits for the
//     commit of its id (or drops it when killed), checks the load scoreboard
//     and the result FIFO, and fires it.
//  3. The execution stage reads the posit register file (or the forwarded
//     load data), computes in the PRAU or the comparison ALU in the same
//     cycle, and writes the posit register or the result FIFO.
//     Memory instructions instead raise a request on the memory interface;
//     its bookkeeping waits in the memory stream FIFO for the memory result,
//     whose data is written into the register file.
//  4. The result FIFO drives the result interface: one transaction per
//     committed instruction, with an integer write for comparisons,
//     posit-to-integer conversions and moves to x registers.
// Throughput is one instruction per cycle when commits arrive in time; the
// latency from issue to result is two cycles (buffer, then result FIFO).
// Ports are the CV-X-IF channels as structs from coprosit_pkg. The block
// structure follows the paper's Coprosit diagram; encodings, buffer depths
// other than the input buffer, and timing are this design's.
module coprosit #(
  parameter int unsigned POSIT_N       = 16,
  parameter int unsigned MEMFIFO_DEPTH = 2,
  parameter int unsigned RESFIFO_DEPTH = 2
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  // issue interface
  input  logic                          x_issue_valid_i,
  output logic                          x_issue_ready_o,
  input  coprosit_pkg::x_issue_req_t    x_issue_req_i,
  output coprosit_pkg::x_issue_resp_t   x_issue_resp_o,
  // commit interface
  input  logic                          x_commit_valid_i,
  input  coprosit_pkg::x_commit_t       x_commit_i,
  // memory (request/response) interface
  output logic                          x_mem_valid_o,
  input  logic                          x_mem_ready_i,
  output coprosit_pkg::x_mem_req_t      x_mem_req_o,
  input  coprosit_pkg::x_mem_resp_t     x_mem_resp_i,
  // memory result interface
  input  logic                          x_mem_result_valid_i,
  input  coprosit_pkg::x_mem_result_t   x_mem_result_i,
  // result interface
  output logic                          x_result_valid_o,
  input  logic                          x_result_ready_i,
  output coprosit_pkg::x_result_t       x_result_o
);
  import coprosit_pkg::*;

  // ---------------------------------------------------------------- issue
  logic accept, writeback, loadstore, use_xrs1;
  logic ibuf_push_ready, ibuf_valid, ibuf_pop;
  ibuf_entry_t ibuf_in, ibuf_head;

  coprosit_predecoder u_predecoder (
    .instr_i(x_issue_req_i.instr), .accept_o(accept), .writeback_o(writeback),
    .loadstore_o(loadstore), .use_xrs1_o(use_xrs1));

  assign x_issue_resp_o  = '{accept: accept, writeback: writeback, loadstore: loadstore};
  assign x_issue_ready_o = !accept || (ibuf_push_ready && (!use_xrs1 || x_issue_req_i.rs_valid[0]));
  assign ibuf_in         = '{instr: x_issue_req_i.instr, id: x_issue_req_i.id, xrs1: x_issue_req_i.rs0};

  coprosit_fifo #(.T(ibuf_entry_t), .DEPTH(1)) u_input_buffer (
    .clk_i, .rst_ni,
    .push_valid_i(x_issue_valid_i && accept && x_issue_ready_o), .push_ready_o(ibuf_push_ready),
    .push_data_i(ibuf_in), .pop_valid_o(ibuf_valid), .pop_ready_i(ibuf_pop), .pop_data_o(ibuf_head),
    .count_o());

  // ---------------------------------------------------------------- decode
  decoded_t dec;
  coprosit_decoder u_decoder (.instr_i(ibuf_head.instr), .dec_o(dec));

  // ---------------------------------------------------------------- register file
  logic [POSIT_N-1:0] rdata_a, rdata_b;
  logic rf_we_ex, rf_we_mem;
  logic [31:0] ex_result, mem_addr, mem_wdata;
  mem_entry_t mem_head;

  posit_regfile #(.NUM_REGS(NUM_PREGS), .N(POSIT_N)) u_regfile (
    .clk_i, .rst_ni,
    .raddr_a_i(dec.rs1), .rdata_a_o(rdata_a),
    .raddr_b_i(dec.rs2), .rdata_b_o(rdata_b),
    .we_ex_i(rf_we_ex), .waddr_ex_i(dec.rd), .wdata_ex_i(ex_result[POSIT_N-1:0]),
    .we_mem_i(rf_we_mem && !x_mem_result_i.err), .waddr_mem_i(mem_head.rd), .wdata_mem_i(x_mem_result_i.rdata[POSIT_N-1:0]));

  // ---------------------------------------------------------------- controller
  logic ex_valid, ex_ready, ex_out_valid, fwd_a, fwd_b;
  logic memfifo_ready, memfifo_push, memfifo_pop, memfifo_valid;
  logic resfifo_ready, resfifo_push;
  logic [$clog2(RESFIFO_DEPTH > 1 ? RESFIFO_DEPTH : 2):0] resfifo_count;
  logic [$clog2(MEMFIFO_DEPTH > 1 ? MEMFIFO_DEPTH : 2):0] memfifo_count;
  logic stall, kill;

  coprosit_controller u_controller (
    .clk_i, .rst_ni,
    .head_valid_i(ibuf_valid), .head_id_i(ibuf_head.id), .dec_i(dec), .head_pop_o(ibuf_pop),
    .commit_valid_i(x_commit_valid_i), .commit_i(x_commit_i),
    .ex_valid_o(ex_valid), .ex_ready_i(ex_ready), .fwd_a_o(fwd_a), .fwd_b_o(fwd_b), .rf_we_ex_o(rf_we_ex),
    .mem_valid_o(x_mem_valid_o), .mem_ready_i(x_mem_ready_i),
    .memfifo_ready_i(memfifo_count < ($bits(memfifo_count))'(MEMFIFO_DEPTH)), .memfifo_push_o(memfifo_push),
    .mem_result_valid_i(x_mem_result_valid_i), .mem_head_i(mem_head),
    .rf_we_mem_o(rf_we_mem), .memfifo_pop_o(memfifo_pop),
    .resfifo_ready_i(resfifo_ready),
    .resfifo_space_i(resfifo_count < ($bits(resfifo_count))'(RESFIFO_DEPTH)), .resfifo_push_o(resfifo_push),
    .stall_o(stall), .kill_o(kill));

  // ---------------------------------------------------------------- execution
  coprosit_exec #(.N(POSIT_N)) u_exec (
    .dec_i(dec), .xrs1_i(ibuf_head.xrs1), .rdata_a_i(rdata_a), .rdata_b_i(rdata_b),
    .fwd_a_i(fwd_a), .fwd_b_i(fwd_b), .fwd_data_i(x_mem_result_i.rdata[POSIT_N-1:0]),
    .in_valid_i(ex_valid), .in_ready_o(ex_ready), .out_valid_o(ex_out_valid), .out_ready_i(resfifo_ready),
    .result_o(ex_result), .mem_addr_o(mem_addr), .mem_wdata_o(mem_wdata));

  assign x_mem_req_o = '{id: ibuf_head.id, addr: mem_addr, we: dec.is_store, size: 2'd1, wdata: mem_wdata};

  // ---------------------------------------------------------------- memory stream FIFO
  mem_entry_t mem_in;
  assign mem_in = '{id: ibuf_head.id, rd: dec.rd, is_load: !dec.is_store};

  coprosit_fifo #(.T(mem_entry_t), .DEPTH(MEMFIFO_DEPTH)) u_mem_stream_fifo (
    .clk_i, .rst_ni,
    .push_valid_i(memfifo_push), .push_ready_o(memfifo_ready), .push_data_i(mem_in),
    .pop_valid_o(memfifo_valid), .pop_ready_i(memfifo_pop), .pop_data_o(mem_head), .count_o(memfifo_count));

  // ---------------------------------------------------------------- result FIFO
  x_result_t res_in;
  always_comb begin
    if (dec.unit == UNIT_MEM)
      res_in = '{id: ibuf_head.id, data: '0, rd: dec.rd, we: 1'b0,
                 exc: x_mem_resp_i.exc, exccode: x_mem_resp_i.exccode};
    else
      res_in = '{id: ibuf_head.id, data: ex_result, rd: dec.rd, we: dec.rd_is_x,
                 exc: 1'b0, exccode: '0};
  end

  coprosit_fifo #(.T(x_result_t), .DEPTH(RESFIFO_DEPTH)) u_result_fifo (
    .clk_i, .rst_ni,
    .push_valid_i(resfifo_push), .push_ready_o(resfifo_ready), .push_data_i(res_in),
    .pop_valid_o(x_result_valid_o), .pop_ready_i(x_result_ready_i), .pop_data_o(x_result_o), .count_o(resfifo_count));

  // ---------------------------------------------------------------- protocol rules
  // a memory request is held until the CPU accepts it
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   x_mem_valid_o && !x_mem_ready_i |=> x_mem_valid_o && $stable(x_mem_req_o));
  // a memory result only arrives for an outstanding request
  assert property (@(posedge clk_i) disable iff (!rst_ni) x_mem_result_valid_i |-> memfifo_valid);
  // the execution stage answers in the cycle it is fired
  assert property (@(posedge clk_i) disable iff (!rst_ni) ex_valid |-> ex_out_valid);
endmodule
