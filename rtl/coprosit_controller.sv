// coprosit_controller: sequencing of Coprosit.
//
// The controller decides, every cycle, what happens to the instruction at
// the head of the input buffer:
//  * Commit tracking. The CPU commits or kills each offloaded instruction on
//    the commit interface, before or after it reaches the head. One
//    committed and one killed bit per instruction id record this; a commit
//    counts from the cycle after it arrives, so a commit sent together with
//    the issue handshake costs nothing. The head waits until its id is
//    committed; a killed head is dropped without a result.
//  * Scoreboard. Loads write their posit register only when the memory
//    result returns. A bit per posit register marks those still pending; an
//    instruction that reads or writes a pending register stalls.
//  * Forwarding. When the pending load completes in the current cycle, its
//    data is forwarded to the operand that needs it and the waiting
//    instruction proceeds in that same cycle instead of stalling.
//  * Issue. A non-memory instruction fires when the execution stage is
//    ready (the result FIFO has room); it writes its posit register or sends
//    its integer result. A memory instruction raises a memory request and
//    completes when the CPU accepts it; its result transaction (no register
//    write, exception status of the request) is sent at that moment, and its
//    rd and type go into the memory stream FIFO.
// Every committed, non-killed instruction produces exactly one result
// transaction. The commit and forwarding mechanisms follow the paper's
// configuration ("forwarding was enabled", input buffer depth one, in-order);
// the scoreboard and the moment results are sent are this design's choices.
module coprosit_controller #(
  localparam int unsigned NID = 2 ** coprosit_pkg::X_ID_WIDTH
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  // head of the input buffer
  input  logic                       head_valid_i,
  input  coprosit_pkg::x_id_t        head_id_i,
  input  coprosit_pkg::decoded_t     dec_i,
  output logic                       head_pop_o,
  // commit interface
  input  logic                       commit_valid_i,
  input  coprosit_pkg::x_commit_t    commit_i,
  // execution stage
  output logic                       ex_valid_o,
  input  logic                       ex_ready_i,
  output logic                       fwd_a_o,
  output logic                       fwd_b_o,
  output logic                       rf_we_ex_o,
  // memory request
  output logic                       mem_valid_o,
  input  logic                       mem_ready_i,
  input  logic                       memfifo_ready_i,   // room without a pop
  output logic                       memfifo_push_o,
  // memory result (head of the memory stream FIFO)
  input  logic                       mem_result_valid_i,
  input  coprosit_pkg::mem_entry_t   mem_head_i,
  output logic                       rf_we_mem_o,
  output logic                       memfifo_pop_o,
  // result FIFO
  input  logic                       resfifo_ready_i,   // room now (may rely on a pop this cycle)
  input  logic                       resfifo_space_i,   // room without a pop
  output logic                       resfifo_push_o,
  // events, for observation
  output logic                       stall_o,
  output logic                       kill_o
);
  import coprosit_pkg::*;

  logic [NID-1:0] committed_q, killed_q;
  logic [NUM_PREGS-1:0] pending_q;
  logic committed, killed, completing;
  logic haz_a, haz_b, haz_d;
  logic can_go, is_mem;

  // ---------------------------------------------------------------- commit state
  // Only registered commit state is used: a commit arriving in this cycle
  // takes effect in the next one. Using it at once would make x_issue_ready
  // depend on x_commit_valid (through the head pop and the input buffer), a
  // combinational loop with a host that commits in the issue cycle.
  assign committed = committed_q[head_id_i];
  assign killed    = killed_q[head_id_i];

  // ---------------------------------------------------------------- hazards
  assign completing = mem_result_valid_i && mem_head_i.is_load;
  assign fwd_a_o    = completing && dec_i.use_prs1 && mem_head_i.rd == dec_i.rs1 && pending_q[dec_i.rs1];
  assign fwd_b_o    = completing && dec_i.use_prs2 && mem_head_i.rd == dec_i.rs2 && pending_q[dec_i.rs2];
  assign haz_a      = dec_i.use_prs1 && pending_q[dec_i.rs1] && !fwd_a_o;
  assign haz_b      = dec_i.use_prs2 && pending_q[dec_i.rs2] && !fwd_b_o;
  // a write to a register with a load still in flight waits (unless that load
  // completes now, in which case the younger write wins in the register file)
  assign haz_d      = !dec_i.rd_is_x && !(dec_i.unit == UNIT_MEM && dec_i.is_store) &&
                      pending_q[dec_i.rd] && !(completing && mem_head_i.rd == dec_i.rd);

  assign is_mem = (dec_i.unit == UNIT_MEM);
  assign can_go = head_valid_i && committed && !killed && !haz_a && !haz_b && !haz_d;

  // A memory request, once raised, must stay up until the CPU takes it. It
  // is therefore raised only when both FIFOs have room that no pop has to
  // provide; nothing else can take that room while the request waits.
  always_comb begin
    ex_valid_o     = can_go && !is_mem && resfifo_ready_i;
    mem_valid_o    = can_go && is_mem && memfifo_ready_i && resfifo_space_i;
    memfifo_push_o = mem_valid_o && mem_ready_i;
    rf_we_ex_o     = ex_valid_o && ex_ready_i && !dec_i.rd_is_x;
    resfifo_push_o = (ex_valid_o && ex_ready_i) || memfifo_push_o;
    head_pop_o     = resfifo_push_o || (head_valid_i && killed);
    rf_we_mem_o    = completing;
    memfifo_pop_o  = mem_result_valid_i;
    kill_o         = head_valid_i && killed;
    stall_o        = head_valid_i && committed && !killed && !head_pop_o;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      committed_q <= '0;
      killed_q    <= '0;
      pending_q   <= '0;
    end else begin
      if (commit_valid_i) begin
        committed_q[commit_i.id] <= !commit_i.commit_kill;
        killed_q[commit_i.id]    <= commit_i.commit_kill;
      end
      if (head_pop_o) begin
        committed_q[head_id_i] <= 1'b0;
        killed_q[head_id_i]    <= 1'b0;
      end
      if (completing) pending_q[mem_head_i.rd] <= 1'b0;
      if (memfifo_push_o && !dec_i.is_store) pending_q[dec_i.rd] <= 1'b1;
    end
  end

  // the head is a decodable posit instruction (the predecoder filtered it)
  assert property (@(posedge clk_i) disable iff (!rst_ni) head_valid_i |-> dec_i.valid);
  // results are only pushed where there is room
  assert property (@(posedge clk_i) disable iff (!rst_ni) resfifo_push_o |-> resfifo_ready_i);
endmodule
