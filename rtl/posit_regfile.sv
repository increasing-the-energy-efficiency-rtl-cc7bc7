// posit_regfile: the 32-entry posit register file of Coprosit.
//
// NUM_REGS registers of N bits, all usable (unlike x0 there is no constant
// register). Two asynchronous read ports serve rs1 and rs2 of the instruction
// being executed (rs2 also supplies store data). Two write ports are written
// at the rising clock edge: one from the execution stage and one from the
// memory result interface (load data). If both write the same register in
// one cycle the execution port wins, because its instruction is the younger
// one. Reset clears every register. The register count and width follow the
// paper; the port arrangement and reset are this design's choices.
module posit_regfile #(
  parameter int unsigned NUM_REGS = 32,
  parameter int unsigned N        = 16,
  localparam int unsigned AW      = $clog2(NUM_REGS)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [AW-1:0] raddr_a_i,
  output logic [N-1:0]  rdata_a_o,
  input  logic [AW-1:0] raddr_b_i,
  output logic [N-1:0]  rdata_b_o,
  input  logic          we_ex_i,
  input  logic [AW-1:0] waddr_ex_i,
  input  logic [N-1:0]  wdata_ex_i,
  input  logic          we_mem_i,
  input  logic [AW-1:0] waddr_mem_i,
  input  logic [N-1:0]  wdata_mem_i
);
  logic [N-1:0] regs_q [NUM_REGS];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < int'(NUM_REGS); i++) regs_q[i] <= '0;
    end else begin
      if (we_mem_i) regs_q[waddr_mem_i] <= wdata_mem_i;
      if (we_ex_i)  regs_q[waddr_ex_i]  <= wdata_ex_i;
    end
  end

  assign rdata_a_o = regs_q[raddr_a_i];
  assign rdata_b_o = regs_q[raddr_b_i];
endmodule
