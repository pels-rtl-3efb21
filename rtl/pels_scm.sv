// pels_scm: private instruction memory of one PELS link.
//
// NUM_LINES words of 48 bits, one command each (opcode, 12-bit field, 32-bit
// operand). The paper builds it as a standard-cell memory (latch array) so
// that a line can be read in the same cycle its address is presented, without
// the sense amplifiers of an SRAM macro. This model keeps that behaviour with
// a flip-flop array: one synchronous write port for the CPU and one
// asynchronous read port for the execution unit. A latch array with clock
// gating would be the area-optimal mapping in a given technology.
//
// Timing: a write with we_i high lands on the rising edge; rdata_o follows
// raddr_i combinationally. Contents are cleared to OPC_END (all zero) by reset
// so an unprogrammed link ends at once when triggered.
module pels_scm
  import pels_pkg::*;
#(
  parameter int unsigned NUM_LINES = 6
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  logic                         we_i,
  input  logic [PC_W-1:0]              waddr_i,
  input  cmd_t                         wdata_i,
  input  logic [PC_W-1:0]              raddr_i,
  output cmd_t                         rdata_o
);

  localparam int unsigned IDX_W = (NUM_LINES > 1) ? $clog2(NUM_LINES) : 1;

  cmd_t mem_q [NUM_LINES];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned i = 0; i < NUM_LINES; i++) mem_q[i] <= '0;
    end else if (we_i && (32'(waddr_i) < NUM_LINES)) begin
      mem_q[waddr_i[IDX_W-1:0]] <= wdata_i;
    end
  end

  always_comb begin
    if (32'(raddr_i) < NUM_LINES) rdata_o = mem_q[raddr_i[IDX_W-1:0]];
    else                          rdata_o = '0;  // reads past the end give END
  end

endmodule
