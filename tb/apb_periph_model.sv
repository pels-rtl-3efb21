// apb_periph_model: behavioural APB (v3) peripheral for the PELS testbenches.
//
// A 1024-word register file addressed by PADDR[11:2]; other address bits are
// ignored. It stands in for the host SoC's peripherals (flag, data and GPIO
// registers) behind the peripheral interconnect. WAIT_MODE 0 answers every
// ACCESS cycle with PREADY (zero wait states); WAIT_MODE 1 inserts a random
// number (0-3) of wait states. Testbenches read and write the registers
// directly through the regs array and count transfers with n_rd / n_wr.
// The last completed write's address and cycle are kept for latency checks.
module apb_periph_model #(
  parameter int unsigned WAIT_MODE = 0
) (
  input  logic        clk_i,
  input  logic        psel_i,
  input  logic        penable_i,
  input  logic        pwrite_i,
  input  logic [31:0] paddr_i,
  input  logic [31:0] pwdata_i,
  output logic [31:0] prdata_o,
  output logic        pready_o,
  output logic        pslverr_o
);

  logic [31:0] regs [1024];
  int unsigned n_rd = 0, n_wr = 0;
  int unsigned wait_left = 0;
  bit          in_access = 0;
  longint unsigned cycle = 0;
  longint unsigned last_wr_cycle = 0;
  logic [31:0] last_wr_addr = '0;

  initial for (int i = 0; i < 1024; i++) regs[i] = '0;

  assign prdata_o  = regs[paddr_i[11:2]];
  assign pslverr_o = 1'b0;
  assign pready_o  = (WAIT_MODE == 0) ? 1'b1 : (wait_left == 0);

  always @(posedge clk_i) begin
    cycle <= cycle + 1;
    if (psel_i && !penable_i) begin
      wait_left <= (WAIT_MODE == 0) ? 0 : $urandom_range(0, 3);
    end else if (psel_i && penable_i && !pready_o) begin
      wait_left <= wait_left - 1;
    end
    if (psel_i && penable_i && pready_o) begin
      if (pwrite_i) begin
        regs[paddr_i[11:2]] <= pwdata_i;
        n_wr <= n_wr + 1;
        last_wr_cycle <= cycle;
        last_wr_addr  <= paddr_i;
      end else begin
        n_rd <= n_rd + 1;
      end
    end
  end

endmodule
