// pels_bus_arb: round-robin arbiter from the PELS links to one APB master port.
//
// Every link may request a single bus transfer (read or write) at a time and
// holds its request until it gets a one-cycle ready strobe. The arbiter picks
// one requesting link per transfer, round robin starting after the link
// served last, so that when all links access peripherals at once each waits
// at most NUM_LINKS-1 transfers. The winner's address, direction and write
// data are registered and driven as a standard APB (v3) transfer: one SETUP
// cycle (PSEL) followed by ACCESS cycles (PSEL, PENABLE) until PREADY. The
// completion strobe, PRDATA and PSLVERR go back to the winning link in the
// cycle PREADY is seen.
//
// The paper relies on the round-robin arbiters of the host SoC's peripheral
// interconnect and names APB as its protocol; folding the arbitration into
// PELS behind one APB master port is this design's choice.
//
// Timing: request seen in cycle t -> SETUP in t+1 -> ACCESS in t+2; with a
// zero-wait-state slave the link gets ready in t+2. The next transfer can
// start its SETUP in t+4 (the arbiter passes through idle for one cycle).
module pels_bus_arb
  import pels_pkg::*;
#(
  parameter int unsigned NUM_LINKS = 4
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  bus_req_t [NUM_LINKS-1:0] req_i,
  output bus_rsp_t [NUM_LINKS-1:0] rsp_o,
  // APB master
  output logic                    psel_o,
  output logic                    penable_o,
  output logic                    pwrite_o,
  output logic [ADDR_W-1:0]       paddr_o,
  output logic [DATA_W-1:0]       pwdata_o,
  input  logic [DATA_W-1:0]       prdata_i,
  input  logic                    pready_i,
  input  logic                    pslverr_i
);

  localparam int unsigned IDX_W = (NUM_LINKS > 1) ? $clog2(NUM_LINKS) : 1;

  typedef enum logic [1:0] {A_IDLE, A_SETUP, A_ACCESS} astate_e;

  astate_e           state_q;
  logic [IDX_W-1:0]  sel_q, last_q, winner;
  logic              any_req;
  logic              pwrite_q;
  logic [ADDR_W-1:0] paddr_q;
  logic [DATA_W-1:0] pwdata_q;

  // Round-robin choice: first requester after last_q, wrapping around.
  always_comb begin
    winner  = last_q;
    any_req = 1'b0;
    for (int unsigned k = 1; k <= NUM_LINKS; k++) begin
      int unsigned idx;
      idx = (32'(last_q) + k) % NUM_LINKS;
      if (!any_req && req_i[idx].req) begin
        any_req = 1'b1;
        winner  = IDX_W'(idx);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q  <= A_IDLE;
      sel_q    <= '0;
      last_q   <= IDX_W'(NUM_LINKS - 1);
      pwrite_q <= 1'b0;
      paddr_q  <= '0;
      pwdata_q <= '0;
    end else begin
      unique case (state_q)
        A_IDLE: if (any_req) begin
          state_q  <= A_SETUP;
          sel_q    <= winner;
          pwrite_q <= req_i[winner].we;
          paddr_q  <= req_i[winner].addr;
          pwdata_q <= req_i[winner].wdata;
        end
        A_SETUP: state_q <= A_ACCESS;
        A_ACCESS: if (pready_i) begin
          state_q <= A_IDLE;
          last_q  <= sel_q;
        end
        default: state_q <= A_IDLE;
      endcase
    end
  end

  assign psel_o    = (state_q == A_SETUP) || (state_q == A_ACCESS);
  assign penable_o = (state_q == A_ACCESS);
  assign pwrite_o  = pwrite_q;
  assign paddr_o   = paddr_q;
  assign pwdata_o  = pwdata_q;

  always_comb begin
    for (int unsigned i = 0; i < NUM_LINKS; i++) begin
      rsp_o[i].ready = (state_q == A_ACCESS) && pready_i && (32'(sel_q) == i);
      rsp_o[i].rdata = prdata_i;
      rsp_o[i].err   = pslverr_i;
    end
  end

  // APB rules: PENABLE only inside a selected transfer; address and
  // direction stable while selected.
  assert property (@(posedge clk_i) disable iff (!rst_ni) penable_o |-> psel_o);
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   psel_o && !(penable_o && pready_i) |=> psel_o && $stable(paddr_o) && $stable(pwrite_o));

endmodule
