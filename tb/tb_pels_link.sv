// tb_pels_link: self-checking testbench of one PELS link.
//
// The link is programmed through its configuration inputs and SCM write port
// and connected to a zero-wait-state bus register file. Checks:
//   - instant action: an event in cycle t drives the action line in cycle
//     t+2 and only then (the paper's 2-cycle instant-action latency);
//   - masked-out events and a disabled link do not trigger; AND mode needs
//     all selected events;
//   - sequenced action: a set command reaches base+offset and modifies only
//     the operand bits;
//   - trigger FIFO: triggers arriving while a sequence runs are executed
//     afterwards, one per pending trigger; a trigger beyond the FIFO depth is
//     dropped and raises the overflow flag, which the clear input resets.
module tb_pels_link;
  import pels_pkg::*;

  localparam int unsigned NIN = 8, NL = 6, AG = 2, FD = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NIN-1:0] ev, mask;
  logic en, clr_ovf, scm_we, busy, ovf, pend;
  trig_mode_e mode;
  logic [BASE_W-1:0] base;
  logic [PC_W-1:0] waddr, pc;
  cmd_t wdata;
  bus_req_t req;
  bus_rsp_t rsp;
  logic [AG-1:0][DATA_W-1:0] act;
  logic [DATA_W-1:0] data;
  logic [31:0] regs [1024];
  int checks = 0, failures = 0;
  int cyc = 0;
  int act_cycles [$];

  pels_link #(.NUM_IN(NIN), .NUM_LINES(NL), .ACT_GROUPS(AG), .FIFO_DEPTH(FD)) dut (
    .clk_i(clk), .rst_ni(rst_n), .events_i(ev),
    .cfg_enable_i(en), .cfg_mode_i(mode), .cfg_mask_i(mask), .cfg_base_i(base),
    .cfg_clr_ovf_i(clr_ovf), .scm_we_i(scm_we), .scm_waddr_i(waddr), .scm_wdata_i(wdata),
    .bus_req_o(req), .bus_rsp_i(rsp), .actions_o(act), .busy_o(busy),
    .overflow_o(ovf), .pending_o(pend), .pc_o(pc), .data_o(data)
  );

  always_comb begin
    rsp.ready = req.req;
    rsp.rdata = regs[req.addr[11:2]];
    rsp.err   = 1'b0;
  end
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (req.req && req.we) regs[req.addr[11:2]] <= req.wdata;
  end
  // record in which cycle action line 0 of group 0 is high
  always @(negedge clk) if (act[0][0]) act_cycles.push_back(cyc);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic load(input int line, input cmd_t c);
    @(negedge clk);
    scm_we = 1; waddr = PC_W'(line); wdata = c;
    @(negedge clk);
    scm_we = 0;
  endtask

  // One-cycle event pulse; returns the cycle number it was applied in.
  task automatic pulse(input logic [NIN-1:0] e, output int t);
    @(negedge clk);
    ev = e; t = cyc;
    @(negedge clk);
    ev = '0;
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t;
    ev = '0; mask = '0; en = 0; clr_ovf = 0; scm_we = 0; mode = TRIG_OR;
    base = '0; waddr = '0; wdata = '0;
    for (int i = 0; i < 1024; i++) regs[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---- instant action latency ----
    load(0, make_cmd(OPC_ACTION, 12'h000, 32'h1));
    load(1, make_cmd(OPC_END, 12'h000, 32'h0));
    mask = 8'b0000_0100; en = 1; mode = TRIG_OR;
    act_cycles.delete();
    pulse(8'b0000_0100, t);
    repeat (5) @(negedge clk);
    check(act_cycles.size() == 1, "one action pulse");
    if (act_cycles.size() == 1) check(act_cycles[0] == t + 2, $sformatf("instant latency %0d", act_cycles[0] - t));

    // ---- masked / disabled / AND ----
    act_cycles.delete();
    pulse(8'b0000_1000, t);               // not in mask
    en = 0;
    pulse(8'b0000_0100, t);               // link disabled
    en = 1;
    mask = 8'b0011_0000; mode = TRIG_AND;
    pulse(8'b0001_0000, t);               // only one of two
    repeat (5) @(negedge clk);
    check(act_cycles.size() == 0, "no trigger on masked/disabled/partial AND");
    pulse(8'b0011_0001, t);               // both selected
    repeat (5) @(negedge clk);
    check(act_cycles.size() == 1, "AND fires with all selected");

    // ---- sequenced action at base+offset ----
    base = 18'h0;
    regs[10'h0A5] = 32'hF0F0_0000;
    load(0, make_cmd(OPC_SET, 12'h0A5, 32'h0000_000F));
    mask = 8'h01; mode = TRIG_OR;
    pulse(8'h01, t);
    repeat (6) @(negedge clk);
    check(regs[10'h0A5] == 32'hF0F0_000F, "set via bus");

    // ---- FIFO buffering and overflow ----
    load(0, make_cmd(OPC_WAIT, 12'h000, 32'd12));
    load(1, make_cmd(OPC_ACTION, 12'h000, 32'h1));
    act_cycles.delete();
    pulse(8'h01, t);                      // starts at once
    pulse(8'h01, t);                      // pending 1
    pulse(8'h01, t);                      // pending 2 (full)
    check(pend == 1'b1 && ovf == 1'b0, "two pending, no overflow");
    pulse(8'h01, t);                      // dropped
    check(ovf == 1'b1, "overflow flag set");
    repeat (60) @(negedge clk);
    check(act_cycles.size() == 3, $sformatf("three sequences ran (%0d)", act_cycles.size()));
    check(!busy && !pend, "idle afterwards");
    @(negedge clk) clr_ovf = 1;
    @(negedge clk) clr_ovf = 0;
    check(ovf == 1'b0, "overflow cleared");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
