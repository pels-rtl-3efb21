// tb_pels_top_min: PELS in its smallest configuration, one link with four
// command lines, running the threshold-check program.
//
// The threshold program (clear flag, capture low byte, jump-if above the
// threshold, action) has five commands when it ends with an explicit end. In a
// four-line memory the end is left out: the action on the last line finishes
// the sequence, and the jump target, line 4, lies past the memory and reads
// as end. The testbench programs the link through the configuration port,
// drives a zero-wait-state APB register file, and checks for random sensor
// values that the flag is cleared, the byte is captured and the action line
// fires exactly when the value is at or below the threshold. The latency is
// checked too: 12 cycles from the event to the action line. It also checks
// that a second link index answers with PSLVERR.
module tb_pels_top_min;
  import pels_pkg::*;

  localparam logic [11:0] AFLAG = 12'h010, ADATA = 12'h011;
  localparam logic [31:0] THRES = 32'd50;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [31:0] events, actions;
  logic        cpsel, cpenable, cpwrite, cpready, cpslverr;
  logic [31:0] cpaddr, cpwdata, cprdata;
  logic        psel, penable, pwrite, pready, pslverr;
  logic [31:0] paddr, pwdata, prdata;
  int checks = 0, failures = 0;
  int cyc = 0;
  int n_hi = 0, n_lo = 0;

  pels_top #(.NUM_LINKS(1), .NUM_LINES(4)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .events_i(events), .actions_o(actions),
    .cfg_psel_i(cpsel), .cfg_penable_i(cpenable), .cfg_pwrite_i(cpwrite),
    .cfg_paddr_i(cpaddr), .cfg_pwdata_i(cpwdata), .cfg_prdata_o(cprdata),
    .cfg_pready_o(cpready), .cfg_pslverr_o(cpslverr),
    .psel_o(psel), .penable_o(penable), .pwrite_o(pwrite), .paddr_o(paddr),
    .pwdata_o(pwdata), .prdata_i(prdata), .pready_i(pready), .pslverr_i(pslverr)
  );

  apb_periph_model #(.WAIT_MODE(0)) periph (
    .clk_i(clk), .psel_i(psel), .penable_i(penable), .pwrite_i(pwrite),
    .paddr_i(paddr), .pwdata_i(pwdata), .prdata_o(prdata), .pready_o(pready),
    .pslverr_o(pslverr)
  );

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic cfg_apb(input bit wr, input logic [31:0] a, input logic [31:0] wd,
                         output logic [31:0] rd, output logic err);
    @(negedge clk);
    cpsel = 1; cpenable = 0; cpwrite = wr; cpaddr = a; cpwdata = wd;
    @(negedge clk);
    cpenable = 1;
    #1 rd = cprdata; err = cpslverr;
    @(posedge clk);
    #1 cpsel = 0; cpenable = 0;
  endtask

  task automatic cfg_wr(input logic [11:0] a, input logic [31:0] wd);
    logic [31:0] rd; logic err;
    cfg_apb(1, {20'h0, a}, wd, rd, err);
    check(!err, "configuration write accepted");
  endtask

  task automatic prog_line(input int line, input cmd_t c);
    cfg_wr(12'(12'h040 + 8 * line), c.operand);
    cfg_wr(12'(12'h044 + 8 * line), {16'h0, c.opc, c.field});
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, te;
    logic [31:0] rd;
    logic err;
    events = '0; cpsel = 0; cpenable = 0; cpwrite = 0; cpaddr = '0; cpwdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    prog_line(0, make_cmd(OPC_CLEAR,   AFLAG, 32'h0000_0001));
    prog_line(1, make_cmd(OPC_CAPTURE, ADATA, 32'h0000_00FF));
    prog_line(2, make_cmd(OPC_JUMP_IF, jump_field(CMP_GT, 4'd4), THRES));
    prog_line(3, make_cmd(OPC_ACTION,  12'h000, 32'h0000_0001));
    cfg_wr(12'h008, 32'h0);             // base 0
    cfg_wr(12'h010, 32'h0000_0001);     // event 0
    cfg_wr(12'h000, 32'h1);             // enable, OR

    for (int r = 0; r < 12; r++) begin
      logic [7:0] v;
      bit saw;
      v = 8'($urandom_range(20, 80));
      if (r == 0) v = 8'd50;
      if (r == 1) v = 8'd51;
      periph.regs[10'(AFLAG)] = 32'h0000_00F1;
      periph.regs[10'(ADATA)] = {24'hC3C3C3, v};
      @(negedge clk);
      events = 32'h1; t = cyc;
      @(negedge clk);
      events = '0;
      saw = 0; te = -1;
      for (int k = 0; k < 30; k++) begin
        @(negedge clk);
        if (actions[0]) saw = 1;
        if (actions[0] && te < 0) te = cyc;
      end
      check(periph.regs[10'(AFLAG)] == 32'h0000_00F0, "flag cleared");
      check(saw == (32'(v) <= THRES), $sformatf("threshold decision for %0d", v));
      if (saw) check(te == t + 12, $sformatf("action latency %0d", te - t));
      cfg_apb(0, 32'h0000_000C, 0, rd, err);
      check(rd == {24'h0, v}, "captured byte");
      cfg_apb(0, 32'h0000_0004, 0, rd, err);
      check(rd[0] == 1'b0 && rd[11:8] == 4'd0, "idle at line 0 after the sequence");
      if (saw) n_lo++; else n_hi++;
    end
    check(n_lo > 0 && n_hi > 0, "both branches taken");

    cfg_apb(1, 32'h0000_0100, 32'h1, rd, err);
    check(err == 1'b1, "no second link");

    $display("branches: at_or_below=%0d above=%0d", n_lo, n_hi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
