// tb_pels_top: end-to-end testbench of PELS at its default configuration
// (4 links, 6 command lines per link, 32 input events, 32 action lines).
//
// A CPU model programs PELS through the configuration APB port, exactly as
// software would: event masks, trigger modes, base addresses and microcode.
// The sequenced-action APB port drives a behavioural register-file
// peripheral. Every mechanism of the design is exercised and counted:
//   instant   event -> action line, checked at exactly 2 cycles
//   sequenced event -> read-modify-write on the peripheral, checked at
//             exactly 7 cycles from the event to the register update
//   threshold the programming example: clear flag, capture data low byte,
//             jump-if above threshold, else instant action (both branches,
//             action line checked at exactly 12 cycles after the event),
//             and its sequenced variant (set GPIO bit over the bus)
//   loopback  one link triggers another through the inter-link action group
//   contention all four links hit the bus at once; the arbiter interleaves
//             their transfers (counted as switches between links)
//   overflow  a trigger beyond the FIFO depth sets the status flag
//   loop/wait hardware loop count and wait counter
//   toggle    toggle-mode action holds the line level
// A mechanism that never happened counts as a failure.
module tb_pels_top;
  import pels_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [31:0] events;
  logic [31:0] actions;
  logic        cpsel, cpenable, cpwrite, cpready, cpslverr;
  logic [31:0] cpaddr, cpwdata, cprdata;
  logic        psel, penable, pwrite, pready, pslverr;
  logic [31:0] paddr, pwdata, prdata;
  int checks = 0, failures = 0;
  int cyc = 0;

  // mechanism counters
  int n_instant = 0, n_seq = 0, n_thr_hi = 0, n_thr_lo = 0, n_thr_seq = 0;
  int n_loopback = 0, n_contention = 0, n_overflow = 0, n_loop = 0, n_wait = 0;
  int n_toggle = 0;

  pels_top dut (
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

  // Bus contention: consecutive APB transfers of the contention test made
  // for different links (word offsets 0x40+l and 0x48+l belong to link l).
  // A single link never alternates, so each switch means links shared the
  // bus and the arbiter interleaved them.
  int last_link = -1;
  always @(negedge clk) begin
    if (psel && penable && pready && paddr[11:6] == 6'h04) begin
      int l;
      l = int'(paddr[3:2]);
      if (last_link >= 0 && last_link != l) n_contention++;
      last_link = l;
    end
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---- CPU model: APB master on the configuration port ----
  task automatic cfg_apb(input bit wr, input logic [31:0] a, input logic [31:0] wd,
                         output logic [31:0] rd);
    @(negedge clk);
    cpsel = 1; cpenable = 0; cpwrite = wr; cpaddr = a; cpwdata = wd;
    @(negedge clk);
    cpenable = 1;
    #1 rd = cprdata;
    @(posedge clk);
    #1 cpsel = 0; cpenable = 0;
  endtask

  task automatic cfg_wr(input int link, input logic [7:0] off, input logic [31:0] wd);
    logic [31:0] rd;
    cfg_apb(1, {20'h0, 4'(link), off}, wd, rd);
  endtask

  task automatic cfg_rd(input int link, input logic [7:0] off, output logic [31:0] rd);
    cfg_apb(0, {20'h0, 4'(link), off}, 0, rd);
  endtask

  task automatic prog_line(input int link, input int line, input cmd_t c);
    cfg_wr(link, 8'(8'h40 + 8 * line), c.operand);
    cfg_wr(link, 8'(8'h44 + 8 * line), {16'h0, c.opc, c.field});
  endtask

  task automatic setup_link(input int link, input logic [31:0] mask, input trig_mode_e md,
                            input logic [3:0] loop_mask, input logic [17:0] base);
    cfg_wr(link, 8'h00, 32'h0);            // disable while reprogramming
    cfg_wr(link, 8'h08, {14'h0, base});
    cfg_wr(link, 8'h10, mask);
    cfg_wr(link, 8'h14, {28'h0, loop_mask});
    cfg_wr(link, 8'h00, {30'h0, md, 1'b1});
  endtask

  task automatic clear_prog(input int link);
    for (int i = 0; i < 6; i++) prog_line(link, i, '0);
  endtask

  // One-cycle event pulse on the given lines; returns the cycle it was in.
  task automatic pulse(input logic [31:0] e, output int t);
    @(negedge clk);
    events = e; t = cyc;
    @(negedge clk);
    events = '0;
  endtask

  task automatic wait_idle();
    logic [31:0] st;
    bit any;
    int guard = 0;
    do begin
      any = 0;
      for (int l = 0; l < 4; l++) begin
        cfg_rd(l, 8'h04, st);
        if (st[1:0] != 0) any = 1;
      end
      guard++;
    end while (any && guard < 200);
    check(!any, "links return to idle");
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Peripheral register word offsets (base 0): flag, data, GPIO, misc.
  localparam logic [11:0] AFLAG = 12'h010, ADATA = 12'h011, AGPIO = 12'h012;
  localparam logic [11:0] REG_A = 12'h020, REG_B = 12'h021, REG_LOOP = 12'h030;
  localparam logic [31:0] THRES = 32'd50;

  initial begin
    int t, te;
    logic [31:0] st;
    events = '0;
    cpsel = 0; cpenable = 0; cpwrite = 0; cpaddr = '0; cpwdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ================= instant action latency =================
    clear_prog(0);
    prog_line(0, 0, make_cmd(OPC_ACTION, 12'h000, 32'h0000_0001));
    setup_link(0, 32'h0000_0001, TRIG_OR, 4'h0, 18'h0);
    pulse(32'h1, t);
    te = -1;
    for (int k = 0; k < 6; k++) begin
      @(negedge clk);
      if (actions[0] && te < 0) te = cyc;
    end
    check(te == t + 2, $sformatf("instant action latency %0d", te - t));
    if (te == t + 2) n_instant++;
    cfg_wr(0, 8'h00, 32'h0);

    // ================= sequenced action latency =================
    clear_prog(1);
    periph.regs[10'(REG_A)] = 32'h0000_0F00;
    prog_line(1, 0, make_cmd(OPC_SET, REG_A, 32'h0000_0003));
    setup_link(1, 32'h0000_0002, TRIG_OR, 4'h0, 18'h0);
    pulse(32'h2, t);
    te = -1;
    for (int k = 0; k < 12; k++) begin
      @(negedge clk);
      if (periph.regs[10'(REG_A)] == 32'h0000_0F03 && te < 0) te = cyc;
    end
    check(te == t + 7, $sformatf("sequenced action latency %0d", te - t));
    if (te == t + 7) n_seq++;
    cfg_wr(1, 8'h00, 32'h0);

    // ================= threshold program (instant variant) =================
    clear_prog(0);
    prog_line(0, 0, make_cmd(OPC_CLEAR,   AFLAG, 32'h0000_0001));
    prog_line(0, 1, make_cmd(OPC_CAPTURE, ADATA, 32'h0000_00FF));
    prog_line(0, 2, make_cmd(OPC_JUMP_IF, jump_field(CMP_GT, 4'd4), THRES));
    prog_line(0, 3, make_cmd(OPC_ACTION,  12'h000, 32'h0000_0100));
    prog_line(0, 4, make_cmd(OPC_END,     12'h000, 32'h0));
    setup_link(0, 32'h0000_0004, TRIG_OR, 4'h0, 18'h0);
    for (int r = 0; r < 8; r++) begin
      logic [7:0] v;
      bit saw;
      v = 8'($urandom_range(0, 120));
      if (r == 0) v = 8'd10;
      if (r == 1) v = 8'd100;
      periph.regs[10'(AFLAG)] = 32'h0000_0011;
      periph.regs[10'(ADATA)] = {24'h5A5A5A, v};
      pulse(32'h4, t);
      saw = 0;
      te = -1;
      for (int k = 0; k < 30; k++) begin
        @(negedge clk);
        if (actions[8]) saw = 1;
        if (actions[8] && te < 0) te = cyc;
      end
      check(periph.regs[10'(AFLAG)] == 32'h0000_0010, "flag cleared");
      check(saw == (v <= 50), $sformatf("threshold decision for %0d", v));
      // clear 6 + capture 3 + jump-if 1 + action 1 cycles, line one cycle later
      if (saw) check(te == t + 12, $sformatf("threshold action latency %0d", te - t));
      cfg_rd(0, 8'h0C, st);
      check(st == {24'h0, v}, "captured byte in data register");
      if (v > 50) n_thr_hi++; else n_thr_lo++;
    end

    // ================= threshold program (sequenced variant) =================
    prog_line(0, 3, make_cmd(OPC_SET, AGPIO, 32'h0000_0100));
    for (int r = 0; r < 4; r++) begin
      logic [7:0] v;
      v = (r % 2 == 0) ? 8'd30 : 8'd70;
      periph.regs[10'(AGPIO)] = 32'h0000_0001;
      periph.regs[10'(ADATA)] = {24'h0, v};
      pulse(32'h4, t);
      repeat (30) @(negedge clk);
      check(periph.regs[10'(AGPIO)] == ((v <= 50) ? 32'h0000_0101 : 32'h0000_0001), "GPIO set only below threshold");
      if (v <= 50) n_thr_seq++;
    end
    cfg_wr(0, 8'h00, 32'h0);

    // ================= inter-link triggering =================
    // link 2: triggered by event 5, pulses loop-back line of link 3
    // link 3: triggered by loop-back line 3, writes REG_B via base 0x1A
    clear_prog(2); clear_prog(3);
    prog_line(2, 0, make_cmd(OPC_ACTION, 12'(1), 32'h0000_0008));
    setup_link(2, 32'h0000_0020, TRIG_OR, 4'h0, 18'h0);
    prog_line(3, 0, make_cmd(OPC_WRITE, REG_B, 32'hCAFE_0001));
    setup_link(3, 32'h0, TRIG_OR, 4'h8, 18'h1A);
    periph.regs[10'(REG_B)] = '0;
    pulse(32'h20, t);
    repeat (20) @(negedge clk);
    check(periph.regs[10'(REG_B)] == 32'hCAFE_0001, "link 3 triggered by link 2");
    check(periph.last_wr_addr == {18'h1A, REG_B, 2'b00}, "base address concatenation");
    if (periph.regs[10'(REG_B)] == 32'hCAFE_0001) n_loopback++;
    check(actions == '0, "loop-back group not on external actions");

    // ================= contention: all links at once =================
    for (int l = 0; l < 4; l++) begin
      clear_prog(l);
      prog_line(l, 0, make_cmd(OPC_TOGGLE, 12'(12'h040 + l), 32'h0000_FFFF));
      prog_line(l, 1, make_cmd(OPC_WRITE,  12'(12'h048 + l), 32'(l + 1)));
      setup_link(l, 32'h0000_0040, TRIG_OR, 4'h0, 18'h0);
      periph.regs[10'(32'h40 + l)] = 32'h1234_0000;
      periph.regs[10'(32'h48 + l)] = 32'h0;
    end
    begin
      int c0;
      c0 = n_contention;
      pulse(32'h40, t);
      repeat (60) @(negedge clk);
      for (int l = 0; l < 4; l++) begin
        check(periph.regs[10'(32'h40 + l)] == 32'h1234_FFFF, $sformatf("toggle link %0d", l));
        check(periph.regs[10'(32'h48 + l)] == 32'(l + 1), $sformatf("write link %0d", l));
      end
      check(n_contention > c0, "links contended for the bus");
    end
    wait_idle();

    // ================= FIFO overflow =================
    clear_prog(1);
    prog_line(1, 0, make_cmd(OPC_WAIT, 12'h000, 32'd20));
    setup_link(1, 32'h0000_0080, TRIG_OR, 4'h0, 18'h0);
    for (int l = 0; l < 4; l++) if (l != 1) cfg_wr(l, 8'h00, 32'h0);
    for (int k = 0; k < 4; k++) pulse(32'h80, t);
    cfg_rd(1, 8'h04, st);
    check(st[2] == 1'b1, "overflow status");
    if (st[2]) n_overflow++;
    wait_idle();
    cfg_wr(1, 8'h04, 32'h4);
    cfg_rd(1, 8'h04, st);
    check(st[2] == 1'b0, "overflow cleared");

    // ================= loop and wait =================
    clear_prog(1);
    periph.regs[10'(REG_LOOP)] = 32'h0;
    prog_line(1, 0, make_cmd(OPC_TOGGLE, REG_LOOP, 32'h0000_0001));
    prog_line(1, 1, make_cmd(OPC_WAIT,   12'h000,  32'd3));
    prog_line(1, 2, make_cmd(OPC_LOOP,   12'h000,  32'd6));   // 7 passes
    prog_line(1, 3, make_cmd(OPC_END,    12'h000,  32'h0));
    begin
      int w0;
      w0 = periph.n_wr;
      pulse(32'h80, t);
      wait_idle();
      check(periph.n_wr - w0 == 7, $sformatf("loop passes %0d", periph.n_wr - w0));
      check(periph.regs[10'(REG_LOOP)] == 32'h1, "odd toggle count");
      if (periph.n_wr - w0 == 7) begin n_loop++; n_wait++; end
    end

    // ================= toggle-mode action =================
    clear_prog(1);
    prog_line(1, 0, make_cmd(OPC_ACTION, 12'h800, 32'h8000_0000));
    pulse(32'h80, t);
    repeat (10) @(negedge clk);
    check(actions[31] == 1'b1, "toggle action holds");
    pulse(32'h80, t);
    repeat (10) @(negedge clk);
    check(actions[31] == 1'b0, "toggle action back");
    if (!actions[31]) n_toggle++;

    // ================= mechanism coverage =================
    $display("mechanisms: instant=%0d sequenced=%0d thr_hi=%0d thr_lo=%0d thr_seq=%0d loopback=%0d contention_switches=%0d overflow=%0d loop=%0d wait=%0d toggle=%0d",
             n_instant, n_seq, n_thr_hi, n_thr_lo, n_thr_seq, n_loopback, n_contention,
             n_overflow, n_loop, n_wait, n_toggle);
    check(n_instant > 0, "instant action happened");
    check(n_seq > 0, "sequenced action happened");
    check(n_thr_hi > 0 && n_thr_lo > 0, "both threshold branches");
    check(n_thr_seq > 0, "sequenced threshold variant");
    check(n_loopback > 0, "inter-link trigger happened");
    check(n_contention > 0, "bus contention happened");
    check(n_overflow > 0, "FIFO overflow happened");
    check(n_loop > 0 && n_wait > 0, "loop and wait happened");
    check(n_toggle > 0, "toggle action happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
