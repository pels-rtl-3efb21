// tb_pels_exec: self-checking testbench of the PELS execution unit.
//
// The instruction memory is a testbench array read combinationally at pc_o.
// The bus is a 4096-word register file answering in the same cycle (zero
// wait states) or after a programmable number of wait cycles. Every test
// loads a program, raises the pending-trigger input, and compares the bus
// register file, the data register, the action lines and the number of
// cycles the sequence takes with values worked out by hand:
//   - the threshold program of the paper's programming example (clear,
//     capture, jump-if, action, end) with a value above and below threshold,
//     checking the per-command cycle costs (clear 2, capture 1, jump 1,
//     action 1) on a zero-wait bus;
//   - write / set / toggle and the write-back one cycle after the read;
//   - loop (hardware loop count), wait (cycle count), all jump conditions,
//     toggle-mode actions and running off the last line;
//   - the stall of a read-modify-write on a bus with wait states.
module tb_pels_exec;
  import pels_pkg::*;

  localparam int unsigned NL = 8;
  localparam int unsigned AG = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic pending, pop, busy;
  logic [PC_W-1:0] pc;
  cmd_t cmd;
  cmd_t prog [MAX_LINES];
  logic [BASE_W-1:0] base;
  bus_req_t req;
  bus_rsp_t rsp;
  logic [AG-1:0][DATA_W-1:0] act;
  logic [DATA_W-1:0] data;

  logic [31:0] regs [4096];
  int unsigned ws = 0, ws_cnt = 0;
  int unsigned n_rd = 0, n_wr = 0;
  int checks = 0, failures = 0;

  pels_exec #(.NUM_LINES(NL), .ACT_GROUPS(AG)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .pending_i(pending), .pop_o(pop), .pc_o(pc), .cmd_i(cmd),
    .base_i(base), .bus_req_o(req), .bus_rsp_i(rsp),
    .actions_o(act), .busy_o(busy), .data_o(data)
  );

  assign cmd = prog[pc];

  // Bus model: ready after ws wait cycles.
  always_comb begin
    rsp.ready = req.req && (ws_cnt >= ws);
    rsp.rdata = regs[req.addr[13:2]];
    rsp.err   = 1'b0;
  end
  always @(posedge clk) begin
    if (req.req && !rsp.ready) ws_cnt <= ws_cnt + 1;
    else                       ws_cnt <= 0;
    if (rsp.ready) begin
      if (req.we) begin regs[req.addr[13:2]] <= req.wdata; n_wr <= n_wr + 1; end
      else        n_rd <= n_rd + 1;
    end
  end

  // Address check: {base, offset, 2'b00}.
  always @(posedge clk) begin
    if (req.req && rsp.ready) begin
      checks <= checks + 1;
      if (req.addr != {base, cmd.field, 2'b00}) begin
        failures <= failures + 1;
        $display("FAIL address %h", req.addr);
      end
    end
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic clear_prog();
    for (int i = 0; i < MAX_LINES; i++) prog[i] = '0;
  endtask

  // Start one sequence and return its length in cycles (from the first
  // command cycle to the last one).
  task automatic run(output int cycles);
    int c = 0;
    @(negedge clk);
    pending = 1'b1;
    #1;
    check(pop == 1'b1, "pop in first command cycle");
    c = 1;
    @(posedge clk);
    #1;
    pending = 1'b0;
    while (busy) begin
      c++;
      @(posedge clk);
      #1;
      if (c > 1000) break;
    end
    cycles = c;
  endtask

  // Records the cycle an action pulse appears, relative to run() start.
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  localparam logic [11:0] AFLAG = 12'h010, ADATA = 12'h011, AGPIO = 12'h012;
  localparam logic [31:0] THRES = 32'd50;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cycles, start;
    logic [31:0] v;
    pending = 0;
    base = 18'h0;
    for (int i = 0; i < 4096; i++) regs[i] = '0;
    clear_prog();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // ---- programming example: threshold check ----
    base = 18'h0;
    prog[0] = make_cmd(OPC_CLEAR,   AFLAG, 32'h0000_0001);
    prog[1] = make_cmd(OPC_CAPTURE, ADATA, 32'h0000_00FF);
    prog[2] = make_cmd(OPC_JUMP_IF, jump_field(CMP_GT, 4'd4), THRES);
    prog[3] = make_cmd(OPC_ACTION,  12'h000, 32'h0000_0004);
    prog[4] = make_cmd(OPC_END,     12'h000, 32'h0);
    for (int t = 0; t < 2; t++) begin
      logic [7:0] val;
      bit saw;
      val = (t == 0) ? 8'd20 : 8'd200;
      regs[AFLAG] = 32'hFFFF_0003;
      regs[ADATA] = {24'hABCDEF, val};
      fork
        run(cycles);
        begin
          saw = 0;
          repeat (10) begin
            @(posedge clk); #1;
            if (act[0] == 32'h4) saw = 1;
          end
        end
      join
      check(regs[AFLAG] == 32'hFFFF_0002, "clear result");
      check(data == {24'h0, val}, "captured low byte");
      // clear 2 + capture 1 + jump 1 (+ action 1) + end 1
      check(cycles == ((val > 50) ? 5 : 6), $sformatf("threshold cycles %0d", cycles));
      check(saw == (val <= 50), "instant action only below threshold");
      check(act == '0, "action pulse lasts one cycle");
    end

    // ---- write, set, toggle; write-back one cycle after read ----
    clear_prog();
    base = 18'h00001;  // bus addresses 0x4000 + 4*offset -> regs index 0x1000+off mod 4096
    prog[0] = make_cmd(OPC_WRITE,  12'h020, 32'hDEAD_BEEF);
    prog[1] = make_cmd(OPC_SET,    12'h021, 32'h0000_F000);
    prog[2] = make_cmd(OPC_TOGGLE, 12'h022, 32'hFFFF_0000);
    regs[12'h021] = 32'h0000_000F;
    regs[12'h022] = 32'h1234_5678;
    n_rd = 0; n_wr = 0;
    run(cycles);
    check(regs[12'h020] == 32'hDEAD_BEEF, "write");
    check(regs[12'h021] == 32'h0000_F00F, "set");
    check(regs[12'h022] == 32'hEDCB_5678, "toggle");
    check(cycles == 1 + 2 + 2 + 1, $sformatf("wr/set/tgl cycles %0d", cycles));
    check(n_rd == 2 && n_wr == 3, "bus transfer count");

    // ---- read-modify-write stall with 3 wait states ----
    ws = 3;
    clear_prog();
    base = 18'h0;
    prog[0] = make_cmd(OPC_CLEAR, 12'h030, 32'h0000_00F0);
    regs[12'h030] = 32'h0000_0FFF;
    run(cycles);
    check(regs[12'h030] == 32'h0000_0F0F, "clear with wait states");
    check(cycles == 4 + 4 + 1, $sformatf("stalled rmw cycles %0d", cycles));
    ws = 0;

    // ---- loop: body (write-inc via toggle) repeated ----
    clear_prog();
    prog[0] = make_cmd(OPC_ACTION, 12'h001, 32'h0000_0001);                // toggle-free pulse group 1
    prog[1] = make_cmd(OPC_TOGGLE, 12'h040, 32'h0000_0001);
    prog[2] = make_cmd(OPC_LOOP,   12'h001, 32'd4);                          // 4 more times
    prog[3] = make_cmd(OPC_END,    12'h000, 32'h0);
    regs[12'h040] = 32'h0;
    n_wr = 0;
    run(cycles);
    check(n_wr == 5, $sformatf("loop iterations %0d", n_wr));
    check(regs[12'h040] == 32'h1, "odd number of toggles");
    check(cycles == 1 + 5 * (2 + 1) + 1, $sformatf("loop cycles %0d", cycles));
    // loop with zero count falls through; loop re-arms on the next trigger
    n_wr = 0;
    run(cycles);
    check(n_wr == 5, "loop re-armed");

    // ---- wait ----
    clear_prog();
    prog[0] = make_cmd(OPC_WAIT, 12'h000, 32'd10);
    prog[1] = make_cmd(OPC_ACTION, 12'h000, 32'h0000_0100);
    start = cyc;
    run(cycles);
    check(cycles == 1 + 10 + 1 + 1, $sformatf("wait cycles %0d", cycles));

    // ---- jump conditions ----
    for (int c = 0; c < 4; c++) begin
      for (int r = 0; r < 6; r++) begin
        logic [31:0] a, b;
        bit hit;
        a = $urandom_range(0, 7);
        b = $urandom_range(0, 7);
        unique case (c)
          0: hit = (a == b);
          1: hit = (a < b);
          2: hit = (a > b);
          default: hit = (a != b);
        endcase
        clear_prog();
        regs[12'h050] = a;
        prog[0] = make_cmd(OPC_CAPTURE, 12'h050, 32'hFFFF_FFFF);
        prog[1] = make_cmd(OPC_JUMP_IF, jump_field(cmp_e'(c), 4'd3), b);
        prog[2] = make_cmd(OPC_WRITE, 12'h051, 32'h1);
        prog[3] = make_cmd(OPC_END, 12'h0, 32'h0);
        regs[12'h051] = 32'h0;
        run(cycles);
        check(regs[12'h051] == (hit ? 32'h0 : 32'h1), $sformatf("jump cond %0d a=%0d b=%0d", c, a, b));
      end
    end

    // ---- toggle-mode action holds level; running off the last line ----
    clear_prog();
    for (int i = 0; i < NL; i++) prog[i] = make_cmd(OPC_ACTION, 12'h800, 32'h0000_0001 << i);
    run(cycles);
    check(cycles == NL, $sformatf("ran off last line after %0d", cycles));
    v = act[0];
    check(v == 32'h0000_00FF, $sformatf("toggle level %h", v));
    run(cycles);
    check(act[0] == 32'h0, "toggle back");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
