// tb_pels_cfg: self-checking testbench of the PELS configuration slave.
//
// Drives APB transfers the way the host CPU would and checks, against values
// the testbench keeps itself: CTRL/BASE/MASK read-back and the per-link
// configuration outputs they drive (only the addressed link changes, mask
// bits above NUM_IN are not stored), STATUS/DATA mirroring the link status
// inputs, the two-write command-line protocol (operand staged, line stored
// with one write-enable strobe to the addressed link on the HI write), the
// overflow-clear strobe, and PSLVERR for a link index beyond NUM_LINKS.
module tb_pels_cfg;
  import pels_pkg::*;

  localparam int unsigned NLK = 3, NIN = 36, NL = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic psel, penable, pwrite, pready, pslverr;
  logic [11:0] paddr;
  logic [31:0] pwdata, prdata;
  logic       [NLK-1:0]             enable, clr_ovf, scm_we, busy, pending, overflow;
  trig_mode_e [NLK-1:0]             mode;
  logic       [NLK-1:0][NIN-1:0]    mask;
  logic       [NLK-1:0][BASE_W-1:0] base;
  logic       [PC_W-1:0]            scm_waddr;
  cmd_t                             scm_wdata;
  logic       [NLK-1:0][PC_W-1:0]   pc;
  logic       [NLK-1:0][DATA_W-1:0] data;
  int checks = 0, failures = 0;

  typedef struct { int link; int line; cmd_t cmd; } wr_t;
  wr_t wr_log [$];
  int ovf_log [$];

  pels_cfg #(.NUM_LINKS(NLK), .NUM_IN(NIN), .NUM_LINES(NL)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .psel_i(psel), .penable_i(penable), .pwrite_i(pwrite), .paddr_i(paddr),
    .pwdata_i(pwdata), .prdata_o(prdata), .pready_o(pready), .pslverr_o(pslverr),
    .enable_o(enable), .mode_o(mode), .mask_o(mask), .base_o(base),
    .clr_ovf_o(clr_ovf), .scm_we_o(scm_we), .scm_waddr_o(scm_waddr),
    .scm_wdata_o(scm_wdata), .busy_i(busy), .pending_i(pending),
    .overflow_i(overflow), .pc_i(pc), .data_i(data)
  );

  always @(posedge clk) begin
    for (int l = 0; l < NLK; l++) begin
      if (scm_we[l]) wr_log.push_back('{l, int'(scm_waddr), scm_wdata});
      if (clr_ovf[l]) ovf_log.push_back(l);
    end
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic apb(input bit wr, input logic [11:0] a, input logic [31:0] wd,
                     output logic [31:0] rd, output logic err);
    @(negedge clk);
    psel = 1; penable = 0; pwrite = wr; paddr = a; pwdata = wd;
    @(negedge clk);
    penable = 1;
    #1;
    rd = prdata; err = pslverr;
    @(posedge clk);
    #1 psel = 0; penable = 0;
  endtask

  task automatic wr32(input logic [11:0] a, input logic [31:0] wd);
    logic [31:0] rd; logic err;
    apb(1, a, wd, rd, err);
    check(!err, "no error on write");
  endtask

  task automatic rd32(input logic [11:0] a, output logic [31:0] rd);
    logic err;
    apb(0, a, 0, rd, err);
    check(!err, "no error on read");
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    logic err;
    logic [NIN-1:0] m [NLK];
    logic [BASE_W-1:0] b [NLK];
    bit en [NLK];
    bit md [NLK];
    psel = 0; penable = 0; pwrite = 0; paddr = '0; pwdata = '0;
    busy = '0; pending = '0; overflow = '0; pc = '0; data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check(enable == '0 && mask == '0 && base == '0, "reset values");

    for (int l = 0; l < NLK; l++) begin
      en[l] = $urandom_range(0, 1); md[l] = $urandom_range(0, 1);
      b[l] = BASE_W'($urandom);
      m[l] = {4'($urandom), $urandom};
      wr32({4'(l), 8'h00}, {30'b0, md[l], en[l]});
      wr32({4'(l), 8'h08}, {14'h3FFF, b[l]});
      wr32({4'(l), 8'h10}, m[l][31:0]);
      wr32({4'(l), 8'h14}, {28'hFFFFFFF, m[l][35:32]});
    end
    for (int l = 0; l < NLK; l++) begin
      check(enable[l] == en[l] && mode[l] == trig_mode_e'(md[l]), "ctrl outputs");
      check(base[l] == b[l] && mask[l] == m[l], "base/mask outputs");
      rd32({4'(l), 8'h00}, rd); check(rd == {30'b0, md[l], en[l]}, "ctrl readback");
      rd32({4'(l), 8'h08}, rd); check(rd == {14'b0, b[l]}, "base readback");
      rd32({4'(l), 8'h10}, rd); check(rd == m[l][31:0], "mask0 readback");
      rd32({4'(l), 8'h14}, rd); check(rd == {28'b0, m[l][35:32]}, "mask1 readback");
    end

    // status and data mirroring
    for (int l = 0; l < NLK; l++) begin
      busy[l] = $urandom_range(0, 1); pending[l] = $urandom_range(0, 1);
      overflow[l] = $urandom_range(0, 1); pc[l] = PC_W'($urandom); data[l] = $urandom;
    end
    for (int l = 0; l < NLK; l++) begin
      rd32({4'(l), 8'h04}, rd);
      check(rd == {20'b0, pc[l], 5'b0, overflow[l], pending[l], busy[l]}, "status");
      rd32({4'(l), 8'h0C}, rd);
      check(rd == data[l], "data register");
    end

    // command lines
    wr_log.delete();
    for (int it = 0; it < 20; it++) begin
      int l, ln;
      cmd_t c;
      l  = $urandom_range(0, NLK - 1);
      ln = $urandom_range(0, NL - 1);
      c  = {4'($urandom), 12'($urandom), $urandom};
      wr32({4'(l), 8'(8'h40 + 8 * ln)}, c.operand);
      check(wr_log.size() == 0, "no store on LO write");
      wr32({4'(l), 8'(8'h44 + 8 * ln)}, {16'h0, c.opc, c.field});
      check(wr_log.size() == 1, "one store on HI write");
      if (wr_log.size() == 1) begin
        check(wr_log[0].link == l && wr_log[0].line == ln && wr_log[0].cmd == c,
              $sformatf("line store link %0d line %0d", l, ln));
      end
      wr_log.delete();
    end
    // line beyond NUM_LINES is not stored
    wr32({4'd0, 8'(8'h44 + 8 * NL)}, 32'h1234);
    check(wr_log.size() == 0, "no store past last line");

    // overflow clear strobe
    ovf_log.delete();
    wr32({4'd1, 8'h04}, 32'h4);
    check(ovf_log.size() == 1 && ovf_log[0] == 1, "overflow clear strobe");

    // bad link index
    apb(1, {4'(NLK), 8'h00}, 32'h3, rd, err);
    check(err == 1'b1, "pslverr on missing link");
    apb(0, {4'(NLK), 8'h08}, 0, rd, err);
    check(err == 1'b1 && rd == 0, "pslverr on read of missing link");
    check(pready == 1'b1, "zero wait states");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
