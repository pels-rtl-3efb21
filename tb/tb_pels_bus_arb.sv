// tb_pels_bus_arb: self-checking testbench of the round-robin APB arbiter.
//
// Four request generators, one per link, issue random reads and writes to
// their own address ranges of an APB peripheral with random wait states,
// holding each request until ready. Checks: every read returns the value
// last written to that address (testbench shadow copy), every write lands;
// while all four links request back to back the grants rotate 0,1,2,3; a
// lone request on an idle bus completes two cycles later (SETUP, then ACCESS) plus the slave's wait states.
// APB protocol rules are checked by the arbiter's own assertions.
module tb_pels_bus_arb;
  import pels_pkg::*;

  localparam int unsigned NLK = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  bus_req_t [NLK-1:0] req;
  bus_rsp_t [NLK-1:0] rsp;
  logic psel, penable, pwrite, pready, pslverr;
  logic [31:0] paddr, pwdata, prdata;
  int checks = 0, failures = 0;
  bit hold_all = 0;
  int grant_log [$];

  pels_bus_arb #(.NUM_LINKS(NLK)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp),
    .psel_o(psel), .penable_o(penable), .pwrite_o(pwrite), .paddr_o(paddr),
    .pwdata_o(pwdata), .prdata_i(prdata), .pready_i(pready), .pslverr_i(pslverr)
  );

  apb_periph_model #(.WAIT_MODE(1)) periph (
    .clk_i(clk), .psel_i(psel), .penable_i(penable), .pwrite_i(pwrite),
    .paddr_i(paddr), .pwdata_i(pwdata), .prdata_o(prdata), .pready_o(pready),
    .pslverr_o(pslverr)
  );

  logic [31:0] shadow [1024];

  always @(negedge clk) begin
    for (int i = 0; i < NLK; i++) if (rsp[i].ready) grant_log.push_back(i);
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One generator per link.
  task automatic gen(input int id, input int n);
    for (int k = 0; k < n; k++) begin
      logic [9:0] w;
      w = {id[1:0], 8'($urandom_range(0, 15))};
      @(negedge clk);
      req[id].req   = 1'b1;
      req[id].we    = $urandom_range(0, 1);
      req[id].addr  = {20'h0, w, 2'b00};
      req[id].wdata = $urandom;
      do @(negedge clk); while (!rsp[id].ready);
      if (req[id].we) shadow[w] = req[id].wdata;
      else check(rsp[id].rdata == shadow[w], $sformatf("read link %0d word %0d", id, w));
      @(posedge clk);
      #1 req[id].req = 1'b0;
      if (!hold_all) repeat ($urandom_range(0, 3)) @(negedge clk);
    end
  endtask

  initial begin
    int t0;
    req = '0;
    for (int i = 0; i < 1024; i++) shadow[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // random traffic
    fork
      gen(0, 60); gen(1, 60); gen(2, 60); gen(3, 60);
    join
    repeat (5) @(posedge clk);
    for (int i = 0; i < 1024; i++) if (i[9:8] < NLK && i[7:0] < 16) check(periph.regs[i] == shadow[i], "final contents");
    // fairness: all links request continuously
    grant_log.delete();
    hold_all = 1;
    fork
      gen(0, 8); gen(1, 8); gen(2, 8); gen(3, 8);
    join
    check(grant_log.size() == 32, "32 grants");
    for (int i = 4; i < grant_log.size(); i++)
      check(grant_log[i] == (grant_log[i-1] + 1) % NLK, $sformatf("round robin at %0d", i));
    // latency of a lone read on an idle bus: ready in the third cycle
    // (APB slave with random wait states, so only check wait-free cases)
    repeat (3) @(posedge clk);
    @(negedge clk);
    req[2].req = 1; req[2].we = 1; req[2].addr = 32'h0000_0200; req[2].wdata = 32'h55;
    t0 = 0;
    do begin @(negedge clk); t0++; end while (!rsp[2].ready);
    @(posedge clk);
    #1 req[2].req = 0;
    check(t0 >= 2 && t0 <= 5, $sformatf("lone transfer takes %0d cycles", t0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
