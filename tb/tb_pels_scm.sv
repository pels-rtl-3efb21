// tb_pels_scm: self-checking testbench of the per-link instruction memory.
//
// Writes random 48-bit commands to random lines, keeping a shadow copy, and
// checks that the asynchronous read port returns the shadow contents at every
// line in the same cycle the address is applied, that reset clears every line
// to the end command, and that lines past NUM_LINES read as end and ignore
// writes.
module tb_pels_scm;
  import pels_pkg::*;

  localparam int unsigned NL = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic we;
  logic [PC_W-1:0] waddr, raddr;
  cmd_t wdata, rdata;
  cmd_t shadow [NL];
  int checks = 0, failures = 0;

  pels_scm #(.NUM_LINES(NL)) dut (
    .clk_i(clk), .rst_ni(rst_n), .we_i(we), .waddr_i(waddr), .wdata_i(wdata),
    .raddr_i(raddr), .rdata_o(rdata)
  );

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = '0; raddr = '0; wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NL; i++) shadow[i] = '0;
    for (int i = 0; i < MAX_LINES; i++) begin
      raddr = PC_W'(i); #1 check(rdata == '0, "reset contents");
    end
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      we    = $urandom_range(0, 1);
      waddr = PC_W'($urandom_range(0, MAX_LINES - 1));
      wdata = {16'($urandom), $urandom};
      raddr = PC_W'($urandom_range(0, MAX_LINES - 1));
      #1;
      if (raddr < NL) check(rdata == shadow[raddr], $sformatf("read line %0d", raddr));
      else            check(rdata == '0, "read past end");
      @(posedge clk);
      if (we && waddr < NL) shadow[waddr] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int i = 0; i < NL; i++) begin
      raddr = PC_W'(i); #1 check(rdata == shadow[i], "final contents");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
