// tb_pels_trig_fifo: self-checking testbench of the PELS trigger FIFO.
//
// Random push/pop traffic (pop only when not empty) is checked cycle by cycle
// against a reference occupancy counter with the same rules: a push into a
// full FIFO is dropped unless a pop frees a slot in the same cycle, and a
// dropped push sets the sticky overflow flag until it is cleared.
module tb_pels_trig_fifo;

  localparam int unsigned D = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic push, pop, clr, empty, full, ovf;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  int n_ovf = 0, n_full_pushpop = 0;

  pels_trig_fifo #(.DEPTH(D)) dut (
    .clk_i(clk), .rst_ni(rst_n), .push_i(push), .pop_i(pop), .clr_ovf_i(clr),
    .empty_o(empty), .full_o(full), .overflow_o(ovf), .count_o(count)
  );

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rc;
    bit rovf;
    push = 0; pop = 0; clr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    rc = 0; rovf = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      check(int'(count) == rc, $sformatf("count %0d vs %0d", count, rc));
      check(empty == (rc == 0) && full == (rc == D), "flags");
      check(ovf == rovf, "overflow flag");
      push = ($urandom_range(0, 99) < 60);
      pop  = (rc != 0) && ($urandom_range(0, 99) < 40);
      clr  = ($urandom_range(0, 99) < 5);
      // reference update for the coming edge
      if (push && rc == D && pop) n_full_pushpop++;
      if (push && rc == D && !pop) begin rovf = 1; n_ovf++; end
      else if (clr) rovf = 0;
      if (pop) rc--;
      if (push && (rc < D)) rc++;
    end
    check(n_ovf > 10 && n_full_pushpop > 5, "corner cases reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
