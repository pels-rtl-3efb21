// tb_pels_trigger: self-checking testbench of the PELS trigger unit.
//
// Drives random event vectors, masks and AND/OR modes (with events and masks
// biased so both conditions are met often) and compares cond_o and the
// rising-edge trigger pulse with a reference computed in the testbench from
// the same inputs and the previous cycle's reference condition. Also checks
// that a held condition triggers only once and that disable blocks triggers.
module tb_pels_trigger;
  import pels_pkg::*;

  localparam int unsigned N = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic en;
  logic [N-1:0] ev, mask;
  trig_mode_e mode;
  logic cond, trig;
  int checks = 0, failures = 0;
  int n_trig = 0;

  pels_trigger #(.NUM_IN(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .enable_i(en), .events_i(ev), .mask_i(mask),
    .mode_i(mode), .cond_o(cond), .trigger_o(trig)
  );

  function automatic logic ref_cond(logic [N-1:0] e, logic [N-1:0] m, trig_mode_e md);
    if (m == '0) return 1'b0;
    if (md == TRIG_AND) return ((e & m) == m);
    return |(e & m);
  endfunction

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
    logic prev;
    en = 0; ev = '0; mask = '0; mode = TRIG_OR;
    repeat (2) @(posedge clk);
    rst_n = 1;
    prev = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      if (i % 50 == 0) begin
        mask = N'($urandom) & N'($urandom);
        mode = trig_mode_e'($urandom_range(0, 1));
        en   = ($urandom_range(0, 7) != 0);
      end
      // bias events towards the mask so AND fires too
      ev = ($urandom_range(0, 1)) ? (mask | N'($urandom & $urandom)) : N'($urandom & $urandom);
      #1;
      check(cond == ref_cond(ev, mask, mode), "condition");
      check(trig == (en && ref_cond(ev, mask, mode) && !prev), "trigger edge");
      if (trig) n_trig++;
      prev = en && ref_cond(ev, mask, mode);
    end
    // held condition: one trigger only
    @(negedge clk);
    mask = 12'h00F; mode = TRIG_AND; en = 1; ev = '0;
    @(negedge clk);
    ev = 12'h0FF;
    #1 check(trig == 1'b1, "held condition first cycle");
    for (int i = 0; i < 5; i++) begin
      @(negedge clk); #1 check(trig == 1'b0, "held condition no retrigger");
    end
    ev = 12'h007;
    @(negedge clk); #1 check(trig == 1'b0 && cond == 1'b0, "AND needs all selected");
    ev = 12'h00F;
    #1 check(trig == 1'b1, "retrigger after condition dropped");
    check(n_trig > 20, "enough random triggers");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
