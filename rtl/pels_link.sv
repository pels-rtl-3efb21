// pels_link: one PELS linking unit.
//
// A link is an independent event handler made of four parts, as in the
// paper's link overview: the trigger unit (event mask and AND/OR condition),
// a FIFO of pending triggers, the private instruction memory (SCM) and the
// execution unit. Several links run in parallel inside PELS; each has its own
// configuration (event mask, trigger mode, enable, 18-bit base address), which
// the configuration slave holds and drives into cfg_*_i.
//
// Interface: events_i is the broadcast event vector (external events and the
// inter-link loop-back lines); the SCM write port comes from the
// configuration slave; bus_req_o / bus_rsp_i go to the bus arbiter;
// actions_o are this link's instant-action groups.
//
// Timing: an event seen in cycle t is pushed into the FIFO at the end of t
// and the first command executes in cycle t+1, so an instant action at line 0
// is visible in cycle t+2 (the paper's 2-cycle instant-action latency).
module pels_link
  import pels_pkg::*;
#(
  parameter int unsigned NUM_IN     = 36,
  parameter int unsigned NUM_LINES  = 6,
  parameter int unsigned ACT_GROUPS = 2,
  parameter int unsigned FIFO_DEPTH = 2
) (
  input  logic                              clk_i,
  input  logic                              rst_ni,
  input  logic [NUM_IN-1:0]                 events_i,
  // private configuration
  input  logic                              cfg_enable_i,
  input  trig_mode_e                        cfg_mode_i,
  input  logic [NUM_IN-1:0]                 cfg_mask_i,
  input  logic [BASE_W-1:0]                 cfg_base_i,
  input  logic                              cfg_clr_ovf_i,
  // instruction memory write port
  input  logic                              scm_we_i,
  input  logic [PC_W-1:0]                   scm_waddr_i,
  input  cmd_t                              scm_wdata_i,
  // peripheral bus
  output bus_req_t                          bus_req_o,
  input  bus_rsp_t                          bus_rsp_i,
  // instant actions
  output logic [ACT_GROUPS-1:0][DATA_W-1:0] actions_o,
  // status
  output logic                              busy_o,
  output logic                              overflow_o,
  output logic                              pending_o,
  output logic [PC_W-1:0]                   pc_o,
  output logic [DATA_W-1:0]                 data_o
);

  logic trigger, cond, fifo_empty, fifo_full, pop;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count;
  logic [PC_W-1:0] pc;
  cmd_t cmd;

  pels_trigger #(.NUM_IN(NUM_IN)) i_trigger (
    .clk_i, .rst_ni,
    .enable_i  (cfg_enable_i),
    .events_i,
    .mask_i    (cfg_mask_i),
    .mode_i    (cfg_mode_i),
    .cond_o    (cond),
    .trigger_o (trigger)
  );

  pels_trig_fifo #(.DEPTH(FIFO_DEPTH)) i_fifo (
    .clk_i, .rst_ni,
    .push_i     (trigger),
    .pop_i      (pop),
    .clr_ovf_i  (cfg_clr_ovf_i),
    .empty_o    (fifo_empty),
    .full_o     (fifo_full),
    .overflow_o,
    .count_o    (fifo_count)
  );

  pels_scm #(.NUM_LINES(NUM_LINES)) i_scm (
    .clk_i, .rst_ni,
    .we_i    (scm_we_i),
    .waddr_i (scm_waddr_i),
    .wdata_i (scm_wdata_i),
    .raddr_i (pc),
    .rdata_o (cmd)
  );

  pels_exec #(.NUM_LINES(NUM_LINES), .ACT_GROUPS(ACT_GROUPS)) i_exec (
    .clk_i, .rst_ni,
    .pending_i (!fifo_empty),
    .pop_o     (pop),
    .pc_o      (pc),
    .cmd_i     (cmd),
    .base_i    (cfg_base_i),
    .bus_req_o,
    .bus_rsp_i,
    .actions_o,
    .busy_o,
    .data_o
  );

  assign pending_o = !fifo_empty;
  assign pc_o      = pc;

endmodule
