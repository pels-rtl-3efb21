// pels_top: the Peripheral Event Linking System (PELS).
//
// PELS lets peripherals react to each other's events without waking the main
// CPU. Input events from the peripherals are broadcast to NUM_LINKS
// independent links. Each link watches a masked subset of the events and,
// when its AND/OR trigger condition fires, runs a short microcode sequence
// from its private instruction memory. A sequence can drive single-wire
// event lines straight to peripherals ("instant actions", 2 cycles from event
// to line) or read, modify and write peripheral registers over the APB
// peripheral bus ("sequenced actions"), with capture, compare-and-jump, loop
// and wait commands for simple decisions such as threshold checks.
//
// Structure:
//   pels_cfg      APB slave; the CPU writes link configuration and microcode
//   pels_link[i]  trigger unit + trigger FIFO + SCM + execution unit
//   pels_bus_arb  round-robin arbitration of the links onto one APB master
// Action groups: every link drives NUM_ACT_GROUPS+1 groups of 32 lines.
// Groups 0..NUM_ACT_GROUPS-1 are ORed over the links onto actions_o. Group
// NUM_ACT_GROUPS is the inter-link group: its bit j, ORed over the links, is
// looped back as an extra input event "link j" to every link, so a link can
// trigger another. The link events seen by every link are
// {loop-back[NUM_LINKS-1:0], events_i[NUM_EVENTS-1:0]}.
//
// The link count and memory depth defaults (4 links, 6 lines) are the
// configuration the paper integrates into its host SoC; the event and action
// line counts are this design's choice.
//
// Timing: event in cycle t -> instant action on actions_o in cycle t+2.
// A set/clear/toggle on a zero-wait-state APB peripheral updates the
// register at the end of cycle t+6 (read SETUP t+2, ACCESS t+3, write SETUP
// t+5, ACCESS t+6), i.e. 7 cycles after the event.
module pels_top
  import pels_pkg::*;
#(
  parameter int unsigned NUM_LINKS      = 4,
  parameter int unsigned NUM_LINES      = 6,
  parameter int unsigned NUM_EVENTS     = 32,
  parameter int unsigned NUM_ACT_GROUPS = 1,
  parameter int unsigned FIFO_DEPTH     = 2
) (
  input  logic                             clk_i,
  input  logic                             rst_ni,
  // peripheral events and instant actions
  input  logic [NUM_EVENTS-1:0]            events_i,
  output logic [NUM_ACT_GROUPS*DATA_W-1:0] actions_o,
  // configuration APB slave
  input  logic                             cfg_psel_i,
  input  logic                             cfg_penable_i,
  input  logic                             cfg_pwrite_i,
  input  logic [ADDR_W-1:0]                cfg_paddr_i,
  input  logic [DATA_W-1:0]                cfg_pwdata_i,
  output logic [DATA_W-1:0]                cfg_prdata_o,
  output logic                             cfg_pready_o,
  output logic                             cfg_pslverr_o,
  // peripheral APB master (sequenced actions)
  output logic                             psel_o,
  output logic                             penable_o,
  output logic                             pwrite_o,
  output logic [ADDR_W-1:0]                paddr_o,
  output logic [DATA_W-1:0]                pwdata_o,
  input  logic [DATA_W-1:0]                prdata_i,
  input  logic                             pready_i,
  input  logic                             pslverr_i
);

  localparam int unsigned NUM_IN     = NUM_EVENTS + NUM_LINKS;
  localparam int unsigned ACT_GROUPS = NUM_ACT_GROUPS + 1;

  logic       [NUM_LINKS-1:0]             enable, clr_ovf, scm_we;
  trig_mode_e [NUM_LINKS-1:0]             mode;
  logic       [NUM_LINKS-1:0][NUM_IN-1:0] mask;
  logic       [NUM_LINKS-1:0][BASE_W-1:0] base;
  logic       [PC_W-1:0]                  scm_waddr;
  cmd_t                                   scm_wdata;
  logic       [NUM_LINKS-1:0]             busy, pending, overflow;
  logic       [NUM_LINKS-1:0][PC_W-1:0]   pc;
  logic       [NUM_LINKS-1:0][DATA_W-1:0] data;
  bus_req_t   [NUM_LINKS-1:0]             bus_req;
  bus_rsp_t   [NUM_LINKS-1:0]             bus_rsp;
  logic       [NUM_LINKS-1:0][ACT_GROUPS-1:0][DATA_W-1:0] link_act;
  logic       [ACT_GROUPS-1:0][DATA_W-1:0] act_or;
  logic       [NUM_IN-1:0]                link_events;

  pels_cfg #(
    .NUM_LINKS (NUM_LINKS),
    .NUM_IN    (NUM_IN),
    .NUM_LINES (NUM_LINES)
  ) i_cfg (
    .clk_i, .rst_ni,
    .psel_i      (cfg_psel_i),
    .penable_i   (cfg_penable_i),
    .pwrite_i    (cfg_pwrite_i),
    .paddr_i     (cfg_paddr_i[11:0]),
    .pwdata_i    (cfg_pwdata_i),
    .prdata_o    (cfg_prdata_o),
    .pready_o    (cfg_pready_o),
    .pslverr_o   (cfg_pslverr_o),
    .enable_o    (enable),
    .mode_o      (mode),
    .mask_o      (mask),
    .base_o      (base),
    .clr_ovf_o   (clr_ovf),
    .scm_we_o    (scm_we),
    .scm_waddr_o (scm_waddr),
    .scm_wdata_o (scm_wdata),
    .busy_i      (busy),
    .pending_i   (pending),
    .overflow_i  (overflow),
    .pc_i        (pc),
    .data_i      (data)
  );

  // OR of all links' action groups.
  always_comb begin
    act_or = '0;
    for (int unsigned l = 0; l < NUM_LINKS; l++) act_or |= link_act[l];
  end

  assign link_events = {act_or[NUM_ACT_GROUPS][NUM_LINKS-1:0], events_i};
  assign actions_o   = act_or[NUM_ACT_GROUPS-1:0];

  for (genvar l = 0; l < NUM_LINKS; l++) begin : g_link
    pels_link #(
      .NUM_IN     (NUM_IN),
      .NUM_LINES  (NUM_LINES),
      .ACT_GROUPS (ACT_GROUPS),
      .FIFO_DEPTH (FIFO_DEPTH)
    ) i_link (
      .clk_i, .rst_ni,
      .events_i      (link_events),
      .cfg_enable_i  (enable[l]),
      .cfg_mode_i    (mode[l]),
      .cfg_mask_i    (mask[l]),
      .cfg_base_i    (base[l]),
      .cfg_clr_ovf_i (clr_ovf[l]),
      .scm_we_i      (scm_we[l]),
      .scm_waddr_i   (scm_waddr),
      .scm_wdata_i   (scm_wdata),
      .bus_req_o     (bus_req[l]),
      .bus_rsp_i     (bus_rsp[l]),
      .actions_o     (link_act[l]),
      .busy_o        (busy[l]),
      .overflow_o    (overflow[l]),
      .pending_o     (pending[l]),
      .pc_o          (pc[l]),
      .data_o        (data[l])
    );
  end

  pels_bus_arb #(.NUM_LINKS(NUM_LINKS)) i_arb (
    .clk_i, .rst_ni,
    .req_i     (bus_req),
    .rsp_o     (bus_rsp),
    .psel_o, .penable_o, .pwrite_o, .paddr_o, .pwdata_o,
    .prdata_i, .pready_i, .pslverr_i
  );

endmodule
