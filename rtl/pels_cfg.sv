// pels_cfg: configuration slave of PELS.
//
// The main CPU programs PELS through this APB (v3) slave, which sits on the
// host's peripheral interconnect. It holds every link's private
// configuration registers (the event mask, the AND/OR trigger mode, an enable
// and the 18-bit base address of the link's peripheral window, as in the
// paper's link figure) and gives write access to each link's instruction
// memory. The register map is this design's own; the paper does not give one.
//
// Register map (byte addresses, PADDR[11:8] = link index, one 256-byte page
// per link):
//   0x00 CTRL    rw  [0] enable, [1] trigger mode (0 = OR, 1 = AND)
//   0x04 STATUS  r   [0] busy, [1] trigger pending, [2] FIFO overflow
//                    (write 1 to bit 2 clears it), [11:8] program counter
//   0x08 BASE    rw  [17:0] base address (bus address = {BASE, offset, 2'b00})
//   0x0C DATA    r   the link's 32-bit data (capture) register
//   0x10+4k MASKk rw event mask bits [32k+31:32k]
//   0x40+8i LINEi_LO w operand of command line i (staged)
//   0x44+8i LINEi_HI w [15:12] opcode, [11:0] field; this write stores
//                    {opcode, field, staged operand} into line i
// Reads of write-only or unmapped offsets return 0. An access to a link index
// >= NUM_LINKS answers with PSLVERR.
//
// Timing: zero wait states (PREADY tied high); writes take effect on the
// clock edge that ends the ACCESS phase.
module pels_cfg
  import pels_pkg::*;
#(
  parameter int unsigned NUM_LINKS = 4,
  parameter int unsigned NUM_IN    = 36,
  parameter int unsigned NUM_LINES = 6
) (
  input  logic                               clk_i,
  input  logic                               rst_ni,
  // APB slave
  input  logic                               psel_i,
  input  logic                               penable_i,
  input  logic                               pwrite_i,
  input  logic [11:0]                        paddr_i,
  input  logic [DATA_W-1:0]                  pwdata_i,
  output logic [DATA_W-1:0]                  prdata_o,
  output logic                               pready_o,
  output logic                               pslverr_o,
  // per-link configuration
  output logic       [NUM_LINKS-1:0]             enable_o,
  output trig_mode_e [NUM_LINKS-1:0]             mode_o,
  output logic       [NUM_LINKS-1:0][NUM_IN-1:0] mask_o,
  output logic       [NUM_LINKS-1:0][BASE_W-1:0] base_o,
  output logic       [NUM_LINKS-1:0]             clr_ovf_o,
  // instruction memory write port (shared data, per-link enable)
  output logic       [NUM_LINKS-1:0]             scm_we_o,
  output logic       [PC_W-1:0]                  scm_waddr_o,
  output cmd_t                                   scm_wdata_o,
  // per-link status
  input  logic       [NUM_LINKS-1:0]             busy_i,
  input  logic       [NUM_LINKS-1:0]             pending_i,
  input  logic       [NUM_LINKS-1:0]             overflow_i,
  input  logic       [NUM_LINKS-1:0][PC_W-1:0]   pc_i,
  input  logic       [NUM_LINKS-1:0][DATA_W-1:0] data_i
);

  localparam int unsigned MASK_WORDS = (NUM_IN + 31) / 32;
  localparam int unsigned LINK_W     = (NUM_LINKS > 1) ? $clog2(NUM_LINKS) : 1;

  logic [3:0]        link_addr;
  logic [LINK_W-1:0] link;       // link index, valid when link_ok
  logic [7:0]        off;
  logic              link_ok, wr;
  logic [DATA_W-1:0] stage_q;
  logic [MASK_WORDS*32-1:0] mask_pad;

  assign link_addr = paddr_i[11:8];
  assign link      = link_addr[LINK_W-1:0];
  assign off       = paddr_i[7:0];
  assign link_ok   = (32'(link_addr) < NUM_LINKS);
  assign wr        = psel_i && penable_i && pwrite_i && link_ok;
  assign pready_o  = 1'b1;
  assign pslverr_o = psel_i && penable_i && !link_ok;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      enable_o <= '0;
      mode_o   <= {NUM_LINKS{TRIG_OR}};
      mask_o   <= '0;
      base_o   <= '0;
      stage_q  <= '0;
    end else if (wr) begin
      if (off == 8'h00) begin
        enable_o[link] <= pwdata_i[0];
        mode_o[link]   <= trig_mode_e'(pwdata_i[1]);
      end
      if (off == 8'h08) base_o[link] <= pwdata_i[BASE_W-1:0];
      for (int unsigned k = 0; k < MASK_WORDS; k++) begin
        if (off == 8'(8'h10 + 4 * k)) begin
          for (int unsigned b = 0; b < 32; b++) begin
            if (32 * k + b < NUM_IN) mask_o[link][32 * k + b] <= pwdata_i[b];
          end
        end
      end
      if (off >= 8'h40 && off[2] == 1'b0) stage_q <= pwdata_i;
    end
  end

  // Line writes and overflow clear are single-cycle strobes.
  always_comb begin
    scm_we_o    = '0;
    clr_ovf_o   = '0;
    scm_waddr_o = PC_W'(8'(off - 8'h40) >> 3);
    scm_wdata_o = '{opc: pwdata_i[15:12], field: pwdata_i[11:0], operand: stage_q};
    if (wr && off >= 8'h40 && off[2] == 1'b1 && 32'(8'(off - 8'h40) >> 3) < NUM_LINES)
      scm_we_o[link] = 1'b1;
    if (wr && off == 8'h04 && pwdata_i[2])
      clr_ovf_o[link] = 1'b1;
  end

  always_comb begin
    prdata_o = '0;
    mask_pad = '0;
    if (link_ok) begin
      mask_pad[NUM_IN-1:0] = mask_o[link];
      unique case (off)
        8'h00: prdata_o = {30'b0, mode_o[link], enable_o[link]};
        8'h04: prdata_o = {20'b0, pc_i[link], 5'b0, overflow_i[link], pending_i[link], busy_i[link]};
        8'h08: prdata_o = {14'b0, base_o[link]};
        8'h0C: prdata_o = data_i[link];
        default: begin
          for (int unsigned k = 0; k < MASK_WORDS; k++)
            if (off == 8'(8'h10 + 4 * k)) prdata_o = mask_pad[32 * k +: 32];
        end
      endcase
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) penable_i |-> psel_i);

endmodule
