// pels_pkg: types and constants shared by the PELS (peripheral event linking
// system) modules.
//
// A PELS command is 48 bits wide: a 4-bit opcode, a 12-bit field that is a
// word offset for bus commands (or a jump target / condition / action group
// selector for the other commands), and a 32-bit operand that is a mask, a
// value, a threshold or a count. The field widths follow the paper; the
// numeric opcode values, the sub-fields packed into the 12-bit field and the
// bus request/response structs are this design's own choices.
package pels_pkg;

  // Field widths of one command (paper: 4-bit op-code, 12-bit address field,
  // 32-bit data).
  localparam int unsigned OPC_W    = 4;
  localparam int unsigned OFFSET_W = 12;
  localparam int unsigned DATA_W   = 32;
  localparam int unsigned CMD_W    = OPC_W + OFFSET_W + DATA_W;  // 48
  // Per-link base address: 18 bits, concatenated with the 12-bit word offset
  // and 2'b00 to form the 32-bit bus address.
  localparam int unsigned BASE_W   = 18;
  localparam int unsigned ADDR_W   = 32;
  // Program counter width (4 bits: up to 16 command lines per link).
  localparam int unsigned PC_W     = 4;
  localparam int unsigned MAX_LINES = 1 << PC_W;

  typedef enum logic [OPC_W-1:0] {
    OPC_END     = 4'h0,  // end of the sequence, return to idle
    OPC_WRITE   = 4'h1,  // bus write of the operand
    OPC_SET     = 4'h2,  // read-modify-write: value | operand
    OPC_CLEAR   = 4'h3,  // read-modify-write: value & ~operand
    OPC_TOGGLE  = 4'h4,  // read-modify-write: value ^ operand
    OPC_CAPTURE = 4'h5,  // masked read into the data register
    OPC_JUMP_IF = 4'h6,  // compare data register with operand, jump
    OPC_LOOP    = 4'h7,  // non-nestable hardware loop
    OPC_WAIT    = 4'h8,  // wait operand cycles
    OPC_ACTION  = 4'h9   // instant action on event-line group
  } opcode_e;

  // Jump-if comparison, held in field[5:4]; target pc in field[3:0].
  typedef enum logic [1:0] {
    CMP_EQ = 2'd0,
    CMP_LT = 2'd1,
    CMP_GT = 2'd2,
    CMP_NE = 2'd3
  } cmp_e;

  // Action mode, held in field[11]; group index in field[7:0].
  typedef enum logic {
    ACT_PULSE  = 1'b0,  // selected lines high for exactly one cycle
    ACT_TOGGLE = 1'b1   // selected lines change level and hold it
  } act_mode_e;

  typedef struct packed {
    logic [OPC_W-1:0]    opc;
    logic [OFFSET_W-1:0] field;
    logic [DATA_W-1:0]   operand;
  } cmd_t;

  // Trigger condition over the masked events.
  typedef enum logic {
    TRIG_OR  = 1'b0,  // any selected event active
    TRIG_AND = 1'b1   // all selected events active
  } trig_mode_e;

  // Request from a link to the peripheral bus. Held stable while req is high
  // until the matching response has ready set.
  typedef struct packed {
    logic              req;
    logic              we;
    logic [ADDR_W-1:0] addr;
    logic [DATA_W-1:0] wdata;
  } bus_req_t;

  typedef struct packed {
    logic              ready;   // one-cycle completion strobe
    logic [DATA_W-1:0] rdata;   // valid with ready on reads
    logic              err;     // APB PSLVERR of the transfer
  } bus_rsp_t;

  // Jump-if field helpers.
  function automatic logic [OFFSET_W-1:0] jump_field(cmp_e cmp, logic [PC_W-1:0] target);
    return OFFSET_W'({cmp, target});
  endfunction

  function automatic cmd_t make_cmd(opcode_e opc, logic [OFFSET_W-1:0] field,
                                    logic [DATA_W-1:0] operand);
    cmd_t c;
    c.opc     = opc;
    c.field   = field;
    c.operand = operand;
    return c;
  endfunction

endpackage
