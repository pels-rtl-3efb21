// pels_exec: execution unit of one PELS link.
//
// A small FSM walks the link's instruction memory line by line, starting at
// line 0 whenever a trigger is pending, and executes one command per line:
//
//   write   bus write of the operand to base+offset
//   set / clear / toggle
//           read-modify-write: read base+offset, OR / AND-NOT / XOR the value
//           with the operand, write it back one cycle after the read returns
//   capture read base+offset, keep (value & operand) in the data register
//   jump-if compare the data register with the operand (==, <, >, !=) and
//           jump to the target line if the comparison holds
//   loop    non-nestable hardware loop: jump back to the target line
//           <operand> more times, then fall through
//   wait    stay <operand> extra cycles on this line
//   action  instant action: pulse (one cycle) or toggle (held level) the
//           lines of one 32-line action group selected by the 12-bit field
//   end     finish the sequence
//
// The command set, the 4/12/32-bit command format, the base+offset address
// ({base[17:0], offset[11:0], 2'b00}), the data register, the comparator and
// the write-back multiplexer follow the paper's execution-unit description
// and figure. The opcode numbers, the packing of jump target / comparison /
// action group into the 12-bit field, the loop and wait counting and the
// pulse/toggle action modes are this design's choices. Running past the last
// line ends the sequence like an end command.
//
// Timing: the first command is executed in the cycle after the trigger
// condition (the pending trigger is seen combinationally while idle), so an
// action command at line 0 drives its lines two cycles after the event.
// Bus requests are combinational from the current command and held until the
// response's ready strobe; the write of a read-modify-write is issued in the
// cycle after the read completes. Non-bus commands take one cycle.
module pels_exec
  import pels_pkg::*;
#(
  parameter int unsigned NUM_LINES  = 6,
  parameter int unsigned ACT_GROUPS = 2   // 32-line action groups driven
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  // trigger FIFO
  input  logic                          pending_i,
  output logic                          pop_o,
  // instruction memory
  output logic [PC_W-1:0]               pc_o,
  input  cmd_t                          cmd_i,
  // configuration
  input  logic [BASE_W-1:0]             base_i,
  // peripheral bus
  output bus_req_t                      bus_req_o,
  input  bus_rsp_t                      bus_rsp_i,
  // instant actions
  output logic [ACT_GROUPS-1:0][DATA_W-1:0] actions_o,
  // status
  output logic                          busy_o,
  output logic [DATA_W-1:0]             data_o
);

  typedef enum logic [1:0] {S_IDLE, S_EXEC, S_WB, S_WAIT} state_e;

  state_e            state_q, state_d;
  logic [PC_W-1:0]   pc_q, pc_d;
  logic [DATA_W-1:0] data_q, data_d;
  logic              loop_act_q, loop_act_d;
  logic [DATA_W-1:0] loop_cnt_q, loop_cnt_d;
  logic [DATA_W-1:0] wait_cnt_q, wait_cnt_d;
  logic [ACT_GROUPS-1:0][DATA_W-1:0] pulse_q, pulse_d, level_q, level_d;

  logic              active;   // a command is being executed this cycle
  logic [PC_W-1:0]   pc_next;  // sequential successor
  logic              last_line;
  logic [DATA_W-1:0] modified;
  logic              cmp_hit;
  logic [ADDR_W-1:0] addr;
  opcode_e           opc;
  cmp_e              cmp;
  logic [7:0]        group;

  assign opc       = opcode_e'(cmd_i.opc);
  assign cmp       = cmp_e'(cmd_i.field[5:4]);
  assign group     = cmd_i.field[7:0];
  assign active    = (state_q == S_EXEC) || (state_q == S_IDLE && pending_i);
  assign last_line = (32'(pc_q) >= NUM_LINES - 1);
  assign pc_next   = pc_q + 1'b1;
  assign addr      = {base_i, cmd_i.field, 2'b00};
  assign pop_o     = (state_q == S_IDLE) && pending_i;
  assign pc_o      = pc_q;
  assign busy_o    = (state_q != S_IDLE);
  assign data_o    = data_q;
  assign actions_o = pulse_q | level_q;

  // Modify stage.
  always_comb begin
    unique case (opc)
      OPC_SET:    modified = bus_rsp_i.rdata | cmd_i.operand;
      OPC_CLEAR:  modified = bus_rsp_i.rdata & ~cmd_i.operand;
      OPC_TOGGLE: modified = bus_rsp_i.rdata ^ cmd_i.operand;
      default:    modified = bus_rsp_i.rdata & cmd_i.operand;  // capture
    endcase
  end

  // Comparator (data register against operand, unsigned).
  always_comb begin
    unique case (cmp)
      CMP_EQ:  cmp_hit = (data_q == cmd_i.operand);
      CMP_LT:  cmp_hit = (data_q <  cmd_i.operand);
      CMP_GT:  cmp_hit = (data_q >  cmd_i.operand);
      default: cmp_hit = (data_q != cmd_i.operand);
    endcase
  end

  // Bus request: the read or write of the current bus command, or the
  // write-back of a read-modify-write.
  always_comb begin
    bus_req_o = '0;
    bus_req_o.addr = addr;
    if (state_q == S_WB) begin
      bus_req_o.req   = 1'b1;
      bus_req_o.we    = 1'b1;
      bus_req_o.wdata = data_q;
    end else if (active) begin
      unique case (opc)
        OPC_WRITE: begin
          bus_req_o.req   = 1'b1;
          bus_req_o.we    = 1'b1;
          bus_req_o.wdata = cmd_i.operand;
        end
        OPC_SET, OPC_CLEAR, OPC_TOGGLE, OPC_CAPTURE: bus_req_o.req = 1'b1;
        default: ;
      endcase
    end
  end

  always_comb begin
    state_d    = state_q;
    pc_d       = pc_q;
    data_d     = data_q;
    loop_act_d = loop_act_q;
    loop_cnt_d = loop_cnt_q;
    wait_cnt_d = wait_cnt_q;
    pulse_d    = '0;
    level_d    = level_q;

    if (state_q == S_WB) begin
      if (bus_rsp_i.ready) begin
        pc_d    = pc_next;
        state_d = last_line ? S_IDLE : S_EXEC;
      end
    end else if (state_q == S_WAIT) begin
      if (wait_cnt_q == '0) begin
        pc_d    = pc_next;
        state_d = last_line ? S_IDLE : S_EXEC;
      end else begin
        wait_cnt_d = wait_cnt_q - 1'b1;
      end
    end else if (active) begin
      // default: advance to the next line, end after the last one
      state_d = last_line ? S_IDLE : S_EXEC;
      pc_d    = pc_next;
      unique case (opc)
        OPC_WRITE: begin
          if (!bus_rsp_i.ready) begin
            state_d = S_EXEC;
            pc_d    = pc_q;
          end
        end
        OPC_SET, OPC_CLEAR, OPC_TOGGLE: begin
          pc_d = pc_q;
          if (bus_rsp_i.ready) begin
            data_d  = modified;
            state_d = S_WB;
          end else begin
            state_d = S_EXEC;
          end
        end
        OPC_CAPTURE: begin
          if (bus_rsp_i.ready) begin
            data_d = modified;
          end else begin
            state_d = S_EXEC;
            pc_d    = pc_q;
          end
        end
        OPC_JUMP_IF: begin
          if (cmp_hit) begin
            pc_d    = cmd_i.field[PC_W-1:0];
            state_d = S_EXEC;
          end
        end
        OPC_LOOP: begin
          if (!loop_act_q) begin
            if (cmd_i.operand != '0) begin
              loop_act_d = 1'b1;
              loop_cnt_d = cmd_i.operand - 1'b1;
              pc_d       = cmd_i.field[PC_W-1:0];
              state_d    = S_EXEC;
            end
          end else if (loop_cnt_q == '0) begin
            loop_act_d = 1'b0;
          end else begin
            loop_cnt_d = loop_cnt_q - 1'b1;
            pc_d       = cmd_i.field[PC_W-1:0];
            state_d    = S_EXEC;
          end
        end
        OPC_WAIT: begin
          if (cmd_i.operand != '0) begin
            wait_cnt_d = cmd_i.operand - 1'b1;
            pc_d       = pc_q;
            state_d    = S_WAIT;
          end
        end
        OPC_ACTION: begin
          if (32'(group) < ACT_GROUPS) begin
            if (cmd_i.field[11] == ACT_TOGGLE) level_d[group] = level_q[group] ^ cmd_i.operand;
            else                               pulse_d[group] = cmd_i.operand;
          end
        end
        default: begin  // OPC_END and unused opcodes
          state_d = S_IDLE;
        end
      endcase
    end

    if (state_d == S_IDLE) begin
      pc_d       = '0;
      loop_act_d = 1'b0;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= S_IDLE;
      pc_q       <= '0;
      data_q     <= '0;
      loop_act_q <= 1'b0;
      loop_cnt_q <= '0;
      wait_cnt_q <= '0;
      pulse_q    <= '0;
      level_q    <= '0;
    end else begin
      state_q    <= state_d;
      pc_q       <= pc_d;
      data_q     <= data_d;
      loop_act_q <= loop_act_d;
      loop_cnt_q <= loop_cnt_d;
      wait_cnt_q <= wait_cnt_d;
      pulse_q    <= pulse_d;
      level_q    <= level_d;
    end
  end

  // A bus request is held with the same address until it completes.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   bus_req_o.req && !bus_rsp_i.ready |=> bus_req_o.req && $stable(bus_req_o.addr));

endmodule
