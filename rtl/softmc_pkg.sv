// softmc_pkg: types and constants shared by the SoftMC controller blocks.
//
// A SoftMC test program is a list of instructions sent by the host. Each
// instruction is one 64-bit word (instr_t). Opcodes ACT, RD, WR, PRE, PREA and
// REF each issue one DDR3 command; RAW issues any other DDR3 command (mode
// register set, ZQ calibration, ...) from its ras_n/cas_n/we_n bits given in
// pattern[2:0], with bank and addr on BA and A; CKE sets the clock-enable pin
// to pattern[0] (power-down, self-refresh); WAIT inserts idle cycles between
// commands; END closes a program. The instruction set (activate, read, write, precharge,
// wait, end, software-issued refresh, any other DDR command) follows the programming interface of
// SoftMC; the bit layout, the field widths and the opcode numbers are this
// design's own choice.
//
// Word layout (bit 63 first):
//   [63:60] op       opcode_e
//   [59:57] bank     DDR3 bank address (8 banks)
//   [56:41] addr     row address for ACT, column address for RD/WR
//   [40:33] pattern  write data byte, repeated over the whole burst (WR);
//                    {ras_n,cas_n,we_n} in bits 2:0 (RAW); CKE level in bit 0 (CKE)
//   [32:1]  cycles   WAIT length in command-clock cycles
//   [0]     spare, ignored
//
// Commands leave the controller as ddr_req_t (one per clock) and are turned
// into DDR3 control-pin values (ddr_pins_t) by encode_cmd(), following the
// JEDEC DDR3 command truth table.
package softmc_pkg;

  // DDR3 geometry: 8 banks, 16 address pins, 64-bit SO-DIMM data bus, burst of 8.
  parameter int unsigned BANK_W    = 3;
  parameter int unsigned ADDR_W    = 16;
  parameter int unsigned DQ_W      = 64;
  parameter int unsigned BURST_LEN = 8;
  parameter int unsigned BURST_W   = DQ_W * BURST_LEN;  // 512 bits per RD/WR
  parameter int unsigned WAIT_W    = 32;
  parameter int unsigned INSTR_W   = 64;

  typedef enum logic [3:0] {
    OP_END  = 4'd0,
    OP_WAIT = 4'd1,
    OP_ACT  = 4'd2,
    OP_RD   = 4'd3,
    OP_WR   = 4'd4,
    OP_PRE  = 4'd5,
    OP_PREA = 4'd6,
    OP_REF  = 4'd7,
    OP_RAW  = 4'd8,
    OP_CKE  = 4'd9
  } opcode_e;

  typedef struct packed {
    opcode_e             op;
    logic [BANK_W-1:0]   bank;
    logic [ADDR_W-1:0]   addr;
    logic [7:0]          pattern;
    logic [WAIT_W-1:0]   cycles;
    logic                spare;
  } instr_t;

  typedef enum logic [2:0] {
    CMD_NOP  = 3'd0,
    CMD_ACT  = 3'd1,
    CMD_RD   = 3'd2,
    CMD_WR   = 3'd3,
    CMD_PRE  = 3'd4,
    CMD_PREA = 3'd5,
    CMD_REF  = 3'd6,
    CMD_RAW  = 3'd7
  } ddr_cmd_e;

  // One DDR command slot as produced by the sequencer or the refresh engine.
  typedef struct packed {
    ddr_cmd_e            cmd;
    logic [BANK_W-1:0]   bank;
    logic [ADDR_W-1:0]   addr;
    logic [7:0]          pattern;
  } ddr_req_t;

  // DDR3 command/address pins for one command-clock cycle (active-low strobes).
  typedef struct packed {
    logic                cs_n;
    logic                ras_n;
    logic                cas_n;
    logic                we_n;
    logic [BANK_W-1:0]   ba;
    logic [ADDR_W-1:0]   a;
  } ddr_pins_t;

  localparam ddr_req_t REQ_NOP = '{cmd: CMD_NOP, bank: '0, addr: '0, pattern: '0};

  // JEDEC DDR3 truth table; idle slots are sent as DESELECT (cs_n high). A10 selects all banks on PRECHARGE and is the
  // auto-precharge bit on READ/WRITE, which this controller never uses, so
  // A10 is forced low there: every precharge is an explicit instruction.
  function automatic ddr_pins_t encode_cmd(ddr_req_t r);
    ddr_pins_t p;
    p.cs_n  = 1'b0;
    p.ras_n = 1'b1;
    p.cas_n = 1'b1;
    p.we_n  = 1'b1;
    p.ba    = r.bank;
    p.a     = r.addr;
    unique case (r.cmd)
      CMD_ACT:  begin p.ras_n = 1'b0; end
      CMD_RD:   begin p.cas_n = 1'b0; p.a[10] = 1'b0; end
      CMD_WR:   begin p.cas_n = 1'b0; p.we_n = 1'b0; p.a[10] = 1'b0; end
      CMD_PRE:  begin p.ras_n = 1'b0; p.we_n = 1'b0; p.a[10] = 1'b0; end
      CMD_PREA: begin p.ras_n = 1'b0; p.we_n = 1'b0; p.a = '0; p.a[10] = 1'b1; p.ba = '0; end
      CMD_REF:  begin p.ras_n = 1'b0; p.cas_n = 1'b0; p.ba = '0; p.a = '0; end
      CMD_RAW:  begin {p.ras_n, p.cas_n, p.we_n} = r.pattern[2:0]; end
      default:  begin p.cs_n = 1'b1; p.ba = '0; p.a = '0; end  // DESELECT
    endcase
    return p;
  endfunction

  // Map an instruction opcode to the DDR command it issues (NOP for WAIT/END).
  function automatic ddr_cmd_e op_to_cmd(opcode_e op);
    unique case (op)
      OP_ACT:  return CMD_ACT;
      OP_RD:   return CMD_RD;
      OP_WR:   return CMD_WR;
      OP_PRE:  return CMD_PRE;
      OP_PREA: return CMD_PREA;
      OP_REF:  return CMD_REF;
      OP_RAW:  return CMD_RAW;
      default: return CMD_NOP;
    endcase
  endfunction

endpackage
