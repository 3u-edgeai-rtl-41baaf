// tdla_pkg: shared types and constants of the T-DLA ternary accelerator core.
//
// The 64-bit instruction word has eight byte-wide fields (byte 7 is the most
// significant): OP, FS (input feature size), SAM/SAL (source address), DAM/DAL
// (destination address), KS (kernel size) and CC (in/out/activation/pooling
// selection). The field order is the published instruction format. The opcode
// values and the meaning of the individual CC bits are not published; the
// encodings below are this design's own choice:
//   CC[3:0] weight tile index, CC[4] first input-channel tile (start a fresh
//   sum), CC[5] last input-channel tile (produce the output), CC[6] ReLU
//   enable, CC[7] 2x2 max-pooling enable.
// SETQ loads the linear scaling factor: multiplier in SAL, right shift in KS.
package tdla_pkg;

  typedef enum logic [7:0] {
    OP_NOP  = 8'h00,
    OP_CONV = 8'h01,
    OP_SETQ = 8'h02,
    OP_END  = 8'hFF
  } opcode_e;

  typedef struct packed {
    logic [7:0] op;   // byte 7
    logic [7:0] fs;   // byte 6
    logic [7:0] sam;  // byte 5
    logic [7:0] sal;  // byte 4
    logic [7:0] dam;  // byte 3
    logic [7:0] dal;  // byte 2
    logic [7:0] ks;   // byte 1
    logic [7:0] cc;   // byte 0
  } inst_t;

  localparam int CC_FIRST = 4;
  localparam int CC_LAST  = 5;
  localparam int CC_RELU  = 6;
  localparam int CC_POOL  = 7;

  // Ternary weight codes, 2-bit two's complement.
  localparam logic [1:0] W_ZERO = 2'b00;
  localparam logic [1:0] W_POS  = 2'b01;
  localparam logic [1:0] W_NEG  = 2'b11;

  function automatic inst_t make_inst(opcode_e op, logic [7:0] fs, logic [15:0] sa,
                                      logic [15:0] da, logic [7:0] ks, logic [7:0] cc);
    inst_t i;
    i.op  = op;
    i.fs  = fs;
    i.sam = sa[15:8];
    i.sal = sa[7:0];
    i.dam = da[15:8];
    i.dal = da[7:0];
    i.ks  = ks;
    i.cc  = cc;
    return i;
  endfunction

endpackage
