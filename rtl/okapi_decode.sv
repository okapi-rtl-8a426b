// okapi_decode: decode-stage extension for the Okapi instructions.
//
// The decoder classifies one 32-bit instruction word into the few class bits
// the Okapi logic needs (uop_t): ordinary load, store, control transfer,
// OkapiLoad, OkapiReset, and whether the instruction can open a transient
// window (be mispredicted or raise an exception).  The suspicious flag from
// fetch is passed along with the class bits.  Purely combinational.
//
// The design only says that decode is extended to handle OkapiReset and
// OkapiLoad; it gives no encoding.  This implementation uses RISC-V encodings:
//   OkapiReset : custom-0 opcode 0001011, funct3 = 111, all other fields zero
//   OkapiLoad  : custom-1 opcode 0101011, I-type, same fields as a LOAD
//                (rd, rs1, 12-bit offset, funct3 = access width)
// Instructions that may open a transient window: branches and jumps, loads,
// stores (memory-dependence speculation, faults), AMOs, SYSTEM instructions,
// both Okapi instructions, and any opcode this decoder does not know (an
// illegal instruction traps).  The list is this design's own choice.
module okapi_decode
  import okapi_pkg::*;
(
  input  logic [31:0] inst,
  input  logic        suspicious,
  output uop_t        uop
);

  localparam logic [6:0] OPC_LOAD     = 7'b0000011;
  localparam logic [6:0] OPC_LOAD_FP  = 7'b0000111;
  localparam logic [6:0] OPC_CUSTOM0  = 7'b0001011;
  localparam logic [6:0] OPC_MISC_MEM = 7'b0001111;
  localparam logic [6:0] OPC_OP_IMM   = 7'b0010011;
  localparam logic [6:0] OPC_AUIPC    = 7'b0010111;
  localparam logic [6:0] OPC_OP_IMM32 = 7'b0011011;
  localparam logic [6:0] OPC_STORE    = 7'b0100011;
  localparam logic [6:0] OPC_STORE_FP = 7'b0100111;
  localparam logic [6:0] OPC_CUSTOM1  = 7'b0101011;
  localparam logic [6:0] OPC_AMO      = 7'b0101111;
  localparam logic [6:0] OPC_OP       = 7'b0110011;
  localparam logic [6:0] OPC_LUI      = 7'b0110111;
  localparam logic [6:0] OPC_OP32     = 7'b0111011;
  localparam logic [6:0] OPC_MADD     = 7'b1000011;
  localparam logic [6:0] OPC_MSUB     = 7'b1000111;
  localparam logic [6:0] OPC_NMSUB    = 7'b1001011;
  localparam logic [6:0] OPC_NMADD    = 7'b1001111;
  localparam logic [6:0] OPC_OP_FP    = 7'b1010011;
  localparam logic [6:0] OPC_BRANCH   = 7'b1100011;
  localparam logic [6:0] OPC_JALR     = 7'b1100111;
  localparam logic [6:0] OPC_JAL      = 7'b1101111;
  localparam logic [6:0] OPC_SYSTEM   = 7'b1110011;

  logic [6:0] opc;
  logic [2:0] funct3;
  logic       known;
  logic       other_window;

  assign opc    = inst[6:0];
  assign funct3 = inst[14:12];

  always_comb begin
    uop          = '0;
    known        = 1'b1;
    other_window = 1'b0;
    unique case (opc)
      OPC_LOAD, OPC_LOAD_FP:      uop.is_load   = 1'b1;
      OPC_STORE, OPC_STORE_FP:    uop.is_store  = 1'b1;
      OPC_BRANCH, OPC_JAL, OPC_JALR: uop.is_branch = 1'b1;
      // OkapiReset: every field except opcode and funct3 must be zero
      OPC_CUSTOM0: begin
        if (funct3 == 3'b111 && inst[31:15] == '0 && inst[11:7] == '0)
          uop.is_okapi_reset = 1'b1;
        else
          known = 1'b0;
      end
      // OkapiLoad: widths LB LH LW LD LBU LHU LWU (funct3 111 reserved)
      OPC_CUSTOM1: begin
        if (funct3 != 3'b111) uop.is_okapi_load = 1'b1;
        else                  known = 1'b0;
      end
      OPC_AMO, OPC_SYSTEM:        other_window = 1'b1;
      OPC_MISC_MEM, OPC_OP_IMM, OPC_AUIPC, OPC_OP_IMM32, OPC_OP, OPC_LUI,
      OPC_OP32, OPC_MADD, OPC_MSUB, OPC_NMSUB, OPC_NMADD, OPC_OP_FP: ;
      default:                    known = 1'b0;
    endcase
    uop.opens_window = uop.is_load | uop.is_store | uop.is_branch |
                       uop.is_okapi_load | uop.is_okapi_reset |
                       other_window | ~known;
    uop.suspicious   = suspicious;
  end

endmodule
