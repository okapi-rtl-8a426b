// tb_okapi_decode: checks the class bits for every major opcode, for both
// Okapi instructions and for malformed custom encodings.  Expected values are
// taken from a table written out here, independent of the decoder.
module tb_okapi_decode;
  import okapi_pkg::*;

  logic [31:0] inst;
  logic        suspicious;
  uop_t        uop;

  okapi_decode dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected: {load, store, branch, okapi_load, okapi_reset, window}
  task automatic expect_class(input logic [31:0] w, input logic [5:0] exp, input string name);
    for (int s = 0; s < 2; s++) begin
      inst = w; suspicious = s[0];
      #1;
      checks++;
      if ({uop.is_load, uop.is_store, uop.is_branch, uop.is_okapi_load,
           uop.is_okapi_reset, uop.opens_window} !== exp || uop.suspicious !== s[0]) begin
        failures++;
        $display("%s %h: got %b%b%b%b%b%b susp %b, expected %b", name, w, uop.is_load,
                 uop.is_store, uop.is_branch, uop.is_okapi_load, uop.is_okapi_reset,
                 uop.opens_window, uop.suspicious, exp);
      end
    end
  endtask

  initial begin
    expect_class(32'h0081_2283, 6'b100001, "lw x5,8(x2)");
    expect_class(32'h0001_3087, 6'b100001, "fld");
    expect_class(32'h0051_3423, 6'b010001, "sd x5,8(x2)");
    expect_class(32'h0000_0463, 6'b001001, "beq");
    expect_class(32'h0080_00ef, 6'b001001, "jal");
    expect_class(32'h0000_8067, 6'b001001, "ret");
    expect_class(32'h0000_700b, 6'b000011, "OkapiReset");
    expect_class(32'h0081_32ab, 6'b000101, "OkapiLoad ld");
    expect_class(32'h0081_02ab, 6'b000101, "OkapiLoad lb");
    expect_class(32'h0081_72ab, 6'b000001, "custom-1 funct3 7 (illegal)");
    expect_class(32'h0000_600b, 6'b000001, "custom-0 funct3 6 (illegal)");
    expect_class(32'h0010_700b, 6'b000001, "custom-0 funct3 7, rs1 set (illegal)");
    expect_class(32'h0000_778b, 6'b000001, "custom-0 funct3 7, rd set (illegal)");
    expect_class(32'h0031_01b3, 6'b000000, "add");
    expect_class(32'h0011_0113, 6'b000000, "addi");
    expect_class(32'h0000_10b7, 6'b000000, "lui");
    expect_class(32'h0000_0097, 6'b000000, "auipc");
    expect_class(32'h0000_000f, 6'b000000, "fence");
    expect_class(32'h0220_7053, 6'b000000, "fadd.d");
    expect_class(32'h0000_0073, 6'b000001, "ecall");
    expect_class(32'h1000_20af, 6'b000001, "lr.w");
    expect_class(32'h0000_007f, 6'b000001, "unknown opcode");
    expect_class(32'h0000_0000, 6'b000001, "all zero");
    // every opcode: window bit set exactly for the listed trapping classes
    for (int o = 0; o < 128; o++) begin
      logic [6:0] op;
      bit exp_w;
      op = 7'(o);
      inst = {25'h0, op};
      suspicious = 0;
      #1;
      case (op)
        7'b0110011, 7'b0010011, 7'b0110111, 7'b0010111, 7'b0001111, 7'b0011011,
        7'b0111011, 7'b1010011, 7'b1000011, 7'b1000111, 7'b1001011, 7'b1001111: exp_w = 0;
        default: exp_w = 1;
      endcase
      checks++;
      if (uop.opens_window !== exp_w) begin
        failures++;
        $display("opcode %b: window %b expected %b", op, uop.opens_window, exp_w);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
