// tb_fpisa_alu: random test of the stateless ALU, every opcode, including
// metadata-distance shifts at and beyond the word width.
module tb_fpisa_alu;
  import fpisa_pkg::*;
  localparam int W = 32;
  alu_op_e op;
  logic [W-1:0] a, b, imm, y, exp_y;
  int checks = 0, failures = 0;

  fpisa_alu #(.W(W)) dut (.op, .a, .b, .imm, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] model(alu_op_e o, logic [W-1:0] x, logic [W-1:0] d,
                                         logic [W-1:0] im);
    longint sx = longint'($signed(x));
    case (o)
      ALU_PASS: return x;
      ALU_ADD:  return W'(longint'(x) + longint'(d));
      ALU_SUB:  return W'(longint'(x) - longint'(d));
      ALU_AND:  return x & im;
      ALU_OR:   return x | im;
      ALU_XOR:  return x ^ im;
      ALU_SHL_IMM: return (im > 63) ? '0 : W'(longint'(x) << im);
      ALU_SHR_IMM: return (im > 63) ? '0 : W'(longint'(x) >> im);
      ALU_SHL_REG: return (d > 63) ? '0 : W'(longint'(x) << d);
      ALU_SHR_REG: return (d > 63) ? '0 : W'(longint'(x) >> d);
      ALU_SRA_REG: return (d > 63) ? W'(sx >>> 63) : W'(sx >>> d);
      default: return '0;
    endcase
  endfunction

  initial begin
    for (int n = 0; n < 4000; n++) begin
      op  = alu_op_e'($urandom_range(0, 11));
      a   = $urandom;
      b   = (n % 3 == 0) ? $urandom : $urandom_range(0, 40);
      imm = (n % 2 == 0) ? $urandom : $urandom_range(0, 40);
      #1;
      exp_y = model(op, a, b, imm);
      checks++;
      if (y !== exp_y) begin
        failures++;
        if (failures < 10) $display("op=%0d a=%h b=%h imm=%h y=%h exp=%h", op, a, b, imm, y, exp_y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
