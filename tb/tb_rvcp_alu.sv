// tb_rvcp_alu: random operands for every ALU operation and branch condition,
// compared with results computed here from the RV32I definitions (including
// corner values such as 0x80000000 and shift amounts above 31 bits' worth).
module tb_rvcp_alu;
  import rvcp_pkg::*;
  alu_op_e op; word_t a, b, y, ba, bb; logic [2:0] bc; logic bt;
  int checks = 0, failures = 0;
  rvcp_alu dut (.op, .a, .b, .y, .br_cond(bc), .br_a(ba), .br_b(bb), .br_true(bt));

  function automatic word_t pick();
    word_t c[5] = '{32'h0, 32'hffff_ffff, 32'h8000_0000, 32'h7fff_ffff, 32'h1};
    return $urandom_range(0, 3) == 0 ? c[$urandom_range(0, 4)] : $urandom;
  endfunction

  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 20000; n++) begin
      word_t exp; bit expb; longint sa, sb;
      op = alu_op_e'($urandom_range(0, 10)); a = pick(); b = pick();
      bc = 3'($urandom_range(0, 7)); ba = pick(); bb = $urandom_range(0, 3) == 0 ? ba : pick();
      #1;
      sa = longint'($signed(a)); sb = longint'($signed(b));
      case (op)
        ALU_ADD:  exp = word_t'(longint'(a) + longint'(b));
        ALU_SUB:  exp = word_t'(longint'(a) - longint'(b));
        ALU_SLL:  exp = word_t'(64'(a) * (64'd1 << (b % 32)));
        ALU_SLT:  exp = (sa < sb) ? 1 : 0;
        ALU_SLTU: exp = (longint'(a) < longint'(b)) ? 1 : 0;
        ALU_XOR:  exp = a ^ b;
        ALU_SRL:  exp = word_t'(64'(a) / (64'd1 << (b % 32)));
        ALU_SRA:  exp = word_t'(sa >>> (b % 32));
        ALU_OR:   exp = a | b;
        ALU_AND:  exp = a & b;
        default:  exp = b;
      endcase
      sa = longint'($signed(ba)); sb = longint'($signed(bb));
      case (bc)
        3'b000: expb = ba == bb;
        3'b001: expb = ba != bb;
        3'b100: expb = sa < sb;
        3'b101: expb = sa >= sb;
        3'b110: expb = longint'(ba) < longint'(bb);
        3'b111: expb = longint'(ba) >= longint'(bb);
        default: expb = 0;
      endcase
      checks += 2;
      if (y !== exp) begin failures++; if (failures < 10) $display("FAIL op %s %h %h -> %h exp %h", op.name(), a, b, y, exp); end
      if (bt !== expb) begin failures++; if (failures < 10) $display("FAIL br %0d %h %h -> %b", bc, ba, bb, bt); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
