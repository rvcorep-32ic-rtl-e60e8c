// rvcp_tb_pkg: verification helpers shared by the RVCoreP-32IC testbenches.
//
//  - Instruction encoders for RV32I and RV32C (enc_* and c_* functions).
//  - expand16(): the standard RV32C-to-RV32I expansion. The RTL never
//    expands compressed instructions (it decodes both lengths in parallel);
//    this function is the independent reference the testbenches compare it
//    with.
//  - rv_iss: an instruction-set model of RV32IC with separate instruction and
//    data memories. It executes one instruction per step() and reports the
//    register write and store, so a testbench can check the pipeline's
//    retire trace in lock step.
//  - rv_progen: a random program generator producing terminating programs
//    that mix 16- and 32-bit instructions and contain counted loops, forward
//    branches of both lengths, calls and returns, loads and stores with
//    immediate use of loaded values, and 32-bit instructions at addresses
//    that are not 4-byte aligned.
package rvcp_tb_pkg;

  // ---------------------------------------------------------------- encoders
  function automatic logic [31:0] enc_r(int f7, int rs2, int rs1, int f3, int rd, int opc);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] enc_i(int imm, int rs1, int f3, int rd, int opc);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] enc_s(int imm, int rs2, int rs1, int f3, int opc);
    logic [11:0] i; i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:0], 7'(opc)};
  endfunction
  function automatic logic [31:0] enc_b(int imm, int rs2, int rs1, int f3);
    logic [12:0] i; i = 13'(imm);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:1], i[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] enc_u(int imm20, int rd, int opc);
    return {20'(imm20), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] enc_j(int imm, int rd);
    logic [20:0] i; i = 21'(imm);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction

  // compressed encoders (register arguments are full register numbers)
  function automatic logic [15:0] c_ci(int f3, int rd, int imm6, int op);
    logic [5:0] i; i = 6'(imm6);
    return {3'(f3), i[5], 5'(rd), i[4:0], 2'(op)};
  endfunction
  function automatic logic [15:0] c_addi(int rd, int imm) ; return c_ci(0, rd, imm, 1); endfunction
  function automatic logic [15:0] c_li(int rd, int imm)   ; return c_ci(2, rd, imm, 1); endfunction
  function automatic logic [15:0] c_lui(int rd, int imm)  ; return c_ci(3, rd, imm, 1); endfunction
  function automatic logic [15:0] c_slli(int rd, int sh)  ; return c_ci(0, rd, sh, 2);  endfunction
  function automatic logic [15:0] c_mv(int rd, int rs2);
    return {4'b1000, 5'(rd), 5'(rs2), 2'b10};
  endfunction
  function automatic logic [15:0] c_add(int rd, int rs2);
    return {4'b1001, 5'(rd), 5'(rs2), 2'b10};
  endfunction
  function automatic logic [15:0] c_jr(int rs1);   return {4'b1000, 5'(rs1), 5'd0, 2'b10}; endfunction
  function automatic logic [15:0] c_jalr(int rs1); return {4'b1001, 5'(rs1), 5'd0, 2'b10}; endfunction
  // f2: 0 srli, 1 srai, 2 andi
  function automatic logic [15:0] c_shift_andi(int f2, int rdp, int imm6);
    logic [5:0] i; i = 6'(imm6);
    return {3'b100, i[5], 2'(f2), 3'(rdp - 8), i[4:0], 2'b01};
  endfunction
  // op: 0 sub, 1 xor, 2 or, 3 and
  function automatic logic [15:0] c_arith(int op, int rdp, int rs2p);
    return {6'b100011, 3'(rdp - 8), 2'(op), 3'(rs2p - 8), 2'b01};
  endfunction
  function automatic logic [15:0] c_lw(int rdp, int rs1p, int off);
    logic [6:0] o; o = 7'(off);
    return {3'b010, o[5:3], 3'(rs1p - 8), o[2], o[6], 3'(rdp - 8), 2'b00};
  endfunction
  function automatic logic [15:0] c_sw(int rs2p, int rs1p, int off);
    logic [6:0] o; o = 7'(off);
    return {3'b110, o[5:3], 3'(rs1p - 8), o[2], o[6], 3'(rs2p - 8), 2'b00};
  endfunction
  function automatic logic [15:0] c_lwsp(int rd, int off);
    logic [7:0] o; o = 8'(off);
    return {3'b010, o[5], 5'(rd), o[4:2], o[7:6], 2'b10};
  endfunction
  function automatic logic [15:0] c_swsp(int rs2, int off);
    logic [7:0] o; o = 8'(off);
    return {3'b110, o[5:2], o[7:6], 5'(rs2), 2'b10};
  endfunction
  function automatic logic [15:0] c_addi4spn(int rdp, int imm);
    logic [9:0] i; i = 10'(imm);
    return {3'b000, i[5:4], i[9:6], i[2], i[3], 3'(rdp - 8), 2'b00};
  endfunction
  function automatic logic [15:0] c_bz(bit bnez, int rs1p, int off);
    logic [8:0] o; o = 9'(off);
    return {2'b11, bnez, o[8], o[4:3], 3'(rs1p - 8), o[7:6], o[2:1], o[5], 2'b01};
  endfunction
  function automatic logic [15:0] c_jal_j(bit is_j, int off);
    logic [11:0] o; o = 12'(off);
    return {is_j, 2'b01, o[11], o[4], o[9:8], o[10], o[6], o[7], o[3:1], o[5], 2'b01};
  endfunction

  // ---------------------------------------------------------------- expansion
  function automatic logic [31:0] expand16(logic [15:0] c);
    int rdp, rs1p, rs2p, rd, rs2;
    int imm;
    rdp = 8 + c[4:2]; rs1p = 8 + c[9:7]; rs2p = rdp; rd = c[11:7]; rs2 = c[6:2];
    unique case ({c[1:0], c[15:13]})
      5'b00_000: begin
        imm = {c[10:7], c[12:11], c[5], c[6], 2'b00};
        return imm == 0 ? 32'h0 : enc_i(imm, 2, 0, rdp, 7'h13);
      end
      5'b00_010: return enc_i({c[5], c[12:10], c[6], 2'b00}, rs1p, 2, rdp, 7'h03);
      5'b00_110: return enc_s({c[5], c[12:10], c[6], 2'b00}, rs2p, rs1p, 2, 7'h23);
      5'b01_000: return enc_i(32'($signed({c[12], c[6:2]})), rd, 0, rd, 7'h13);
      5'b01_001: return enc_j(32'($signed({c[12], c[8], c[10:9], c[6], c[7], c[2], c[11], c[5:3], 1'b0})), 1);
      5'b01_010: return enc_i(32'($signed({c[12], c[6:2]})), 0, 0, rd, 7'h13);
      5'b01_011: begin
        if (rd == 2)
          return enc_i(32'($signed({c[12], c[4:3], c[5], c[2], c[6], 4'b0})), 2, 0, 2, 7'h13);
        return enc_u(32'($signed({c[12], c[6:2]})), rd, 7'h37);
      end
      5'b01_100: begin
        unique case (c[11:10])
          2'b00: return enc_r(0, c[6:2], rs1p, 5, rs1p, 7'h13);
          2'b01: return enc_r(7'h20, c[6:2], rs1p, 5, rs1p, 7'h13);
          2'b10: return enc_i(32'($signed({c[12], c[6:2]})), rs1p, 7, rs1p, 7'h13);
          default: begin
            unique case (c[6:5])
              2'b00: return enc_r(7'h20, rs2p, rs1p, 0, rs1p, 7'h33);
              2'b01: return enc_r(0, rs2p, rs1p, 4, rs1p, 7'h33);
              2'b10: return enc_r(0, rs2p, rs1p, 6, rs1p, 7'h33);
              default: return enc_r(0, rs2p, rs1p, 7, rs1p, 7'h33);
            endcase
          end
        endcase
      end
      5'b01_101: return enc_j(32'($signed({c[12], c[8], c[10:9], c[6], c[7], c[2], c[11], c[5:3], 1'b0})), 0);
      5'b01_110: return enc_b(32'($signed({c[12], c[6:5], c[2], c[11:10], c[4:3], 1'b0})), 0, rs1p, 0);
      5'b01_111: return enc_b(32'($signed({c[12], c[6:5], c[2], c[11:10], c[4:3], 1'b0})), 0, rs1p, 1);
      5'b10_000: return enc_r(0, c[6:2], rd, 1, rd, 7'h13);
      5'b10_010: return rd == 0 ? 32'h0 : enc_i({c[3:2], c[12], c[6:4], 2'b00}, 2, 2, rd, 7'h03);
      5'b10_100: begin
        if (!c[12]) begin
          if (rs2 == 0) return rd == 0 ? 32'h0 : enc_i(0, rd, 0, 0, 7'h67);
          return enc_r(0, rs2, 0, 0, rd, 7'h33);
        end
        if (rs2 == 0) return rd == 0 ? 32'h0010_0073 : enc_i(0, rd, 0, 1, 7'h67);
        return enc_r(0, rs2, rd, 0, rd, 7'h33);
      end
      5'b10_110: return enc_s({c[8:7], c[12:9], 2'b00}, rs2, 2, 2, 7'h23);
      default:   return 32'h0;  // not an RV32C integer instruction: treated as no-op
    endcase
  endfunction

  // ---------------------------------------------------------------- ISS
  typedef struct {
    logic [31:0] pc;
    logic [31:0] inst;     // 16-bit instructions zero-extended
    bit          rd_we;
    int          rd;
    logic [31:0] rd_val;
    logic [3:0]  st_be;
    logic [31:0] st_addr;
    logic [31:0] st_data;
  } iss_rec_t;

  class rv_iss;
    logic [15:0] imem[int];       // halfword index -> entry
    logic [31:0] dmem[int];       // word index -> word
    logic [31:0] x[32];
    logic [31:0] pc;

    function new();
      foreach (x[i]) x[i] = 0;
      pc = 0;
    endfunction

    function logic [15:0] ih(logic [31:0] a);
      int k; k = int'(a >> 1);
      return imem.exists(k) ? imem[k] : 16'h0000;
    endfunction
    function logic [31:0] dw(logic [31:0] a);
      int k; k = int'(a >> 2);
      return dmem.exists(k) ? dmem[k] : 32'h0;
    endfunction

    function iss_rec_t step();
      iss_rec_t r;
      logic [31:0] raw, i, npc, a, b, v, imm_i, imm_s, imm_b, ea, w;
      int len, rd, rs1, rs2, f3;
      bit wr;
      raw = {ih(pc + 2), ih(pc)};
      if (raw[1:0] != 2'b11) begin
        len = 2; i = expand16(raw[15:0]); r.inst = {16'd0, raw[15:0]};
      end else begin
        len = 4; i = raw; r.inst = raw;
      end
      r.pc = pc; r.st_be = 0; r.st_addr = 0; r.st_data = 0;
      rd = i[11:7]; rs1 = i[19:15]; rs2 = i[24:20]; f3 = i[14:12];
      a = x[rs1]; b = x[rs2];
      imm_i = {{20{i[31]}}, i[31:20]};
      imm_s = {{20{i[31]}}, i[31:25], i[11:7]};
      imm_b = {{19{i[31]}}, i[31], i[7], i[30:25], i[11:8], 1'b0};
      npc = pc + len; wr = 0; v = 0;
      unique case (i[6:0])
        7'h37: begin wr = 1; v = {i[31:12], 12'd0}; end
        7'h17: begin wr = 1; v = pc + {i[31:12], 12'd0}; end
        7'h6f: begin wr = 1; v = pc + len;
                     npc = pc + {{11{i[31]}}, i[31], i[19:12], i[20], i[30:21], 1'b0}; end
        7'h67: begin wr = 1; v = pc + len; npc = (a + imm_i) & ~32'd1; end
        7'h63: begin
          bit t;
          unique case (f3)
            0: t = a == b;  1: t = a != b;
            4: t = $signed(a) <  $signed(b);  5: t = $signed(a) >= $signed(b);
            6: t = a < b;   7: t = a >= b;
            default: t = 0;
          endcase
          if (t) npc = pc + imm_b;
        end
        7'h03: begin
          ea = a + imm_i; w = dw(ea) >> (8 * ea[1:0]); wr = 1;
          unique case (f3)
            0: v = {{24{w[7]}}, w[7:0]};
            1: v = {{16{w[15]}}, w[15:0]};
            4: v = {24'd0, w[7:0]};
            5: v = {16'd0, w[15:0]};
            default: v = dw(ea);
          endcase
        end
        7'h23: begin
          ea = a + imm_s;
          unique case (f3)
            0: begin r.st_be = 4'b0001 << ea[1:0]; r.st_data = {4{b[7:0]}}; end
            1: begin r.st_be = 4'b0011 << ea[1:0]; r.st_data = {2{b[15:0]}}; end
            default: begin r.st_be = 4'b1111; r.st_data = b; end
          endcase
          r.st_addr = {ea[31:2], 2'b00};
          w = dw(ea);
          for (int k = 0; k < 4; k++) if (r.st_be[k]) w[k*8 +: 8] = r.st_data[k*8 +: 8];
          dmem[int'(ea >> 2)] = w;
        end
        7'h13, 7'h33: begin
          logic [31:0] o2; bit isr;
          isr = i[5];
          o2 = isr ? b : imm_i;
          wr = 1;
          unique case (f3)
            0: v = (isr && i[30]) ? a - o2 : a + o2;
            1: v = a << o2[4:0];
            2: v = {31'd0, $signed(a) < $signed(o2)};
            3: v = {31'd0, a < o2};
            4: v = a ^ o2;
            5: v = i[30] ? 32'($signed(a) >>> o2[4:0]) : a >> o2[4:0];
            6: v = a | o2;
            default: v = a & o2;
          endcase
        end
        default: ;
      endcase
      r.rd_we = wr && rd != 0;
      r.rd = r.rd_we ? rd : 0;
      r.rd_val = v;
      if (r.rd_we) x[rd] = v;
      pc = npc;
      return r;
    endfunction
  endclass

  // ---------------------------------------------------------------- programs
  class rv_progen;
    logic [15:0] hw[$];          // program, one halfword per entry, from code_base
    int unsigned halt_pc;
    int unsigned data_base;      // x2 points here, x8 at data_base + 128
    int unsigned code_base;      // address of hw[0]
    int unsigned n_comp, n_32;

    function new(int unsigned dbase = 32'h400, int unsigned cbase = 0);
      data_base = dbase;
      code_base = cbase;
    endfunction

    function int unsigned pc(); return code_base + hw.size() * 2; endfunction
    function void e16(logic [15:0] c); hw.push_back(c); n_comp++; endfunction
    function void e32(logic [31:0] i); hw.push_back(i[15:0]); hw.push_back(i[31:16]); n_32++; endfunction

    // destination registers the random code may write
    function int rd_any();
      int pool[$] = '{5, 6, 7, 10, 11, 12, 13, 14, 15, 16, 17, 18, 20, 22, 25, 28, 31};
      return pool[$urandom_range(pool.size() - 1)];
    endfunction
    function int rd_c(); return $urandom_range(10, 15); endfunction  // x10..x15
    function int src_any();
      int pool[$] = '{0, 5, 6, 7, 10, 11, 12, 13, 14, 15, 16, 17, 18, 20, 22, 25, 28, 31};
      return pool[$urandom_range(pool.size() - 1)];
    endfunction

    function void li32(int rd, logic [31:0] v);
      logic [31:0] hi; hi = v + 32'h800;
      e32(enc_u(int'(hi[31:12]), rd, 7'h37));
      e32(enc_i(int'(v[11:0]), rd, 0, rd, 7'h13));
    endfunction

    // one random non-control instruction
    function void rand_op();
      int k, rd, r1, r2;
      k = $urandom_range(0, 21);
      rd = rd_any(); r1 = src_any(); r2 = src_any();
      unique case (k)
        0, 1:  e32(enc_r($urandom_range(0, 1) ? 7'h20 : 0, r2, r1, 0, rd, 7'h33));   // add/sub
        2:     e32(enc_r(0, r2, r1, $urandom_range(1, 7), rd, 7'h33));
        3:     e32(enc_r(7'h20, r2, r1, 5, rd, 7'h33));                                // sra
        4, 5:  e32(enc_i($urandom_range(0, 4095), r1, 0, rd, 7'h13));                  // addi
        6:     begin int f3; f3 = 2 + $urandom_range(0, 1) * 2 + $urandom_range(0, 1) * 4;
                     f3 = (f3 == 8) ? 7 : f3;
                     e32(enc_i($urandom_range(0, 4095), r1, f3, rd, 7'h13)); end
        7:     e32(enc_r($urandom_range(0, 1) ? 7'h20 : 0, $urandom_range(0, 31), r1,
                         $urandom_range(0, 1) ? 5 : 1, rd, 7'h13));                   // shifts
        8:     e32(enc_u($urandom, rd, $urandom_range(0, 1) ? 7'h37 : 7'h17));        // lui/auipc
        9:     e16(c_addi(rd, $urandom_range(1, 63)));
        10:    e16(c_li(rd, $urandom_range(0, 63)));
        11:    e16(c_lui(rd, $urandom_range(1, 31)));
        12:    e16(c_mv(rd, r1 == 0 ? 5 : r1));
        13:    e16(c_add(rd, r1 == 0 ? 6 : r1));
        14:    e16(c_arith($urandom_range(0, 3), rd_c(), rd_c()));
        15:    e16(c_shift_andi($urandom_range(0, 2), rd_c(), $urandom_range(0, 31)));
        16:    e16(c_slli(rd, $urandom_range(1, 31)));
        17:    e16(c_addi4spn(rd_c(), 4 * $urandom_range(1, 60)));
        18, 19: rand_mem();
        default: rand_load_use();
      endcase
    endfunction

    function void rand_mem();
      int k, off;
      k = $urandom_range(0, 9);
      unique case (k)
        0: e32(enc_i(4 * $urandom_range(0, 31), 2, 2, rd_any(), 7'h03));                 // lw
        1: e32(enc_i($urandom_range(0, 127), 2, $urandom_range(0, 1) ? 0 : 4, rd_any(), 7'h03)); // lb/lbu
        2: e32(enc_i(2 * $urandom_range(0, 63), 2, $urandom_range(0, 1) ? 1 : 5, rd_any(), 7'h03)); // lh/lhu
        3: e32(enc_s(4 * $urandom_range(0, 31), src_any(), 2, 2, 7'h23));                 // sw
        4: e32(enc_s($urandom_range(0, 127), src_any(), 2, 0, 7'h23));                    // sb
        5: e32(enc_s(2 * $urandom_range(0, 63), src_any(), 2, 1, 7'h23));                 // sh
        6: e16(c_lw(rd_c(), 8, 4 * $urandom_range(0, 31)));
        7: e16(c_sw(rd_c(), 8, 4 * $urandom_range(0, 31)));
        8: e16(c_lwsp(rd_any(), 4 * $urandom_range(0, 31)));
        default: e16(c_swsp(src_any(), 4 * $urandom_range(0, 31)));
      endcase
    endfunction

    // a load followed at once by an instruction reading its result
    function void rand_load_use();
      int rd;
      rd = rd_c();
      if ($urandom_range(0, 1)) e16(c_lw(rd, 8, 4 * $urandom_range(0, 31)));
      else e32(enc_i(4 * $urandom_range(0, 31), 2, 2, rd, 7'h03));
      if ($urandom_range(0, 1)) e16(c_add(rd_any(), rd));
      else e32(enc_r(0, rd, $urandom_range(0, 1) ? rd : src_any(), 0, rd_any(), 7'h33));
    endfunction

    // forward conditional branch over k random instructions
    function void fwd_branch(int k);
      int at; int target;
      logic [31:0] b;
      bit short;
      short = $urandom_range(0, 1);
      at = hw.size();
      if (short) e16(16'h0); else e32(32'h0);
      repeat (k) rand_op();
      target = pc() - code_base - at * 2;
      if (short) begin
        hw[at] = c_bz($urandom_range(0, 1), rd_c(), target);
      end else begin
        b = enc_b(target, src_any(), src_any(), $urandom_range(0, 1) ? ($urandom_range(0, 1) ? 0 : 1)
                                                                      : $urandom_range(4, 7));
        hw[at] = b[15:0]; hw[at + 1] = b[31:16];
      end
    endfunction

    function void body(int n, int depth, int fn_addr[$]);
      repeat (n) begin
        int k; k = $urandom_range(0, 9);
        if (k < 6) rand_op();
        else if (k < 8) fwd_branch($urandom_range(1, 4));
        else if (k == 8 && depth < 2) loop($urandom_range(2, 5), $urandom_range(3, 8), depth + 1, fn_addr);
        else if (fn_addr.size() > 0) call(fn_addr[$urandom_range(fn_addr.size() - 1)]);
        else rand_op();
      end
    endfunction

    // counted loop: x9 (depth 1) or x19 (depth 2) holds the trip count
    function void loop(int trips, int n, int depth, int fn_addr[$]);
      int cnt, top, off;
      logic [31:0] b;
      cnt = (depth == 1) ? 9 : 19;
      e32(enc_i(trips, 0, 0, cnt, 7'h13));
      if ($urandom_range(0, 1)) e16(c_addi(10, 1));   // shifts the loop head's alignment
      top = pc();
      body(n, depth, fn_addr);
      e32(enc_i(-1, cnt, 0, cnt, 7'h13));
      off = top - int'(pc());
      if (cnt == 9 && off >= -256 && $urandom_range(0, 1)) e16(c_bz(1, 9, off));
      else begin b = enc_b(off, 0, cnt, 1); e32(b); end
    endfunction

    function void call(int fn);
      int off, k;
      k = $urandom_range(0, 2);
      unique case (k)
        0: begin off = fn - int'(pc()); e32(enc_j(off, 1)); end
        1: begin
          off = fn - int'(pc());
          if (off >= -2048) e16(c_jal_j(0, off)); else e32(enc_j(off, 1));
        end
        default: begin
          if (fn < 2048) e32(enc_i(fn, 0, 0, 3, 7'h13)); else li32(3, fn);
          e16(c_jalr(3));
        end
      endcase
    endfunction

    // Program: jump over functions, set up bases and registers, random body
    // with loops, then a self-loop at halt_pc.
    function void build(int n_items);
      int fns[$];
      int at0;
      logic [31:0] j;
      hw.delete(); n_comp = 0; n_32 = 0;
      at0 = hw.size(); e32(32'h0);                       // j main (patched)
      repeat (3) begin
        if ($urandom_range(0, 1)) e16(c_addi(10, 0));    // vary alignment
        fns.push_back(pc());
        repeat ($urandom_range(2, 6)) rand_op();
        if ($urandom_range(0, 1)) e16(c_jr(1)); else e32(enc_i(0, 1, 0, 0, 7'h67));
      end
      j = enc_j(int'(pc()) - int'(code_base) - at0 * 2, 0);
      hw[at0] = j[15:0]; hw[at0 + 1] = j[31:16];
      li32(2, data_base);
      li32(8, data_base + 128);
      for (int r = 5; r < 32; r++)
        if (!(r inside {8, 9, 19, 2, 3})) li32(r, $urandom);
      body(n_items, 0, fns);
      // a loop whose exit branch alternates with history, for the predictor
      loop(6, 3, 1, fns);
      halt_pc = pc();
      e16(c_jal_j(1, 0));                                // c.j . (halt)
      e16(16'h0001); e16(16'h0001);                      // padding (c.nop)
    endfunction
  endclass

endpackage
