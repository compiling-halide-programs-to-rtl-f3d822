// Self-checking test of the PE core. For every ALU operation and both
// signednesses, random operands are applied directly and the result is
// compared with a reference computed here; the COND comparisons, the LUT,
// the registered input mode (one-cycle delay), the constant mode and the
// stall hold of the input registers are checked as well.
module tb_pe;
  import ub_pkg::*;

  logic clk = 0, rst_n = 0, stall = 0;
  pe_cfg_t cfg;
  word_t a_in, b_in, res;
  logic [2:0] bit_in;
  logic res_bit;
  int checks = 0, failures = 0;

  pe dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s op=%0d a=%0h b=%0h res=%0h", what, cfg.op, a_in, b_in, res);
    end
  endtask

  function automatic word_t ref_alu(pe_op_t op, bit sg, word_t a, word_t b, bit s0);
    longint sa, sb, p;
    sa = sg ? longint'($signed(a)) : longint'(a);
    sb = sg ? longint'($signed(b)) : longint'(b);
    p  = sa * sb;
    case (op)
      OP_ADD:   return a + b;
      OP_SUB:   return a - b;
      OP_MUL:   return word_t'(p);
      OP_MULH:  return word_t'(p >>> 16);
      OP_ABSD:  return word_t'(sa < sb ? sb - sa : sa - sb);
      OP_MIN:   return sa < sb ? a : b;
      OP_MAX:   return sa < sb ? b : a;
      OP_SHL:   return a << b[3:0];
      OP_SHR:   return a >> b[3:0];
      OP_ASHR:  return word_t'($signed(a) >>> b[3:0]);
      OP_AND:   return a & b;
      OP_OR:    return a | b;
      OP_XOR:   return a ^ b;
      OP_SEL:   return s0 ? a : b;
      OP_PASSA: return a;
      default:  return '0;
    endcase
  endfunction

  function automatic bit ref_cmp(pe_cmp_t c, bit sg, word_t a, word_t b, word_t r);
    longint sa, sb;
    sa = sg ? longint'($signed(a)) : longint'(a);
    sb = sg ? longint'($signed(b)) : longint'(b);
    case (c)
      CMP_EQ: return sa == sb;
      CMP_NE: return sa != sb;
      CMP_LT: return sa < sb;
      CMP_LE: return sa <= sb;
      CMP_GT: return sa > sb;
      CMP_GE: return sa >= sb;
      CMP_ZERO: return r == 0;
      default: return 1'b1;
    endcase
  endfunction

  word_t prev_a, prev_b;

  initial begin
    cfg = '0; a_in = '0; b_in = '0; bit_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int op = 0; op < 16; op++) begin
      for (int n = 0; n < 200; n++) begin
        cfg.op = pe_op_t'(op);
        cfg.is_signed = n[0];
        cfg.cmp = pe_cmp_t'($urandom_range(0, 7));
        cfg.lut = 8'($urandom);
        cfg.bit_out_lut = n[1];
        a_in = word_t'($urandom);
        b_in = (n % 5 == 0) ? a_in : word_t'($urandom);
        bit_in = 3'($urandom);
        #1;
        check(res == ref_alu(cfg.op, cfg.is_signed, a_in, b_in, bit_in[0]), "alu");
        if (cfg.bit_out_lut) check(res_bit == cfg.lut[bit_in], "lut");
        else check(res_bit == ref_cmp(cfg.cmp, cfg.is_signed, a_in, b_in, res), "cond");
        @(negedge clk);
      end
    end
    // registered and constant operand modes: res = a(t-1) + 7
    cfg = '0;
    cfg.op = OP_ADD; cfg.a_mode = IN_REG; cfg.b_mode = IN_CONST; cfg.b_const = 16'd7;
    prev_a = a_in;
    for (int n = 0; n < 50; n++) begin
      a_in = word_t'($urandom);
      stall = (n % 7 == 3);
      #1;
      check(res == prev_a + 16'd7, "registered operand + constant");
      @(negedge clk);
      if (!stall) prev_a = a_in;
    end
    stall = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
