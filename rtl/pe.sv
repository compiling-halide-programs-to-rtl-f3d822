// Processing element (PE) core of a PE tile.
//
// Two 16-bit operands and three 1-bit operands arrive from the connection
// boxes. Each 16-bit operand passes through an input register stage (REG 0,
// REG 1) with a configurable choice of the direct value, the registered value
// (a one-cycle delay, which also serves as a shift-register stage) or a
// configured constant; the 1-bit operands have the same choice. The ALU +
// multiplier computes `res` from the two operands; the comparison unit (COND)
// and a 3-input lookup table (LUT) on the 1-bit operands produce the 1-bit
// result, chosen by configuration. OP_SEL uses 1-bit operand 0 to pick
// between the two 16-bit operands.
//
// The block structure (REG 0/1, ALU+MULT, COND, LUT, 16-bit and 1-bit
// inputs and outputs) follows the reference PE; its operation list and
// encodings are this design's own. Outputs are combinational from the
// selected operands; input registers hold while `stall` is high.
module pe
  import ub_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       stall,
  input  pe_cfg_t    cfg,
  input  word_t      a_in,
  input  word_t      b_in,
  input  logic [2:0] bit_in,
  output word_t      res,
  output logic       res_bit
);

  word_t      a_reg, b_reg, a, b;
  logic [2:0] bit_reg, bits;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_reg   <= '0;
      b_reg   <= '0;
      bit_reg <= '0;
    end else if (!stall) begin
      a_reg   <= a_in;
      b_reg   <= b_in;
      bit_reg <= bit_in;
    end
  end

  function automatic word_t pick(in_mode_t m, word_t d, word_t r, word_t c);
    unique case (m)
      IN_DIRECT: return d;
      IN_REG:    return r;
      default:   return c;
    endcase
  endfunction

  assign a = pick(cfg.a_mode, a_in, a_reg, cfg.a_const);
  assign b = pick(cfg.b_mode, b_in, b_reg, cfg.b_const);

  always_comb begin
    for (int i = 0; i < 3; i++) begin
      unique case (cfg.bit_mode[i])
        2'd0:    bits[i] = bit_in[i];
        2'd1:    bits[i] = bit_reg[i];
        default: bits[i] = cfg.bit_const[i];
      endcase
    end
  end

  // ALU + MULT
  logic signed [DATA_W:0]     sa, sb;      // sign- or zero-extended operands
  logic signed [2*DATA_W+1:0] prod;
  assign sa   = cfg.is_signed ? {a[DATA_W-1], a} : {1'b0, a};
  assign sb   = cfg.is_signed ? {b[DATA_W-1], b} : {1'b0, b};
  assign prod = sa * sb;

  logic a_lt_b;
  assign a_lt_b = sa < sb;

  always_comb begin
    unique case (cfg.op)
      OP_ADD:   res = a + b;
      OP_SUB:   res = a - b;
      OP_MUL:   res = prod[DATA_W-1:0];
      OP_MULH:  res = prod[2*DATA_W-1:DATA_W];
      OP_ABSD:  res = a_lt_b ? b - a : a - b;
      OP_MIN:   res = a_lt_b ? a : b;
      OP_MAX:   res = a_lt_b ? b : a;
      OP_SHL:   res = a << b[3:0];
      OP_SHR:   res = a >> b[3:0];
      OP_ASHR:  res = word_t'($signed(a) >>> b[3:0]);
      OP_AND:   res = a & b;
      OP_OR:    res = a | b;
      OP_XOR:   res = a ^ b;
      OP_SEL:   res = bits[0] ? a : b;
      OP_PASSA: res = a;
      default:  res = '0;
    endcase
  end

  // COND
  logic cond;
  always_comb begin
    unique case (cfg.cmp)
      CMP_EQ:   cond = (a == b);
      CMP_NE:   cond = (a != b);
      CMP_LT:   cond = a_lt_b;
      CMP_LE:   cond = a_lt_b || (a == b);
      CMP_GT:   cond = !a_lt_b && (a != b);
      CMP_GE:   cond = !a_lt_b;
      CMP_ZERO: cond = (res == '0);
      default:  cond = 1'b1;
    endcase
  end

  // LUT
  logic lut_out;
  assign lut_out = cfg.lut[bits];

  assign res_bit = cfg.bit_out_lut ? lut_out : cond;

endmodule
