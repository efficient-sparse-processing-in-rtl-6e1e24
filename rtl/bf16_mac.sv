// bf16_mac: one multiply-accumulate of an ESPIM execution unit.
//
// acc_o = acc_i + a_i * b_i, where a_i (matrix cell) and b_i (vector element)
// are bfloat16 and the running sum acc_i / acc_o is IEEE fp32.
// The 8x8-bit significand product is exact in fp32, so the only rounding
// is that of the addition, done round-to-nearest-even with guard, round and
// sticky bits. Subnormal inputs and results are flushed to zero; an exponent
// overflow gives infinity; NaN inputs are not treated specially.
//
// Timing: purely combinational; the caller registers the result (the
// execution unit's output-buffer entry), one accumulation per column command.
//
// The paper specifies bfloat16 operands and a MAC per lane. The fp32
// accumulator, the rounding mode and the flush-to-zero rule are choices of
// this design.
module bf16_mac
  import espim_pkg::*;
(
  input  bf16_t a_i,
  input  bf16_t b_i,
  input  fp32_t acc_i,
  output fp32_t acc_o
);

  // ---------------- exact product as fp32 ----------------
  logic        p_sign, p_zero;
  logic [9:0]  p_exp;        // signed-ish, room for over/underflow
  logic [15:0] p_sig;
  logic [22:0] p_man;
  fp32_t       prod;

  always_comb begin
    p_sign = a_i[15] ^ b_i[15];
    p_zero = (a_i[14:7] == 8'd0) || (b_i[14:7] == 8'd0);
    p_sig  = {1'b1, a_i[6:0]} * {1'b1, b_i[6:0]};
    p_exp  = {2'b00, a_i[14:7]} + {2'b00, b_i[14:7]} - 10'd127 + {9'd0, p_sig[15]};
    p_man  = p_sig[15] ? {p_sig[14:0], 8'd0} : {p_sig[13:0], 9'd0};
    if (p_zero || p_exp[9] || p_exp == 10'd0)
      prod = {p_sign, 31'd0};                       // zero / flushed underflow
    else if (p_exp >= 10'd255)
      prod = {p_sign, 8'hff, 23'd0};                // overflow to infinity
    else
      prod = {p_sign, p_exp[7:0], p_man};
  end

  // ---------------- fp32 addition, round to nearest even ----------------
  logic        x_zero, y_zero, swap;
  fp32_t       op_big, op_sml;
  logic [7:0]  e_big, e_small, d;
  logic [26:0] m_big, m_small, m_shift;    // 24-bit significand + G,R,S
  logic [27:0] m_sum;
  logic [26:0] m_norm;
  logic [9:0]  e_res;
  logic [4:0]  lz;
  logic        lz_found;
  logic [24:0] m_rnd;
  logic        rnd_up;
  logic        s_res;

  always_comb begin
    x_zero = (acc_i[30:23] == 8'd0);
    y_zero = (prod[30:23] == 8'd0);
    swap   = (prod[30:0] > acc_i[30:0]);
    op_big    = swap ? prod : acc_i;
    op_sml  = swap ? acc_i : prod;
    e_big  = op_big[30:23];
    e_small = op_sml[30:23];
    d      = e_big - e_small;
    m_big  = {1'b1, op_big[22:0], 3'b000};
    m_small = {1'b1, op_sml[22:0], 3'b000};
    // align the smaller operand, folding shifted-out bits into sticky
    if (d >= 8'd27) begin
      m_shift = {26'd0, 1'b1};
    end else begin
      m_shift = m_small >> d;
      if ((m_small & ((27'd1 << d) - 27'd1)) != 27'd0) m_shift[0] = 1'b1;
    end
    s_res  = op_big[31];
    e_res  = {2'b00, e_big};
    m_norm = '0;
    lz     = '0;
    lz_found = 1'b0;
    if (op_big[31] == op_sml[31]) begin
      m_sum = {1'b0, m_big} + {1'b0, m_shift};
      if (m_sum[27]) begin
        m_norm = m_sum[27:1];
        m_norm[0] = m_sum[1] | m_sum[0];
        e_res  = e_res + 10'd1;
      end else begin
        m_norm = m_sum[26:0];
      end
    end else begin
      m_sum = {1'b0, m_big} - {1'b0, m_shift};
      // leading-zero count over bits 26..3 (a cancellation of more than one
      // bit only happens when the shift was at most one, i.e. exactly)
      for (int i = 26; i >= 0; i--) begin
        if (!lz_found && m_sum[i]) begin
          lz = 5'(26 - i);
          lz_found = 1'b1;
        end
      end
      m_norm = m_sum[26:0] << lz;
      e_res  = e_res - {5'd0, lz};
    end
    // round to nearest, ties to even
    rnd_up = m_norm[2] & (m_norm[1] | m_norm[0] | m_norm[3]);
    m_rnd  = {1'b0, m_norm[26:3]} + {24'd0, rnd_up};
    if (m_rnd[24]) begin
      m_rnd = m_rnd >> 1;
      e_res = e_res + 10'd1;
    end

    if (x_zero && y_zero)
      acc_o = {acc_i[31] & prod[31], 31'd0};
    else if (x_zero)
      acc_o = prod;
    else if (y_zero)
      acc_o = acc_i;
    else if (!lz_found && (op_big[31] != op_sml[31]))
      acc_o = 32'd0;                                  // exact cancellation
    else if (e_res[9] || e_res == 10'd0)
      acc_o = {s_res, 31'd0};                         // flushed underflow
    else if (e_res >= 10'd255)
      acc_o = {s_res, 8'hff, 23'd0};                  // overflow
    else
      acc_o = {s_res, e_res[7:0], m_rnd[22:0]};
  end

endmodule
