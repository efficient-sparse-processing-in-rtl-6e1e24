// fp_ref_pkg: reference number conversions for the testbenches, written
// independently of the RTL arithmetic. Values are computed in double
// precision and converted here to bfloat16 / fp32 bit patterns with
// round-to-nearest-even; results below the normal range flush to zero to
// match the datapath's convention.
package fp_ref_pkg;

  function automatic real bf16_to_real(input logic [15:0] h);
    return $bitstoreal({h[15], (h[14:7] == 8'd0) ? 11'd0 : 11'(h[14:7]) - 11'd127 + 11'd1023,
                        h[6:0], 45'd0});
  endfunction

  function automatic real fp32_to_real(input logic [31:0] f);
    if (f[30:23] == 8'd0) return 0.0;
    return $bitstoreal({f[31], 11'(f[30:23]) - 11'd127 + 11'd1023, f[22:0], 29'd0});
  endfunction

  // round a double to fp32 (nearest even); flush tiny results to zero
  function automatic logic [31:0] real_to_fp32(input real r);
    logic [63:0] d;
    int          e;
    logic [52:0] m;
    logic [24:0] keep;
    logic [28:0] rest;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:0]};
    keep = {1'b0, m[52:29]};
    rest = m[28:0];
    if (rest[28] && ((rest[27:0] != 0) || keep[0])) keep = keep + 1;
    if (keep[24]) begin
      keep = keep >> 1;
      e = e + 1;
    end
    if (e <= 0) return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    return {d[63], 8'(e), keep[22:0]};
  endfunction

  // exact conversion of a small integer to bfloat16 (|v| < 256)
  function automatic logic [15:0] int_to_bf16(input int v);
    logic [63:0] d;
    if (v == 0) return 16'd0;
    d = $realtobits(real'(v));
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:45]};
  endfunction

endpackage
