// sfp_ref_pkg: reference model for the testbenches of the FP32 container
// codec. It is written independently of the RTL: exponent codes are computed
// with integer arithmetic, and packed streams are built as queues of bits,
// most significant bit first, instead of with rotating registers.
package sfp_ref_pkg;

  // exponent code of an 8-bit FP32 exponent with bias 127:
  // difference d in -128..127 (mod 256), then 0,-1,1,-2,2,... -> 0,1,2,3,4,...
  function automatic int ref_code_of_exp(int e);
    int d;
    d = e - 127;
    if (d > 127) d -= 256;
    return (d >= 0) ? 2 * d : -2 * d - 1;
  endfunction

  function automatic int ref_exp_of_code(int z);
    int d;
    d = (z % 2 == 0) ? z / 2 : -(z + 1) / 2;
    return (d + 127 + 256) % 256;
  endfunction

  function automatic int ref_bits_needed(int z);
    int n = 0;
    while (z > 0) begin n++; z = z / 2; end
    return n;
  endfunction

  // row width code: bits for the largest code; 7 and 8 bits share code 7
  function automatic int ref_row_code(logic [7:0][31:0] row);
    int n = 0;
    for (int i = 0; i < 8; i++) begin
      int b = ref_bits_needed(ref_code_of_exp(int'(row[i][30:23])));
      if (b > n) n = b;
    end
    return (n >= 7) ? 7 : n;
  endfunction

  function automatic int ref_exp_bits(int code);
    return (code == 7) ? 8 : code;
  endfunction

  function automatic int ref_man_bits(int mw);
    return (mw > 23) ? 23 : mw;
  endfunction

  // append one value, MSB first: [sign] [exp code, eb bits] [mantissa top mb bits]
  function automatic void ref_push_value(ref bit q[$], input logic [31:0] v, input int code,
                                         input int mw, input bit sign_en);
    int eb = ref_exp_bits(code);
    int mb = ref_man_bits(mw);
    int z  = ref_code_of_exp(int'(v[30:23]));
    if (sign_en) q.push_back(v[31]);
    for (int b = eb - 1; b >= 0; b--) q.push_back(bit'((z >> b) & 1));
    for (int b = 22; b > 22 - mb; b--) q.push_back(v[b]);
  endfunction

  // pop a 32b word (zero padded if the queue runs short)
  function automatic logic [31:0] ref_pop_word(ref bit q[$]);
    logic [31:0] w = '0;
    for (int b = 31; b >= 0; b--) if (q.size() > 0) w[b] = q.pop_front();
    return w;
  endfunction

  // value after a round trip: sign kept or zeroed, exponent exact, mantissa truncated
  function automatic logic [31:0] ref_roundtrip(logic [31:0] v, int mw, bit sign_en);
    int mb = ref_man_bits(mw);
    logic [22:0] m = v[22:0];
    for (int b = 0; b < 23 - mb; b++) m[b] = 1'b0;
    return {sign_en ? v[31] : 1'b0, v[30:23], m};
  endfunction

  // random FP32 value whose exponent lies within +-spread of the bias
  function automatic logic [31:0] ref_rand_fp(int spread);
    int e = 127 + int'($urandom_range(2 * spread)) - spread;
    if (e < 0) e = 0;
    if (e > 255) e = 255;
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
