// tb_util_pkg: helpers shared by the testbenches.
//
// * int_to_bf16 / bf16_to_int convert small integers to and from BF16. Sums of
//   small integers stay exact in BF16 up to 256, so expected results can be
//   worked out with plain integer arithmetic.
// * dram_word gives the initial content of every DRAM burst of the behavioural
//   rank model: lane l (16 bits) of burst (seed, bank, row, col) holds the
//   integer (seed*3 + bank*5 + row*7 + col*11 + l) mod 4 as BF16.
package tb_util_pkg;
  import gnnear_pkg::*;

  function automatic bf16_t int_to_bf16(input int n);
    int p, a;
    logic s;
    s = (n < 0);
    a = s ? -n : n;
    if (a == 0) return 16'h0000;
    p = 0;
    for (int i = 0; i < 16; i++) if (a >= (1 << i)) p = i;
    return {s, 8'(127 + p), 7'((a << (7 - p)) & 32'h7F)};
  endfunction

  // exact for integers of at most 8 significant bits
  function automatic int bf16_to_int(input bf16_t v);
    int e, m, r;
    if (v[14:7] == 8'd0) return 0;
    e = int'(v[14:7]) - 127;
    m = 128 + int'(v[6:0]);
    if (e < 0) return 0;
    r = (e >= 7) ? (m << (e - 7)) : (m >> (7 - e));
    return v[15] ? -r : r;
  endfunction

  function automatic int dram_lane(input int seed, input int bank, input int row,
                                   input int col, input int lane);
    return (seed * 3 + bank * 5 + row * 7 + col * 11 + lane) % 4;
  endfunction

  function automatic logic [BURST_W-1:0] dram_word(input int seed, input int bank,
                                                   input int row, input int col);
    logic [BURST_W-1:0] w;
    for (int l = 0; l < BURST_W / 16; l++)
      w[l*16 +: 16] = int_to_bf16(dram_lane(seed, bank, row, col, l));
    return w;
  endfunction
endpackage
