// mcd_ref_pkg: reference models shared by the testbenches.
//
// Written apart from the RTL, from the definitions only:
//   * LFSR step: shift right by one; if the bit shifted out was 1, XOR the
//     polynomial x^16 + x^14 + x^13 + x^11 + 1, i.e. bits 15, 13, 12, 10.
//   * engine seed: 0xACE1 ^ (engine * 0x1F35) ^ (exit * 0x5A5B), mod 2**16,
//     with 0 replaced by 1; MCD layer `stage` of the engine also XORs
//     (stage * 0x3C6D).
//   * MCD element: 0 when random > keep, else floor(x * keep / 65536).
package mcd_ref_pkg;

  function automatic logic [15:0] ref_lfsr_next(input logic [15:0] s);
    logic [15:0] n;
    logic        out_bit;
    out_bit = s[0];
    n = {1'b0, s[15:1]};
    if (out_bit) begin
      n[15] = ~n[15];
      n[13] = ~n[13];
      n[12] = ~n[12];
      n[10] = ~n[10];
    end
    return n;
  endfunction

  function automatic logic [15:0] ref_seed(input int exit_id, input int eng);
    int s;
    s = (32'(16'hACE1) ^ ((eng * 16'h1F35) & 16'hFFFF) ^ ((exit_id * 16'h5A5B) & 16'hFFFF)) & 16'hFFFF;
    if (s == 0) s = 1;
    return 16'(s);
  endfunction

  // seed of MCD layer `stage` of an engine: also XOR (stage * 0x3C6D).
  function automatic logic [15:0] ref_seed_stage(input int exit_id, input int eng,
                                                 input int stage);
    int s;
    s = (32'(16'hACE1) ^ ((eng * 16'h1F35) & 16'hFFFF) ^ ((exit_id * 16'h5A5B) & 16'hFFFF)
         ^ ((stage * 16'h3C6D) & 16'hFFFF)) & 16'hFFFF;
    if (s == 0) s = 1;
    return 16'(s);
  endfunction

  function automatic logic ref_drop(input logic [15:0] rnd, input logic [15:0] keep);
    return int'(rnd) > int'(keep);
  endfunction

  // floor(x * keep / 2**16) for a 16-bit signed x, computed with integers.
  function automatic logic signed [15:0] ref_scale(input logic signed [15:0] x,
                                                   input logic [15:0] keep);
    longint p;
    longint q;
    p = longint'(x) * longint'(keep);
    q = p / 65536;
    if (p < 0 && (q * 65536 != p)) q = q - 1;   // floor for negatives
    return 16'(q);
  endfunction

  function automatic logic signed [15:0] ref_mcd(input logic signed [15:0] x,
                                                 input logic [15:0] rnd,
                                                 input logic [15:0] keep);
    return ref_drop(rnd, keep) ? 16'sd0 : ref_scale(x, keep);
  endfunction

endpackage
