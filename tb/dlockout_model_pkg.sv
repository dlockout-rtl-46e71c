// dlockout_model_pkg: reference model used by the datapath and top testbenches.
//
// Recomputes, independently of the RTL, what the example obfuscated
// datapath produces: the operand each obfuscation point passes (correct
// register when key ^ mask equals the secret bit, decoy register otherwise),
// whether the key check at S1 sees a wrong bit, and the four result
// registers after all kw/4 compute steps. Keys up to 128 bits.
package dlockout_model_pkg;

  typedef logic [3:0][31:0] regs_t;

  function automatic int unsigned csrc(int unsigned j);
    return j % 4;
  endfunction

  function automatic int unsigned dsrc(int unsigned j);
    return (j % 4 + 1 + (j / 4) % 3) % 4;
  endfunction

  function automatic logic [31:0] point(regs_t r, int unsigned j,
                                        logic [127:0] key, mask, secret);
    return ((key[j] ^ mask[j]) == secret[j]) ? r[csrc(j)] : r[dsrc(j)];
  endfunction

  // 1 when the S1 comparators flag any point on the loaded inputs.
  function automatic bit check_fails(regs_t r, int unsigned kw,
                                     logic [127:0] key, mask, secret);
    for (int unsigned j = 0; j < kw; j++)
      if (point(r, j, key, mask, secret) != r[csrc(j)]) return 1'b1;
    return 1'b0;
  endfunction

  function automatic regs_t run(regs_t pi, int unsigned kw,
                                logic [127:0] key, mask, secret);
    regs_t r = pi;
    for (int unsigned s = 0; s < kw / 4; s++) begin
      logic [31:0] p0, p1, p2, p3;
      p0 = point(r, 4*s,   key, mask, secret);
      p1 = point(r, 4*s+1, key, mask, secret);
      p2 = point(r, 4*s+2, key, mask, secret);
      p3 = point(r, 4*s+3, key, mask, secret);
      if (s % 2 == 0) begin
        r[0] = p0 + p1;
        r[1] = p2 - p3;
      end else begin
        r[2] = p0 ^ p1;
        r[3] = p2 + p3;
      end
    end
    return r;
  endfunction

endpackage
