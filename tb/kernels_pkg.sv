// kernels_pkg: test kernels for the overlay, as lists of context words, with
// reference models.
//
// gradient: the medical-imaging 'gradient' stencil point
//   b = (c-a0)^2 + (c-a1)^2 + (c-a2)^2 + (c-a3)^2, inputs {a0, a1, c, a2, a3}
//   scheduled ASAP into 4 stages: 4 SUB, 4 SQR, 2 ADD, 1 ADD, one stage per FU.
//   FUs after the last stage get a single bypass instruction.
// chain: a synthetic deep kernel (depth D > 8) used to exercise cascaded
//   pipelines: inputs {x, acc}; stage s (s < D-1) forwards x and updates
//   acc <- acc*x (even s) or acc + x (odd s); the last stage outputs acc only.
package kernels_pkg;
  import overlay_pkg::*;

  typedef ctx_word_t ctx_q_t [$];

  function automatic ctx_q_t gradient_ctx(int tag_base, int num_fu);
    ctx_q_t q;
    for (int i = 0; i < 4; i++)
      q.push_back('{tag: 8'(tag_base + 0), insn: (i == 0) ? insn_sub(0, 2) : (i == 1) ? insn_sub(1, 2) :
                                                   (i == 2) ? insn_sub(2, 3) : insn_sub(2, 4)});
    for (int i = 0; i < 4; i++)
      q.push_back('{tag: 8'(tag_base + 1), insn: insn_mul(5'(i), 5'(i))});
    q.push_back('{tag: 8'(tag_base + 2), insn: insn_add(0, 1)});
    q.push_back('{tag: 8'(tag_base + 2), insn: insn_add(2, 3)});
    q.push_back('{tag: 8'(tag_base + 3), insn: insn_add(0, 1)});
    for (int k = 4; k < num_fu; k++)
      q.push_back('{tag: 8'(tag_base + k), insn: insn_byp(0)});
    return q;
  endfunction

  function automatic logic [31:0] gradient_ref(logic [31:0] a0, logic [31:0] a1, logic [31:0] c,
                                               logic [31:0] a2, logic [31:0] a3);
    logic [31:0] d0, d1, d2, d3;
    d0 = a0 - c; d1 = a1 - c; d2 = c - a2; d3 = c - a3;
    return d0 * d0 + d1 * d1 + d2 * d2 + d3 * d3;
  endfunction

  // Deep chain kernel over num_fu_total FUs (tags tag_base ..).
  function automatic ctx_q_t chain_ctx(int tag_base, int depth, int num_fu_total);
    ctx_q_t q;
    for (int s = 0; s < depth; s++) begin
      if (s < depth - 1) q.push_back('{tag: 8'(tag_base + s), insn: insn_byp(0)});
      q.push_back('{tag: 8'(tag_base + s), insn: (s % 2 == 0) ? insn_mul(1, 0) : insn_add(1, 0)});
    end
    for (int k = depth; k < num_fu_total; k++)
      q.push_back('{tag: 8'(tag_base + k), insn: insn_byp(0)});
    return q;
  endfunction

  // The multiplier takes acc[24:0] (signed) and x[17:0] (signed).
  function automatic logic [31:0] chain_ref(logic [31:0] x, logic [31:0] acc, int depth);
    for (int s = 0; s < depth; s++) begin
      if (s % 2 == 0) acc = 32'(longint'($signed(acc[24:0])) * longint'($signed(x[17:0])));
      else            acc = acc + x;
    end
    return acc;
  endfunction
endpackage
