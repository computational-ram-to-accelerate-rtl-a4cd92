// cram_tb_pkg: host-side helpers for the testbenches: builders for micro-
// instructions, the micro-program of one alignment of the DNA matching
// kernel (what a code generator would emit), and a reference model of the
// similarity score.
//
// Row layout (see cram_pkg): reference character j in columns 2j (bit 0) and
// 2j+1 (bit 1); pattern character i in 2F+2i and 2F+2i+1; region A (P cells)
// and region B (P cells) after the pattern; then the temporaries
//   T+0, T+1  two outputs of the NOR that starts an XOR
//   T+2, T+3  XOR results of bit 0 and bit 1 of a character
//   T+4, T+5  ripple carries of a multi-bit addition (alternating)
//   T+6, T+7  S1 = INV(carry), S2 = COPY(S1) of a full adder
//   T+8       constant 0, pads narrower operands and feeds carry-in.
//
// Micro-program of one alignment at location loc:
//   gang preset of region A to 0 and of T+8 to 0 (hoisted presets);
//   for every pattern character i, for each bit b:
//     NOR2(ref[loc+i].b, pat[i].b) -> T+0, T+1; TH(ref, pat, T+0, T+1) -> T+2+b
//   then NOR(T+2, T+3) -> A[i] without preset: the match string, 1 = match;
//   reduction tree: numbers start as the P one-bit match bits; each level adds
//   them in pairs with ripple-carry adders of 1-bit full adders
//     MAJ3(a,b,cin) -> cout; INV(cout) -> S1; COPY(S1) -> S2;
//     MAJ5(a,b,cin,S1,S2) -> sum
//   writing results alternately into region B and region A (an odd number
//   left over is copied across with COPY), until one number is left;
//   score read-out of that number, tagged with loc.
package cram_tb_pkg;
  import cram_pkg::*;

  function automatic micro_instr_t mi_gate(input gate_op_e op, input bit pre,
      input int i0, input int i1, input int i2, input int i3, input int i4,
      input int o0, input int o1);
    micro_instr_t m;
    m = '0;
    m.kind = MI_GATE;
    m.bcast = 1'b1;
    m.op = op;
    m.do_preset = pre;
    m.in_col = {col_t'(i4), col_t'(i3), col_t'(i2), col_t'(i1), col_t'(i0)};
    m.out_col = {col_t'(o1), col_t'(o0)};
    return m;
  endfunction

  function automatic micro_instr_t mi_preset(input int c, input int n, input bit mask_mode,
                                             input logic [15:0] val);
    micro_instr_t m;
    m = '0;
    m.kind = MI_PRESET;
    m.bcast = 1'b1;
    m.col = col_t'(c);
    m.ncell = 8'(n);
    m.mask_mode = mask_mode;
    m.val = val;
    return m;
  endfunction

  // gates and presets built above go to every array; this one narrows an
  // instruction to array arr
  function automatic micro_instr_t to_array(input micro_instr_t m, input int arr);
    m.bcast = 1'b0;
    m.arr = arr_t'(arr);
    return m;
  endfunction

  function automatic micro_instr_t mi_write(input int arr, input bit bcast, input int row,
                                            input int c, input int len);
    micro_instr_t m;
    m = '0;
    m.kind = MI_WRITE;
    m.arr = arr_t'(arr);
    m.bcast = bcast;
    m.row = row_t'(row);
    m.col = col_t'(c);
    m.len = col_t'(len);
    return m;
  endfunction

  function automatic micro_instr_t mi_read(input int arr, input int row);
    micro_instr_t m;
    m = '0;
    m.kind = MI_READ;
    m.arr = arr_t'(arr);
    m.row = row_t'(row);
    return m;
  endfunction

  function automatic micro_instr_t mi_score(input int c, input int loc);
    micro_instr_t m;
    m = '0;
    m.kind = MI_SCORE;
    m.col = col_t'(c);
    m.loc = loc_t'(loc);
    return m;
  endfunction

  // Statistics of a generated micro-program.
  typedef struct {
    int gates;
    int full_adders;
    int inline_presets;
    int hoisted_presets;
    int score_col;
  } prog_stats_t;

  typedef int num_t[$];

  // Append the micro-program of one alignment to q.
  function automatic void gen_alignment(input int f, input int p, input int loc,
                                        ref micro_instr_t q[$], ref prog_stats_t st);
    int pb, ra, rb, t, zero;
    num_t nums[$];
    num_t next[$];
    bit to_b;
    pb = 2*f; ra = 2*f + 2*p; rb = 2*f + 3*p; t = 2*f + 4*p; zero = t + 8;

    // hoisted gang presets: region A (NOR outputs, preset 0) and the zero cell
    for (int c = 0; c < p; c += 200) begin
      int n;
      n = (p - c > 200) ? 200 : p - c;
      q.push_back(mi_preset(ra + c, n, 1'b0, 16'h0000));
      st.hoisted_presets += n;
    end
    // temporaries T+4..T+8 to 1,1,0,1,0 (carries, S1, S2, zero cell) in mask mode
    q.push_back(mi_preset(t + 4, 5, 1'b1, 16'h000b));
    st.hoisted_presets += 5;

    // phase 1: match string
    for (int i = 0; i < p; i++) begin
      for (int b = 0; b < 2; b++) begin
        int rc, pc;
        rc = 2*(loc + i) + b;
        pc = pb + 2*i + b;
        q.push_back(mi_gate(OP_NOR2, 1'b1, rc, pc, 0, 0, 0, t + 0, t + 1));
        q.push_back(mi_gate(OP_TH, 1'b1, rc, pc, t + 0, t + 1, 0, t + 2 + b, 0));
        st.gates += 2;
        st.inline_presets += 3;
      end
      q.push_back(mi_gate(OP_NOR, 1'b0, t + 2, t + 3, 0, 0, 0, ra + i, 0));
      st.gates += 1;
    end

    // phase 2: reduction tree
    for (int i = 0; i < p; i++) begin
      num_t one;
      one.push_back(ra + i);
      nums.push_back(one);
    end
    to_b = 1'b1;
    while (nums.size() > 1) begin
      int dst;
      dst = to_b ? rb : ra;
      next.delete();
      for (int k = 0; k + 1 < nums.size(); k += 2) begin
        num_t x, y, res;
        int w, cin;
        x = nums[k];
        y = nums[k+1];
        w = (x.size() > y.size()) ? x.size() : y.size();
        cin = zero;
        for (int j = 0; j < w; j++) begin
          int a, b, co;
          a = (j < x.size()) ? x[j] : zero;
          b = (j < y.size()) ? y[j] : zero;
          co = (j == w - 1) ? dst + w : t + 4 + (j % 2);
          q.push_back(mi_gate(OP_MAJ3, 1'b1, a, b, cin, 0, 0, co, 0));
          q.push_back(mi_gate(OP_INV, 1'b1, co, 0, 0, 0, 0, t + 6, 0));
          q.push_back(mi_gate(OP_COPY, 1'b1, t + 6, 0, 0, 0, 0, t + 7, 0));
          q.push_back(mi_gate(OP_MAJ5, 1'b1, a, b, cin, t + 6, t + 7, dst + j, 0));
          st.gates += 4;
          st.inline_presets += 4;
          st.full_adders += 1;
          res.push_back(dst + j);
          cin = co;
        end
        res.push_back(dst + w);
        dst += w + 1;
        next.push_back(res);
      end
      if (nums.size() % 2 == 1) begin
        num_t x, res;
        x = nums[nums.size() - 1];
        for (int j = 0; j < x.size(); j++) begin
          q.push_back(mi_gate(OP_COPY, 1'b1, x[j], 0, 0, 0, 0, dst + j, 0));
          st.gates += 1;
          st.inline_presets += 1;
          res.push_back(dst + j);
        end
        dst += x.size();
        next.push_back(res);
      end
      nums = next;
      to_b = !to_b;
    end
    st.score_col = nums[0][0];
    q.push_back(mi_score(nums[0][0], loc));
  endfunction

  // Deterministic pseudo-random characters, so that large arrays need no
  // stored copy of their contents.
  function automatic int unsigned mix(input int unsigned x);
    x = x ^ (x >> 16);
    x = x * 32'h7feb352d;
    x = x ^ (x >> 15);
    x = x * 32'h846ca68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  function automatic logic [1:0] ref_char(input int seed, input int a, input int r, input int j);
    return 2'(mix(32'(seed) * 32'h9e3779b9 ^ mix(32'(a) * 32'd131071 + 32'(r)) ^ (32'(j) * 32'h85ebca6b)));
  endfunction

  // Pattern of a row: a copy of the fragment at a planted location, with a
  // few characters changed; some rows get an unrelated pattern.
  function automatic logic [1:0] pat_char(input int seed, input int a, input int r, input int i,
                                          input int f, input int p);
    int unsigned h;
    int plant;
    h = mix(32'(seed) ^ mix(32'(a) * 32'd7919 + 32'(r) * 32'd31 + 32'd17));
    plant = int'(h % 32'(f - p + 1));
    if (h[31:30] == 2'b00) return 2'(mix(h + 32'(i)));
    if ((mix(h ^ 32'(i)) % 8) == 0) return ~ref_char(seed, a, r, plant + i);
    return ref_char(seed, a, r, plant + i);
  endfunction

  // Reference similarity score: characters equal at alignment loc.
  function automatic int ref_score(input int seed, input int a, input int r, input int loc,
                                   input int f, input int p);
    int s;
    s = 0;
    for (int i = 0; i < p; i++)
      if (ref_char(seed, a, r, loc + i) == pat_char(seed, a, r, i, f, p)) s++;
    return s;
  endfunction

endpackage
