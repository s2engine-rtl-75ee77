// tb_s2_util: reference encoder and arithmetic shared by the testbenches.
//
// enc_groups() turns dense groups of GROUP_LEN values into the compressed
// flow the engine consumes: zeros are dropped, each kept element carries its
// offset in the group, the last one of a group gets EOG, an all-zero group
// keeps one zero with EOG, and values outside the signed 8-bit range are
// split into a low byte and a high byte (tag 1, same offset and EOG). For
// weights the last element of the flow gets end-of-kernel.
// pair_product() is the value of one partial pair; dot() the exact dot
// product the engine has to reproduce.
package tb_s2_util;
  import s2_pkg::*;

  // One compressed element, wide enough for features and weights.
  typedef struct packed {
    logic [7:0] value;
    logic [3:0] offset;
    logic       eog;
    logic       eok;
    logic       tag;
  } elem_t;

  function automatic void enc_groups(input int vals[$], input bit is_weight,
                                     ref elem_t q[$]);
    int ngrp = vals.size() / GROUP_LEN;
    for (int g = 0; g < ngrp; g++) begin
      int last = -1;
      elem_t e;
      for (int i = 0; i < GROUP_LEN; i++)
        if (vals[g*GROUP_LEN+i] != 0) last = i;
      if (last < 0) begin
        e = '{value: 8'd0, offset: 4'd0, eog: 1'b1, eok: 1'b0, tag: 1'b0};
        e.eok = is_weight && (g == ngrp-1);
        q.push_back(e);
        continue;
      end
      for (int i = 0; i <= last; i++) begin
        int v = vals[g*GROUP_LEN+i];
        bit eg = (i == last);
        bit ek = is_weight && eg && (g == ngrp-1);
        if (v == 0) continue;
        if (v >= -128 && v <= 127) begin
          e = '{value: 8'(v), offset: 4'(i), eog: eg, eok: ek, tag: 1'b0};
          q.push_back(e);
        end else begin
          e = '{value: 8'(v), offset: 4'(i), eog: eg, eok: ek, tag: 1'b1};
          q.push_back(e);                          // low byte
          e.value = 8'(v >>> 8);
          q.push_back(e);                          // high byte
        end
      end
    end
  endfunction

  function automatic feat_t to_feat(elem_t e);
    return '{value: e.value, offset: e.offset, eog: e.eog, tag: e.tag};
  endfunction

  function automatic wgt_t to_wgt(elem_t e);
    return '{value: e.value, offset: e.offset, eog: e.eog, eok: e.eok, tag: e.tag};
  endfunction

  function automatic int byte_val(logic [7:0] b, part_e p);
    case (p)
      PART_LOW:  return int'(b);
      PART_HIGH: return int'($signed(b)) * 256;
      default:   return int'($signed(b));
    endcase
  endfunction

  function automatic int pair_product(pair_t p);
    return byte_val(p.f, p.fpart) * byte_val(p.w, p.wpart);
  endfunction

  function automatic int dot(input int a[$], input int b[$]);
    int s = 0;
    for (int i = 0; i < a.size(); i++) s += a[i] * b[i];
    return s;
  endfunction

  // Random dense value: zero with probability (100-density)%, else 8-bit,
  // or 16-bit with probability wide_pct%.
  function automatic int rand_val(int density, int wide_pct);
    if (int'($urandom_range(99, 0)) >= density) return 0;
    if (int'($urandom_range(99, 0)) < wide_pct) begin
      int v;
      do v = int'($urandom_range(65535, 0)) - 32768; while (v >= -128 && v <= 127);
      return v;
    end
    begin
      int v;
      do v = int'($urandom_range(255, 0)) - 128; while (v == 0);
      return v;
    end
  endfunction

endpackage
