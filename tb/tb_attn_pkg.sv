// tb_attn_pkg: floating-point reference of one attention row, used by the
// engine-level and system-level testbenches.  Keys and values come from
// tb_kv_pkg::kv_elem.  Given the query row, the tokens in the order the
// hardware processes them and the causal mask, it returns the softmax-
// weighted average of the value vectors (what O*2^qsh/l should be), the
// softmax denominator in units of 1/256 (what l should be), and the number
// of times the running maximum rises after the first key (the output
// rescale events the hardware must perform for that order).
package tb_attn_pkg;
  function automatic void ref_row(input int qrow[], input int tok[$], input bit mk[$],
                                  input int ssh, output real avg[], output real lsum,
                                  output int events);
    int   cols = qrow.size();
    int   s[$];
    int   m = 0;
    bit   mv = 0;
    real  w, wsum;
    events = 0;
    foreach (tok[t]) begin
      int acc = 0;
      for (int j = 0; j < cols; j++) acc += qrow[j] * tb_kv_pkg::kv_elem(tok[t], j, 1'b0);
      s.push_back(acc);
      if (!mk[t]) begin
        if (!mv) begin mv = 1; m = acc; end
        else if (acc > m) begin events++; m = acc; end
      end
    end
    avg = new[cols];
    foreach (avg[j]) avg[j] = 0.0;
    wsum = 0.0;
    foreach (tok[t]) begin
      if (!mk[t]) begin
        w = $exp(real'(s[t] - m) / (2.0 ** ssh));
        wsum += w;
        for (int j = 0; j < cols; j++) avg[j] += w * tb_kv_pkg::kv_elem(tok[t], j, 1'b1);
      end
    end
    foreach (avg[j]) avg[j] = avg[j] / wsum;
    lsum = wsum * 256.0;
  endfunction
endpackage
