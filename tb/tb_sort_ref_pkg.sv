// tb_sort_ref_pkg: reference model of reuse-and-update sorting for the
// testbenches: chunk-wise sort with the odd/even-frame boundaries of Dynamic
// Partial Sorting, and the final merge that drops invalid entries.
package tb_sort_ref_pkg;
  import neo_pkg::*;
  typedef entry_t eq_t [$];

  function automatic eq_t dps_ref(eq_t t, int frame, int chunk);
    eq_t d, tmp;
    int s, e, l;
    d = t; l = t.size();
    s = 0;
    e = (frame % 2 == 1) ? chunk : chunk / 2;
    while (s < l) begin
      if (e > l) e = l;
      tmp.delete();
      for (int i = s; i < e; i++) tmp.push_back(d[i]);
      tmp.sort() with (item.depth);
      for (int i = s; i < e; i++) d[i] = tmp[i - s];
      s = e; e = e + chunk;
    end
    return d;
  endfunction

  function automatic eq_t merge_ref(eq_t a, eq_t b_unsorted);
    eq_t o, af, b;
    int x, y;
    b = b_unsorted;
    b.sort() with (item.depth);
    foreach (a[i]) if (a[i].valid) af.push_back(a[i]);
    x = 0; y = 0;
    while (x < af.size() || y < b.size()) begin
      if (y >= b.size() || (x < af.size() && af[x].depth <= b[y].depth)) begin o.push_back(af[x]); x++; end
      else begin o.push_back(b[y]); y++; end
    end
    return o;
  endfunction
endpackage
