// tb_kv_pkg: test data shared by the testbenches that use external DRAM.
// Every K and V element of token `a`, channel `j` is a hash of (a, j), so the
// DRAM model and the reference models can produce it without a stored table.
package tb_kv_pkg;
  function automatic int unsigned mix(int unsigned x);
    x = x ^ (x >> 16);
    x = x * 32'h7feb352d;
    x = x ^ (x >> 15);
    x = x * 32'h846ca68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  // K elements in [-16, 15], V elements in [-32, 31]
  function automatic int kv_elem(int a, int j, bit isv);
    int unsigned h;
    h = mix(32'(a) * 32'd2654435761 + 32'(j) * 32'd40503 + (isv ? 32'h9e3779b9 : 32'h0));
    return isv ? int'(h % 64) - 32 : int'(h % 32) - 16;
  endfunction
endpackage
