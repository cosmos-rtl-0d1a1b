// tb_pkg: reference functions shared by the testbenches.
//
// The DRAM contents are never stored: every byte of a rank is a hash of
// (rank index, byte address), and every graph record is generated from the
// node id. The memory models return these values and the testbenches use
// the same functions, written independently of the RTL, to work out the
// expected distances and search results.
//   mem_byte(rank, addr)   byte at addr in rank 'rank' of any channel
//   seg_data(rank, addr)   the 64-byte beat starting at addr
//   node_degree(n, CS, D)  out-degree of node n: D - (n mod 3), at least 1
//   node_nbr(n, k, CS)     k-th neighbour: same cluster of CS nodes,
//                          offset 1 + (7k mod (CS-1)) (a circulant graph,
//                          strongly connected through offset 1)
//   sort_signed(a)         ascending sort of a signed int queue
//   ref_dist(...)          distance of vector v to the query, with the
//                          column-wise split of segments over ranks
package tb_pkg;
  import cosmos_pkg::*;

  function automatic logic [7:0] mem_byte(int rank, longint unsigned addr);
    logic [31:0] x;
    x = 32'(addr) * 32'h9E3779B1 ^ 32'(addr >> 32) ^ (32'(rank) * 32'h85EBCA6B);
    x = x ^ (x >> 15);
    x = x * 32'h2C1B3C6D;
    x = x ^ (x >> 12);
    return x[7:0];
  endfunction

  function automatic seg_t seg_data(int rank, longint unsigned addr);
    seg_t s;
    for (int b = 0; b < 64; b++) s[8*b +: 8] = mem_byte(rank, addr + longint'(b));
    return s;
  endfunction

  function automatic int node_degree(int n, int d);
    int v;
    v = d - (n % 3);
    return (v < 1) ? 1 : v;
  endfunction

  function automatic int node_nbr(int n, int k, int cs);
    int base, i;
    base = n - (n % cs);
    i    = n % cs;
    return base + (i + 1 + (7 * k) % (cs - 1)) % cs;
  endfunction

  function automatic int elem_val(logic [7:0] b, elem_e e);
    return (e == ELEM_INT8) ? int'($signed(b)) : int'(b);
  endfunction

  // Distance of vector v to the query (query bytes in q[]).
  function automatic int ref_dist(int v, int nseg, int n_rank, longint unsigned emb,
                                  longint unsigned stride, metric_e m, elem_e e,
                                  ref logic [7:0] q[]);
    int acc;
    acc = 0;
    for (int s = 0; s < nseg; s++) begin
      longint unsigned a;
      a = emb + longint'(v) * stride + longint'(s / n_rank) * 64;
      for (int b = 0; b < 64; b++) begin
        int x, y;
        x = elem_val(q[s*64+b], e);
        y = elem_val(mem_byte(s % n_rank, a + longint'(b)), e);
        if (m == METRIC_L2) acc += (x - y) * (x - y);
        else                acc -= x * y;
      end
    end
    return acc;
  endfunction

  // Ascending signed sort (insertion sort; the built-in queue sort is not
  // relied on for signed values).
  function automatic void sort_signed(ref int a[$]);
    for (int i = 1; i < a.size(); i++) begin
      int v, j;
      v = a[i];
      j = i - 1;
      while (j >= 0 && a[j] > v) begin
        a[j+1] = a[j];
        j--;
      end
      a[j+1] = v;
    end
  endfunction

endpackage
