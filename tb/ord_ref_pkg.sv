// ord_ref_pkg: reference models shared by the testbenches.
//
// Bit counting by shifting one bit at a time, a stable insertion sort by
// descending '1'-bit count, and the rank-to-slot table built by walking the
// full flits lane by lane (rank 0 to flit 0 lane 0, rank 1 to flit 1 lane 0,
// ...). They are written independently of the RTL to serve as its check.
package ord_ref_pkg;

  function automatic int ones(longint unsigned v, int w);
    int c = 0;
    for (int b = 0; b < w; b++) c += int'((v >> b) & 1);
    return c;
  endfunction

  // order[r] = original position of the value of rank r; descending count,
  // ties kept in original order.
  function automatic void ref_sort(input int key[], output int order[]);
    int n = key.size();
    order = new[n];
    for (int i = 0; i < n; i++) begin
      int j = i;
      while (j > 0 && key[order[j-1]] < key[i]) begin
        order[j] = order[j-1];
        j--;
      end
      order[j] = i;
    end
  endfunction

  // slot[r]: buffer slot of rank r for n values and half-flits of h lanes
  function automatic void ref_slots(input int n, input int h, output int slot[]);
    int nfull = n / h;
    int r = 0;
    slot = new[n];
    for (int lane = 0; lane < h; lane++)
      for (int f = 0; f < nfull; f++) begin
        slot[r] = f * h + lane;
        r++;
      end
    for (; r < n; r++) slot[r] = r;
  endfunction

endpackage
