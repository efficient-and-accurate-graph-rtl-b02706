// tb_util_pkg: helpers shared by the testbenches.
//
// build_schedule() is the off-line static load-balancing step: rows are
// bucketed by nonzero count, buckets are walked in increasing order and every
// P consecutive rows form one iteration; the last iteration is padded with
// invalid entries (-1). floor_shift() is the reference floor((x)/2^s).
package tb_util_pkg;

  typedef int int_q[$];

  function automatic int_q build_schedule(input int_q rowptr, input int p);
    int_q order, sched;
    int n = rowptr.size() - 1;
    int maxnz = 0;
    for (int r = 0; r < n; r++) if (rowptr[r+1] - rowptr[r] > maxnz) maxnz = rowptr[r+1] - rowptr[r];
    for (int nz = 0; nz <= maxnz; nz++)
      for (int r = 0; r < n; r++) if (rowptr[r+1] - rowptr[r] == nz) order.push_back(r);
    while (order.size() % p != 0) order.push_back(-1);
    return order;  // entry i*p + j = row of PE j in iteration i
  endfunction

  function automatic longint floor_shift(input longint x, input int s);
    return x >>> s;
  endfunction

  // Deterministic test content of the Nystrom projection matrix in DDR:
  // element `lane` of 512-bit word `w` (byte address w*64), a Q16.16 value
  // in [-0.5, 0.5).
  function automatic int pnys_elem(input longint w, input int lane);
    longint x;
    x = (w * 16 + lane) * 64'd6364136223846793005 + 64'd1442695040888963407;
    x = x ^ (x >>> 29);
    x = x * 64'd2685821657736338717;
    return int'((x >>> 40) & 64'hFFFF) - 32768;
  endfunction

endpackage
