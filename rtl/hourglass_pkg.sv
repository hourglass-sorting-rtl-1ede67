// hourglass_pkg: tree-shape arithmetic shared by the hourglass sorter and its testbenches.
//
// The sorter is a binary tree. Level 0 holds the N input (leaf) registers; level l (l >= 1)
// holds ceil(N / 2^l) sorting cells, so a level whose parent level has an odd size keeps a
// cell that has only a left parent (the paper's Fig. 5 shows this for N = 6). The root is the
// single cell of level ceil(log2 N). All nodes of all levels are numbered in one flat index
// space: level l starts at level_offset(n, l).
package hourglass_pkg;

  // Number of cell levels between the leaves and the serial output (ceil(log2 n)).
  // This is also the latency, in cycles, from the load to the first output.
  function automatic int unsigned num_levels(int unsigned n);
    return (n <= 1) ? 0 : $clog2(n);
  endfunction

  // Number of nodes in level l: ceil(n / 2^l); level 0 are the leaves.
  function automatic int unsigned level_count(int unsigned n, int unsigned l);
    return (n + (1 << l) - 1) >> l;
  endfunction

  // Flat index of the first node of level l.
  function automatic int unsigned level_offset(int unsigned n, int unsigned l);
    int unsigned off;
    off = 0;
    for (int unsigned k = 0; k < l; k++) off += level_count(n, k);
    return off;
  endfunction

  // Leaves plus cells of all levels.
  function automatic int unsigned total_nodes(int unsigned n);
    return level_offset(n, num_levels(n) + 1);
  endfunction

endpackage
