// tb_ref_pkg -- reference models used by the testbenches.
//
// Block (non-streaming) forms of the algorithms, written on queues of bits,
// so that the hardware's bit-by-bit trees are checked against the textbook
// recursion: U(s) is the XOR of every complete pair, V(s) the common value
// of every equal pair, and von Neumann emits the first bit of every
// unequal pair.  Node i of a Peres tree (heap numbering, 2i+1 = U child,
// 2i+2 = V child) sees the string obtained by applying the U/V steps on
// the path from the root.
package tb_ref_pkg;
  timeunit 1ns; timeprecision 1ps;

  typedef bit bitq_t[$];

  function automatic bitq_t u_of(input bitq_t s);
    bitq_t r;
    for (int k = 0; k + 1 < s.size(); k += 2) r.push_back(s[k] ^ s[k+1]);
    return r;
  endfunction

  function automatic bitq_t v_of(input bitq_t s);
    bitq_t r;
    for (int k = 0; k + 1 < s.size(); k += 2) if (s[k] == s[k+1]) r.push_back(s[k]);
    return r;
  endfunction

  function automatic bitq_t vn_of(input bitq_t s);
    bitq_t r;
    for (int k = 0; k + 1 < s.size(); k += 2) if (s[k] != s[k+1]) r.push_back(s[k]);
    return r;
  endfunction

  // Input string of heap node `node`.
  function automatic bitq_t node_input(input bitq_t s, input int node);
    int path[$];
    bitq_t cur;
    int n;
    n = node;
    while (n > 0) begin
      path.push_front(n);
      n = (n - 1) / 2;
    end
    cur = s;
    foreach (path[k]) cur = (path[k] % 2 == 1) ? u_of(cur) : v_of(cur);
    return cur;
  endfunction

  // Expected output bits of heap node `node` for the input string s.
  function automatic bitq_t node_output(input bitq_t s, input int node);
    return vn_of(node_input(s, node));
  endfunction
endpackage
