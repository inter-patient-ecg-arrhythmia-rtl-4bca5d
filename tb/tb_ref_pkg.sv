// tb_ref_pkg: reference models used by the testbenches, written
// independently of the RTL: the wiring hash, the 16 named two-input gates
// and a LUT read by summing L_j * 2^(N-1-j).
package tb_ref_pkg;

  function automatic int unsigned h32(input int unsigned v);
    int unsigned x;
    x = v;
    x = x ^ (x >> 16);
    x = x * 32'h7feb352d;
    x = x ^ (x >> 15);
    x = x * 32'h846ca68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  function automatic int unsigned ref_conn(input int unsigned seed, input int unsigned layer,
                                           input int unsigned neuron, input int unsigned pin,
                                           input int unsigned in_width);
    int unsigned inner;
    inner = layer * 32'h9e3779b1 + neuron * 32'h85ebca6b + pin * 32'hc2b2ae35;
    return h32(seed ^ h32(inner)) % in_width;
  endfunction

  // The 16 gates by name, numbered as in the LGN gate table.
  function automatic bit ref_gate(input int op, input bit a, input bit b);
    case (op)
      0:  return 0;
      1:  return a & b;
      2:  return a & !b;
      3:  return a;
      4:  return !a & b;
      5:  return b;
      6:  return a ^ b;
      7:  return a | b;
      8:  return !(a | b);
      9:  return !(a ^ b);
      10: return !b;
      11: return a | !b;
      12: return !a;
      13: return !a | b;
      14: return !(a & b);
      default: return 1;
    endcase
  endfunction

  // LUT with table w (bit i = W_i) and inputs l (bit j = L_j), L_0 most significant.
  function automatic bit ref_lut(input int n, input logic [63:0] w, input logic [5:0] l);
    int idx;
    idx = 0;
    for (int j = 0; j < n; j++) idx = idx + (l[j] ? (1 << (n - 1 - j)) : 0);
    return w[idx];
  endfunction

endpackage
