// Decoding graph of a distance-d rotated surface code over d measurement
// rounds, as closed-form constant functions used at elaboration time.
//
// Each round (layer) holds (d+1)^2/2 vertices on the even checkerboard
// sites (a, b), 0 <= a, b <= d, a + b even, of a (d+1) x (d+1) grid of
// stabilizer sites.  Sites with b = 0 or b = d are virtual vertices (the
// code boundary, d+1 of them per layer); the other (d^2-1)/2 are the real
// Z-type stabilizers.  Data qubit (i, j) joins the two even sites among the
// corners of its cell: (i,j)-(i+1,j+1) when i + j is even, (i,j+1)-(i+1,j)
// otherwise, giving d^2 spatial edges per layer.  Each real stabilizer is
// joined to itself in the next round by a time (measurement error) edge.
// Vertex count is d * (d+1)^2 / 2, which is the paper's |V| for every d it
// lists; the edge count is that of phenomenological noise,
// d^3 + (d-1)(d^2-1)/2, and lacks the extra diagonal edges of the paper's
// circuit-level graphs, whose exact shape the paper does not give.
//
// Vertex numbering: v = t * L + a * (d+1)/2 + b/2 with L = (d+1)^2/2.
// Edge numbering: spatial edge of data qubit (i,j) in round t is
// t * d^2 + i * d + j; the time edge of real stabilizer k (row-major among
// the real sites) from round t to t+1 is d^3 + t * (d^2-1)/2 + k.
// Neighbour slots of a vertex: 0 = (a+1,b+1), 1 = (a-1,b-1), 2 = (a+1,b-1),
// 3 = (a-1,b+1), 4 = previous round, 5 = next round.
// Edges crossing column j = 0 form the logical cut: a matching's logical
// correction bit is the parity of its paths that end on the b = 0 boundary.
package mb_graph_pkg;

  function automatic int layer_size(int d);      return (d + 1) * (d + 1) / 2; endfunction
  function automatic int real_per_layer(int d);  return (d * d - 1) / 2;       endfunction
  function automatic int num_vertices(int d);    return d * layer_size(d);     endfunction
  function automatic int num_edges(int d);       return d * d * d + (d - 1) * real_per_layer(d); endfunction

  function automatic int v_layer(int d, int v);  return v / layer_size(d); endfunction
  function automatic int v_a(int d, int v);      return (v % layer_size(d)) / ((d + 1) / 2); endfunction
  function automatic int v_b(int d, int v);
    int a;
    a = v_a(d, v);
    return 2 * ((v % layer_size(d)) % ((d + 1) / 2)) + (a % 2);
  endfunction
  function automatic int vid(int d, int t, int a, int b);
    return t * layer_size(d) + a * ((d + 1) / 2) + b / 2;
  endfunction
  function automatic bit v_virtual(int d, int v);
    return (v_b(d, v) == 0) || (v_b(d, v) == d);
  endfunction
  // index of a real vertex among the real vertices of its layer
  function automatic int v_real_index(int d, int v);
    int a, b;
    a = v_a(d, v);
    b = v_b(d, v);
    return a * ((d - 1) / 2) + ((a % 2 == 0) ? (b / 2 - 1) : ((b - 1) / 2));
  endfunction

  // edge endpoints: side 0 is the lower-row (spatial) or earlier-round (time) end
  function automatic int e_end(int d, int e, int side);
    int t, q, i, j, x, a, c, b;
    if (e < d * d * d) begin
      t = e / (d * d);
      q = e % (d * d);
      i = q / d;
      j = q % d;
      if ((i + j) % 2 == 0) return (side == 0) ? vid(d, t, i, j)     : vid(d, t, i + 1, j + 1);
      else                  return (side == 0) ? vid(d, t, i, j + 1) : vid(d, t, i + 1, j);
    end
    x = e - d * d * d;
    t = x / real_per_layer(d);
    q = x % real_per_layer(d);
    a = q / ((d - 1) / 2);
    c = q % ((d - 1) / 2);
    b = (a % 2 == 0) ? (2 * c + 2) : (2 * c + 1);
    return (side == 0) ? vid(d, t, a, b) : vid(d, t + 1, a, b);
  endfunction
  // neighbour slot of e at each of its ends
  function automatic int e_slot(int d, int e, int side);
    int q, i, j;
    if (e >= d * d * d) return (side == 0) ? 5 : 4;
    q = e % (d * d);
    i = q / d;
    j = q % d;
    if ((i + j) % 2 == 0) return (side == 0) ? 0 : 1;
    return (side == 0) ? 2 : 3;
  endfunction
  function automatic bit e_is_time(int d, int e);  return e >= d * d * d; endfunction
  function automatic bit e_on_cut(int d, int e);
    return (e < d * d * d) && ((e % (d * d)) % d == 0);
  endfunction

  // edge index at neighbour slot k of vertex v, -1 when there is none
  function automatic int v_edge(int d, int v, int k);
    int t, a, b;
    t = v_layer(d, v);
    a = v_a(d, v);
    b = v_b(d, v);
    case (k)
      0: return (a < d && b < d) ? t * d * d + a * d + b : -1;
      1: return (a > 0 && b > 0) ? t * d * d + (a - 1) * d + (b - 1) : -1;
      2: return (a < d && b > 0) ? t * d * d + a * d + (b - 1) : -1;
      3: return (a > 0 && b < d) ? t * d * d + (a - 1) * d + b : -1;
      4: return (!v_virtual(d, v) && t > 0)     ? d * d * d + (t - 1) * real_per_layer(d) + v_real_index(d, v) : -1;
      5: return (!v_virtual(d, v) && t < d - 1) ? d * d * d + t * real_per_layer(d) + v_real_index(d, v) : -1;
      default: return -1;
    endcase
  endfunction
  // vertex at neighbour slot k of vertex v, -1 when there is none
  function automatic int v_nbr(int d, int v, int k);
    int t, a, b;
    t = v_layer(d, v);
    a = v_a(d, v);
    b = v_b(d, v);
    if (v_edge(d, v, k) < 0) return -1;
    case (k)
      0: return vid(d, t, a + 1, b + 1);
      1: return vid(d, t, a - 1, b - 1);
      2: return vid(d, t, a + 1, b - 1);
      3: return vid(d, t, a - 1, b + 1);
      4: return vid(d, t - 1, a, b);
      5: return vid(d, t + 1, a, b);
      default: return -1;
    endcase
  endfunction

endpackage
