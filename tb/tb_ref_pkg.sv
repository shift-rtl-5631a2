// tb_ref_pkg: reference models for the SHIFT testbenches.
//
// An ordinary breadth-first search over the chiplet mesh, written as a
// queue-based software algorithm, independent of the bit-parallel hardware:
// ref_hops returns the hop count from a to b inside the bounding-box
// subgraph of a and b with masked nodes removed (a and b are never masked),
// or -1 if b cannot be reached. Links: orthogonal neighbours, UC to the four
// corner chiplets of its tile, UC to the UCs of the adjacent tiles.
package tb_ref_pkg;

  function automatic bit is_uc(int gx, int i);
    return ((i % gx) % 3 == 1) && ((i / gx) % 3 == 1);
  endfunction

  function automatic bit linked(int gx, int gy, int a, int b);
    int ax, ay, bx, by, dx, dy;
    ax = a % gx; ay = a / gx; bx = b % gx; by = b / gx;
    dx = (ax > bx) ? ax - bx : bx - ax;
    dy = (ay > by) ? ay - by : by - ay;
    if (dx + dy == 1) return 1;
    // UC <-> corner of its own tile
    if (dx == 1 && dy == 1) begin
      if (is_uc(gx, a) && ax / 3 == bx / 3 && ay / 3 == by / 3) return 1;
      if (is_uc(gx, b) && ax / 3 == bx / 3 && ay / 3 == by / 3) return 1;
    end
    // UC <-> UC of adjacent tile
    if (is_uc(gx, a) && is_uc(gx, b) && ((dx == 3 && dy == 0) || (dx == 0 && dy == 3))) return 1;
    return 0;
  endfunction

  function automatic int ref_hops(int gx, int gy, int a, int b, bit mask []);
    int n, x0, x1, y0, y1, head;
    int dst_hops [];
    int q [$];
    n = gx * gy;
    dst_hops = new[n];
    foreach (dst_hops[i]) dst_hops[i] = -1;
    x0 = (a % gx < b % gx) ? a % gx : b % gx;  x1 = (a % gx < b % gx) ? b % gx : a % gx;
    y0 = (a / gx < b / gx) ? a / gx : b / gx;  y1 = (a / gx < b / gx) ? b / gx : a / gx;
    dst_hops[a] = 0;
    q.push_back(a);
    while (q.size() > 0) begin
      head = q.pop_front();
      if (head == b) return dst_hops[b];
      for (int v = 0; v < n; v++) begin
        bit inbox;
        inbox = (v % gx >= x0) && (v % gx <= x1) && (v / gx >= y0) && (v / gx <= y1);
        if (dst_hops[v] < 0 && inbox && (!mask[v] || v == b) && linked(gx, gy, head, v)) begin
          dst_hops[v] = dst_hops[head] + 1;
          q.push_back(v);
        end
      end
    end
    return -1;
  endfunction

endpackage
