// rayflex_s10_logic: stage 10 logic, QuadSort network and 5 comparators.
//
// Ray-box (step 5): sorts the four boxes by entry distance with a five-comparator
// QuadSort network.  The sort key of a missed box is +infinity, so hit boxes come
// first, nearest first, and missed boxes follow.  The output per slot is the box
// index, its entry distance and its hit flag.
// Ray-triangle (step 9): five comparisons decide the hit with back-face culling:
//   miss if U > 0, V > 0 or W > 0 (ray passes outside an edge or hits the back),
//   miss if det == 0 (ray parallel to the triangle plane),
//   miss if T > 0 (intersection behind the ray origin).
// With the sign convention of the watertight formulas used in stages 5 and 6, a
// front-face hit (dir . (AB x AC) > 0) gives U, V, W <= 0 and det < 0, so the
// distance T/det is non-negative.  An edge or vertex hit (one or two of U, V, W
// zero) counts as a hit.
//
// The paper lists two QuadSort networks in this stage but does not say what the
// second one sorts; this design uses one.  The distance is not compared with the
// ray extent here (the paper counts only five comparisons and returns the distance
// as a numerator/denominator pair).  Combinational.
module rayflex_s10_logic
  import rayflex_pkg::*;
(
  input  srfds_t d,
  output srfds_t q
);
  logic                        is_box;
  recfn_t [NUM_BOXES-1:0]      key_in, key_out;
  logic   [NUM_BOXES-1:0][1:0] idx_in, idx_out;
  logic   [NUM_BOXES-1:0]      hit_in, hit_out;
  recfn_t [NUM_BOXES-1:0]      tmin_out;

  recfn_t [4:0] ca;
  logic   [4:0] c_lt, c_eq, c_gt, c_un;

  quadsort u_sort (
    .key_in, .idx_in, .hit_in, .key_out, .idx_out, .hit_out
  );

  for (genvar i = 0; i < 5; i++) begin : g_cmp
    fp_rec_cmp u_cmp (.a(ca[i]), .b(REC_ZERO), .lt(c_lt[i]), .eq(c_eq[i]), .gt(c_gt[i]),
                      .unordered(c_un[i]));
  end

  always_comb begin
    is_box = (d.op == OP_BOX);
    for (int b = 0; b < NUM_BOXES; b++) begin
      key_in[b] = !is_box ? REC_ZERO : (d.box_hit[b] ? d.box_tmin[b] : REC_POS_INF);
      idx_in[b] = 2'(b);
      hit_in[b] = is_box && d.box_hit[b];
    end
    // missed boxes carry +inf as key; report their own entry distance
    for (int s = 0; s < NUM_BOXES; s++) tmin_out[s] = d.box_tmin[idx_out[s]];

    ca[0] = is_box ? REC_ZERO : d.tri_uvw[0];
    ca[1] = is_box ? REC_ZERO : d.tri_uvw[1];
    ca[2] = is_box ? REC_ZERO : d.tri_uvw[2];
    ca[3] = is_box ? REC_ZERO : d.tri_det;
    ca[4] = is_box ? REC_ZERO : d.tri_t;

    q = d;
    if (is_box) begin
      q.box_order       = idx_out;
      q.box_sorted_tmin = tmin_out;
      q.box_sorted_hit  = hit_out;
    end else begin
      q.tri_hit = !c_gt[0] && !c_gt[1] && !c_gt[2] && !c_eq[3] && !c_gt[4];
    end
  end
endmodule
