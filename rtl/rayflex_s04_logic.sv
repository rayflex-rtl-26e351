// rayflex_s04_logic: stage 4 logic, 40 comparators and 6 adders.
//
// Ray-box (steps 3 and 4), per box, 10 comparators:
//   * 3: order each axis' slab pair, near = min(t_lo, t_hi), far = max(t_lo, t_hi)
//     (a negative inverse direction swaps them);
//   * 3: tmin = max(near_x, near_y, near_z, 0) as a two-level tree;
//   * 3: tmax = min(far_x, far_y, far_z, extent) as a two-level tree;
//   * 1: hit = tmin < tmax.
// NaN (from 0 * infinity when the ray lies in a face plane) is propagated through
// min/max, so the final comparison reads false and the box is a miss.
// Ray-triangle (step 5, second half), 6 adders: x_v = v[kx] - Sx*v[kz] and
// y_v = v[ky] - Sy*v[kz] for every vertex; z_v = Sz*v[kz] is copied.
// Input gating and copy-through as in stage 2.  Combinational.
//
// Own choice: the hit test is strict (tmin < tmax).  The slab algorithm in the paper
// writes tmin <= tmax, but the paper's test list expects a miss for a ray starting on
// a face or corner and pointing away, which gives tmin == tmax == 0.
module rayflex_s04_logic
  import rayflex_pkg::*;
(
  input  srfds_t d,
  output srfds_t q
);
  localparam int unsigned NC = 10 * NUM_BOXES;
  localparam int unsigned NA = 6;

  recfn_t [NC-1:0] ca, cb;
  logic   [NC-1:0] c_lt, c_eq, c_gt, c_un;
  recfn_t [NA-1:0] aa, ab, ay;

  for (genvar i = 0; i < NC; i++) begin : g_cmp
    fp_rec_cmp u_cmp (.a(ca[i]), .b(cb[i]), .lt(c_lt[i]), .eq(c_eq[i]), .gt(c_gt[i]),
                      .unordered(c_un[i]));
  end
  for (genvar i = 0; i < NA; i++) begin : g_add
    fp_rec_add u_add (.a(aa[i]), .b(ab[i]), .y(ay[i]));
  end

  // Comparator usage per box b (base j = 10*b):
  //   j+0..2 : t_lo[c] vs t_hi[c]
  //   j+3    : near_x vs near_y     j+4 : near_z vs 0       j+5 : the two maxima
  //   j+6    : far_x vs far_y       j+7 : far_z vs extent   j+8 : the two minima
  //   j+9    : tmin vs tmax
  // The tree levels depend on earlier comparators of the same stage, so the
  // comparator inputs are computed level by level in one block.
  recfn_t [NUM_BOXES-1:0][2:0] near, far;
  recfn_t [NUM_BOXES-1:0]      mx0, mx1, mn0, mn1, tmin, tmax;
  logic                        is_box;

  // max/min with NaN propagation: keep a when it wins or when it is NaN
  function automatic recfn_t pick(logic a_wins, recfn_t a, recfn_t b);
    return (a_wins || rec_is_nan(a)) ? a : b;
  endfunction

  always_comb begin
    is_box = (d.op == OP_BOX);
    ca = '0;
    cb = '0;
    for (int b = 0; b < NUM_BOXES; b++) begin
      for (int c = 0; c < 3; c++) begin
        ca[10*b + c] = is_box ? d.box_t_lo[b][c] : REC_ZERO;
        cb[10*b + c] = is_box ? d.box_t_hi[b][c] : REC_ZERO;
        if (c_un[10*b + c]) begin
          near[b][c] = REC_NAN;
          far[b][c]  = REC_NAN;
        end else if (c_gt[10*b + c]) begin
          near[b][c] = d.box_t_hi[b][c];
          far[b][c]  = d.box_t_lo[b][c];
        end else begin
          near[b][c] = d.box_t_lo[b][c];
          far[b][c]  = d.box_t_hi[b][c];
        end
      end
      ca[10*b + 3] = is_box ? near[b][0] : REC_ZERO;  cb[10*b + 3] = is_box ? near[b][1] : REC_ZERO;
      ca[10*b + 4] = is_box ? near[b][2] : REC_ZERO;  cb[10*b + 4] = REC_ZERO;
      ca[10*b + 6] = is_box ? far[b][0]  : REC_ZERO;  cb[10*b + 6] = is_box ? far[b][1] : REC_ZERO;
      ca[10*b + 7] = is_box ? far[b][2]  : REC_ZERO;  cb[10*b + 7] = is_box ? d.ray.extent : REC_ZERO;
      mx0[b] = pick(c_gt[10*b + 3] || c_eq[10*b + 3], near[b][0], near[b][1]);
      mx1[b] = pick(c_gt[10*b + 4] || c_eq[10*b + 4], near[b][2], REC_ZERO);
      mn0[b] = pick(c_lt[10*b + 6] || c_eq[10*b + 6], far[b][0], far[b][1]);
      mn1[b] = pick(c_lt[10*b + 7] || c_eq[10*b + 7], far[b][2], d.ray.extent);
      ca[10*b + 5] = is_box ? mx0[b] : REC_ZERO;  cb[10*b + 5] = is_box ? mx1[b] : REC_ZERO;
      ca[10*b + 8] = is_box ? mn0[b] : REC_ZERO;  cb[10*b + 8] = is_box ? mn1[b] : REC_ZERO;
      tmin[b] = pick(c_gt[10*b + 5] || c_eq[10*b + 5], mx0[b], mx1[b]);
      tmax[b] = pick(c_lt[10*b + 8] || c_eq[10*b + 8], mn0[b], mn1[b]);
      ca[10*b + 9] = is_box ? tmin[b] : REC_ZERO;  cb[10*b + 9] = is_box ? tmax[b] : REC_ZERO;
    end

    // triangle shear: adder v*2 + 0 -> x_v, v*2 + 1 -> y_v
    for (int v = 0; v < 3; v++) begin
      aa[2*v]     = is_box ? REC_ZERO : d.tri_tr[v][d.ray.k[0]];
      ab[2*v]     = is_box ? REC_ZERO : rec_neg(d.tri_sh[v][0]);
      aa[2*v + 1] = is_box ? REC_ZERO : d.tri_tr[v][d.ray.k[1]];
      ab[2*v + 1] = is_box ? REC_ZERO : rec_neg(d.tri_sh[v][1]);
    end

    q = d;
    if (is_box) begin
      for (int b = 0; b < NUM_BOXES; b++) begin
        q.box_tmin[b] = tmin[b];
        q.box_tmax[b] = tmax[b];
        q.box_hit[b]  = c_lt[10*b + 9];
      end
    end else begin
      for (int v = 0; v < 3; v++) begin
        q.tri_xyz[v][0] = ay[2*v];
        q.tri_xyz[v][1] = ay[2*v + 1];
        q.tri_xyz[v][2] = d.tri_sh[v][2];
      end
    end
  end
endmodule
