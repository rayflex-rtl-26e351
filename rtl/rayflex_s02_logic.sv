// rayflex_s02_logic: stage 2 logic, 24 shared adders.
//
// Ray-box (step 1): translates the four boxes to the ray origin, lo - origin and
// hi - origin for every axis of every box (24 subtractions).
// Ray-triangle (step 4): translates the three vertices, v - origin (9 subtractions),
// on adders 0..8.
// The adders are shared between the operations.  Each adder input is driven through
// a multiplexer that feeds zero unless the current operation uses that adder, so an
// idle adder does not toggle.  The stage copies its input to its output and
// overwrites only the fields it produces.  Combinational.
module rayflex_s02_logic
  import rayflex_pkg::*;
(
  input  srfds_t d,
  output srfds_t q
);
  localparam int unsigned N = 24;
  recfn_t [N-1:0] a, b, y;

  for (genvar i = 0; i < N; i++) begin : g_add
    fp_rec_add u_add (.a(a[i]), .b(b[i]), .y(y[i]));
  end

  // adder i = box*6 + side*3 + axis (side 0 = lo, 1 = hi) for boxes;
  // adder i = vertex*3 + axis for the triangle
  always_comb begin
    for (int i = 0; i < N; i++) begin
      a[i] = REC_ZERO;
      b[i] = REC_ZERO;
      if (d.op == OP_BOX) begin
        a[i] = ((i % 6) < 3) ? d.box[i / 6].lo[i % 3] : d.box[i / 6].hi[i % 3];
        b[i] = rec_neg(d.ray.origin[i % 3]);
      end else if (i < 9) begin
        a[i] = d.trng[i / 3][i % 3];
        b[i] = rec_neg(d.ray.origin[i % 3]);
      end
    end
    q = d;
    if (d.op == OP_BOX) begin
      for (int i = 0; i < N; i++)
        if ((i % 6) < 3) q.box_lo_tr[i / 6][i % 3] = y[i];
        else             q.box_hi_tr[i / 6][i % 3] = y[i];
    end else begin
      for (int i = 0; i < 9; i++) q.tri_tr[i / 3][i % 3] = y[i];
    end
  end
endmodule
