// rayflex_s03_logic: stage 3 logic, 24 shared multipliers.
//
// Ray-box (step 2): slab distances (lo - origin) * inv_dir and (hi - origin) * inv_dir
// for every axis of every box (24 multiplications).
// Ray-triangle (step 5, first half): S[c] * v[kz] for c = x, y, z and every vertex v,
// where v is the translated vertex and kz the ray's dominant axis (9 multiplications
// on multipliers 0..8).
// Input gating, sharing and copy-through as in stage 2.  Combinational.
module rayflex_s03_logic
  import rayflex_pkg::*;
(
  input  srfds_t d,
  output srfds_t q
);
  localparam int unsigned N = 24;
  recfn_t [N-1:0] a, b, y;

  for (genvar i = 0; i < N; i++) begin : g_mul
    fp_rec_mul u_mul (.a(a[i]), .b(b[i]), .y(y[i]));
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      a[i] = REC_ZERO;
      b[i] = REC_ZERO;
      if (d.op == OP_BOX) begin
        a[i] = ((i % 6) < 3) ? d.box_lo_tr[i / 6][i % 3] : d.box_hi_tr[i / 6][i % 3];
        b[i] = d.ray.inv_dir[i % 3];
      end else if (i < 9) begin
        // multiplier i = vertex*3 + c
        a[i] = d.ray.shear[i % 3];
        b[i] = d.tri_tr[i / 3][d.ray.k[2]];
      end
    end
    q = d;
    if (d.op == OP_BOX) begin
      for (int i = 0; i < N; i++)
        if ((i % 6) < 3) q.box_t_lo[i / 6][i % 3] = y[i];
        else             q.box_t_hi[i / 6][i % 3] = y[i];
    end else begin
      for (int i = 0; i < 9; i++) q.tri_sh[i / 3][i % 3] = y[i];
    end
  end
endmodule
