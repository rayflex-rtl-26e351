// rayflex_stages_tb: self-checking testbench of the eleven stage-logic blocks.
//
// Every stage's logic (rayflex_s01_logic .. rayflex_s11_logic) is instantiated on its
// own and fed random Shared RayFlex Data Structures, ray-box and ray-triangle
// operations mixed.  For each stage the fields it produces are checked against the
// double-precision reference model (bit-exact, except where only the sign of a zero
// may differ), and the remaining fields must pass through unchanged.  The random
// values are mostly ordinary numbers, with zeros, subnormals, infinities and NaNs
// mixed in.
module rayflex_stages_tb;
  import rayflex_pkg::*;
  import tb_fp_pkg::*;
  localparam int N = 3000;

  logic         clk = 1'b0;
  rayflex_in_t  d1;
  srfds_t       d  [2:11];
  srfds_t       q  [1:10];
  rayflex_out_t q11;
  int           checks = 0, failures = 0;
  int           nbox [1:11], ntri [1:11];

  rayflex_s01_logic u_s01 (.d(d1),    .q(q[1]));
  rayflex_s02_logic u_s02 (.d(d[2]),  .q(q[2]));
  rayflex_s03_logic u_s03 (.d(d[3]),  .q(q[3]));
  rayflex_s04_logic u_s04 (.d(d[4]),  .q(q[4]));
  rayflex_s05_logic u_s05 (.d(d[5]),  .q(q[5]));
  rayflex_s06_logic u_s06 (.d(d[6]),  .q(q[6]));
  rayflex_s07_logic u_s07 (.d(d[7]),  .q(q[7]));
  rayflex_s08_logic u_s08 (.d(d[8]),  .q(q[8]));
  rayflex_s09_logic u_s09 (.d(d[9]),  .q(q[9]));
  rayflex_s10_logic u_s10 (.d(d[10]), .q(q[10]));
  rayflex_s11_logic u_s11 (.d(d[11]), .q(q11));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (11 * N + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, int st, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("MISMATCH stage %0d: %s", st, what);
    end
  endtask

  // bit-exact check of a recoded result against a binary32 reference
  task automatic chk(int st, string what, logic [32:0] got, bit [31:0] want);
    check(same32(from_rec(got), want), st,
          $sformatf("%s got %h want %h", what, from_rec(got), want));
  endtask
  task automatic chkv(int st, string what, logic [32:0] got, bit [31:0] want);
    check(same_val(from_rec(got), want), st,
          $sformatf("%s got %h want %h", what, from_rec(got), want));
  endtask

  function automatic bit [31:0] rf();
    return (($urandom % 100) < 85) ? rand_normal(118, 136) : rand_fp();
  endfunction
  function automatic logic [32:0] rv();
    return to_rec(rf());
  endfunction
  function automatic bit [31:0] f(logic [32:0] x);
    return from_rec(x);
  endfunction

  // random structure: every recoded field holds a valid recoded number
  function automatic srfds_t rand_srfds();
    srfds_t s;
    s.op = opcode_e'($urandom % 2);
    for (int c = 0; c < 3; c++) begin
      s.ray.origin[c] = rv(); s.ray.dir[c] = rv(); s.ray.inv_dir[c] = rv();
      s.ray.shear[c] = rv();
      for (int v = 0; v < 3; v++) begin
        s.trng[v][c] = rv(); s.tri_tr[v][c] = rv(); s.tri_sh[v][c] = rv(); s.tri_xyz[v][c] = rv();
      end
      for (int b = 0; b < NUM_BOXES; b++) begin
        s.box[b].lo[c] = rv(); s.box[b].hi[c] = rv();
        s.box_lo_tr[b][c] = rv(); s.box_hi_tr[b][c] = rv();
        s.box_t_lo[b][c] = rv(); s.box_t_hi[b][c] = rv();
      end
    end
    s.ray.extent = rv();
    s.ray.k[2] = 2'($urandom % 3);
    s.ray.k[0] = 2'((s.ray.k[2] + 1) % 3);
    s.ray.k[1] = 2'((s.ray.k[2] + 2) % 3);
    if ($urandom % 2) s.ray.k[1:0] = {s.ray.k[0], s.ray.k[1]};
    for (int b = 0; b < NUM_BOXES; b++) begin
      // entry distances are never NaN for a box that was hit
      s.box_tmin[b] = ($urandom % 4 == 0) ? to_rec(fp(real'($urandom % 3))) : to_rec(rand_normal(118, 136));
      s.box_tmax[b] = rv();
      s.box_sorted_tmin[b] = rv();
    end
    s.box_hit = 4'($urandom);
    s.box_order = 8'($urandom);
    s.box_sorted_hit = 4'($urandom);
    for (int i = 0; i < 6; i++) s.tri_prod[i] = rv();
    for (int i = 0; i < 3; i++) begin
      // mostly non-positive U, V, W (the hit side), some zeros
      s.tri_uvw[i] = ($urandom % 10 == 0) ? REC_ZERO : to_rec((rf() & 32'h7FFFFFFF) | ((($urandom % 4) != 0) ? 32'h80000000 : 32'h0));
      s.tri_tprod[i] = rv();
    end
    s.tri_det_part = rv(); s.tri_t_part = rv();
    s.tri_det = ($urandom % 8 == 0) ? REC_ZERO : rv();
    s.tri_t = to_rec((rf() & 32'h7FFFFFFF) | ((($urandom % 4) != 0) ? 32'h80000000 : 32'h0));
    s.tri_hit = 1'($urandom);
    return s;
  endfunction

  initial begin
    srfds_t e, s;
    bit [31:0] near [3], far [3], tmin, tmax, key [4];
    bit [3:0]  used;
    bit        ok;
    @(posedge clk);
    for (int n = 0; n < N; n++) begin
      // ---------------- stage inputs
      d1.op = opcode_e'($urandom % 2);
      for (int c = 0; c < 3; c++) begin
        d1.ray.origin[c] = rand_fp(); d1.ray.dir[c] = rand_fp();
        d1.ray.inv_dir[c] = rand_fp(); d1.ray.shear[c] = rand_fp();
        d1.ray.k[c] = 2'($urandom % 3);
        for (int v = 0; v < 3; v++) d1.trng.v[v][c] = rand_fp();
        for (int b = 0; b < NUM_BOXES; b++) begin
          d1.box[b].lo[c] = rand_fp(); d1.box[b].hi[c] = rand_fp();
        end
      end
      d1.ray.extent = rand_fp();
      for (int st = 2; st <= 11; st++) d[st] = rand_srfds();
      @(posedge clk);

      // ---------------- stage 1: reformat in
      ok = (q[1].op == d1.op) && (q[1].ray.k == d1.ray.k);
      for (int c = 0; c < 3; c++) begin
        ok &= same32(f(q[1].ray.origin[c]), d1.ray.origin[c]) && same32(f(q[1].ray.dir[c]), d1.ray.dir[c]) &&
              same32(f(q[1].ray.inv_dir[c]), d1.ray.inv_dir[c]) && same32(f(q[1].ray.shear[c]), d1.ray.shear[c]);
        for (int v = 0; v < 3; v++) ok &= same32(f(q[1].trng[v][c]), d1.trng.v[v][c]);
        for (int b = 0; b < NUM_BOXES; b++)
          ok &= same32(f(q[1].box[b].lo[c]), d1.box[b].lo[c]) && same32(f(q[1].box[b].hi[c]), d1.box[b].hi[c]);
      end
      ok &= same32(f(q[1].ray.extent), d1.ray.extent);
      e = q[1]; e.op = opcode_e'(0); e.ray = '0; e.box = '0; e.trng = '0;
      ok &= (e == '0);
      check(ok, 1, "input reformat");

      // ---------------- stage 2: translate
      s = d[2]; e = s;
      if (s.op == OP_BOX) begin
        nbox[2]++;
        for (int b = 0; b < NUM_BOXES; b++) for (int c = 0; c < 3; c++) begin
          chk(2, "box lo - o", q[2].box_lo_tr[b][c], g_sub(f(s.box[b].lo[c]), f(s.ray.origin[c])));
          chk(2, "box hi - o", q[2].box_hi_tr[b][c], g_sub(f(s.box[b].hi[c]), f(s.ray.origin[c])));
          e.box_lo_tr[b][c] = q[2].box_lo_tr[b][c]; e.box_hi_tr[b][c] = q[2].box_hi_tr[b][c];
        end
      end else begin
        ntri[2]++;
        for (int v = 0; v < 3; v++) for (int c = 0; c < 3; c++) begin
          chk(2, "vertex - o", q[2].tri_tr[v][c], g_sub(f(s.trng[v][c]), f(s.ray.origin[c])));
          e.tri_tr[v][c] = q[2].tri_tr[v][c];
        end
      end
      check(q[2] == e, 2, "pass-through");

      // ---------------- stage 3: multiply
      s = d[3]; e = s;
      if (s.op == OP_BOX) begin
        for (int b = 0; b < NUM_BOXES; b++) for (int c = 0; c < 3; c++) begin
          chk(3, "t_lo", q[3].box_t_lo[b][c], g_mul(f(s.box_lo_tr[b][c]), f(s.ray.inv_dir[c])));
          chk(3, "t_hi", q[3].box_t_hi[b][c], g_mul(f(s.box_hi_tr[b][c]), f(s.ray.inv_dir[c])));
          e.box_t_lo[b][c] = q[3].box_t_lo[b][c]; e.box_t_hi[b][c] = q[3].box_t_hi[b][c];
        end
      end else begin
        for (int v = 0; v < 3; v++) for (int c = 0; c < 3; c++) begin
          chk(3, "shear mul", q[3].tri_sh[v][c], g_mul(f(s.ray.shear[c]), f(s.tri_tr[v][s.ray.k[2]])));
          e.tri_sh[v][c] = q[3].tri_sh[v][c];
        end
      end
      check(q[3] == e, 3, "pass-through");

      // ---------------- stage 4: slab compare / shear subtract
      s = d[4]; e = s;
      if (s.op == OP_BOX) begin
        nbox[4]++;
        for (int b = 0; b < NUM_BOXES; b++) begin
          for (int c = 0; c < 3; c++) begin
            near[c] = g_min(f(s.box_t_lo[b][c]), f(s.box_t_hi[b][c]));
            far[c]  = g_max(f(s.box_t_lo[b][c]), f(s.box_t_hi[b][c]));
          end
          tmin = g_max(g_max(near[0], near[1]), g_max(near[2], 32'h0));
          tmax = g_min(g_min(far[0], far[1]), g_min(far[2], f(s.ray.extent)));
          chkv(4, "tmin", q[4].box_tmin[b], tmin);
          chkv(4, "tmax", q[4].box_tmax[b], tmax);
          check(q[4].box_hit[b] == g_lt(tmin, tmax), 4, "box hit");
          e.box_tmin[b] = q[4].box_tmin[b]; e.box_tmax[b] = q[4].box_tmax[b]; e.box_hit[b] = q[4].box_hit[b];
        end
      end else begin
        ntri[4]++;
        for (int v = 0; v < 3; v++) begin
          chk(4, "x", q[4].tri_xyz[v][0], g_sub(f(s.tri_tr[v][s.ray.k[0]]), f(s.tri_sh[v][0])));
          chk(4, "y", q[4].tri_xyz[v][1], g_sub(f(s.tri_tr[v][s.ray.k[1]]), f(s.tri_sh[v][1])));
          check(q[4].tri_xyz[v][2] == s.tri_sh[v][2], 4, "z");
          e.tri_xyz[v] = q[4].tri_xyz[v];
        end
      end
      check(q[4] == e, 4, "pass-through");

      // ---------------- stages 5..9: triangle arithmetic
      s = d[5]; e = s;
      if (s.op == OP_TRIANGLE) begin
        chk(5, "Cx*By", q[5].tri_prod[0], g_mul(f(s.tri_xyz[2][0]), f(s.tri_xyz[1][1])));
        chk(5, "Cy*Bx", q[5].tri_prod[1], g_mul(f(s.tri_xyz[2][1]), f(s.tri_xyz[1][0])));
        chk(5, "Ax*Cy", q[5].tri_prod[2], g_mul(f(s.tri_xyz[0][0]), f(s.tri_xyz[2][1])));
        chk(5, "Ay*Cx", q[5].tri_prod[3], g_mul(f(s.tri_xyz[0][1]), f(s.tri_xyz[2][0])));
        chk(5, "Bx*Ay", q[5].tri_prod[4], g_mul(f(s.tri_xyz[1][0]), f(s.tri_xyz[0][1])));
        chk(5, "By*Ax", q[5].tri_prod[5], g_mul(f(s.tri_xyz[1][1]), f(s.tri_xyz[0][0])));
        e.tri_prod = q[5].tri_prod;
      end
      check(q[5] == e, 5, "pass-through");

      s = d[6]; e = s;
      if (s.op == OP_TRIANGLE) begin
        for (int i = 0; i < 3; i++)
          chk(6, "U/V/W", q[6].tri_uvw[i], g_sub(f(s.tri_prod[2*i]), f(s.tri_prod[2*i+1])));
        e.tri_uvw = q[6].tri_uvw;
      end
      check(q[6] == e, 6, "pass-through");

      s = d[7]; e = s;
      if (s.op == OP_TRIANGLE) begin
        for (int i = 0; i < 3; i++)
          chk(7, "uvw*z", q[7].tri_tprod[i], g_mul(f(s.tri_uvw[i]), f(s.tri_xyz[i][2])));
        e.tri_tprod = q[7].tri_tprod;
      end
      check(q[7] == e, 7, "pass-through");

      s = d[8]; e = s;
      if (s.op == OP_TRIANGLE) begin
        chk(8, "U+V", q[8].tri_det_part, g_add(f(s.tri_uvw[0]), f(s.tri_uvw[1])));
        chk(8, "t part", q[8].tri_t_part, g_add(f(s.tri_tprod[0]), f(s.tri_tprod[1])));
        e.tri_det_part = q[8].tri_det_part; e.tri_t_part = q[8].tri_t_part;
      end
      check(q[8] == e, 8, "pass-through");

      s = d[9]; e = s;
      if (s.op == OP_TRIANGLE) begin
        chk(9, "det", q[9].tri_det, g_add(f(s.tri_det_part), f(s.tri_uvw[2])));
        chk(9, "T", q[9].tri_t, g_add(f(s.tri_t_part), f(s.tri_tprod[2])));
        e.tri_det = q[9].tri_det; e.tri_t = q[9].tri_t;
      end
      check(q[9] == e, 9, "pass-through");

      // ---------------- stage 10: sort / triangle hit
      s = d[10]; e = s;
      if (s.op == OP_BOX) begin
        nbox[10]++;
        used = '0;
        ok = 1;
        for (int i = 0; i < 4; i++) begin
          key[i] = q[10].box_sorted_hit[i] ? f(q[10].box_sorted_tmin[i]) : 32'h7F800000;
          if (used[q[10].box_order[i]]) ok = 0;
          used[q[10].box_order[i]] = 1;
          if (q[10].box_sorted_tmin[i] != s.box_tmin[q[10].box_order[i]] ||
              q[10].box_sorted_hit[i] != s.box_hit[q[10].box_order[i]]) ok = 0;
        end
        for (int i = 0; i < 3; i++)
          if (!is_nan32(key[i]) && !is_nan32(key[i+1]) && g_lt(key[i+1], key[i])) ok = 0;
        check(ok, 10, "box sort");
        e.box_order = q[10].box_order; e.box_sorted_tmin = q[10].box_sorted_tmin;
        e.box_sorted_hit = q[10].box_sorted_hit;
      end else begin
        ntri[10]++;
        ok = !g_gt(f(s.tri_uvw[0]), 0) && !g_gt(f(s.tri_uvw[1]), 0) && !g_gt(f(s.tri_uvw[2]), 0) &&
             !g_eq(f(s.tri_det), 0) && !g_gt(f(s.tri_t), 0);
        check(q[10].tri_hit == ok, 10, "triangle hit");
        if (ok) nbox[1]++;   // count triangle hits seen
        e.tri_hit = q[10].tri_hit;
      end
      check(q[10] == e, 10, "pass-through");

      // ---------------- stage 11: reformat out
      s = d[11];
      ok = (q11.op == s.op);
      if (s.op == OP_BOX) begin
        ok &= (q11.box_order == s.box_order) && (q11.box_hit == s.box_sorted_hit) && !q11.tri_hit &&
              (q11.tri_t_num == 0) && (q11.tri_t_denom == 0);
        for (int i = 0; i < 4; i++) ok &= same32(q11.box_tmin[i], f(s.box_sorted_tmin[i]));
      end else begin
        ok &= (q11.tri_hit == s.tri_hit) && same32(q11.tri_t_num, f(s.tri_t)) &&
              same32(q11.tri_t_denom, f(s.tri_det)) && (q11.box_order == 0) && (q11.box_hit == 0);
      end
      check(ok, 11, "output reformat");
    end
    check(nbox[2] > 0 && ntri[2] > 0 && nbox[1] > 0, 0, "both operations and triangle hits exercised");
    $display("box ops %0d, triangle ops %0d, triangle hits at stage 10 %0d", nbox[2], ntri[2], nbox[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
