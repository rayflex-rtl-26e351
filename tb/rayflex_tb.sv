// rayflex_tb: end-to-end self-checking testbench of the RayFlex datapath (top level,
// default parameters).
//
// Reference model: the ray-box slab test and the watertight ray-triangle test,
// written here operation by operation in double precision with a rounding to
// binary32 after every add and multiply, in the same order as the datapath; so the
// expected outputs are bit-exact (the sign of a zero distance is not compared).
// The producer side computes the ray's inverse direction, the dominant axis
// permutation k and the shear constants S, as a GPU core would at ray creation.
//
// Phases:
//   1. The functional test cases of the datapath's specification: nine ray-box
//      cases and eleven ray-triangle cases with known hit/miss outcomes, sent
//      back-to-back; each operation must take exactly 11 cycles.
//   2. A burst of 300 random operations with the consumer always ready: one result
//      must leave every cycle.
//   3. 4000 random operations with random producer gaps and random consumer
//      stalls, so the skid buffers fill and back-pressure reaches the input.
// Every mechanism is counted (box and triangle operations, hits and misses, NaN
// misses, back-face culls, parallel rays, output stalls, input back-pressure, full
// throughput) and one that never happened counts as a failure.
module rayflex_tb;
  import rayflex_pkg::*;
  import tb_fp_pkg::*;

  localparam int NBURST = 300;
  localparam int NRAND  = 4000;

  logic         clk = 1'b0, rst_n = 1'b0;
  logic         in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  rayflex_in_t  in_data;
  rayflex_out_t out_data;

  rayflex dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (40 * (NBURST + NRAND) + 5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("MISMATCH (cycle %0d): %s", cycle, what);
    end
  endtask

  // ------------------------------------------------------------ reference model
  typedef struct {
    rayflex_in_t in;
    int          t_in;        // cycle of input_fire
    int          exp_hit;     // expected hit mask / flag from the test list, -1 if none
    int          strict_lat;  // latency must be exactly 11
  } item_t;

  // mechanism counters
  int n_box, n_tri, n_box_hit, n_box_miss, n_nan_miss, n_tri_hit, n_tri_miss, n_backface,
      n_parallel, n_out_stall, n_in_stall, n_fullrate;

  function automatic void ref_box(rayflex_in_t x, output bit [31:0] tmin [4], output bit [3:0] hit,
                                  output bit nan_seen);
    bit [31:0] lt, ht, nr [3], fr [3], tmax;
    nan_seen = 0;
    for (int b = 0; b < 4; b++) begin
      for (int c = 0; c < 3; c++) begin
        lt = g_mul(g_sub(x.box[b].lo[c], x.ray.origin[c]), x.ray.inv_dir[c]);
        ht = g_mul(g_sub(x.box[b].hi[c], x.ray.origin[c]), x.ray.inv_dir[c]);
        nr[c] = g_min(lt, ht);
        fr[c] = g_max(lt, ht);
        if (is_nan32(lt) || is_nan32(ht)) nan_seen = 1;
      end
      tmin[b] = g_max(g_max(nr[0], nr[1]), g_max(nr[2], 32'h0));
      tmax    = g_min(g_min(fr[0], fr[1]), g_min(fr[2], x.ray.extent));
      hit[b]  = g_lt(tmin[b], tmax);
    end
  endfunction

  function automatic void ref_tri(rayflex_in_t x, output bit hit, output bit [31:0] t, output bit [31:0] det,
                                  output bit [31:0] u, output bit [31:0] v, output bit [31:0] w);
    bit [31:0] tr [3][3], sh [3][3], px [3], py [3], pz [3];
    for (int i = 0; i < 3; i++) begin
      for (int c = 0; c < 3; c++) tr[i][c] = g_sub(x.trng.v[i][c], x.ray.origin[c]);
      for (int c = 0; c < 3; c++) sh[i][c] = g_mul(x.ray.shear[c], tr[i][x.ray.k[2]]);
      px[i] = g_sub(tr[i][x.ray.k[0]], sh[i][0]);
      py[i] = g_sub(tr[i][x.ray.k[1]], sh[i][1]);
      pz[i] = sh[i][2];
    end
    u   = g_sub(g_mul(px[2], py[1]), g_mul(py[2], px[1]));
    v   = g_sub(g_mul(px[0], py[2]), g_mul(py[0], px[2]));
    w   = g_sub(g_mul(px[1], py[0]), g_mul(py[1], px[0]));
    det = g_add(g_add(u, v), w);
    t   = g_add(g_add(g_mul(u, pz[0]), g_mul(v, pz[1])), g_mul(w, pz[2]));
    hit = !g_gt(u, 0) && !g_gt(v, 0) && !g_gt(w, 0) && !g_eq(det, 0) && !g_gt(t, 0);
  endfunction

  // ------------------------------------------------------------ stimulus helpers
  // ray from real origin/direction: inverse direction, k and S as at ray creation
  function automatic ray_fp_t mk_ray(real o [3], real d [3], real ext);
    ray_fp_t r;
    int      kz, kx, ky, tmp;
    real     ad [3];
    for (int c = 0; c < 3; c++) begin
      r.origin[c]  = fp(o[c]);
      r.dir[c]     = fp(d[c]);
      r.inv_dir[c] = fp(1.0 / fp32_to_real(r.dir[c]));
      ad[c]        = (d[c] < 0) ? -d[c] : d[c];
    end
    kz = 0;
    if (ad[1] > ad[kz]) kz = 1;
    if (ad[2] > ad[kz]) kz = 2;
    kx = (kz + 1) % 3;
    ky = (kx + 1) % 3;
    if (d[kz] < 0) begin tmp = kx; kx = ky; ky = tmp; end
    r.k[0] = 2'(kx); r.k[1] = 2'(ky); r.k[2] = 2'(kz);
    r.shear[0] = fp(fp32_to_real(r.dir[kx]) / fp32_to_real(r.dir[kz]));
    r.shear[1] = fp(fp32_to_real(r.dir[ky]) / fp32_to_real(r.dir[kz]));
    r.shear[2] = fp(1.0 / fp32_to_real(r.dir[kz]));
    r.extent   = fp(ext);
    return r;
  endfunction

  function automatic box_fp_t mk_box(real x0, real y0, real z0, real x1, real y1, real z1);
    box_fp_t b;
    b.lo[0] = fp(x0); b.lo[1] = fp(y0); b.lo[2] = fp(z0);
    b.hi[0] = fp(x1); b.hi[1] = fp(y1); b.hi[2] = fp(z1);
    return b;
  endfunction

  function automatic tri_fp_t mk_tri(real a [3], real b [3], real c [3]);
    tri_fp_t t;
    for (int i = 0; i < 3; i++) begin
      t.v[0][i] = fp(a[i]); t.v[1][i] = fp(b[i]); t.v[2][i] = fp(c[i]);
    end
    return t;
  endfunction

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * (real'($urandom % 1000000) / 1000000.0);
  endfunction

  function automatic rayflex_in_t rand_op();
    rayflex_in_t x;
    real o [3], d [3], a [3], b [3], c [3], p;
    x = '0;
    x.op = opcode_e'($urandom % 2);
    for (int i = 0; i < 3; i++) begin
      o[i] = urand(-2.0, 2.0);
      d[i] = (($urandom % 12) == 0) ? 0.0 : urand(-1.0, 1.0);
    end
    if (d[0] == 0.0 && d[1] == 0.0 && d[2] == 0.0) d[2] = 1.0;
    x.ray = mk_ray(o, d, urand(0.5, 10.0));
    for (int k = 0; k < 4; k++) begin
      for (int i = 0; i < 3; i++) begin
        a[i] = urand(-3.0, 3.0);
        b[i] = a[i] + urand(0.1, 3.0);
      end
      // sometimes a box face through the ray origin
      if (($urandom % 10) == 0) begin
        int ax = $urandom % 3;
        a[ax] = o[ax];
        b[ax] = a[ax] + urand(0.1, 3.0);
      end
      x.box[k] = mk_box(a[0], a[1], a[2], b[0], b[1], b[2]);
    end
    // triangle near the ray path, either winding
    p = urand(0.5, 3.0);
    for (int i = 0; i < 3; i++) begin
      a[i] = o[i] + p * d[i] + urand(-1.0, 1.0);
      b[i] = o[i] + p * d[i] + urand(-1.0, 1.0);
      c[i] = o[i] + p * d[i] + urand(-1.0, 1.0);
    end
    x.trng = mk_tri(a, b, c);
    return x;
  endfunction

  // ------------------------------------------------------------ driver / monitor
  item_t sent [$];
  item_t pend [$];
  int    pv = 100, pr = 100;
  int    n_fired = 0;
  bit    random_mode = 0;
  int    last_out_cycle = -10, streak = 0, max_streak = 0;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      n_fired++;
      if (pend.size() == 0) check(0, "input accepted with nothing pending");
      pend[0].t_in = cycle;
      sent.push_back(pend[0]);
      void'(pend.pop_front());
    end
    if (in_valid && !in_ready) n_in_stall++;
    if (out_valid && !out_ready) n_out_stall++;
    if (out_valid && out_ready) begin
      if (sent.size() == 0) check(0, "output without input");
      else begin
        score(sent[0], out_data, cycle);
        void'(sent.pop_front());
      end
      streak = (last_out_cycle == cycle - 1) ? streak + 1 : 1;
      if (streak > max_streak) max_streak = streak;
      last_out_cycle = cycle;
    end
  end

  task automatic score(item_t it, rayflex_out_t o, int t_out);
    bit [31:0] tmin [4], t, det, u, v, w;
    bit [3:0]  hit, used;
    bit        nan_seen, th, ok;
    bit [31:0] key [4];
    if (it.strict_lat) check(t_out - it.t_in == 11, $sformatf("latency %0d", t_out - it.t_in));
    else               check(t_out - it.t_in >= 11, "latency below 11");
    check(o.op == it.in.op, "opcode");
    if (it.in.op == OP_BOX) begin
      n_box++;
      ref_box(it.in, tmin, hit, nan_seen);
      ok = 1;
      used = '0;
      for (int s = 0; s < 4; s++) begin
        if (used[o.box_order[s]]) ok = 0;
        used[o.box_order[s]] = 1;
        if (o.box_hit[s] != hit[o.box_order[s]]) ok = 0;
        if (!same_val(o.box_tmin[s], tmin[o.box_order[s]])) ok = 0;
        key[s] = o.box_hit[s] ? o.box_tmin[s] : 32'h7F800000;
      end
      for (int s = 0; s < 3; s++) if (g_lt(key[s + 1], key[s])) ok = 0;
      check(ok, $sformatf("box result order=%h hit=%b ref hit=%b", o.box_order, o.box_hit, hit));
      if (it.exp_hit >= 0) check(hit == 4'(it.exp_hit) && ok, $sformatf("box test case: hit %b expected %b", hit, 4'(it.exp_hit)));
      if (hit != 0) n_box_hit++;
      if (hit != 4'hF) n_box_miss++;
      if (nan_seen && hit != 4'hF) n_nan_miss++;
    end else begin
      n_tri++;
      ref_tri(it.in, th, t, det, u, v, w);
      check(o.tri_hit == th && same32(o.tri_t_num, t) && same32(o.tri_t_denom, det),
            $sformatf("triangle hit %0d/%0d T %h/%h det %h/%h", o.tri_hit, th, o.tri_t_num, t, o.tri_t_denom, det));
      if (it.exp_hit >= 0) check(o.tri_hit == it.exp_hit[0], $sformatf("triangle test case: hit %0d expected %0d", o.tri_hit, it.exp_hit));
      if (th) n_tri_hit++; else n_tri_miss++;
      if (!g_lt(u, 0) && !g_lt(v, 0) && !g_lt(w, 0) && (g_gt(u, 0) || g_gt(v, 0) || g_gt(w, 0))) n_backface++;
      if (g_eq(det, 0)) n_parallel++;
    end
  endtask

  task automatic send(rayflex_in_t x, int exp_hit, bit strict);
    item_t it;
    int    target;
    it.in = x;
    it.exp_hit = exp_hit;
    it.strict_lat = strict;
    pend.push_back(it);
    in_data  = x;
    in_valid = 1'b1;
    target   = n_fired + 1;
    do begin
      @(posedge clk);
      #1;
    end while (n_fired != target);
    in_valid = 1'b0;
  endtask

  // ------------------------------------------------------------ directed cases
  rayflex_in_t tc_box [9];
  int          tc_box_hit [9];
  rayflex_in_t tc_tri [11];
  int          tc_tri_hit [11];

  task automatic build_cases();
    box_fp_t far_box, unit;
    real o [3], d [3], a [3], b [3], c [3];
    far_box = mk_box(100, -101, 100, 101, -100, 101);   // off every test ray
    unit    = mk_box(0, 0, 0, 1, 1, 1);
    for (int i = 0; i < 9; i++) begin
      tc_box[i] = '0;
      tc_box[i].op = OP_BOX;
      tc_box[i].box = {far_box, far_box, far_box, unit};
    end
    // (1) origin inside the box: hit
    o = '{0.5, 0.5, 0.5}; d = '{1.0, 0.5, 0.25};  tc_box[0].ray = mk_ray(o, d, 100); tc_box_hit[0] = 1;
    // (2) outside, pointing away: miss
    o = '{2.0, 0.5, 0.5}; d = '{1.0, 0.2, 0.3};   tc_box[1].ray = mk_ray(o, d, 100); tc_box_hit[1] = 0;
    // (3) on a face, pointing away: miss
    o = '{1.0, 0.5, 0.5}; d = '{1.0, 0.1, 0.1};   tc_box[2].ray = mk_ray(o, d, 100); tc_box_hit[2] = 0;
    // (4) on a corner, pointing away: miss
    o = '{1.0, 1.0, 1.0}; d = '{1.0, 1.0, 1.0};   tc_box[3].ray = mk_ray(o, d, 100); tc_box_hit[3] = 0;
    // (5) on a corner, pointing along an edge: miss
    o = '{0.0, 0.0, 0.0}; d = '{1.0, 0.0, 0.0};   tc_box[4].ray = mk_ray(o, d, 100); tc_box_hit[4] = 0;
    // (6) outside, pointing towards the box: hit
    o = '{-1.0, 0.5, 0.5}; d = '{1.0, 0.1, -0.1}; tc_box[5].ray = mk_ray(o, d, 100); tc_box_hit[5] = 1;
    // (7) two boxes in a row
    o = '{-1.0, 0.5, 0.5}; d = '{1.0, 0.0, 0.0};  tc_box[6].ray = mk_ray(o, d, 100);
    tc_box[6].box[1] = mk_box(2, 0, 0, 3, 1, 1);   tc_box_hit[6] = 3;
    // (8) three boxes in a row, a fourth off the path (indices shuffled)
    tc_box[7].ray = mk_ray(o, d, 100);
    tc_box[7].box[0] = mk_box(4, 0, 0, 5, 1, 1);
    tc_box[7].box[1] = unit;
    tc_box[7].box[2] = mk_box(2, 5, 0, 3, 6, 1);
    tc_box[7].box[3] = mk_box(2, 0, 0, 3, 1, 1);   tc_box_hit[7] = 4'b1011;
    // (9) outside, along an edge of the box: miss
    o = '{-1.0, 0.0, 0.0}; d = '{1.0, 0.0, 0.0};  tc_box[8].ray = mk_ray(o, d, 100); tc_box_hit[8] = 0;

    a = '{0.0, 0.0, 0.0}; b = '{1.0, 0.0, 0.0}; c = '{0.0, 1.0, 0.0};   // front face: +z
    for (int i = 0; i < 11; i++) begin
      tc_tri[i] = '0;
      tc_tri[i].op = OP_TRIANGLE;
      tc_tri[i].trng = mk_tri(a, b, c);
    end
    d = '{0.0, 0.0, 1.0};
    // (1) hits the back: miss
    o = '{0.2, 0.2, 1.0};  tc_tri[0].ray = mk_ray(o, '{0.0, 0.0, -1.0}, 100); tc_tri_hit[0] = 0;
    // (2) hits the front
    o = '{0.2, 0.2, -1.0}; tc_tri[1].ray = mk_ray(o, d, 100); tc_tri_hit[1] = 1;
    // (3) hits an edge from the front
    o = '{0.5, 0.0, -1.0}; tc_tri[2].ray = mk_ray(o, d, 100); tc_tri_hit[2] = 1;
    // (4) hits a vertex from the front
    o = '{0.0, 0.0, -1.0}; tc_tri[3].ray = mk_ray(o, d, 100); tc_tri_hit[3] = 1;
    // (5) misses
    o = '{2.0, 2.0, -1.0}; tc_tri[4].ray = mk_ray(o, '{0.3, 0.1, 1.0}, 100); tc_tri_hit[4] = 0;
    // (6) parallel to the normal, no intersection
    o = '{-1.0, 0.5, -1.0}; tc_tri[5].ray = mk_ray(o, d, 100); tc_tri_hit[5] = 0;
    // (7) far-away triangle
    tc_tri[6].trng = mk_tri('{0.0, 0.0, 1000.0}, '{1000.0, 0.0, 1000.0}, '{0.0, 1000.0, 1000.0});
    o = '{100.0, 100.0, -1000.0}; tc_tri[6].ray = mk_ray(o, d, 1.0e6); tc_tri_hit[6] = 1;
    // (8) front hit at an oblique angle
    o = '{0.2, 0.2, -1.0}; tc_tri[7].ray = mk_ray(o, '{0.1, 0.05, 1.0}, 100); tc_tri_hit[7] = 1;
    // (9) coplanar ray through an edge: miss
    o = '{-1.0, 0.5, 0.0}; tc_tri[8].ray = mk_ray(o, '{1.0, 0.0, 0.0}, 100); tc_tri_hit[8] = 0;
    // (10) front hit along another axis (triangle in the x = 0 plane, front +x)
    tc_tri[9].trng = mk_tri('{0.0, 0.0, 0.0}, '{0.0, 1.0, 0.0}, '{0.0, 0.0, 1.0});
    o = '{-1.0, 0.2, 0.2}; tc_tri[9].ray = mk_ray(o, '{1.0, 0.0, 0.0}, 100); tc_tri_hit[9] = 1;
    // (11) coplanar ray from inside the triangle: miss
    o = '{0.2, 0.2, 0.0};  tc_tri[10].ray = mk_ray(o, '{1.0, 0.0, 0.0}, 100); tc_tri_hit[10] = 0;
  endtask

  // ------------------------------------------------------------ main
  initial begin
    int t0, n0;
    build_cases();
    repeat (3) @(posedge clk);
    #1;
    rst_n = 1'b1;
    out_ready = 1'b1;
    @(posedge clk);
    #1;

    // phase 1: specification test cases, back-to-back, consumer ready
    for (int i = 0; i < 9; i++)  send(tc_box[i], tc_box_hit[i], 1);
    for (int i = 0; i < 11; i++) send(tc_tri[i], tc_tri_hit[i], 1);
    wait (sent.size() == 0 && pend.size() == 0);
    repeat (3) @(posedge clk);
    #1;

    // phase 2: full-rate burst
    max_streak = 0;
    for (int i = 0; i < NBURST; i++) send(rand_op(), -1, 1);
    wait (sent.size() == 0);
    check(max_streak >= NBURST, $sformatf("full rate: longest run of back-to-back results %0d", max_streak));
    if (max_streak >= NBURST) n_fullrate++;
    repeat (3) @(posedge clk);
    #1;

    // phase 3: random gaps and stalls
    random_mode = 1;
    for (int i = 0; i < NRAND; i++) begin
      pv = 30 + (i / 500) * 10;
      pr = 90 - (i / 500) * 10;
      while (($urandom % 100) >= pv) @(posedge clk);
      #1;
      send(rand_op(), -1, 0);
    end
    random_mode = 0;
    out_ready = 1'b1;
    wait (sent.size() == 0);
    repeat (3) @(posedge clk);

    check(n_box > 0,       "no box operation");
    check(n_tri > 0,       "no triangle operation");
    check(n_box_hit > 0,   "no box hit");
    check(n_box_miss > 0,  "no box miss");
    check(n_nan_miss > 0,  "no NaN-driven box miss");
    check(n_tri_hit > 0,   "no triangle hit");
    check(n_tri_miss > 0,  "no triangle miss");
    check(n_backface > 0,  "no back-face cull");
    check(n_parallel > 0,  "no parallel ray");
    check(n_out_stall > 0, "no output stall");
    check(n_in_stall > 0,  "no input back-pressure");
    check(n_fullrate > 0,  "no full-rate burst");
    $display("mechanisms: box %0d tri %0d box-hit %0d box-miss %0d nan-miss %0d tri-hit %0d tri-miss %0d backface %0d parallel %0d out-stall %0d in-stall %0d full-rate %0d",
             n_box, n_tri, n_box_hit, n_box_miss, n_nan_miss, n_tri_hit, n_tri_miss, n_backface,
             n_parallel, n_out_stall, n_in_stall, n_fullrate);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random consumer in phase 3
  always @(negedge clk) if (random_mode) out_ready <= ($urandom % 100) < pr;
endmodule
