// quadsort: four-input sorting network with five compare-exchange elements.
//
// Sorts four (key, index, hit) entries by ascending key using the optimal network
// (0,1)(2,3) / (0,2)(1,3) / (1,2): five comparators in three levels, the figure the
// paper quotes for sorting the four child boxes by order of intersection.  The
// caller passes +infinity as the key of a missed box, so missed boxes land after
// the boxes that were hit.  Each element swaps only when the second key is strictly
// smaller (fp_rec_cmp.lt), so equal keys keep their order within one element; a
// NaN key never causes a swap.  Timing: purely combinational.
module quadsort
  import rayflex_pkg::*;
(
  input  recfn_t [3:0]      key_in,
  input  logic   [3:0][1:0] idx_in,
  input  logic   [3:0]      hit_in,
  output recfn_t [3:0]      key_out,
  output logic   [3:0][1:0] idx_out,
  output logic   [3:0]      hit_out
);
  typedef struct packed {
    recfn_t     key;
    logic [1:0] idx;
    logic       hit;
  } entry_t;

  entry_t [3:0] l0, l1, l2, l3;
  logic   [4:0] swp;


  recfn_t [4:0] ca, cb;
  logic   [4:0] c_lt, c_eq, c_gt, c_un;

  for (genvar i = 0; i < 5; i++) begin : g_cmp
    fp_rec_cmp u_cmp (.a(ca[i]), .b(cb[i]), .lt(c_lt[i]), .eq(c_eq[i]), .gt(c_gt[i]),
                      .unordered(c_un[i]));
  end

  always_comb begin
    for (int i = 0; i < 4; i++) l0[i] = '{key: key_in[i], idx: idx_in[i], hit: hit_in[i]};
    // level 1: (0,1) (2,3)
    l1 = l0;
    ca[0] = l0[1].key; cb[0] = l0[0].key;
    ca[1] = l0[3].key; cb[1] = l0[2].key;
    swp[0] = c_lt[0];
    swp[1] = c_lt[1];
    if (swp[0]) begin l1[0] = l0[1]; l1[1] = l0[0]; end
    if (swp[1]) begin l1[2] = l0[3]; l1[3] = l0[2]; end
    // level 2: (0,2) (1,3)
    l2 = l1;
    ca[2] = l1[2].key; cb[2] = l1[0].key;
    ca[3] = l1[3].key; cb[3] = l1[1].key;
    swp[2] = c_lt[2];
    swp[3] = c_lt[3];
    if (swp[2]) begin l2[0] = l1[2]; l2[2] = l1[0]; end
    if (swp[3]) begin l2[1] = l1[3]; l2[3] = l1[1]; end
    // level 3: (1,2)
    l3 = l2;
    ca[4] = l2[2].key; cb[4] = l2[1].key;
    swp[4] = c_lt[4];
    if (swp[4]) begin l3[1] = l2[2]; l3[2] = l2[1]; end
    for (int i = 0; i < 4; i++) begin
      key_out[i] = l3[i].key;
      idx_out[i] = l3[i].idx;
      hit_out[i] = l3[i].hit;
    end
  end
endmodule
