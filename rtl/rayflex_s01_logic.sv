// rayflex_s01_logic: stage 1 logic, input reformat (binary32 -> recoded).
//
// Converts every floating-point field of the external input (ray: 13 values, four
// boxes: 24 values, triangle: 9 values) to the 33-bit recoded format with a bank of
// fp_to_rec converters and places them in a fresh Shared RayFlex Data Structure.
// All intermediate fields start at zero.  The opcode and the ray's k indices pass
// unchanged.  Combinational; the surrounding skid buffer registers the result.
module rayflex_s01_logic
  import rayflex_pkg::*;
(
  input  rayflex_in_t d,
  output srfds_t      q
);
  ray_rec_t                 ray;
  box_rec_t [NUM_BOXES-1:0] box;
  recfn_t   [2:0][2:0]      trng;

  for (genvar c = 0; c < 3; c++) begin : g_ray
    fp_to_rec u_o (.x(d.ray.origin[c]),  .y(ray.origin[c]));
    fp_to_rec u_d (.x(d.ray.dir[c]),     .y(ray.dir[c]));
    fp_to_rec u_i (.x(d.ray.inv_dir[c]), .y(ray.inv_dir[c]));
    fp_to_rec u_s (.x(d.ray.shear[c]),   .y(ray.shear[c]));
    for (genvar v = 0; v < 3; v++) begin : g_tri
      fp_to_rec u_t (.x(d.trng.v[v][c]), .y(trng[v][c]));
    end
    for (genvar b = 0; b < NUM_BOXES; b++) begin : g_box
      fp_to_rec u_lo (.x(d.box[b].lo[c]), .y(box[b].lo[c]));
      fp_to_rec u_hi (.x(d.box[b].hi[c]), .y(box[b].hi[c]));
    end
  end
  fp_to_rec u_ext (.x(d.ray.extent), .y(ray.extent));
  assign ray.k = d.ray.k;

  always_comb begin
    q      = '0;
    q.op   = d.op;
    q.ray  = ray;
    q.box  = box;
    q.trng = trng;
  end
endmodule
