// rayflex_s11_logic: stage 11 logic, output reformat (recoded -> binary32).
//
// Converts the result fields of the Shared RayFlex Data Structure back to binary32
// with rec_to_fp converters and builds the external output: for a box operation the
// sorted box indices, entry distances and hit flags; for a triangle operation the
// hit flag and the distance as numerator T and denominator det.  Fields of the other
// operation are driven to zero.  Combinational.
module rayflex_s11_logic
  import rayflex_pkg::*;
(
  input  srfds_t       d,
  output rayflex_out_t q
);
  fp32_t [NUM_BOXES-1:0] tmin;
  fp32_t                 t_num, t_den;

  for (genvar s = 0; s < NUM_BOXES; s++) begin : g_box
    rec_to_fp u_cvt (.x(d.box_sorted_tmin[s]), .y(tmin[s]));
  end
  rec_to_fp u_num (.x(d.tri_t),   .y(t_num));
  rec_to_fp u_den (.x(d.tri_det), .y(t_den));

  always_comb begin
    q    = '0;
    q.op = d.op;
    if (d.op == OP_BOX) begin
      q.box_order = d.box_order;
      q.box_tmin  = tmin;
      q.box_hit   = d.box_sorted_hit;
    end else begin
      q.tri_hit     = d.tri_hit;
      q.tri_t_num   = t_num;
      q.tri_t_denom = t_den;
    end
  end
endmodule
