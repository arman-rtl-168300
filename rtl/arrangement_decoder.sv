// arrangement_decoder -- selector values of the ten Mux/DeMux groups.
//
// Decodes the configured arrangement (2x2, 1x4, 4x1, 1x3, 3x1, 1x2, 2x1 or
// the unified 1x1) into one selector bit per Mux/DeMux group, exactly as the
// paper's selector table lists them, plus a mask of the arrays the
// arrangement uses. Groups the table marks '-' (their array is idle in 1x3
// and 3x1) are driven to 1, i.e. to the independent setting; the idle array
// is held cleared by the controller. Purely combinational.
module arrangement_decoder
  import arman_pkg::*;
(
  input  arrangement_e arrangement,
  output group_sel_t   sel,     // bit g-1 drives group g
  output array_mask_t  active   // bit a: array a in use
);

  always_comb begin
    sel    = sel_table(arrangement);
    active = active_table(arrangement);
  end

endmodule
