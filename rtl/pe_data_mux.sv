// pe_data_mux: data and weight selection for PE unit U of a PE group
// (paper Fig. 9 and Fig. 10).
//
// A PE unit has three PE rows of three PEs. In 3x3 mode:
//   unit 0   rows (R0, R0, R1) with filter rows (W2, W1, W2); PE row 0
//            gives PSUM'6, rows 1-2 give PSUM'7 (outputs 6, 7 of the
//            previous row frame, finished with this frame's rows 0, 1);
//   unit U   (1..6) rows (R[U-1], R[U], R[U+1]) with (W0, W1, W2), all
//            summed into PSUM(U-1), a complete partial sum;
//   unit 7   rows (R6, R7, R7) with (W0, W1, W0); rows 0-1 give PSUM''6,
//            row 2 gives PSUM''7 (outputs 6, 7 of this frame, finished by
//            the next frame).
// In 1x1 mode all three PE rows see row R[U] and the nine weight inputs
// carry one weight of each of 8 filters (w[k] = filter k); PE (2,2) idles.
//
// Combinational. w[3*i + j] is filter tap W(i, j) in 3x3 mode. grp_b marks
// the PE rows whose products form the unit's second output.
module pe_data_mux
  import accel_pkg::*;
#(
  parameter int U = 1
) (
  input  logic  mode1x1,
  input  data_t rows [8],
  input  data_t w [9],
  output data_t d [3],
  output data_t pw [3][3],
  output logic  grp_b [3]
);
  // weight row used by each PE row, and the data row, in 3x3 mode
  localparam int WROW [3] = (U == 0) ? '{2, 1, 2} : (U == 7) ? '{0, 1, 0} : '{0, 1, 2};
  localparam int DROW [3] = (U == 0) ? '{0, 0, 1} : (U == 7) ? '{6, 7, 7} : '{U - 1, U, U + 1};
  localparam bit GRPB [3] = (U == 0) ? '{1'b0, 1'b1, 1'b1} : (U == 7) ? '{1'b0, 1'b0, 1'b1}
                                     : '{1'b0, 1'b0, 1'b0};

  always_comb begin
    for (int r = 0; r < 3; r++) begin
      d[r]     = mode1x1 ? rows[U] : rows[DROW[r]];
      grp_b[r] = mode1x1 ? 1'b0 : GRPB[r];
      for (int j = 0; j < 3; j++)
        pw[r][j] = mode1x1 ? w[3*r + j] : w[3*WROW[r] + j];
    end
  end
endmodule
