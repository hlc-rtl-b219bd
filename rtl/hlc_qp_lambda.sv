// hlc_qp_lambda: QP to Lagrange multiplier table of the RDO. The paper fits
// the average R-D curve of its training set to D = 1e6 * R^-1.291 and takes
// lambda as the slope -dD/dR at each QP's operating point. The operating
// rates are not published; this table assumes R(QP) = 1000 * 2^(-QP/5) bits
// per CU (see hlc_pkg::LAMBDA_TAB). Output has 4 fractional bits; the table
// is read combinationally.
module hlc_qp_lambda
  import hlc_pkg::*;
(
  input  logic [3:0] qp,
  output logic [9:0] lambda
);
  assign lambda = LAMBDA_TAB[qp];
endmodule
