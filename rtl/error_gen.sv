// error_gen: turns an ORBGRAND rank pattern into an error vector.
//
// Each nonzero part r of the pattern names the r-th least reliable bit
// (rank r, 1-based); its bit index is order[r-1] from the reliability
// sorter. The error vector has a one at each of these indices and zeros
// elsewhere. Combinational. The paper names the block; the mapping is
// ORBGRAND's rank-to-position rule.
module error_gen #(
  parameter int unsigned N      = 128,
  parameter int unsigned HW_MAX = 8
) (
  input  logic [N-1:0][$clog2(N)-1:0]        order,
  input  logic [HW_MAX-1:0][$clog2(N+1)-1:0] parts,
  output logic [N-1:0]                       err
);

  localparam int unsigned LOGN = $clog2(N);

  always_comb begin
    err = '0;
    for (int k = 0; k < HW_MAX; k++)
      if (parts[k] != 0) err[order[LOGN'(parts[k] - 1'b1)]] = 1'b1;
  end

endmodule
