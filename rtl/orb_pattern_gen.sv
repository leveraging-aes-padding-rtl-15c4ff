// orb_pattern_gen: ORBGRAND pattern generator.
//
// ORBGRAND tests noise patterns in order of increasing logistic weight: a
// pattern flips the bits of ranks r1 > r2 > ... > rm (rank 1 = least
// reliable bit) and its logistic weight is r1 + r2 + ... + rm. The patterns of
// weight W are therefore the partitions of W into distinct parts no larger
// than N. This generator walks through them one per clock cycle: W = 1, 2,
// ... up to LW_MAX, and within one W in reverse lexicographic order of the
// parts, keeping at most HW_MAX parts (flipped bits).
//
// Successor rule, all in one cycle: take the rightmost part p[i] that can be
// lowered by one while the freed amount plus the parts after it, R, still
// fits after it in distinct parts below p[i]-1 using the remaining slots;
// lower it and refill the tail greedily (largest part first), which gives
// the next pattern in order and the fewest parts. When no part can be
// lowered, W advances and its first pattern is the greedy split of W.
//
// init loads the first pattern (W = 1, {1}); next advances. parts[0] is the
// largest part, num_parts how many are valid, lw the logistic weight.
// exhausted rises when the weight would exceed LW_MAX; the patterns then
// stop. The paper names the pattern generator and the ORBGRAND ordering; the
// successor logic and the HW_MAX/LW_MAX limits are this design's choice.
module orb_pattern_gen #(
  parameter int unsigned N      = 128,
  parameter int unsigned HW_MAX = 8,
  parameter int unsigned LW_MAX = 64
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 init,
  input  logic                                 next,
  output logic [HW_MAX-1:0][$clog2(N+1)-1:0]   parts,
  output logic [$clog2(HW_MAX+1)-1:0]          num_parts,
  output logic [15:0]                          lw,
  output logic                                 exhausted
);

  localparam int unsigned PW = $clog2(N + 1);
  localparam int unsigned CW = $clog2(HW_MAX + 1);
  typedef logic [HW_MAX-1:0][PW-1:0] parts_t;

  // largest sum of s distinct positive parts, each at most c
  function automatic int unsigned max_sum(input int unsigned c, input int unsigned s);
    int unsigned t;
    t = (s < c) ? s : c;
    return t * c - t * (t - 1) / 2;
  endfunction

  // greedy fill of amount r into slots first..HW_MAX-1, each part <= cap and
  // strictly decreasing; slots left over are zero
  function automatic parts_t greedy_fill(input parts_t base, input int unsigned first,
                                         input int unsigned r, input int unsigned cap);
    parts_t o;
    int unsigned rem, c, v;
    o   = base;
    rem = r;
    c   = cap;
    for (int unsigned k = 0; k < HW_MAX; k++) begin
      if (k >= first) begin
        v    = (rem < c) ? rem : c;
        o[k] = PW'(v);
        rem  = rem - v;
        c    = (v > 0) ? v - 1 : 0;
      end
    end
    return o;
  endfunction

  function automatic logic [CW-1:0] count_parts(input parts_t p);
    logic [CW-1:0] n;
    n = '0;
    for (int unsigned k = 0; k < HW_MAX; k++) if (p[k] != 0) n = n + 1'b1;
    return n;
  endfunction

  parts_t        p_q, p_nx;
  logic [15:0]   lw_q, lw_nx;
  logic          ex_q, ex_nx;

  always_comb begin
    int unsigned tail, pi;
    bit found;
    p_nx  = p_q;
    lw_nx = lw_q;
    ex_nx = ex_q;
    found = 1'b0;
    tail  = 0;
    // scan from the right; tail = sum of parts after position i
    for (int i = HW_MAX - 1; i >= 0; i--) begin
      pi = int'(p_q[i]);
      if (!found && pi >= 2 &&
          (1 + tail) <= max_sum(pi - 2, HW_MAX - 1 - i)) begin
        p_nx      = p_q;
        p_nx[i]   = PW'(pi - 1);
        p_nx      = greedy_fill(p_nx, i + 1, 1 + tail, pi - 2);
        found     = 1'b1;
      end
      tail = tail + pi;
    end
    if (!found) begin
      lw_nx = lw_q + 16'd1;
      if (int'(lw_nx) > LW_MAX || int'(lw_nx) > max_sum(N, HW_MAX)) begin
        ex_nx = 1'b1;
        p_nx  = p_q;
        lw_nx = lw_q;
      end else begin
        p_nx = greedy_fill('0, 0, int'(lw_nx), N);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_q  <= '0;
      lw_q <= '0;
      ex_q <= 1'b1;
    end else if (init) begin
      p_q    <= '0;
      p_q[0] <= PW'(1);
      lw_q   <= 16'd1;
      ex_q   <= (LW_MAX < 1);
    end else if (next && !ex_q) begin
      p_q  <= p_nx;
      lw_q <= lw_nx;
      ex_q <= ex_nx;
    end
  end

  assign parts     = p_q;
  assign num_parts = count_parts(p_q);
  assign lw        = lw_q;
  assign exhausted = ex_q;

endmodule
