// reliability_sorter: orders the bit positions of a block by reliability.
//
// Each bit i of the block comes with an LLR magnitude mag[i]. The sorter
// returns order[r] = the bit index with the r-th smallest magnitude
// (r = 0 is the least reliable bit), the ranking ORBGRAND needs. Ties are
// broken by bit index, so the key {mag, index} is unique and the result does
// not depend on the network. The sort is a bitonic sorting network of
// log2(N)(log2(N)+1)/2 compare-exchange stages (28 for N = 128) with a
// register after each of its log2(N) merge phases, so a load is sorted
// log2(N)+1 cycles later (input register plus one cycle per phase); done
// pulses then and order holds until the next load. The paper names the
// sorter and ties its cycle count to the number of comparator stages; the
// bitonic network and its pipelining are this design's choice.
module reliability_sorter
  import aes_grand_pkg::*;
#(
  parameter int unsigned N     = 128,
  parameter int unsigned MAG_W = 6
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        load,
  input  logic [N-1:0][MAG_W-1:0]     mag,
  output logic                        done,
  output logic [N-1:0][$clog2(N)-1:0] order
);

  localparam int unsigned LOGN   = $clog2(N);
  localparam int unsigned NSTAGE = LOGN * (LOGN + 1) / 2;
  localparam int unsigned KEY_W  = MAG_W + LOGN;

  typedef logic [KEY_W-1:0] key_t;   // {magnitude, bit index}

  // phase p (1..LOGN) has p stages; block size k = 2^p, distance j = 2^(p-1-q)
  function automatic int unsigned stage_phase(input int unsigned s);
    int unsigned p, acc;
    p = 1; acc = 0;
    for (int unsigned i = 1; i <= LOGN; i++)
      if (s >= acc + i) begin acc = acc + i; p = i + 1; end
    return p;
  endfunction

  function automatic int unsigned stage_dist(input int unsigned s);
    int unsigned p, first;
    p = stage_phase(s);
    first = (p - 1) * p / 2;
    return 1 << (p - 1 - (s - first));
  endfunction

  function automatic bit stage_last(input int unsigned s);
    int unsigned p;
    p = stage_phase(s);
    return (s == p * (p + 1) / 2 - 1);
  endfunction

  key_t            in_q [N];
  logic [LOGN:0]   vld_q;

  // input register
  always_ff @(posedge clk) begin
    if (load)
      for (int i = 0; i < N; i++) in_q[i] <= {mag[i], LOGN'(i)};
  end

  for (genvar s = 0; s < NSTAGE; s++) begin : g_stage
    localparam int unsigned K = 1 << stage_phase(s);
    localparam int unsigned J = stage_dist(s);
    key_t si [N];   // stage input
    key_t cx [N];   // after compare-exchange
    key_t so [N];   // stage output (registered at the end of a phase)
    if (s == 0) begin : g_first
      assign si = in_q;
    end else begin : g_next
      assign si = g_stage[s-1].so;
    end
    for (genvar i = 0; i < N; i++) begin : g_cx
      localparam int unsigned L = i ^ J;
      if (L > i) begin : g_pair
        localparam bit ASC = ((i & K) == 0);
        logic swap;
        assign swap = ASC ? (si[i] > si[L]) : (si[i] < si[L]);
        assign cx[i] = swap ? si[L] : si[i];
        assign cx[L] = swap ? si[i] : si[L];
      end
    end
    if (stage_last(s)) begin : g_reg
      always_ff @(posedge clk) so <= cx;
    end else begin : g_wire
      assign so = cx;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld_q <= '0;
    else        vld_q <= {vld_q[LOGN-1:0], load};
  end

  assign done = vld_q[LOGN];
  for (genvar i = 0; i < N; i++) begin : g_out
    assign order[i] = g_stage[NSTAGE-1].so[i][LOGN-1:0];
  end

endmodule
