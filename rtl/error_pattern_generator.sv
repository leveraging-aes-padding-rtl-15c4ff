// error_pattern_generator: the ORBGRAND error pattern generator.
//
// Chain of reliability sorter -> pattern generator -> error generator, as in
// the receiver diagram. load takes the LLR magnitudes of a new block: the
// sorter ranks its bits and the pattern generator restarts at logistic
// weight 1. ready rises when the ranking is available (log2(N)+1 cycles
// after load). Each enable while ready and not exhausted registers the
// error vector of the current pattern into err, pulses err_valid one cycle
// later and advances the pattern generator, so one new pattern is available
// per cycle. exhausted rises once all patterns up to LW_MAX (at most HW_MAX
// flipped bits) have been issued. err_lw gives the logistic weight of the
// pattern in err.
module error_pattern_generator #(
  parameter int unsigned N      = 128,
  parameter int unsigned MAG_W  = 6,
  parameter int unsigned HW_MAX = 8,
  parameter int unsigned LW_MAX = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  logic [N-1:0][MAG_W-1:0] mag,
  input  logic                    enable,
  output logic                    ready,
  output logic                    err_valid,
  output logic [N-1:0]            err,
  output logic [15:0]             err_lw,
  output logic                    exhausted
);

  logic                                sort_done;
  logic [N-1:0][$clog2(N)-1:0]         order;
  logic [HW_MAX-1:0][$clog2(N+1)-1:0]  parts;
  logic [$clog2(HW_MAX+1)-1:0]         num_parts;
  logic [15:0]                         lw;
  logic                                pg_exhausted;
  logic [N-1:0]                        err_c;
  logic                                fire;

  reliability_sorter #(.N(N), .MAG_W(MAG_W)) u_sorter (
    .clk, .rst_n, .load, .mag, .done(sort_done), .order
  );

  orb_pattern_gen #(.N(N), .HW_MAX(HW_MAX), .LW_MAX(LW_MAX)) u_pattern (
    .clk, .rst_n, .init(load), .next(fire), .parts, .num_parts, .lw,
    .exhausted(pg_exhausted)
  );

  error_gen #(.N(N), .HW_MAX(HW_MAX)) u_error (
    .order, .parts, .err(err_c)
  );

  assign fire = enable && ready && !pg_exhausted;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ready     <= 1'b0;
      err_valid <= 1'b0;
      err       <= '0;
      err_lw    <= '0;
    end else begin
      err_valid <= fire;
      if (load)           ready <= 1'b0;
      else if (sort_done) ready <= 1'b1;
      if (fire) begin
        err    <= err_c;
        err_lw <= lw;
      end
    end
  end

  assign exhausted = pg_exhausted;

  // a pattern is only requested once the ranking is known
  property p_enable_when_ready;
    @(posedge clk) disable iff (!rst_n) (enable && !pg_exhausted) |-> ready;
  endproperty
  a_enable_when_ready: assert property (p_enable_when_ready)
    else $error("error_pattern_generator: enable before the sort finished");

  logic unused;
  assign unused = ^num_parts;

endmodule
