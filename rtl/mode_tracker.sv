// mode_tracker -- most frequently occupied state configuration of a trial.
//
// The p-computer samples a Boltzmann-like distribution, so the ground state is
// expected to be the configuration it occupies most often; the output of a
// trial is therefore the state seen in the most iterations. Counting every
// possible configuration is impossible in hardware, so this block keeps a
// table of DEPTH (configuration, count, error) entries and updates it with the
// Space-Saving heavy-hitter rule, one sample per cycle:
//   * a sample already in the table increments its count;
//   * otherwise it takes a free entry with count 1;
//   * otherwise it replaces the entry with the smallest count c, getting count
//     c+1 and error c (its true count lies in [count-error, count]).
// With at most DEPTH distinct configurations in a trial the counts are exact
// (all errors 0). Otherwise every configuration occurring more than
// samples/DEPTH times is guaranteed to be in the table. The table size and
// this counting method are this design's choices.
//
// Interface / timing: clear empties the table (start of a trial). Each cycle
// with sample_valid counts sample. mode_state / mode_count / mode_err are
// combinational from the table: the entry with the largest count, the lowest
// index on a tie. evictions counts replacements since clear.
module mode_tracker #(
  parameter int unsigned W     = 512,
  parameter int unsigned DEPTH = 32,
  parameter int unsigned CNT_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             sample_valid,
  input  logic [W-1:0]     sample,
  output logic [W-1:0]     mode_state,
  output logic [CNT_W-1:0] mode_count,
  output logic [CNT_W-1:0] mode_err,
  output logic [CNT_W-1:0] evictions
);

  localparam int unsigned IDX_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]     ent_state [DEPTH];
  logic [CNT_W-1:0] ent_cnt   [DEPTH];
  logic [CNT_W-1:0] ent_err   [DEPTH];
  logic             ent_vld   [DEPTH];

  // lookup: matching entry, first free entry, entry with the smallest count
  logic             hit, has_free;
  logic [IDX_W-1:0] hit_idx, free_idx, min_idx, max_idx;

  always_comb begin
    hit      = 1'b0;
    has_free = 1'b0;
    hit_idx  = '0;
    free_idx = '0;
    min_idx  = '0;
    max_idx  = '0;
    for (int e = DEPTH - 1; e >= 0; e--) begin
      if (ent_vld[e] && ent_state[e] == sample) begin
        hit     = 1'b1;
        hit_idx = IDX_W'(e);
      end
      if (!ent_vld[e]) begin
        has_free = 1'b1;
        free_idx = IDX_W'(e);
      end
    end
    for (int e = 1; e < DEPTH; e++) begin
      if (ent_cnt[e] < ent_cnt[min_idx]) min_idx = IDX_W'(e);
      if (ent_vld[e] && (!ent_vld[max_idx] || ent_cnt[e] > ent_cnt[max_idx]))
        max_idx = IDX_W'(e);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < DEPTH; e++) begin
        ent_state[e] <= '0;
        ent_cnt[e]   <= '0;
        ent_err[e]   <= '0;
        ent_vld[e]   <= 1'b0;
      end
      evictions <= '0;
    end else if (clear) begin
      for (int e = 0; e < DEPTH; e++) begin
        ent_cnt[e] <= '0;
        ent_err[e] <= '0;
        ent_vld[e] <= 1'b0;
      end
      evictions <= '0;
    end else if (sample_valid) begin
      if (hit) begin
        if (ent_cnt[hit_idx] != '1) ent_cnt[hit_idx] <= ent_cnt[hit_idx] + 1'b1;
      end else if (has_free) begin
        ent_state[free_idx] <= sample;
        ent_cnt[free_idx]   <= CNT_W'(1);
        ent_err[free_idx]   <= '0;
        ent_vld[free_idx]   <= 1'b1;
      end else begin
        ent_state[min_idx] <= sample;
        ent_cnt[min_idx]   <= ent_cnt[min_idx] + 1'b1;
        ent_err[min_idx]   <= ent_cnt[min_idx];
        if (evictions != '1) evictions <= evictions + 1'b1;
      end
    end
  end

  assign mode_state = ent_vld[max_idx] ? ent_state[max_idx] : '0;
  assign mode_count = ent_vld[max_idx] ? ent_cnt[max_idx]   : '0;
  assign mode_err   = ent_vld[max_idx] ? ent_err[max_idx]   : '0;

endmodule
