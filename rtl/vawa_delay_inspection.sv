// vawa_delay_inspection: latency lookup of the variation-aware way aligned
// (VAWA) cache with non-uniform set grouping.
//
// In the way-aligned CNFET layout the latency differs from set to set. Rather
// than one delay register per set, the cache keeps, for each of two low-latency
// groups (latency L1 and L2), PAIRS register pairs (start, end) that mark runs
// of consecutive sets in that group. A set belongs to a run when
// start <= set < end (the comparators "≥" and "<" of the lookup). All other
// sets belong to the third group, which runs at the worst latency Lmax and
// needs no registers. The runs are computed offline and written at
// initialisation through cfg_*; an empty run has start = end.
//
// One row of PAIRS comparator pairs is shared by the groups: the inspection
// controller compares the L1 runs in the first cycle after start and, only if
// none matches, the L2 runs in the second. The faster group is looked at first,
// so its answer is there early; L2 and Lmax are known in cycle 2, well before
// any latency of 6 or more cycles expires. lat_valid rises with the answer and
// stays high, with lat, until the next start.
module vawa_delay_inspection #(
  parameter int unsigned IDX_W     = 12,
  parameter int unsigned PAIRS     = 16,
  parameter int unsigned LAT_W     = 4,
  parameter int unsigned RESET_L1  = 6,
  parameter int unsigned RESET_L2  = 7,
  parameter int unsigned RESET_MAX = 10,
  localparam int unsigned PAIR_W   = $clog2(PAIRS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration: segment registers and latency registers
  input  logic              cfg_seg_we,
  input  logic              cfg_grp,      // 0: L1 group, 1: L2 group
  input  logic [PAIR_W-1:0] cfg_pair,
  input  logic              cfg_end,      // 0: start index, 1: end index
  input  logic [IDX_W-1:0]  cfg_idx,
  input  logic              cfg_lat_we,
  input  logic [1:0]        cfg_lat_sel,  // 0: L1, 1: L2, 2: Lmax
  input  logic [LAT_W-1:0]  cfg_lat,
  // lookup
  input  logic              start,
  input  logic [IDX_W-1:0]  set_idx,
  output logic              lat_valid,
  output logic [LAT_W-1:0]  lat,
  output logic [1:0]        group       // 0: L1, 1: L2, 2: Lmax
);

  typedef enum logic [1:0] {S_IDLE, S_G1, S_G2, S_DONE} state_e;

  logic [IDX_W-1:0] seg_start [2][PAIRS];
  logic [IDX_W-1:0] seg_end   [2][PAIRS];
  logic [LAT_W-1:0] lat_reg   [3];

  state_e           state;
  logic [IDX_W-1:0] idx_q;
  logic [1:0]       group_q;
  logic             row;        // register row fed to the shared comparators
  logic             match;

  // Segment and latency registers.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < 2; g++)
        for (int p = 0; p < PAIRS; p++) begin
          seg_start[g][p] <= '0;
          seg_end[g][p]   <= '0;
        end
      lat_reg[0] <= LAT_W'(RESET_L1);
      lat_reg[1] <= LAT_W'(RESET_L2);
      lat_reg[2] <= LAT_W'(RESET_MAX);
    end else begin
      if (cfg_seg_we) begin
        if (cfg_end) seg_end[cfg_grp][cfg_pair]   <= cfg_idx;
        else         seg_start[cfg_grp][cfg_pair] <= cfg_idx;
      end
      if (cfg_lat_we && cfg_lat_sel != 2'd3) lat_reg[cfg_lat_sel] <= cfg_lat;
    end
  end

  // Shared comparator row: the inspection controller selects which group's
  // registers it sees.
  always_comb begin
    row   = (state == S_G2);
    match = 1'b0;
    for (int p = 0; p < PAIRS; p++)
      match |= (idx_q >= seg_start[row][p]) && (idx_q < seg_end[row][p]);
  end

  // Inspection controller.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      idx_q   <= '0;
      group_q <= 2'd2;
    end else if (start) begin
      state <= S_G1;
      idx_q <= set_idx;
    end else begin
      unique case (state)
        S_G1: begin
          if (match) begin
            group_q <= 2'd0;
            state   <= S_DONE;
          end else begin
            state <= S_G2;
          end
        end
        S_G2: begin
          group_q <= match ? 2'd1 : 2'd2;
          state   <= S_DONE;
        end
        default: ;
      endcase
    end
  end

  // The answer is visible in the cycle of the comparison that found it.
  always_comb begin
    lat_valid = 1'b0;
    group     = group_q;
    unique case (state)
      S_G1:    if (match) begin lat_valid = 1'b1; group = 2'd0; end
      S_G2:    begin lat_valid = 1'b1; group = match ? 2'd1 : 2'd2; end
      S_DONE:  lat_valid = 1'b1;
      default: ;
    endcase
    lat = lat_reg[group];
  end

endmodule
