// cnfet_llc: variation-aware last level cache for a CNFET array whose access
// latency varies with the position of the data, caused by CNT density
// variation.
//
// The array is WAYS ways of SETS sets of LINE_BYTES-byte lines (2 MB, 8 ways,
// 64 B, 4096 sets by default). Instead of clocking every access at the worst
// latency, the cache releases read data after the latency of the part of the
// array that holds it:
//   LAYOUT_VASA (set aligned layout): every way has its own latency, held in
//     vasa_delay_regs and selected by the tag comparison. With DS_EN the
//     ds_controller moves recently used blocks into the fastest pair of ways
//     (latency-aware data shuffling), and also chooses the victim on a miss.
//   LAYOUT_VAWA (way aligned layout): every set has its own latency; the
//     vawa_delay_inspection unit finds it from the set index and a small table
//     of set-index runs (non-uniform grouping). Replacement is plain LRU.
// In both layouts a delay_controller counts the cycles of the access and
// enables the output multiplexer when the latency is reached.
//
// Request side: req_valid/req_ready handshake with a line-aligned byte address
// and, for writes, a full line. Every request gets exactly one rsp_valid pulse;
// there is no back-pressure on responses. A read hit answers lat cycles after
// the accepting edge (lat = latency of the hit way or set; at least 2), a read
// miss answers when memory returns the line, a write answers when the line is
// written (hit) or when memory takes the write (miss). Memory side: a single
// outstanding line request (mem_req_*, valid/ready) and a response pulse
// mem_rsp_valid with the line.
//
// Own choices of this implementation, where the architecture leaves them
// open: writes are full lines, write-through, and do not allocate on a miss;
// one request is in flight at a time and a shuffle finishes before the next
// request is taken (two cycles: load the buffers, write the ways); after reset
// the cache clears all valid bits, one set per cycle, before init_done rises.
// Latency registers are written through cfg_* (address map in llc_pkg).
module cnfet_llc
  import llc_pkg::*;
#(
  parameter layout_e     LAYOUT     = LAYOUT_VASA,
  parameter bit          DS_EN      = 1'b1,
  parameter int unsigned WAYS       = DEF_WAYS,
  parameter int unsigned SETS       = DEF_SETS,
  parameter int unsigned LINE_BYTES = DEF_LINE_BYTES,
  parameter int unsigned ADDR_W     = DEF_ADDR_W,
  parameter int unsigned LAT_W      = DEF_LAT_W,
  parameter int unsigned VAWA_PAIRS = DEF_VAWA_PAIRS,
  localparam int unsigned DATA_W = LINE_BYTES * 8,
  localparam int unsigned OFF_W  = $clog2(LINE_BYTES),
  localparam int unsigned IDX_W  = $clog2(SETS),
  localparam int unsigned TAG_W  = ADDR_W - IDX_W - OFF_W,
  localparam int unsigned WAY_W  = $clog2(WAYS),
  localparam int unsigned GROUPS = WAYS / 2,
  localparam int unsigned GRP_W  = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              init_done,
  // latency configuration
  input  logic              cfg_we,
  input  logic [7:0]        cfg_addr,
  input  logic [15:0]       cfg_wdata,
  // requests from the upper level
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  logic [ADDR_W-1:0] req_addr,
  input  logic [DATA_W-1:0] req_wdata,
  output logic              rsp_valid,
  output logic [DATA_W-1:0] rsp_data,
  output logic              rsp_hit,
  output logic [WAY_W-1:0]  rsp_way,
  output logic              shuffle_active,
  // main memory
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [ADDR_W-1:0] mem_req_addr,
  output logic [DATA_W-1:0] mem_req_wdata,
  input  logic              mem_rsp_valid,
  input  logic [DATA_W-1:0] mem_rsp_data
);

  localparam bit USE_DS = (LAYOUT == LAYOUT_VASA) && DS_EN;

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_LOOKUP, S_HIT_WAIT, S_MISS_REQ, S_MISS_WAIT,
    S_SH_CAP, S_SH_WR, S_WR_MEM
  } state_e;

  state_e state;

  // ------------------------------------------------------------------
  // Request registers
  // ------------------------------------------------------------------
  logic              accept;
  logic [IDX_W-1:0]  req_idx;
  logic [IDX_W-1:0]  idx_q, init_idx;
  logic [TAG_W-1:0]  tag_q;
  logic              we_q;
  logic [DATA_W-1:0] wdata_q, fill_q;
  logic              hit_q;
  logic [WAYS-1:0]   hit_vec_q;
  logic [WAY_W-1:0]  hit_way_q;

  assign req_ready = (state == S_IDLE);
  assign accept    = req_valid && req_ready;
  assign req_idx   = req_addr[OFF_W +: IDX_W];
  assign init_done = (state != S_INIT);

  // ------------------------------------------------------------------
  // Cache ways (decoder, tag array, data array)
  // ------------------------------------------------------------------
  logic              way_rvalid [WAYS];
  logic [TAG_W-1:0]  way_rtag   [WAYS];
  logic [DATA_W-1:0] way_rdata  [WAYS];
  logic              way_we     [WAYS];
  logic              way_wvalid [WAYS];
  logic [TAG_W-1:0]  way_wtag   [WAYS];
  logic [DATA_W-1:0] way_wdata  [WAYS];
  logic [IDX_W-1:0]  way_widx;

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    way_array #(.SETS(SETS), .TAG_W(TAG_W), .DATA_W(DATA_W)) u_way (
      .clk      (clk),
      .rd_en    (accept),
      .rd_idx   (req_idx),
      .rd_valid (way_rvalid[w]),
      .rd_tag   (way_rtag[w]),
      .rd_data  (way_rdata[w]),
      .wr_en    (way_we[w]),
      .wr_idx   (way_widx),
      .wr_valid (way_wvalid[w]),
      .wr_tag   (way_wtag[w]),
      .wr_data  (way_wdata[w])
    );
  end

  // ------------------------------------------------------------------
  // Tag comparison
  // ------------------------------------------------------------------
  logic [WAYS-1:0]  hit_vec;
  logic             hit;
  logic [WAY_W-1:0] hit_way;

  tag_compare #(.WAYS(WAYS), .TAG_W(TAG_W)) u_cmp (
    .req_tag   (tag_q),
    .way_tag   (way_rtag),
    .way_valid (way_rvalid),
    .hit_vec   (hit_vec),
    .hit       (hit),
    .hit_way   (hit_way)
  );

  // ------------------------------------------------------------------
  // Latency source and delay controller
  // ------------------------------------------------------------------
  logic             lat_valid;
  logic [LAT_W-1:0] lat;
  logic             dc_en, dc_busy;
  logic [LAT_W-1:0] dc_count;

  if (LAYOUT == LAYOUT_VASA) begin : g_vasa
    vasa_delay_regs #(.WAYS(WAYS), .LAT_W(LAT_W), .RESET_LAT(VASA_LAT_MAX)) u_dregs (
      .clk     (clk),
      .rst_n   (rst_n),
      .cfg_we  (cfg_we && !cfg_addr[7]),
      .cfg_way (cfg_addr[WAY_W-1:0]),
      .cfg_lat (cfg_wdata[LAT_W-1:0]),
      .hit_vec (hit_vec_q),
      .lat     (lat)
    );
    assign lat_valid = (state == S_HIT_WAIT);
  end else begin : g_vawa
    localparam int unsigned PAIR_W = $clog2(VAWA_PAIRS);
    logic       insp_valid;
    logic [1:0] insp_group;
    vawa_delay_inspection #(
      .IDX_W(IDX_W), .PAIRS(VAWA_PAIRS), .LAT_W(LAT_W),
      .RESET_L1(VAWA_LAT_L1), .RESET_L2(VAWA_LAT_L2), .RESET_MAX(VAWA_LAT_MAX)
    ) u_insp (
      .clk         (clk),
      .rst_n       (rst_n),
      .cfg_seg_we  (cfg_we && cfg_addr[7]),
      .cfg_grp     (cfg_addr[6]),
      .cfg_pair    (cfg_addr[PAIR_W:1]),
      .cfg_end     (cfg_addr[0]),
      .cfg_idx     (cfg_wdata[IDX_W-1:0]),
      .cfg_lat_we  (cfg_we && !cfg_addr[7]),
      .cfg_lat_sel (cfg_addr[1:0]),
      .cfg_lat     (cfg_wdata[LAT_W-1:0]),
      .start       (accept),
      .set_idx     (req_idx),
      .lat_valid   (insp_valid),
      .lat         (lat),
      .group       (insp_group)
    );
    assign lat_valid = (state == S_HIT_WAIT) && insp_valid;
  end

  delay_controller #(.LAT_W(LAT_W)) u_dc (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (accept),
    .cancel    (state == S_LOOKUP && !hit),
    .lat_valid (lat_valid),
    .lat       (lat),
    .enable    (dc_en),
    .busy      (dc_busy),
    .count     (dc_count)
  );

  // ------------------------------------------------------------------
  // Replacement / data shuffling
  // ------------------------------------------------------------------
  logic              shuffle;
  logic [GROUPS-1:0] buf_load;
  logic [WAY_W-1:0]  buf_src  [GROUPS];
  logic [WAYS-1:0]   sh_wr, sh_new;
  logic [GRP_W-1:0]  sh_buf   [WAYS];
  logic [WAY_W-1:0]  victim;

  if (USE_DS) begin : g_ds
    logic [WAYS-1:0] t_q, t_new;
    ds_controller #(.WAYS(WAYS), .SETS(SETS)) u_ds (
      .clk          (clk),
      .rd_en        (accept),
      .rd_idx       (req_idx),
      .upd_en       ((state == S_HIT_WAIT && dc_en && !shuffle) || state == S_SH_WR),
      .upd_idx      (idx_q),
      .init_en      (state == S_INIT),
      .init_idx     (init_idx),
      .t_q          (t_q),
      .hit          (hit_q),
      .hit_way      (hit_way_q),
      .shuffle      (shuffle),
      .t_new        (t_new),
      .buf_load     (buf_load),
      .buf_src      (buf_src),
      .way_wr       (sh_wr),
      .way_from_new (sh_new),
      .way_buf      (sh_buf),
      .victim       (victim)
    );
  end else begin : g_lru
    lru_replacement #(.WAYS(WAYS), .SETS(SETS)) u_lru (
      .clk      (clk),
      .rd_en    (accept),
      .rd_idx   (req_idx),
      .upd_en   ((state == S_HIT_WAIT && dc_en) || (state == S_MISS_WAIT && mem_rsp_valid)),
      .upd_idx  (idx_q),
      .upd_way  (hit_q ? hit_way_q : victim),
      .init_en  (state == S_INIT),
      .init_idx (init_idx),
      .victim   (victim)
    );
    assign shuffle  = 1'b0;
    assign buf_load = '0;
    assign sh_wr    = '0;
    assign sh_new   = '0;
    for (genvar g = 0; g < GROUPS; g++) begin : g_tie_buf
      assign buf_src[g] = '0;
    end
    for (genvar w = 0; w < WAYS; w++) begin : g_tie_way
      assign sh_buf[w] = '0;
    end
  end

  // Shuffle buffers: one line (with tag and valid bit) per way group.
  logic [DATA_W-1:0] buf_data  [GROUPS];
  logic [TAG_W-1:0]  buf_tag   [GROUPS];
  logic              buf_valid [GROUPS];

  always_ff @(posedge clk) begin
    if (state == S_SH_CAP) begin
      for (int unsigned g = 0; g < GROUPS; g++) begin
        if (buf_load[g]) begin
          buf_valid[g] <= way_rvalid[buf_src[g]];
          buf_tag[g]   <= way_rtag[buf_src[g]];
          // a written hit block carries the new line
          buf_data[g]  <= (hit_q && we_q && buf_src[g] == hit_way_q) ? wdata_q
                                                                      : way_rdata[buf_src[g]];
        end
      end
    end
  end

  // ------------------------------------------------------------------
  // Way write ports
  // ------------------------------------------------------------------
  always_comb begin
    way_widx = (state == S_INIT) ? init_idx : idx_q;
    for (int unsigned w = 0; w < WAYS; w++) begin
      way_we[w]     = 1'b0;
      way_wvalid[w] = 1'b1;
      way_wtag[w]   = tag_q;
      way_wdata[w]  = wdata_q;
      unique case (state)
        S_INIT: begin
          way_we[w]     = 1'b1;
          way_wvalid[w] = 1'b0;
        end
        S_HIT_WAIT: way_we[w] = dc_en && we_q && (WAY_W'(w) == hit_way_q);
        S_MISS_WAIT: begin
          way_we[w]    = !USE_DS && mem_rsp_valid && (WAY_W'(w) == victim);
          way_wdata[w] = mem_rsp_data;
        end
        S_SH_WR: begin
          way_we[w] = sh_wr[w];
          if (sh_new[w]) begin
            way_wdata[w] = fill_q;
          end else begin
            way_wvalid[w] = buf_valid[sh_buf[w]];
            way_wtag[w]   = buf_tag[sh_buf[w]];
            way_wdata[w]  = buf_data[sh_buf[w]];
          end
        end
        default: ;
      endcase
    end
  end

  // ------------------------------------------------------------------
  // Control
  // ------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_INIT;
      init_idx  <= '0;
      idx_q     <= '0;
      tag_q     <= '0;
      we_q      <= 1'b0;
      wdata_q   <= '0;
      fill_q    <= '0;
      hit_q     <= 1'b0;
      hit_vec_q <= '0;
      hit_way_q <= '0;
    end else begin
      unique case (state)
        S_INIT: begin
          init_idx <= init_idx + 1'b1;
          if (init_idx == IDX_W'(SETS - 1)) state <= S_IDLE;
        end
        S_IDLE: begin
          if (accept) begin
            idx_q   <= req_idx;
            tag_q   <= req_addr[ADDR_W-1 -: TAG_W];
            we_q    <= req_we;
            wdata_q <= req_wdata;
            state   <= S_LOOKUP;
          end
        end
        S_LOOKUP: begin
          hit_q     <= hit;
          hit_vec_q <= hit_vec;
          hit_way_q <= hit_way;
          if (hit)       state <= S_HIT_WAIT;
          else if (we_q) state <= S_WR_MEM;
          else           state <= S_MISS_REQ;
        end
        S_HIT_WAIT: begin
          if (dc_en) begin
            if (shuffle)   state <= S_SH_CAP;
            else if (we_q) state <= S_WR_MEM;
            else           state <= S_IDLE;
          end
        end
        S_MISS_REQ: if (mem_req_ready) state <= S_MISS_WAIT;
        S_MISS_WAIT: begin
          if (mem_rsp_valid) begin
            fill_q <= mem_rsp_data;
            state  <= USE_DS ? S_SH_CAP : S_IDLE;
          end
        end
        S_SH_CAP: state <= S_SH_WR;
        S_SH_WR:  state <= (we_q && hit_q) ? S_WR_MEM : S_IDLE;
        S_WR_MEM: if (mem_req_ready) state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------------
  // Outputs
  // ------------------------------------------------------------------
  always_comb begin
    rsp_valid = 1'b0;
    rsp_data  = way_rdata[hit_way_q];   // output multiplexer
    rsp_hit   = hit_q;
    rsp_way   = hit_q ? hit_way_q : victim;
    unique case (state)
      S_HIT_WAIT:  rsp_valid = dc_en;
      S_MISS_WAIT: begin
        rsp_valid = mem_rsp_valid;
        rsp_data  = mem_rsp_data;
      end
      S_WR_MEM:    rsp_valid = mem_req_ready && !hit_q;
      default: ;
    endcase
  end

  assign shuffle_active = (state == S_SH_CAP) || (state == S_SH_WR);
  assign mem_req_valid  = (state == S_MISS_REQ) || (state == S_WR_MEM);
  assign mem_req_we     = (state == S_WR_MEM);
  assign mem_req_addr   = {tag_q, idx_q, {OFF_W{1'b0}}};
  assign mem_req_wdata  = wdata_q;

  // ------------------------------------------------------------------
  // Protocol rules
  // ------------------------------------------------------------------
  a_mem_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_addr) && $stable(mem_req_we));
  a_rsp_not_idle: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid |-> state != S_IDLE && state != S_INIT);
  a_hit_onehot: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_LOOKUP |-> $onehot0(hit_vec));
  a_dc_busy: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_HIT_WAIT |-> dc_busy);

endmodule
