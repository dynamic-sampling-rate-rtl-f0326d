// dsr_raster_unit: the Dynamic Sampling Rate additions to the raster pipeline
// of a tile-based GPU, with the sequencing of one tile through them.
//
// For each tile handed over by the tile scheduler the unit
//   1. looks the tile's sampling-rate state up in the Sampling Rate Table;
//   2. for every primitive of the tile, walks the tile's superquads at that
//      rate and offers their sample positions to the baseline rasterizer
//      (coverage, depth test, fragment shading and blending stay outside);
//   3. lets blending read and write the Color Buffer once per superfragment;
//   4. on `tile_end` (all fragments of the tile blended) upsamples the Color
//      Buffer by replicating each superfragment colour over its pixels;
//   5. flushes the 16 tile rows to memory and, at the same time, starts the
//      Frequency Analysis Unit on the tile. The FAU reads the Color Buffer
//      only during its first pass; once that and the flush are over the next
//      tile may start, and the FAU's second pass, MaxC, state update and SRT
//      write overlap the rendering of the next tile.
// The next tile waits (stall) when the FAU is still busy with the previous
// tile at step 5, or when it is the very tile the FAU is still analysing (so
// the SRT lookup sees the updated state).
//
// `sq_sx`/`sq_sy` are the superfragment indices of lane 0, always even, so
// their bit 0 is constant 0.
// Interfaces are valid/ready where data flows (tile, superquads, flush) and
// single-cycle pulses for events. After reset the SRT spends NUM_TILES cycles
// setting every tile to 1x; `tile_ready` stays low meanwhile. The blocks,
// their connections and the overlap of analysis with rendering follow the
// paper's raster pipeline; the handshakes and the stall rules are this
// design's own.
module dsr_raster_unit
  import dsr_pkg::*;
#(
  parameter int unsigned NUM_TILES = 8100,
  parameter int unsigned TILE_X_W  = 7,
  parameter int unsigned TILE_Y_W  = 7,
  localparam int unsigned AW       = $clog2(NUM_TILES),
  localparam int unsigned XW       = TILE_X_W + IDX_W + 1,
  localparam int unsigned YW       = TILE_Y_W + IDX_W + 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  dsr_params_t         params,
  output logic                init_busy,
  // tile scheduler
  input  logic                tile_valid,
  output logic                tile_ready,
  input  logic [AW-1:0]       tile_id,
  input  logic [TILE_X_W-1:0] tile_x,
  input  logic [TILE_Y_W-1:0] tile_y,
  output logic                tile_active,   // a tile is being rendered
  output sr_level_e           tile_level,    // its sampling-rate state
  // primitive fetcher: one request per primitive of the active tile
  input  logic                prim_valid,
  output logic                prim_ready,
  // superquads to the baseline rasterizer
  output logic                sq_valid,
  input  logic                sq_ready,
  output logic                sq_last,
  output logic [IDX_W-1:0]    sq_sx,
  output logic [IDX_W-1:0]    sq_sy,
  output logic [3:0]          sq_mask,
  output logic [3:0][XW-1:0]  sq_x2,
  output logic [3:0][YW-1:0]  sq_y2,
  // blending access to the Color Buffer, in superfragment coordinates
  input  logic                bl_rd_en,
  input  logic [IDX_W-1:0]    bl_rd_sx,
  input  logic [IDX_W-1:0]    bl_rd_sy,
  output rgba_t               bl_rd_data,
  input  logic                bl_wr_en,
  input  logic [IDX_W-1:0]    bl_wr_sx,
  input  logic [IDX_W-1:0]    bl_wr_sy,
  input  rgba_t               bl_wr_data,
  input  logic                tile_end,
  // tile flush to memory, one 64-byte row per transfer
  output logic                fl_valid,
  input  logic                fl_ready,
  output logic [AW-1:0]       fl_tile,
  output logic [IDX_W-1:0]    fl_row_idx,
  output color_row_t          fl_row,
  output logic                fl_tile_done,  // pulse after the last row
  // frequency analysis results
  output logic                fau_busy,
  output logic                fau_done,
  output logic [AW-1:0]       fau_tile,
  output sr_level_e           fau_old_level,
  output sr_level_e           fau_new_level,
  output sr_decision_e        fau_decision,
  output mag_t                fau_maxc_reduce,
  output mag_t                fau_maxc_increase,
  // mechanism monitors
  output logic                stall_fau_busy,   // finished tile waits for the FAU
  output logic                stall_same_tile   // new tile waits for its own analysis
);

  typedef enum logic [2:0] {T_IDLE, T_LOOKUP, T_RENDER, T_UPSAMPLE, T_WAIT_FAU, T_DRAIN} tstate_e;

  tstate_e        tstate;
  logic [AW-1:0]  cur_tile;
  logic [TILE_X_W-1:0] cur_x;
  logic [TILE_Y_W-1:0] cur_y;
  sr_level_e      level;

  // SRT wiring
  logic           srt_a_rd;
  sr_level_e      srt_a_data;
  logic           srt_b_rd, srt_b_wr;
  logic [AW-1:0]  srt_b_addr;
  sr_level_e      srt_b_wdata, srt_b_rdata;

  // Color Buffer wiring
  logic           up_start, up_busy, up_done;
  logic           fau_cb_rd;
  logic [IDX_W-1:0] fau_cb_addr;
  color_row_t     fau_cb_row;

  // FAU wiring
  logic           fau_start, fau_cb_done;
  logic [AW-1:0]  fau_tile_inflight;   // tile the FAU is (or was last) analysing

  // flush
  logic           fl_rd_pending, fl_all_done, fau_read_done;
  logic           fl_rd_en;

  assign tile_active = (tstate == T_RENDER);
  assign tile_level  = level;
  assign tile_ready  = (tstate == T_IDLE) && !init_busy
                       && !(fau_busy && fau_tile_inflight == tile_id);
  assign stall_same_tile = (tstate == T_IDLE) && !init_busy && tile_valid
                           && fau_busy && fau_tile_inflight == tile_id;
  assign stall_fau_busy  = (tstate == T_WAIT_FAU);
  assign srt_a_rd    = tile_valid && tile_ready;
  assign prim_ready  = (tstate == T_RENDER) && !sq_valid;
  assign up_start    = (tstate == T_RENDER) && tile_end;
  assign fau_start   = (tstate == T_WAIT_FAU) && !fau_busy;

  sampling_rate_table #(.NUM_TILES(NUM_TILES)) u_srt (
    .clk      (clk),
    .rst_n    (rst_n),
    .init_busy(init_busy),
    .a_rd_en  (srt_a_rd),
    .a_addr   (tile_id),
    .a_rd_data(srt_a_data),
    .b_rd_en  (srt_b_rd),
    .b_wr_en  (srt_b_wr),
    .b_addr   (srt_b_addr),
    .b_wr_data(srt_b_wdata),
    .b_rd_data(srt_b_rdata));

  superquad_gen #(.TILE_X_W(TILE_X_W), .TILE_Y_W(TILE_Y_W)) u_sqgen (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (prim_valid && prim_ready),
    .level   (level),
    .tile_x  (cur_x),
    .tile_y  (cur_y),
    .sq_valid(sq_valid),
    .sq_ready(sq_ready),
    .sq_last (sq_last),
    .sq_sx   (sq_sx),
    .sq_sy   (sq_sy),
    .sq_mask (sq_mask),
    .sq_x2   (sq_x2),
    .sq_y2   (sq_y2));

  color_buffer u_cb (
    .clk       (clk),
    .rst_n     (rst_n),
    .level     (level),
    .px_rd_en  (bl_rd_en),
    .px_rd_sx  (bl_rd_sx),
    .px_rd_sy  (bl_rd_sy),
    .px_rd_data(bl_rd_data),
    .px_wr_en  (bl_wr_en && tstate == T_RENDER),
    .px_wr_sx  (bl_wr_sx),
    .px_wr_sy  (bl_wr_sy),
    .px_wr_data(bl_wr_data),
    .up_start  (up_start),
    .up_busy   (up_busy),
    .up_done   (up_done),
    .rd_a_en   (fl_rd_en),
    .rd_a_addr (fl_row_idx),
    .rd_a_row  (fl_row),
    .rd_b_en   (fau_cb_rd),
    .rd_b_addr (fau_cb_addr),
    .rd_b_row  (fau_cb_row));

  freq_analysis_unit #(.NUM_TILES(NUM_TILES)) u_fau (
    .clk              (clk),
    .rst_n            (rst_n),
    .params           (params),
    .start            (fau_start),
    .tile_id          (cur_tile),
    .busy             (fau_busy),
    .cb_done          (fau_cb_done),
    .done             (fau_done),
    .cb_rd_en         (fau_cb_rd),
    .cb_rd_addr       (fau_cb_addr),
    .cb_rd_row        (fau_cb_row),
    .srt_rd_en        (srt_b_rd),
    .srt_wr_en        (srt_b_wr),
    .srt_addr         (srt_b_addr),
    .srt_wr_data      (srt_b_wdata),
    .srt_rd_data      (srt_b_rdata),
    .res_tile         (fau_tile),
    .res_old_level    (fau_old_level),
    .res_new_level    (fau_new_level),
    .res_decision     (fau_decision),
    .res_maxc_reduce  (fau_maxc_reduce),
    .res_maxc_increase(fau_maxc_increase));

  // flush: read a row, present it until accepted, then the next one
  assign fl_tile  = cur_tile;
  assign fl_rd_en = (tstate == T_DRAIN) && !fl_valid && !fl_rd_pending && !fl_all_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tstate            <= T_IDLE;
      cur_tile          <= '0;
      cur_x             <= '0;
      cur_y             <= '0;
      level             <= SR_1X;
      fau_tile_inflight <= '0;
      fl_valid          <= 1'b0;
      fl_rd_pending     <= 1'b0;
      fl_all_done       <= 1'b0;
      fl_row_idx        <= '0;
      fl_tile_done      <= 1'b0;
      fau_read_done     <= 1'b0;
    end else begin
      fl_tile_done <= 1'b0;
      unique case (tstate)
        T_IDLE: begin
          if (tile_valid && tile_ready) begin
            cur_tile <= tile_id;
            cur_x    <= tile_x;
            cur_y    <= tile_y;
            tstate   <= T_LOOKUP;
          end
        end
        T_LOOKUP: begin
          level  <= srt_a_data;
          tstate <= T_RENDER;
        end
        T_RENDER: begin
          if (tile_end) tstate <= T_UPSAMPLE;
        end
        T_UPSAMPLE: begin
          if (up_done) tstate <= T_WAIT_FAU;
        end
        T_WAIT_FAU: begin
          if (!fau_busy) begin
            fau_tile_inflight <= cur_tile;
            fl_row_idx        <= '0;
            fl_all_done       <= 1'b0;
            fau_read_done     <= 1'b0;
            tstate            <= T_DRAIN;
          end
        end
        T_DRAIN: begin
          if (fau_cb_done) fau_read_done <= 1'b1;
          if (fl_rd_en) begin
            fl_rd_pending <= 1'b1;
          end else if (fl_rd_pending) begin
            fl_rd_pending <= 1'b0;
            fl_valid      <= 1'b1;
          end else if (fl_valid && fl_ready) begin
            fl_valid <= 1'b0;
            if (fl_row_idx == IDX_W'(TILE_DIM - 1)) begin
              fl_all_done  <= 1'b1;
              fl_tile_done <= 1'b1;
            end else begin
              fl_row_idx <= fl_row_idx + 1'b1;
            end
          end
          if (fl_all_done && (fau_read_done || fau_cb_done)) tstate <= T_IDLE;
        end
        default: tstate <= T_IDLE;
      endcase
    end
  end

  // A tile ends only after all its superquads have been issued.
  end_after_walk: assert property (@(posedge clk) disable iff (!rst_n)
                                   tstate == T_RENDER && tile_end |-> !sq_valid);
  // The upsampling pass runs exactly while the unit waits for it.
  upsample_tracked: assert property (@(posedge clk) disable iff (!rst_n)
                                     tstate == T_UPSAMPLE |-> up_busy || up_done);
  // Flush data must stay put until accepted.
  flush_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 fl_valid && !fl_ready |=> fl_valid && $stable(fl_row_idx));

endmodule
