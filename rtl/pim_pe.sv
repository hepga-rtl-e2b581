// pim_pe: HePGA processing element: four PIM tiles of one device type plus a
// network interface.
//
// DEVICE picks the tile type: ReRAM, FeFET or SRAM. A tier of the 3D stack
// holds PEs of one device only. The network interface executes single-flit
// messages that arrive from the router:
//   OP_WRITE_W   program a weight word: tile, xbar, index = {row[8:0], word[5:0]}
//   OP_WRITE_X   write input element index[8:0] of a tile with data[7:0]
//   OP_RESULT    an output of another tile. It becomes input element
//                index mod ROWS of the addressed tile, saturated to 8 bits.
//                This is how activations H_l pass from one layer to the next.
//   OP_RUN       start an MVM on a tile. For SRAM tiles, xbar selects the array.
//   OP_ADD_DEST  append data[8:0] (a dest_t: node and tile) to the tile's
//                destination list, up to DEST_MAX entries
//   OP_CLR_DEST  empty the tile's destination list
// A message waits in the router (in_ready low) while its tile cannot take
// it, for example during a write-latency stall or while the tile is busy.
// Results leave by multicast. Every result of a tile is sent as one
// OP_RESULT flit to each entry of that tile's destination list in turn. Only
// then is the next result taken. If the list is empty, results are dropped.
// A round-robin arbiter chooses among tiles that have results.
// A PE whose tiles stream results to each other, through a network that is
// itself blocked, can deadlock. The caller keeps each result stream's
// receiving tile different from its sending tile.
// The device types, four tiles per PE and the multicast of activations come
// from the HePGA paper. The message set, the destination lists and the
// requantization by saturation are this design's choices.
module pim_pe
  import hepga_pkg::*;
#(
  parameter dev_t        DEVICE    = DEV_RERAM,
  parameter logic [1:0]  X_POS     = 2'd0,
  parameter logic [1:0]  Y_POS     = 2'd0,
  parameter logic [1:0]  Z_POS     = 2'd0,
  parameter int unsigned DEST_MAX  = 4,
  parameter int unsigned RR_XBARS  = 96,
  parameter int unsigned RR_ROWS   = 128,
  parameter int unsigned RR_COLS   = 128,
  parameter int unsigned RR_WR_LAT = 100,
  parameter int unsigned FE_XBARS  = 48,
  parameter int unsigned FE_ROWS   = 256,
  parameter int unsigned FE_COLS   = 256,
  parameter int unsigned FE_WR_LAT = 3,
  parameter int unsigned SR_ARRAYS = 9,
  parameter int unsigned SR_ROWS   = 256,
  parameter int unsigned SR_COLS   = 256,
  parameter int unsigned SR_WR_LAT = 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  flit_t                   in_flit,
  input  logic                    in_valid,
  output logic                    in_ready,
  output flit_t                   out_flit,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [TILES_PER_PE-1:0] tile_busy,
  output logic [15:0]             clip_count
);

  localparam int unsigned NT = TILES_PER_PE;
  localparam int unsigned TW = $clog2(NT);
  localparam int unsigned DW = $clog2(DEST_MAX + 1);

  logic [NT-1:0] w_valid, w_ready, x_valid, x_ready, start, r_valid, r_ready;
  result_t       r_out [NT];
  logic [15:0]   clips [NT];
  wreq_t         w_req;
  xreq_t         x_req;
  logic [TW-1:0] t_in;

  dest_t         dests  [NT][DEST_MAX];
  logic [DW-1:0] dcount [NT];

  // Ingress decode.
  assign t_in       = in_flit.tile;
  assign w_req.xbar = in_flit.xbar;
  assign w_req.row  = in_flit.index[14:6];
  assign w_req.word = in_flit.index[5:0];
  assign w_req.data = in_flit.data[WBITS-1:0];
  assign x_req.row  = in_flit.index[8:0];
  assign x_req.data = (in_flit.op == OP_RESULT && in_flit.data[31:XBITS] != '0) ? '1
                                                                                 : in_flit.data[XBITS-1:0];

  always_comb begin
    w_valid  = '0;
    x_valid  = '0;
    start    = '0;
    in_ready = 1'b0;
    case (in_flit.op)
      OP_WRITE_W: begin
        w_valid[t_in] = in_valid;
        in_ready      = w_ready[t_in];
      end
      OP_WRITE_X, OP_RESULT: begin
        x_valid[t_in] = in_valid;
        in_ready      = x_ready[t_in];
      end
      OP_RUN: begin
        start[t_in] = in_valid;
        in_ready    = !tile_busy[t_in];
      end
      OP_ADD_DEST, OP_CLR_DEST: in_ready = 1'b1;
      default:                  in_ready = 1'b1;  // unknown messages are dropped
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < NT; t++) dcount[t] <= '0;
    end else if (in_valid && in_ready) begin
      if (in_flit.op == OP_CLR_DEST)
        dcount[t_in] <= '0;
      else if (in_flit.op == OP_ADD_DEST && dcount[t_in] < DW'(DEST_MAX))
        dcount[t_in] <= dcount[t_in] + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready && in_flit.op == OP_ADD_DEST && dcount[t_in] < DW'(DEST_MAX))
      dests[t_in][dcount[t_in][$clog2(DEST_MAX)-1:0]] <= dest_t'(in_flit.data[$bits(dest_t)-1:0]);
  end

  // Tiles.
  for (genvar t = 0; t < NT; t++) begin : g_tile
    if (DEVICE == DEV_RERAM) begin : g_rr
      reram_tile #(
        .XBARS(RR_XBARS), .ROWS(RR_ROWS), .COLS(RR_COLS), .WR_LAT(RR_WR_LAT)
      ) u_tile (
        .clk(clk), .rst_n(rst_n),
        .w_valid(w_valid[t]), .w_ready(w_ready[t]), .w_req(w_req),
        .x_valid(x_valid[t]), .x_ready(x_ready[t]), .x_req(x_req),
        .start(start[t]), .busy(tile_busy[t]),
        .r_valid(r_valid[t]), .r_ready(r_ready[t]), .r_out(r_out[t]),
        .clip_count(clips[t])
      );
    end else if (DEVICE == DEV_FEFET) begin : g_fe
      fefet_tile #(
        .XBARS(FE_XBARS), .ROWS(FE_ROWS), .COLS(FE_COLS), .WR_LAT(FE_WR_LAT)
      ) u_tile (
        .clk(clk), .rst_n(rst_n),
        .w_valid(w_valid[t]), .w_ready(w_ready[t]), .w_req(w_req),
        .x_valid(x_valid[t]), .x_ready(x_ready[t]), .x_req(x_req),
        .start(start[t]), .busy(tile_busy[t]),
        .r_valid(r_valid[t]), .r_ready(r_ready[t]), .r_out(r_out[t])
      );
      assign clips[t] = '0;
    end else begin : g_sr
      localparam int unsigned AW = (SR_ARRAYS > 1) ? $clog2(SR_ARRAYS) : 1;
      sram_tile #(
        .ARRAYS(SR_ARRAYS), .ROWS(SR_ROWS), .COLS(SR_COLS), .WR_LAT(SR_WR_LAT)
      ) u_tile (
        .clk(clk), .rst_n(rst_n),
        .w_valid(w_valid[t]), .w_ready(w_ready[t]), .w_req(w_req),
        .x_valid(x_valid[t]), .x_ready(x_ready[t]), .x_req(x_req),
        .start(start[t]), .sel(in_flit.xbar[AW-1:0]), .busy(tile_busy[t]),
        .r_valid(r_valid[t]), .r_ready(r_ready[t]), .r_out(r_out[t])
      );
      assign clips[t] = '0;
    end
  end

  always_comb begin
    clip_count = '0;
    for (int t = 0; t < NT; t++) clip_count = clip_count + clips[t];
  end

  // Egress: round-robin over tiles, multicast each result to the tile's list.
  logic          locked;
  logic [TW-1:0] cur_q, cur, rr_ptr;
  logic [DW-1:0] didx;
  logic          found;
  logic [TW-1:0] cand;

  always_comb begin
    cur   = cur_q;
    found = locked;
    cand  = '0;
    if (!locked)
      for (int k = 0; k < NT; k++) begin
        cand = TW'(int'(rr_ptr) + k);
        if (!found && r_valid[cand]) begin
          found = 1'b1;
          cur   = cand;
        end
      end
  end

  always_comb begin
    r_ready   = '0;
    out_valid = 1'b0;
    out_flit  = '0;
    if (found && r_valid[cur]) begin
      if (dcount[cur] == '0) begin
        r_ready[cur] = 1'b1;
      end else begin
        out_valid         = 1'b1;
        out_flit.dst      = dests[cur][didx[$clog2(DEST_MAX)-1:0]].node;
        out_flit.src.host = 1'b0;
        out_flit.src.x    = X_POS;
        out_flit.src.y    = Y_POS;
        out_flit.src.z    = Z_POS;
        out_flit.op       = OP_RESULT;
        out_flit.tile     = dests[cur][didx[$clog2(DEST_MAX)-1:0]].tile;
        out_flit.xbar     = '0;
        out_flit.index    = IDXW'(r_out[cur].idx);
        out_flit.data     = 32'(r_out[cur].data);
        r_ready[cur]      = out_ready && (didx == dcount[cur] - 1'b1);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0;
      cur_q  <= '0;
      rr_ptr <= '0;
      didx   <= '0;
    end else if (found && r_valid[cur]) begin
      if (r_ready[cur]) begin
        locked <= 1'b0;
        didx   <= '0;
        rr_ptr <= cur + 1'b1;
      end else if (out_valid && out_ready) begin
        locked <= 1'b1;
        cur_q  <= cur;
        didx   <= didx + 1'b1;
      end
    end
  end

endmodule
