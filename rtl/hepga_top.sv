// hepga_top: the HePGA heterogeneous 3D PIM accelerator.
//
// MZ planar tiers of MX x MY processing elements sit on a 3D mesh network.
// TIERS[z] sets the memory device of every PE on tier z, with index 0 being
// tier 1, next to the heat sink. The default is the paper's chosen [R1 R2 F3
// S4]. Two ReRAM tiers hold the dense forward-pass operands: the adjacency
// matrix A, large weight matrices and activations. A FeFET tier holds the
// small, low-latency layers. The SRAM tier, farthest from the sink, computes
// the write-heavy gradients. Which operand goes to which PE is decided
// offline. Here it is carried out by the messages a host sends in through
// the host port (see pim_pe for the message set). Results come back through
// the same port when a destination list names the host.
// Interface: clk, active-low asynchronous reset rst_n, one flit input and one
// flit output with valid/ready at mesh node (0,0,0). tile_busy shows which
// of the 4 x N tiles are working. clip_count is the total of ReRAM ADC
// saturation events. The default parameters give the full chip: 36 PEs and
// 144 tiles, with 6912 ReRAM crossbars, 1728 FeFET crossbars and 324 SRAM
// arrays.
module hepga_top
  import hepga_pkg::*;
#(
  parameter int unsigned MX         = MESH_X,
  parameter int unsigned MY         = MESH_Y,
  parameter int unsigned MZ         = MESH_Z,
  parameter dev_t [3:0]  TIERS      = HEPGA_TIERS,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned DEST_MAX   = 4,
  parameter int unsigned RR_XBARS   = 96,
  parameter int unsigned RR_ROWS    = 128,
  parameter int unsigned RR_COLS    = 128,
  parameter int unsigned RR_WR_LAT  = 100,
  parameter int unsigned FE_XBARS   = 48,
  parameter int unsigned FE_ROWS    = 256,
  parameter int unsigned FE_COLS    = 256,
  parameter int unsigned FE_WR_LAT  = 3,
  parameter int unsigned SR_ARRAYS  = 9,
  parameter int unsigned SR_ROWS    = 256,
  parameter int unsigned SR_COLS    = 256,
  parameter int unsigned SR_WR_LAT  = 1,
  localparam int unsigned N         = MX * MY * MZ
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  flit_t                        host_in_flit,
  input  logic                         host_in_valid,
  output logic                         host_in_ready,
  output flit_t                        host_out_flit,
  output logic                         host_out_valid,
  input  logic                         host_out_ready,
  output logic [N*TILES_PER_PE-1:0]    tile_busy,
  output logic [31:0]                  clip_count
);

  flit_t        pe_in_flit  [N];
  logic [N-1:0] pe_in_valid, pe_in_ready;
  flit_t        pe_out_flit [N];
  logic [N-1:0] pe_out_valid, pe_out_ready;
  logic [15:0]  pe_clips [N];

  noc_mesh_3d #(.MX(MX), .MY(MY), .MZ(MZ), .FIFO_DEPTH(FIFO_DEPTH)) u_mesh (
    .clk            (clk),
    .rst_n          (rst_n),
    .pe_in_flit     (pe_in_flit),
    .pe_in_valid    (pe_in_valid),
    .pe_in_ready    (pe_in_ready),
    .pe_out_flit    (pe_out_flit),
    .pe_out_valid   (pe_out_valid),
    .pe_out_ready   (pe_out_ready),
    .host_in_flit   (host_in_flit),
    .host_in_valid  (host_in_valid),
    .host_in_ready  (host_in_ready),
    .host_out_flit  (host_out_flit),
    .host_out_valid (host_out_valid),
    .host_out_ready (host_out_ready)
  );

  for (genvar z = 0; z < MZ; z++) begin : g_z
    for (genvar y = 0; y < MY; y++) begin : g_y
      for (genvar x = 0; x < MX; x++) begin : g_x
        localparam int unsigned ID = x + MX * (y + MY * z);
        pim_pe #(
          .DEVICE(TIERS[z]), .X_POS(2'(x)), .Y_POS(2'(y)), .Z_POS(2'(z)),
          .DEST_MAX(DEST_MAX),
          .RR_XBARS(RR_XBARS), .RR_ROWS(RR_ROWS), .RR_COLS(RR_COLS), .RR_WR_LAT(RR_WR_LAT),
          .FE_XBARS(FE_XBARS), .FE_ROWS(FE_ROWS), .FE_COLS(FE_COLS), .FE_WR_LAT(FE_WR_LAT),
          .SR_ARRAYS(SR_ARRAYS), .SR_ROWS(SR_ROWS), .SR_COLS(SR_COLS), .SR_WR_LAT(SR_WR_LAT)
        ) u_pe (
          .clk        (clk),
          .rst_n      (rst_n),
          .in_flit    (pe_out_flit[ID]),
          .in_valid   (pe_out_valid[ID]),
          .in_ready   (pe_out_ready[ID]),
          .out_flit   (pe_in_flit[ID]),
          .out_valid  (pe_in_valid[ID]),
          .out_ready  (pe_in_ready[ID]),
          .tile_busy  (tile_busy[ID*TILES_PER_PE +: TILES_PER_PE]),
          .clip_count (pe_clips[ID])
        );
      end
    end
  end

  always_comb begin
    clip_count = '0;
    for (int n = 0; n < N; n++) clip_count = clip_count + 32'(pe_clips[n]);
  end

endmodule
