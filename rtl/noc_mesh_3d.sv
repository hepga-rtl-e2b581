// noc_mesh_3d: the HePGA 3D mesh network-on-chip.
//
// It holds MX x MY x MZ routers. MX x MY routers sit on each planar tier and
// are joined by planar links in X and Y. Vertically adjacent routers are
// joined by TSV links in Z. Node n = x + MX*(y + MY*z) owns router (x,y,z).
// Its Local port is the pe_in_* / pe_out_* pair n. The X- port of node
// (0,0,0) is the host interface, host_in_* / host_out_*. Every other
// boundary port is tied off. Its input never has a flit, and its output is
// always ready, which discards a flit addressed outside the mesh.
// Links are plain wires. Each hop costs one cycle, in the downstream input
// FIFO. A TSV link behaves like a planar link. Its physical data (5 um
// diameter, 37 fF) set its energy, not its logic.
// The paper gives the topology, the 3 x 3 x 4 size of the main configuration,
// TSV vertical links and FIFO-based flow control. The host attachment point
// is this design's choice.
module noc_mesh_3d
  import hepga_pkg::*;
#(
  parameter int unsigned MX         = MESH_X,
  parameter int unsigned MY         = MESH_Y,
  parameter int unsigned MZ         = MESH_Z,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned N         = MX * MY * MZ
) (
  input  logic         clk,
  input  logic         rst_n,
  input  flit_t        pe_in_flit   [N],
  input  logic [N-1:0] pe_in_valid,
  output logic [N-1:0] pe_in_ready,
  output flit_t        pe_out_flit  [N],
  output logic [N-1:0] pe_out_valid,
  input  logic [N-1:0] pe_out_ready,
  input  flit_t        host_in_flit,
  input  logic         host_in_valid,
  output logic         host_in_ready,
  output flit_t        host_out_flit,
  output logic         host_out_valid,
  input  logic         host_out_ready
);

  flit_t             rin_f  [N][NPORTS];
  logic [NPORTS-1:0] rin_v  [N];
  logic [NPORTS-1:0] rin_r  [N];
  flit_t             rout_f [N][NPORTS];
  logic [NPORTS-1:0] rout_v [N];
  logic [NPORTS-1:0] rout_r [N];

  function automatic int unsigned node_id(int unsigned x, int unsigned y, int unsigned z);
    return x + MX * (y + MY * z);
  endfunction

  for (genvar z = 0; z < MZ; z++) begin : g_z
    for (genvar y = 0; y < MY; y++) begin : g_y
      for (genvar x = 0; x < MX; x++) begin : g_x
        localparam int unsigned ID = node_id(x, y, z);

        noc_router_3d #(
          .X_POS(2'(x)), .Y_POS(2'(y)), .Z_POS(2'(z)), .FIFO_DEPTH(FIFO_DEPTH)
        ) u_router (
          .clk       (clk),
          .rst_n     (rst_n),
          .in_flit   (rin_f[ID]),
          .in_valid  (rin_v[ID]),
          .in_ready  (rin_r[ID]),
          .out_flit  (rout_f[ID]),
          .out_valid (rout_v[ID]),
          .out_ready (rout_r[ID])
        );

        // Local port.
        assign rin_f[ID][P_LOCAL]  = pe_in_flit[ID];
        assign rin_v[ID][P_LOCAL]  = pe_in_valid[ID];
        assign pe_in_ready[ID]     = rin_r[ID][P_LOCAL];
        assign pe_out_flit[ID]     = rout_f[ID][P_LOCAL];
        assign pe_out_valid[ID]    = rout_v[ID][P_LOCAL];
        assign rout_r[ID][P_LOCAL] = pe_out_ready[ID];

        // X+ / X- planar links.
        if (x + 1 < MX) begin : g_xp
          localparam int unsigned NB = node_id(x + 1, y, z);
          assign rin_f[ID][P_XP]  = rout_f[NB][P_XM];
          assign rin_v[ID][P_XP]  = rout_v[NB][P_XM];
          assign rout_r[ID][P_XP] = rin_r[NB][P_XM];
        end else begin : g_xp_edge
          assign rin_f[ID][P_XP]  = '0;
          assign rin_v[ID][P_XP]  = 1'b0;
          assign rout_r[ID][P_XP] = 1'b1;
        end
        if (x > 0) begin : g_xm
          localparam int unsigned NB = node_id(x - 1, y, z);
          assign rin_f[ID][P_XM]  = rout_f[NB][P_XP];
          assign rin_v[ID][P_XM]  = rout_v[NB][P_XP];
          assign rout_r[ID][P_XM] = rin_r[NB][P_XP];
        end else if (y == 0 && z == 0) begin : g_host
          assign rin_f[ID][P_XM]  = host_in_flit;
          assign rin_v[ID][P_XM]  = host_in_valid;
          assign host_in_ready    = rin_r[ID][P_XM];
          assign host_out_flit    = rout_f[ID][P_XM];
          assign host_out_valid   = rout_v[ID][P_XM];
          assign rout_r[ID][P_XM] = host_out_ready;
        end else begin : g_xm_edge
          assign rin_f[ID][P_XM]  = '0;
          assign rin_v[ID][P_XM]  = 1'b0;
          assign rout_r[ID][P_XM] = 1'b1;
        end

        // Y+ / Y- planar links.
        if (y + 1 < MY) begin : g_yp
          localparam int unsigned NB = node_id(x, y + 1, z);
          assign rin_f[ID][P_YP]  = rout_f[NB][P_YM];
          assign rin_v[ID][P_YP]  = rout_v[NB][P_YM];
          assign rout_r[ID][P_YP] = rin_r[NB][P_YM];
        end else begin : g_yp_edge
          assign rin_f[ID][P_YP]  = '0;
          assign rin_v[ID][P_YP]  = 1'b0;
          assign rout_r[ID][P_YP] = 1'b1;
        end
        if (y > 0) begin : g_ym
          localparam int unsigned NB = node_id(x, y - 1, z);
          assign rin_f[ID][P_YM]  = rout_f[NB][P_YP];
          assign rin_v[ID][P_YM]  = rout_v[NB][P_YP];
          assign rout_r[ID][P_YM] = rin_r[NB][P_YP];
        end else begin : g_ym_edge
          assign rin_f[ID][P_YM]  = '0;
          assign rin_v[ID][P_YM]  = 1'b0;
          assign rout_r[ID][P_YM] = 1'b1;
        end

        // Z+ / Z- TSV links.
        if (z + 1 < MZ) begin : g_zp
          localparam int unsigned NB = node_id(x, y, z + 1);
          assign rin_f[ID][P_ZP]  = rout_f[NB][P_ZM];
          assign rin_v[ID][P_ZP]  = rout_v[NB][P_ZM];
          assign rout_r[ID][P_ZP] = rin_r[NB][P_ZM];
        end else begin : g_zp_edge
          assign rin_f[ID][P_ZP]  = '0;
          assign rin_v[ID][P_ZP]  = 1'b0;
          assign rout_r[ID][P_ZP] = 1'b1;
        end
        if (z > 0) begin : g_zm
          localparam int unsigned NB = node_id(x, y, z - 1);
          assign rin_f[ID][P_ZM]  = rout_f[NB][P_ZP];
          assign rin_v[ID][P_ZM]  = rout_v[NB][P_ZP];
          assign rout_r[ID][P_ZM] = rin_r[NB][P_ZP];
        end else begin : g_zm_edge
          assign rin_f[ID][P_ZM]  = '0;
          assign rin_v[ID][P_ZM]  = 1'b0;
          assign rout_r[ID][P_ZM] = 1'b1;
        end
      end
    end
  end

endmodule
