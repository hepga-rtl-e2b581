// noc_router_3d: seven-port router of the HePGA 3D mesh network-on-chip.
//
// Every PE has one router. Its ports are Local (the PE), X+/X-, Y+/Y- (planar
// links) and Z+/Z- (TSV links to the tiers above and below). Z+ points away
// from the heat sink. Each input port has a flit FIFO. The upstream side may
// push only while in_ready is high: this is the FIFO-based flow control the
// paper names. Packets are single flits, routed in dimension order: first X,
// then Y, then Z, then eject to Local. With single-flit packets and a
// minimal dimension-order route, the mesh is deadlock-free.
// A flit whose destination has the host flag set is routed toward node
// (0,0,0) and leaves there on its X- port, where the host interface attaches.
// Each output port has its own round-robin arbiter over the input FIFO heads
// that want it. A flit moves when the output's downstream in_ready is high.
// out_valid and out_flit are combinational from the FIFO heads, and
// out_ready only gates the pop. So a flit stays one cycle per router, in the
// downstream FIFO.
// Interface: in_* and out_* are arrays indexed by the port numbers of
// hepga_pkg (P_LOCAL .. P_ZM). The paper gives the 3D mesh topology and
// FIFO-based flow control. Dimension-order routing, round-robin arbitration,
// single-flit packets and the FIFO depth are this design's choices.
module noc_router_3d
  import hepga_pkg::*;
#(
  parameter logic [1:0]  X_POS      = 2'd0,
  parameter logic [1:0]  Y_POS      = 2'd0,
  parameter logic [1:0]  Z_POS      = 2'd0,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  flit_t             in_flit  [NPORTS],
  input  logic [NPORTS-1:0] in_valid,
  output logic [NPORTS-1:0] in_ready,
  output flit_t             out_flit [NPORTS],
  output logic [NPORTS-1:0] out_valid,
  input  logic [NPORTS-1:0] out_ready
);

  localparam int unsigned PW = $clog2(NPORTS);

  flit_t             head  [NPORTS];
  logic [NPORTS-1:0] empty, full, pop;
  logic [PW-1:0]     want  [NPORTS];
  logic [PW-1:0]     rr_ptr [NPORTS];
  logic [PW-1:0]     gnt_idx [NPORTS];

  // Dimension-order (X, Y, Z) output port for a destination.
  function automatic logic [PW-1:0] route(input node_t d);
    logic [1:0] tx, ty, tz;
    tx = d.host ? 2'd0 : d.x;
    ty = d.host ? 2'd0 : d.y;
    tz = d.host ? 2'd0 : d.z;
    if (tx > X_POS)      return PW'(P_XP);
    else if (tx < X_POS) return PW'(P_XM);
    else if (ty > Y_POS) return PW'(P_YP);
    else if (ty < Y_POS) return PW'(P_YM);
    else if (tz > Z_POS) return PW'(P_ZP);
    else if (tz < Z_POS) return PW'(P_ZM);
    else if (d.host)     return PW'(P_XM);
    else                 return PW'(P_LOCAL);
  endfunction

  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    flit_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
      .clk   (clk),
      .rst_n (rst_n),
      .push  (in_valid[i] && !full[i]),
      .din   (in_flit[i]),
      .full  (full[i]),
      .pop   (pop[i]),
      .head  (head[i]),
      .empty (empty[i])
    );
    assign in_ready[i] = !full[i];
    assign want[i]     = route(head[i].dst);
  end

  // Round-robin arbitration per output port.
  always_comb begin
    for (int o = 0; o < NPORTS; o++) begin
      logic found;
      found        = 1'b0;
      gnt_idx[o]   = '0;
      out_valid[o] = 1'b0;
      for (int k = 0; k < NPORTS; k++) begin
        int unsigned i;
        i = (int'(rr_ptr[o]) + k) % NPORTS;
        if (!found && !empty[i] && want[i] == PW'(o)) begin
          found      = 1'b1;
          gnt_idx[o] = PW'(i);
        end
      end
      out_valid[o] = found;
      out_flit[o]  = head[gnt_idx[o]];
    end
  end

  // Kept apart from the arbiter so that out_valid never depends on out_ready.
  always_comb begin
    pop = '0;
    for (int o = 0; o < NPORTS; o++)
      if (out_valid[o] && out_ready[o]) pop[gnt_idx[o]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NPORTS; o++) rr_ptr[o] <= '0;
    end else begin
      for (int o = 0; o < NPORTS; o++)
        if (out_valid[o] && out_ready[o])
          rr_ptr[o] <= (gnt_idx[o] == PW'(NPORTS - 1)) ? '0 : gnt_idx[o] + 1'b1;
    end
  end

  // A flit offered on an output stays offered until it is taken, except that a
  // newly arrived flit of higher round-robin priority may take its place; the
  // offered flit itself is never lost, so only the no-drop rule is checked.
  a_pop_only_valid: assert property (@(posedge clk) disable iff (!rst_n)
                                     (pop & empty) == '0);

endmodule
