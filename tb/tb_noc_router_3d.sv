// tb_noc_router_3d: routing, flow control and arbitration of one router.
// The router sits at (1,1,1) of a 3x3x4 mesh. Random flits, each tagged with
// a unique id in data, enter all seven inputs. Their destinations are random
// mesh nodes or the host. The outputs see random backpressure. Each flit
// must leave exactly once, unchanged, on the port that X-then-Y-then-Z
// dimension-order routing gives. Flits from one input to one output must
// keep their order. Inputs are pushed only while in_ready is high, and every
// output must have been stalled by backpressure at least once.
module tb_noc_router_3d;
  import hepga_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NF = 2000;
  logic rst_n;
  flit_t in_flit [NPORTS];
  flit_t out_flit [NPORTS];
  logic [NPORTS-1:0] in_valid, in_ready, out_valid, out_ready;
  int exp_port [NF];
  int src_port [NF];
  bit seen [NF];
  int last_id [NPORTS][NPORTS];
  int sent = 0, got = 0, stalls = 0;
  int checks = 0, failures = 0;

  noc_router_3d #(.X_POS(2'd1), .Y_POS(2'd1), .Z_POS(2'd1), .FIFO_DEPTH(4)) dut (
    .clk(clk), .rst_n(rst_n), .in_flit(in_flit), .in_valid(in_valid), .in_ready(in_ready),
    .out_flit(out_flit), .out_valid(out_valid), .out_ready(out_ready));

  function automatic int ref_port(node_t d);
    int tx, ty, tz;
    tx = d.host ? 0 : int'(d.x);
    ty = d.host ? 0 : int'(d.y);
    tz = d.host ? 0 : int'(d.z);
    if (tx != 1) return (tx > 1) ? P_XP : P_XM;
    if (ty != 1) return (ty > 1) ? P_YP : P_YM;
    if (tz != 1) return (tz > 1) ? P_ZP : P_ZM;
    return d.host ? P_XM : P_LOCAL;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Monitor outputs at each rising edge (transfer = valid && ready).
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NPORTS; o++) begin
      if (out_valid[o] && !out_ready[o]) stalls++;
      if (out_valid[o] && out_ready[o]) begin
        int id;
        id = int'(out_flit[o].data);
        checks++;
        if (id < 0 || id >= NF || seen[id] || exp_port[id] != o) begin
          failures++;
          $display("bad delivery id=%0d port=%0d", id, o);
        end else begin
          seen[id] = 1'b1;
          got++;
          if (last_id[src_port[id]][o] > id) begin
            failures++;
            $display("order violated id=%0d", id);
          end
          last_id[src_port[id]][o] = id;
        end
      end
    end
  end

  initial begin
    rst_n = 1'b0;
    in_valid = '0;
    out_ready = '0;
    for (int i = 0; i < NPORTS; i++) begin
      in_flit[i] = '0;
      for (int o = 0; o < NPORTS; o++) last_id[i][o] = -1;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (sent < NF || got < NF) begin
      @(negedge clk);
      // Inputs that were accepted at the last edge get new flits.
      for (int i = 0; i < NPORTS; i++) begin
        if (!in_valid[i] && sent < NF && ($urandom % 2) == 0) begin
          flit_t f;
          f = '0;
          f.dst.host = (($urandom % 10) == 0);
          f.dst.x = 2'($urandom % 3);
          f.dst.y = 2'($urandom % 3);
          f.dst.z = 2'($urandom % 4);
          f.op    = OP_RESULT;
          f.data  = 32'(sent);
          exp_port[sent] = ref_port(f.dst);
          src_port[sent] = i;
          in_flit[i]  = f;
          in_valid[i] = 1'b1;
          sent++;
        end
      end
      for (int o = 0; o < NPORTS; o++) out_ready[o] = (($urandom % 4) != 0);
      @(posedge clk);
      #1;
      for (int i = 0; i < NPORTS; i++) if (in_valid[i] && in_ready_q[i]) in_valid[i] = 1'b0;
    end
    checks++;
    if (stalls == 0) begin
      failures++;
      $display("no backpressure stall was seen");
    end
    $display("delivered %0d flits, %0d stall cycles", got, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // in_ready as it was just before the edge decides whether the input was taken.
  logic [NPORTS-1:0] in_ready_q;
  always @(negedge clk) in_ready_q <= in_ready;
  initial in_ready_q = '0;
endmodule
