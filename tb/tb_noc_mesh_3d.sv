// tb_noc_mesh_3d: end-to-end delivery across the 3x3x4 mesh.
// Part 1 sends one flit alone from every node to every other node and to the
// host. Each must arrive at the right node after exactly manhattan+2 cycles: one
// edge into the source FIFO, one per hop, and one to eject at the sink.
// Part 2 floods the mesh. Every node and the host inject random traffic at
// once, and the sinks see random backpressure. Every flit must arrive exactly
// once at its destination, unchanged.
module tb_noc_mesh_3d;
  import hepga_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int MX = 3, MY = 3, MZ = 4, N = MX * MY * MZ;
  localparam int NF = 4000;
  logic rst_n;
  flit_t pe_in_flit [N];
  flit_t pe_out_flit [N];
  logic [N-1:0] pe_in_valid, pe_in_ready, pe_out_valid, pe_out_ready;
  flit_t host_in_flit, host_out_flit;
  logic host_in_valid, host_in_ready, host_out_valid, host_out_ready;
  int exp_node [NF];  // N means host
  bit seen [NF];
  int got = 0, sent = 0;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  noc_mesh_3d #(.MX(MX), .MY(MY), .MZ(MZ), .FIFO_DEPTH(4)) dut (
    .clk(clk), .rst_n(rst_n),
    .pe_in_flit(pe_in_flit), .pe_in_valid(pe_in_valid), .pe_in_ready(pe_in_ready),
    .pe_out_flit(pe_out_flit), .pe_out_valid(pe_out_valid), .pe_out_ready(pe_out_ready),
    .host_in_flit(host_in_flit), .host_in_valid(host_in_valid), .host_in_ready(host_in_ready),
    .host_out_flit(host_out_flit), .host_out_valid(host_out_valid), .host_out_ready(host_out_ready));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic node_t node_of(int n);
    node_t d;
    d = '0;
    if (n == N) d.host = 1'b1;
    else begin
      d.x = 2'(n % MX);
      d.y = 2'((n / MX) % MY);
      d.z = 2'(n / (MX * MY));
    end
    return d;
  endfunction

  function automatic int hops(int a, int b);
    node_t na, nb;
    na = node_of(a);
    nb = node_of(b);
    if (b == N) nb = '0;
    if (a == N) na = '0;
    return (na.x > nb.x ? na.x - nb.x : nb.x - na.x) + (na.y > nb.y ? na.y - nb.y : nb.y - na.y)
         + (na.z > nb.z ? na.z - nb.z : nb.z - na.z);
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n <= N; n++) begin
      logic v, r;
      flit_t f;
      v = (n == N) ? host_out_valid : pe_out_valid[n];
      r = (n == N) ? host_out_ready : pe_out_ready[n];
      f = (n == N) ? host_out_flit : pe_out_flit[n];
      if (v && r) begin
        int id;
        id = int'(f.data);
        checks++;
        if (id >= NF || seen[id] || exp_node[id] != n || f.dst != node_of(n)) begin
          failures++;
          $display("bad delivery id=%0d at node %0d", id, n);
        end else begin
          seen[id] = 1'b1;
          got++;
        end
      end
    end
  end

  task automatic send(int src, int dst, int id);
    flit_t f;
    f = '0;
    f.dst = node_of(dst);
    f.src = node_of(src);
    f.op = OP_RESULT;
    f.data = 32'(id);
    exp_node[id] = dst;
    if (src == N) begin host_in_flit = f; host_in_valid = 1'b1; end
    else begin pe_in_flit[src] = f; pe_in_valid[src] = 1'b1; end
  endtask

  initial begin
    rst_n = 1'b0;
    pe_in_valid = '0; host_in_valid = 1'b0;
    pe_out_ready = '1; host_out_ready = 1'b1;
    host_in_flit = '0;
    for (int n = 0; n < N; n++) pe_in_flit[n] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Part 1: latency of lone flits.
    for (int s = 0; s <= N; s++)
      for (int d = 0; d <= N; d++) begin
        int t0, id;
        if (s == d || sent >= NF) continue;
        id = sent++;
        @(negedge clk);
        send(s, d, id);
        t0 = cyc;
        @(negedge clk);
        pe_in_valid = '0; host_in_valid = 1'b0;
        while (!seen[id] && cyc - t0 < 100) @(negedge clk);
        checks++;
        if (cyc - t0 != hops(s, d) + 2) begin
          failures++;
          $display("latency %0d->%0d: %0d, expected %0d", s, d, cyc - t0, hops(s, d) + 2);
        end
      end
    // Part 2: flood with backpressure.
    while (sent < NF) begin
      @(negedge clk);
      for (int s = 0; s <= N; s++) begin
        bit busy_in;
        busy_in = (s == N) ? (host_in_valid && !host_in_ready) : (pe_in_valid[s] && !pe_in_ready[s]);
        if (!busy_in) begin
          if (s == N) host_in_valid = 1'b0; else pe_in_valid[s] = 1'b0;
          if (sent < NF && ($urandom % 3) == 0) begin
            int d;
            d = $urandom_range(0, N);
            if (d != s) send(s, d, sent++);
          end
        end
      end
      for (int n = 0; n < N; n++) pe_out_ready[n] = (($urandom % 3) != 0);
      host_out_ready = (($urandom % 3) != 0);
    end
    @(negedge clk);
    for (int s = 0; s <= N; s++) begin
      while ((s == N) ? (host_in_valid && !host_in_ready) : (pe_in_valid[s] && !pe_in_ready[s])) @(negedge clk);
      if (s == N) host_in_valid = 1'b0; else pe_in_valid[s] = 1'b0;
    end
    pe_out_ready = '1; host_out_ready = 1'b1;
    repeat (200) @(negedge clk);
    checks++;
    if (got != sent) begin
      failures++;
      $display("delivered %0d of %0d", got, sent);
    end
    $display("delivered %0d flits", got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
