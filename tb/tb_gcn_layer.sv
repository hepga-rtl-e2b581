// tb_gcn_layer: one GCN layer, H = A * (X * W), computed by the chip on a
// small graph.
// The chip is reduced to 2x2 PEs per tier, with the R1 R2 F3 S4 tiers and
// small tiles, as in tb_hepga_top. The layer follows the GCN kernel split:
//   Combination on ReRAM PE (0,0,0) tile 0: crossbar 0 holds W (16 input
//     features x 4 output features). For every node i the host writes
//     feature vector X[i] and runs the tile. Words 0..3 of crossbar 0 come
//     back as Z[i] = W^T X[i].
//   Aggregation on FeFET PE (1,1,2) tile 0: weight row j, output word i
//     (crossbar i/4, word i%4) holds the adjacency entry A[i][j], with self
//     loops. For every output feature f the host writes the column
//     Z[.][f], saturated to 8 bits, into rows 0..7 and runs the tile.
//     Output i is then H[i][f] = sum_j A[i][j] * Z[j][f].
// The host gathers Z as returned by the chip and feeds its columns back.
// That is the transposition between the two kernels, which the message set
// leaves to the host.
// The testbench computes Z and H itself and checks every value that comes
// back. The graph has 8 nodes, and the features are small enough that the
// ReRAM column sums stay below ADC full scale. The watchdog is 400000
// cycles.
module tb_gcn_layer;
  import hepga_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int MX = 2, MY = 2, MZ = 4, N = MX * MY * MZ;
  localparam int RR_XB = 2, RR_ROWS = 128, RR_COLS = 16, RR_WORDS = 4;
  localparam int FE_XB = 2, FE_ROWS = 16, FE_COLS = 32, FE_WORDS = 4;
  localparam int NN = 8, FIN = 16, FOUT = 4;

  logic rst_n;
  flit_t host_in_flit, host_out_flit;
  logic host_in_valid, host_in_ready, host_out_valid, host_out_ready;
  logic [N*4-1:0] tile_busy;
  logic [31:0] clip_count;

  logic [7:0] X [NN][FIN];
  logic [7:0] W [FIN][FOUT];
  bit         A [NN][NN];
  longint     Zexp [NN][FOUT];
  longint     Hexp [NN][FOUT];
  longint     Zgot [NN][FOUT];
  longint     got [RR_XB * RR_WORDS];
  int         ngot;
  int checks = 0, failures = 0;
  int n_comb = 0, n_aggr = 0;

  hepga_top #(
    .MX(MX), .MY(MY), .MZ(MZ),
    .RR_XBARS(RR_XB), .RR_ROWS(RR_ROWS), .RR_COLS(RR_COLS), .RR_WR_LAT(4),
    .FE_XBARS(FE_XB), .FE_ROWS(FE_ROWS), .FE_COLS(FE_COLS),
    .SR_ARRAYS(2), .SR_ROWS(16), .SR_COLS(32)
  ) dut (
    .clk(clk), .rst_n(rst_n),
    .host_in_flit(host_in_flit), .host_in_valid(host_in_valid), .host_in_ready(host_in_ready),
    .host_out_flit(host_out_flit), .host_out_valid(host_out_valid), .host_out_ready(host_out_ready),
    .tile_busy(tile_busy), .clip_count(clip_count));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  assign host_out_ready = 1'b1;
  always @(posedge clk) if (rst_n && host_out_valid) begin
    if (host_out_flit.index < 16'(RR_XB * RR_WORDS))
      got[host_out_flit.index] = longint'(host_out_flit.data);
    ngot++;
  end

  task automatic send(int x, int y, int z, op_t op, int xbar, int index, int data);
    @(negedge clk);
    host_in_flit = '0;
    host_in_flit.dst.x = 2'(x);
    host_in_flit.dst.y = 2'(y);
    host_in_flit.dst.z = 2'(z);
    host_in_flit.src.host = 1'b1;
    host_in_flit.op    = op;
    host_in_flit.xbar  = 7'(xbar);
    host_in_flit.index = 16'(index);
    host_in_flit.data  = 32'(data);
    host_in_valid = 1'b1;
    @(posedge clk);
    while (!host_in_ready) @(posedge clk);
    @(negedge clk);
    host_in_valid = 1'b0;
  endtask

  // Run a tile whose results go to the host, and wait for n of them.
  task automatic run_and_collect(int x, int y, int z, int n);
    int t;
    ngot = 0;
    send(x, y, z, OP_RUN, 0, 0, 0);
    t = 0;
    while (ngot < n && t < 20000) begin
      @(negedge clk);
      t++;
    end
    checks++;
    if (ngot != n) begin
      failures++;
      $display("run at (%0d,%0d,%0d): %0d results, expected %0d", x, y, z, ngot, n);
    end
  endtask

  function automatic logic [7:0] sat8(longint v);
    return (v > 255) ? 8'hFF : 8'(v);
  endfunction

  initial begin
    dest_t d;
    rst_n = 1'b0; host_in_valid = 1'b0; host_in_flit = '0; ngot = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // Graph, features and weights, and the reference layer.
    for (int i = 0; i < NN; i++)
      for (int j = 0; j <= i; j++) begin
        A[i][j] = (i == j) || (($urandom % 3) == 0);
        A[j][i] = A[i][j];
      end
    for (int i = 0; i < NN; i++)
      for (int k = 0; k < FIN; k++) X[i][k] = 8'($urandom % 16);
    for (int k = 0; k < FIN; k++)
      for (int f = 0; f < FOUT; f++) W[k][f] = 8'($urandom);
    for (int i = 0; i < NN; i++)
      for (int f = 0; f < FOUT; f++) begin
        Zexp[i][f] = 0;
        for (int k = 0; k < FIN; k++) Zexp[i][f] += longint'(X[i][k]) * longint'(W[k][f]);
      end
    for (int i = 0; i < NN; i++)
      for (int f = 0; f < FOUT; f++) begin
        Hexp[i][f] = 0;
        for (int j = 0; j < NN; j++)
          if (A[i][j]) Hexp[i][f] += longint'(sat8(Zexp[j][f]));
      end

    // Both tiles report to the host.
    d = '0;
    d.node.host = 1'b1;
    send(0, 0, 0, OP_CLR_DEST, 0, 0, 0);
    send(0, 0, 0, OP_ADD_DEST, 0, 0, int'(d));
    send(1, 1, 2, OP_CLR_DEST, 0, 0, 0);
    send(1, 1, 2, OP_ADD_DEST, 0, 0, int'(d));

    // Combination weights, and zero inputs on the unused ReRAM rows.
    for (int k = 0; k < FIN; k++)
      for (int f = 0; f < FOUT; f++) send(0, 0, 0, OP_WRITE_W, 0, (k << 6) | f, int'(W[k][f]));
    for (int r = FIN; r < RR_ROWS; r++) send(0, 0, 0, OP_WRITE_X, 0, r, 0);

    // Combination, node by node.
    for (int i = 0; i < NN; i++) begin
      for (int k = 0; k < FIN; k++) send(0, 0, 0, OP_WRITE_X, 0, k, int'(X[i][k]));
      run_and_collect(0, 0, 0, RR_XB * RR_WORDS);
      n_comb++;
      for (int f = 0; f < FOUT; f++) begin
        Zgot[i][f] = got[f];
        checks++;
        if (got[f] != Zexp[i][f]) begin
          failures++;
          $display("Z[%0d][%0d] = %0d, expected %0d", i, f, got[f], Zexp[i][f]);
        end
      end
    end

    // Aggregation adjacency, and zero inputs on the unused FeFET rows.
    for (int i = 0; i < NN; i++)
      for (int j = 0; j < NN; j++)
        send(1, 1, 2, OP_WRITE_W, i / FE_WORDS, (j << 6) | (i % FE_WORDS), A[i][j] ? 1 : 0);
    for (int r = NN; r < FE_ROWS; r++) send(1, 1, 2, OP_WRITE_X, 0, r, 0);

    // Aggregation, feature by feature, from the gathered Z columns.
    for (int f = 0; f < FOUT; f++) begin
      for (int j = 0; j < NN; j++) send(1, 1, 2, OP_WRITE_X, 0, j, int'(sat8(Zgot[j][f])));
      run_and_collect(1, 1, 2, FE_XB * FE_WORDS);
      n_aggr++;
      for (int i = 0; i < NN; i++) begin
        checks++;
        if (got[i] != Hexp[i][f]) begin
          failures++;
          $display("H[%0d][%0d] = %0d, expected %0d", i, f, got[i], Hexp[i][f]);
        end
      end
    end

    checks++;
    if (n_comb != NN || n_aggr != FOUT || clip_count != 0) begin
      failures++;
      $display("combination runs %0d, aggregation runs %0d, ADC clips %0d", n_comb, n_aggr, clip_count);
    end
    $display("GCN layer: %0d nodes, %0d -> %0d features, %0d combination and %0d aggregation runs",
             NN, FIN, FOUT, n_comb, n_aggr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
