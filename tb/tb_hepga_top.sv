// tb_hepga_top: a three-layer chain through the heterogeneous stack.
// The design is reduced to 2x2 PEs per tier with the R1 R2 F3 S4 tiers and
// small tiles. Everything is driven through the host port only.
//   Layer 1: ReRAM PE (0,0,0) tile 0, 128 rows. Crossbar 0 has random weights.
//            Crossbar 1 has all-ones weights, and with all-ones inputs its
//            ADCs clip. Results are multicast to FeFET PE (1,1,2) tile 0 and
//            to the host.
//   Layer 2: FeFET PE (1,1,2) tile 0. Its inputs 0..7 are the layer-1 results,
//            saturated to 8 bits, and 8..15 come from the host. Results are
//            multicast to SRAM PE (0,1,3) tile 1 and the host.
//   Layer 3: SRAM PE (0,1,3) tile 1, array 1, with inputs as for layer 2.
//            Results go to the host.
// The testbench computes every layer's expected values itself, including
// ADC clipping and saturation, and compares all results that reach the host.
// It counts how often each mechanism happened and fails any that never did:
// write-latency stalls seen at the host port, ADC clipping, multicast copies,
// saturating requantization, host-port backpressure, and a run on each of
// the three device tiers.
module tb_hepga_top;
  import hepga_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int MX = 2, MY = 2, MZ = 4, N = MX * MY * MZ;
  localparam int RR_XB = 2, RR_ROWS = 128, RR_COLS = 16, RR_WORDS = 4;
  localparam int FE_XB = 2, FE_ROWS = 16, FE_COLS = 32, FE_WORDS = 4;
  localparam int SR_NA = 2, SR_ROWS = 16, SR_COLS = 32, SR_WORDS = 4;
  localparam int L1_OUT = RR_XB * RR_WORDS, L2_OUT = FE_XB * FE_WORDS, L3_OUT = SR_WORDS;

  logic rst_n;
  flit_t host_in_flit, host_out_flit;
  logic host_in_valid, host_in_ready, host_out_valid, host_out_ready;
  logic [N*4-1:0] tile_busy;
  logic [31:0] clip_count;

  logic [7:0] W1 [RR_XB][RR_ROWS][RR_WORDS];
  logic [7:0] X1 [RR_ROWS];
  logic [7:0] W2 [FE_XB][FE_ROWS][FE_WORDS];
  logic [7:0] X2 [FE_ROWS];
  logic [7:0] W3 [SR_ROWS][SR_WORDS];
  logic [7:0] X3 [SR_ROWS];
  longint Y1 [L1_OUT];
  longint Y2 [L2_OUT];
  longint Y3 [L3_OUT];
  longint got [3][L1_OUT];
  int ngot [3];

  int checks = 0, failures = 0;
  int n_wstall = 0, n_clip = 0, n_mcast = 0, n_sat = 0, n_bp = 0;
  int n_run [3];

  hepga_top #(
    .MX(MX), .MY(MY), .MZ(MZ),
    .RR_XBARS(RR_XB), .RR_ROWS(RR_ROWS), .RR_COLS(RR_COLS), .RR_WR_LAT(4),
    .FE_XBARS(FE_XB), .FE_ROWS(FE_ROWS), .FE_COLS(FE_COLS),
    .SR_ARRAYS(SR_NA), .SR_ROWS(SR_ROWS), .SR_COLS(SR_COLS)
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

  // Host receive side: random backpressure; results sorted by source tier.
  always @(negedge clk) host_out_ready <= (($urandom % 4) != 0);
  always @(posedge clk) if (rst_n) begin
    if (host_out_valid && !host_out_ready) n_bp++;
    if (host_out_valid && host_out_ready) begin
      int l;
      l = (host_out_flit.src.z == 2'd0) ? 0 : (host_out_flit.src.z == 2'd2) ? 1 : 2;
      if (ngot[l] < L1_OUT) got[l][ngot[l]] = longint'(host_out_flit.data);
      ngot[l]++;
      if (l == 0) n_mcast++;
      if (l == 1) n_mcast++;
    end
    if (host_in_valid && !host_in_ready && host_in_flit.op == OP_WRITE_W) n_wstall++;
    // Tier activity: tiles of PE n are tile_busy[4n +: 4].
    if (tile_busy[0]) n_run[0]++;
    if (tile_busy[4 * (1 + MX * (1 + MY * 2))]) n_run[1]++;
    if (tile_busy[4 * (0 + MX * (1 + MY * 3)) + 1]) n_run[2]++;
  end

  task automatic send(int x, int y, int z, op_t op, int tile, int xbar, int index, int data);
    @(negedge clk);
    host_in_flit = '0;
    host_in_flit.dst.x = 2'(x);
    host_in_flit.dst.y = 2'(y);
    host_in_flit.dst.z = 2'(z);
    host_in_flit.src.host = 1'b1;
    host_in_flit.op    = op;
    host_in_flit.tile  = 2'(tile);
    host_in_flit.xbar  = 7'(xbar);
    host_in_flit.index = 16'(index);
    host_in_flit.data  = 32'(data);
    host_in_valid = 1'b1;
    @(posedge clk);
    while (!host_in_ready) @(posedge clk);
    @(negedge clk);
    host_in_valid = 1'b0;
  endtask

  function automatic int dest_word(int host, int x, int y, int z, int tile);
    dest_t d;
    d = '0;
    d.node.host = 1'(host);
    d.node.x = 2'(x);
    d.node.y = 2'(y);
    d.node.z = 2'(z);
    d.tile = 2'(tile);
    return int'(d);
  endfunction

  function automatic logic [7:0] sat8(longint v);
    return (v > 255) ? 8'hFF : 8'(v);
  endfunction

  task automatic wait_results(int l, int n);
    int t;
    t = 0;
    while (ngot[l] < n && t < 100000) begin
      @(negedge clk);
      t++;
    end
    repeat (50) @(negedge clk);  // let the other multicast copies land
  endtask

  initial begin
    rst_n = 1'b0; host_in_valid = 1'b0; host_in_flit = '0;
    for (int l = 0; l < 3; l++) begin ngot[l] = 0; n_run[l] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---- Layer 1 on ReRAM (0,0,0) tile 0.
    send(0, 0, 0, OP_ADD_DEST, 0, 0, 0, dest_word(0, 1, 1, 2, 0));
    send(0, 0, 0, OP_ADD_DEST, 0, 0, 0, dest_word(1, 0, 0, 0, 0));
    for (int x = 0; x < RR_XB; x++)
      for (int r = 0; r < RR_ROWS; r++)
        for (int w = 0; w < RR_WORDS; w++) begin
          W1[x][r][w] = (x == 1) ? 8'hFF : 8'($urandom);
          send(0, 0, 0, OP_WRITE_W, 0, x, (r << 6) | w, int'(W1[x][r][w]));
        end
    for (int r = 0; r < RR_ROWS; r++) begin
      X1[r] = 8'hFF;
      send(0, 0, 0, OP_WRITE_X, 0, 0, r, int'(X1[r]));
    end
    for (int n = 0; n < L1_OUT; n++) begin
      longint acc;
      acc = 0;
      for (int b = 0; b < 8; b++)
        for (int s = 0; s < 4; s++) begin
          int sum;
          sum = 0;
          for (int r = 0; r < RR_ROWS; r++)
            if (X1[r][b]) sum += int'(W1[n / RR_WORDS][r][n % RR_WORDS][2*s +: 2]);
          if (sum > 255) begin sum = 255; n_clip++; end
          acc += longint'(sum) << (b + 2 * s);
        end
      Y1[n] = acc;
    end
    // FeFET weights and host-provided inputs for layer 2 are loaded now too.
    send(1, 1, 2, OP_ADD_DEST, 0, 0, 0, dest_word(0, 0, 1, 3, 1));
    send(1, 1, 2, OP_ADD_DEST, 0, 0, 0, dest_word(1, 0, 0, 0, 0));
    for (int x = 0; x < FE_XB; x++)
      for (int r = 0; r < FE_ROWS; r++)
        for (int w = 0; w < FE_WORDS; w++) begin
          W2[x][r][w] = 8'($urandom);
          send(1, 1, 2, OP_WRITE_W, 0, x, (r << 6) | w, int'(W2[x][r][w]));
        end
    for (int r = L1_OUT; r < FE_ROWS; r++) begin
      X2[r] = 8'($urandom);
      send(1, 1, 2, OP_WRITE_X, 0, 0, r, int'(X2[r]));
    end
    send(0, 0, 0, OP_RUN, 0, 0, 0, 0);
    wait_results(0, L1_OUT);
    checks++;
    if (ngot[0] != L1_OUT) begin failures++; $display("layer 1: %0d results", ngot[0]); end
    for (int n = 0; n < L1_OUT; n++) begin
      checks++;
      if (got[0][n] != Y1[n]) begin
        failures++;
        $display("layer 1 result %0d: got %0d exp %0d", n, got[0][n], Y1[n]);
      end
      X2[n] = sat8(Y1[n]);
      if (Y1[n] > 255) n_sat++;
    end

    // ---- Layer 2 on FeFET (1,1,2) tile 0.
    send(0, 1, 3, OP_ADD_DEST, 1, 0, 0, dest_word(1, 0, 0, 0, 0));
    for (int r = 0; r < SR_ROWS; r++)
      for (int w = 0; w < SR_WORDS; w++) begin
        W3[r][w] = 8'($urandom);
        send(0, 1, 3, OP_WRITE_W, 1, 1, (r << 6) | w, int'(W3[r][w]));
      end
    for (int r = L2_OUT; r < SR_ROWS; r++) begin
      X3[r] = 8'($urandom);
      send(0, 1, 3, OP_WRITE_X, 1, 0, r, int'(X3[r]));
    end
    for (int n = 0; n < L2_OUT; n++) begin
      Y2[n] = 0;
      for (int r = 0; r < FE_ROWS; r++) Y2[n] += longint'(X2[r]) * longint'(W2[n / FE_WORDS][r][n % FE_WORDS]);
    end
    send(1, 1, 2, OP_RUN, 0, 0, 0, 0);
    wait_results(1, L2_OUT);
    checks++;
    if (ngot[1] != L2_OUT) begin failures++; $display("layer 2: %0d results", ngot[1]); end
    for (int n = 0; n < L2_OUT; n++) begin
      checks++;
      if (got[1][n] != Y2[n]) begin
        failures++;
        $display("layer 2 result %0d: got %0d exp %0d", n, got[1][n], Y2[n]);
      end
      X3[n] = sat8(Y2[n]);
      if (Y2[n] > 255) n_sat++;
    end

    // ---- Layer 3 on SRAM (0,1,3) tile 1, array 1.
    for (int n = 0; n < L3_OUT; n++) begin
      Y3[n] = 0;
      for (int r = 0; r < SR_ROWS; r++) Y3[n] += longint'(X3[r]) * longint'(W3[r][n]);
    end
    send(0, 1, 3, OP_RUN, 1, 1, 0, 0);
    wait_results(2, L3_OUT);
    checks++;
    if (ngot[2] != L3_OUT) begin failures++; $display("layer 3: %0d results", ngot[2]); end
    for (int n = 0; n < L3_OUT; n++) begin
      checks++;
      if (got[2][n] != Y3[n]) begin
        failures++;
        $display("layer 3 result %0d: got %0d exp %0d", n, got[2][n], Y3[n]);
      end
    end

    // ---- Mechanism coverage.
    checks++;
    if (int'(clip_count) != n_clip || n_clip == 0) begin
      failures++;
      $display("clip_count %0d, expected %0d (>0)", clip_count, n_clip);
    end
    checks++;
    if (n_wstall == 0 || n_mcast == 0 || n_sat == 0 || n_bp == 0
        || n_run[0] == 0 || n_run[1] == 0 || n_run[2] == 0) begin
      failures++;
    end
    $display("write stalls %0d, ADC clips %0d, multicast copies to host %0d, saturations %0d, host backpressure %0d",
             n_wstall, n_clip, n_mcast, n_sat, n_bp);
    $display("busy cycles: ReRAM %0d, FeFET %0d, SRAM %0d", n_run[0], n_run[1], n_run[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
