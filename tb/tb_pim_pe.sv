// tb_pim_pe: the network interface and tiles of one ReRAM PE, driven by flits.
// The PE sits at (0,1,2) and has reduced tiles: 2 crossbars of 16x16, 2-bit
// cells, write latency 4. The test:
//  1. Gives tile 0 two destinations, tile 2 of node (1,0,0) and the host.
//     It programs random weights and inputs, runs tile 0, and checks that
//     every result leaves twice (multicast), to those destinations in order,
//     with the right index, data and source. The data is checked against
//     an independent dot product.
//  2. Programs tile 1 so that output word 0 sums its inputs. It then feeds
//     tile 1 OP_RESULT flits, some larger than 255, which must saturate to
//     255 as they become inputs. It runs tile 1 towards the host and checks
//     the sum.
//  3. Counts the cycles in which in_ready was low during weight writes (the
//     write-latency stall) and in which out_ready backpressure held a
//     result. Both must happen.
module tb_pim_pe;
  import hepga_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int XB = 2, ROWS = 16, COLS = 16, WORDS = 4;
  logic rst_n;
  flit_t in_flit, out_flit;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [3:0] tile_busy;
  logic [15:0] clip_count;
  logic [7:0] W [XB][ROWS][WORDS];
  logic [7:0] X [ROWS];
  int checks = 0, failures = 0;
  int wstall = 0, ostall = 0, mcast = 0;

  pim_pe #(
    .DEVICE(DEV_RERAM), .X_POS(2'd0), .Y_POS(2'd1), .Z_POS(2'd2),
    .RR_XBARS(XB), .RR_ROWS(ROWS), .RR_COLS(COLS), .RR_WR_LAT(4)
  ) dut (
    .clk(clk), .rst_n(rst_n), .in_flit(in_flit), .in_valid(in_valid), .in_ready(in_ready),
    .out_flit(out_flit), .out_valid(out_valid), .out_ready(out_ready),
    .tile_busy(tile_busy), .clip_count(clip_count));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready && in_flit.op == OP_WRITE_W) wstall++;
    if (out_valid && !out_ready) ostall++;
  end

  task automatic send(op_t op, int tile, int xbar, int index, int data);
    @(negedge clk);
    in_flit = '0;
    in_flit.dst.y = 2'd1;
    in_flit.dst.z = 2'd2;
    in_flit.op    = op;
    in_flit.tile  = 2'(tile);
    in_flit.xbar  = 7'(xbar);
    in_flit.index = 16'(index);
    in_flit.data  = 32'(data);
    in_valid = 1'b1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 1'b0;
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

  // Receive one flit from the PE output, with random backpressure.
  task automatic recv(output flit_t f);
    forever begin
      @(negedge clk);
      out_ready = 1'($urandom);
      @(posedge clk);
      if (out_valid && out_ready) begin
        f = out_flit;
        @(negedge clk);
        out_ready = 1'b0;
        return;
      end
    end
  endtask

  initial begin
    flit_t f;
    longint e;
    rst_n = 1'b0; in_valid = 1'b0; out_ready = 1'b0; in_flit = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // 1. multicast of tile 0 results.
    send(OP_CLR_DEST, 0, 0, 0, 0);
    send(OP_ADD_DEST, 0, 0, 0, dest_word(0, 1, 0, 0, 2));
    send(OP_ADD_DEST, 0, 0, 0, dest_word(1, 0, 0, 0, 0));
    for (int x = 0; x < XB; x++)
      for (int r = 0; r < ROWS; r++)
        for (int w = 0; w < WORDS; w++) begin
          W[x][r][w] = 8'($urandom);
          send(OP_WRITE_W, 0, x, (r << 6) | w, int'(W[x][r][w]));
        end
    for (int r = 0; r < ROWS; r++) begin
      X[r] = 8'($urandom);
      send(OP_WRITE_X, 0, 0, r, int'(X[r]));
    end
    send(OP_RUN, 0, 0, 0, 0);
    for (int n = 0; n < XB * WORDS; n++) begin
      e = 0;
      for (int r = 0; r < ROWS; r++) e += longint'(X[r]) * longint'(W[n / WORDS][r][n % WORDS]);
      for (int c = 0; c < 2; c++) begin
        recv(f);
        checks++;
        if (f.op != OP_RESULT || f.index != 16'(n) || longint'(f.data) != e
            || f.src.y != 2'd1 || f.src.z != 2'd2
            || (c == 0 && (f.dst.host || f.dst.x != 2'd1 || f.tile != 2'd2))
            || (c == 1 && !f.dst.host)) begin
          failures++;
          $display("result %0d copy %0d: idx=%0d data=%0d exp=%0d dst=%h tile=%0d",
                   n, c, f.index, f.data, e, f.dst, f.tile);
        end else if (c == 1) mcast++;
      end
    end
    // 2. received results become saturated inputs of tile 1.
    send(OP_ADD_DEST, 1, 0, 0, dest_word(1, 0, 0, 0, 0));
    for (int x = 0; x < XB; x++)
      for (int r = 0; r < ROWS; r++)
        for (int w = 0; w < WORDS; w++)
          send(OP_WRITE_W, 1, x, (r << 6) | w, (x == 0 && w == 0) ? 1 : 0);
    e = 0;
    for (int r = 0; r < ROWS; r++) begin
      int v;
      v = (r % 3 == 0) ? 1000 + r : r * 7;
      send(OP_RESULT, 1, 0, r, v);
      e += (v > 255) ? 255 : v;
    end
    send(OP_RUN, 1, 0, 0, 0);
    for (int n = 0; n < XB * WORDS; n++) begin
      recv(f);
      if (n == 0) begin
        checks++;
        if (longint'(f.data) != e || !f.dst.host) begin
          failures++;
          $display("saturated sum got=%0d exp=%0d", f.data, e);
        end
      end
    end
    checks++;
    if (wstall == 0 || ostall == 0 || mcast != XB * WORDS) begin
      failures++;
      $display("wstall=%0d ostall=%0d mcast=%0d", wstall, ostall, mcast);
    end
    $display("write stalls %0d, output stalls %0d, multicast results %0d", wstall, ostall, mcast);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
