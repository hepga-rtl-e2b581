// tb_addr_decoder: all addresses of the 9-way decoder, enabled and disabled.
module tb_addr_decoder;
  logic       en;
  logic [3:0] addr;
  logic [8:0] sel;
  int checks = 0, failures = 0;

  addr_decoder #(.N(9)) dut (.en(en), .addr(addr), .sel(sel));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 16; a++) begin
        logic [8:0] exp_sel;
        en   = e[0];
        addr = 4'(a);
        #1;
        exp_sel = '0;
        if (e == 1 && a < 9) exp_sel[a] = 1'b1;
        checks++;
        if (sel != exp_sel) begin
          failures++;
          $display("mismatch en=%0d addr=%0d sel=%b", e, a, sel);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
