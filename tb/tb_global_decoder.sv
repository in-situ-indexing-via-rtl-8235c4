// tb_global_decoder: every address in and past range, with enable on and off; the
// select must be one-hot on the addressed group, or all zero.
module tb_global_decoder;
  localparam int G = 16;
  logic en;
  logic [19:0] addr;
  logic [G-1:0] sel;
  int checks = 0, failures = 0;
  global_decoder #(.GROUPS(G), .AW(20)) dut (.en, .addr, .sel);
  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < G + 8; a++) begin
        logic [G-1:0] exp;
        en = e[0]; addr = 20'(a); #1;
        exp = (e == 1 && a < G) ? G'(1) << a : '0;
        checks++;
        if (sel != exp) begin failures++; $display("FAIL en=%0d a=%0d sel=%h", e, a, sel); end
      end
    addr = 20'hFFFFF; en = 1; #1; checks++; if (sel != '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
