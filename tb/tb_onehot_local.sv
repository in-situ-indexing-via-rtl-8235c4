// tb_onehot_local: random and edge-case 128-bit match vectors; the reported row must be
// the lowest set bit and hit must equal "any bit set".
module tb_onehot_local;
  logic [127:0] match;
  logic hit;
  logic [6:0] row;
  int checks = 0, failures = 0;
  onehot_local #(.ROWS(128)) dut (.match, .hit, .row);
  initial begin
    for (int n = 0; n < 600; n++) begin
      int expr;
      if (n == 0) match = '0;
      else if (n < 129) match = 128'(1) << (n - 1);
      else begin
        match = {$urandom, $urandom, $urandom, $urandom};
        if (n % 3 == 0) match = match & (~128'(0) << ($urandom % 128));
        if (n % 5 == 0) match = match & {$urandom, $urandom, $urandom, $urandom} & {$urandom, $urandom, $urandom, $urandom};
      end
      #1;
      expr = -1;
      for (int i = 127; i >= 0; i--) if (match[i]) expr = i;
      checks++;
      if (hit != (expr >= 0) || (expr >= 0 && int'(row) != expr)) begin
        failures++;
        if (failures < 5) $display("FAIL match=%h hit=%b row=%0d exp=%0d", match, hit, row, expr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
