// tb_key_mask_encoder: checks the query-bit to search-line encoding against the
// three-row table 0 -> (0,Vs), 1 -> (Vs,0), X -> (0,0) over random queries and masks,
// and that a disabled encoder drives nothing.
module tb_key_mask_encoder;
  import path_pkg::*;
  logic          en;
  logic [QW-1:0] q, mask, sl, slb;
  int checks = 0, failures = 0;

  key_mask_encoder dut (.en, .q, .mask, .sl, .slb);

  initial begin
    for (int n = 0; n < 400; n++) begin
      en   = (n % 7) != 0;
      q    = {$urandom, $urandom, $urandom};
      mask = {$urandom, $urandom, $urandom} & {$urandom, $urandom, $urandom};
      #1;
      for (int i = 0; i < QW; i++) begin
        logic [1:0] exp;
        if (!en || mask[i]) exp = 2'b00;
        else if (q[i])      exp = 2'b10;
        else                exp = 2'b01;
        checks++;
        if ({sl[i], slb[i]} !== exp) begin
          failures++;
          if (failures < 5) $display("bit %0d q=%b m=%b en=%b got %b%b exp %b", i, q[i], mask[i], en, sl[i], slb[i], exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
