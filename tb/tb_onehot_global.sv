// tb_onehot_global: random per-array hits and rows for 4 arrays of 128 rows; the
// result must be {first hitting array, its row}, and no hit when none hit.
module tb_onehot_global;
  logic [3:0] sub_hit;
  logic [3:0][6:0] sub_row;
  logic hit;
  logic [8:0] row;
  int checks = 0, failures = 0;
  onehot_global #(.N_SUB(4), .ROWS(128)) dut (.sub_hit, .sub_row, .hit, .row);
  initial begin
    for (int n = 0; n < 500; n++) begin
      int e;
      sub_hit = 4'($urandom);
      if (n < 16) sub_hit = 4'(n);
      for (int s = 0; s < 4; s++) sub_row[s] = 7'($urandom);
      #1;
      e = -1;
      for (int s = 3; s >= 0; s--) if (sub_hit[s]) e = s * 128 + int'(sub_row[s]);
      checks++;
      if (hit != (e >= 0) || (e >= 0 && int'(row) != e)) begin
        failures++;
        if (failures < 5) $display("FAIL hits=%b row=%0d exp=%0d", sub_hit, row, e);
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
