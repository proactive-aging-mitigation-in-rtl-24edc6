// tb_row_rotate: every rotation amount for a 2-row and an 8-row shifter
// (8 rows is the largest fabric height the paper considers).
module tb_row_rotate;
  int checks = 0, failures = 0;
  logic [1:0][7:0] in2, out2;
  logic [0:0]      amt2;
  logic [7:0][5:0] in8, out8;
  logic [2:0]      amt8;

  row_rotate #(.ROWS(2), .W(8)) dut2 (.in(in2), .amt(amt2), .out(out2));
  row_rotate #(.ROWS(8), .W(6)) dut8 (.in(in8), .amt(amt8), .out(out8));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      in2 = $urandom; amt2 = 1'($urandom);
      for (int r = 0; r < 8; r++) in8[r] = 6'($urandom);
      amt8 = 3'($urandom);
      #1;
      for (int r = 0; r < 2; r++) begin
        checks++;
        if (out2[(r + amt2) % 2] !== in2[r]) begin failures++; $display("FAIL2 r=%0d amt=%0d", r, amt2); end
      end
      for (int r = 0; r < 8; r++) begin
        checks++;
        if (out8[(r + amt8) % 8] !== in8[r]) begin failures++; $display("FAIL8 r=%0d amt=%0d", r, amt8); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
