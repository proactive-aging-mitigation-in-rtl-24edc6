// tb_fu_alu: random and corner operands for every operation of fu_alu,
// compared with the reference ALU of cgra_ref_pkg; also checks `busy`.
module tb_fu_alu;
  import cgra_pkg::*;
  import cgra_ref_pkg::*;
  int checks = 0, failures = 0;
  alu_op_e op;
  word_t a, b, y;
  logic busy;

  fu_alu dut (.op, .a, .b, .y, .busy);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t corner [6] = '{32'h0, 32'h1, 32'hffff_ffff, 32'h8000_0000, 32'h7fff_ffff, 32'h1f};
    for (int o = 0; o <= 11; o++)
      for (int i = 0; i < 6; i++)
        for (int j = 0; j < 6; j++) begin
          op = alu_op_e'(o); a = corner[i]; b = corner[j];
          #1;
          checks++;
          if (y !== ref_alu(op, a, b) || busy !== (op != ALU_NOP)) begin
            failures++;
            $display("FAIL op=%0d a=%h b=%h y=%h exp=%h", o, a, b, y, ref_alu(op, a, b));
          end
        end
    for (int n = 0; n < 2000; n++) begin
      op = alu_op_e'($urandom_range(0, 11)); a = $urandom; b = $urandom;
      #1;
      checks++;
      if (y !== ref_alu(op, a, b)) begin
        failures++;
        $display("FAIL op=%0d a=%h b=%h y=%h", op, a, b, y);
      end
    end
    // a few hand-computed results
    op = ALU_SUB; a = 5; b = 7; #1; checks++; if (y !== 32'hffff_fffe) failures++;
    op = ALU_SRA; a = 32'h8000_0000; b = 4; #1; checks++; if (y !== 32'hf800_0000) failures++;
    op = ALU_SLT; a = 32'hffff_ffff; b = 0; #1; checks++; if (y !== 1) failures++;
    op = ALU_SLTU; a = 32'hffff_ffff; b = 0; #1; checks++; if (y !== 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
