// lp_fu_tb: checks the three FU opcodes on random and corner operands
// against integer reference arithmetic.
module lp_fu_tb;
  import rnn_pkg::*;
  import tb_ref_pkg::*;

  fu_op_e op;
  word_t  a, b, y0, y1;
  int checks = 0, failures = 0;

  lp_fu dut (.op(op), .a(a), .b(b), .y0(y0), .y1(y1));

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: a=%h b=%h got %0d exp %0d", what, a, b, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      case (n)
        0: begin a = 32'h80808080; b = 32'h80808080; end
        1: begin a = 32'h7f7f7f7f; b = 32'h80808080; end
        2: begin a = 32'h7fff7fff; b = 32'h00010001; end
        3: begin a = 32'h80008000; b = 32'hffffffff; end
        default: begin a = $urandom; b = $urandom; end
      endcase
      op = OP_MUL4X8_SPLIT; #1;
      for (int k = 0; k < 4; k++) begin
        longint p;
        p = longint'($signed(a[8*k +: 8])) * longint'($signed(b[8*k +: 8]));
        if (k < 2) check("mul lo", longint'($signed(y0[16*k +: 16])), p);
        else       check("mul hi", longint'($signed(y1[16*(k-2) +: 16])), p);
      end
      op = OP_ADD2X16_SPLIT; #1;
      check("add16 0", longint'($signed(y0)),
            clamp(longint'($signed(a[15:0])) + longint'($signed(b[15:0])), -32768, 32767));
      check("add16 1", longint'($signed(y1)),
            clamp(longint'($signed(a[31:16])) + longint'($signed(b[31:16])), -32768, 32767));
      op = OP_ADD32; #1;
      check("add32", longint'(y0), (longint'(a) + longint'(b)) & 64'hffff_ffff);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
