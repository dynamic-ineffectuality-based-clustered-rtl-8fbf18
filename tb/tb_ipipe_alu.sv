// tb_ipipe_alu: checks the I-pipe functional unit on random operands against
// arithmetic worked out here: results, the four flags, whether a result is
// written, and the Type-A misspeculation of branches, indirect jumps and
// predicated moves.
module tb_ipipe_alu;
  import ineff_pkg::*;
  int checks = 0, failures = 0;

  op_e op; cond_e cond;
  logic [XLEN-1:0] a, b, imm, result;
  logic [FLAG_W-1:0] flags_in, flags_out;
  logic pred_taken, result_ok, misspec;

  ipipe_alu dut (.op, .cond, .a, .b, .flags_in, .imm, .pred_taken, .result, .flags_out, .result_ok, .misspec);

  function automatic bit cond_ref(int c, logic [3:0] f);
    bit z, s, cy, o;
    z = f[0]; s = f[1]; cy = f[2]; o = f[3];
    case (c)
      0: return z;  1: return !z;  2: return s != o;  3: return s == o;
      4: return cy; 5: return !cy; 6: return 1;       default: return 0;
    endcase
  endfunction

  initial begin
    for (int t = 0; t < 20000; t++) begin
      logic [XLEN-1:0] er, bb;
      logic [XLEN:0] wide;
      bit eok, emis, arith, ec, eo;
      int k;
      k = $urandom_range(0, 11);
      op = op_e'(k);
      cond = cond_e'($urandom_range(0, 7));
      a = {$urandom, $urandom};
      b = ($urandom_range(0, 3) == 0) ? a : {$urandom, $urandom};
      if ($urandom_range(0, 3) == 0) a[XLEN-1] = ~b[XLEN-1];
      imm = ($urandom_range(0, 1)) ? a : {$urandom, $urandom};
      flags_in = 4'($urandom);
      pred_taken = $urandom_range(0, 1);
      #1;
      er = '0; eok = 1; emis = 0; arith = 0; ec = 0; eo = 0;
      case (k)
        1, 6: begin
          bb = (k == 1) ? b : imm;
          wide = {1'b0, a} + {1'b0, bb};
          er = wide[XLEN-1:0]; arith = 1; ec = wide[XLEN];
          eo = (a[XLEN-1] == bb[XLEN-1]) && (er[XLEN-1] != a[XLEN-1]);
        end
        2, 8: begin
          wide = {1'b0, a} - {1'b0, b};
          er = wide[XLEN-1:0]; arith = 1; ec = (a < b);
          eo = (a[XLEN-1] != b[XLEN-1]) && (er[XLEN-1] != a[XLEN-1]);
        end
        3: er = a & b;
        4: er = a | b;
        5: er = a ^ b;
        7: er = imm;
        9:  begin eok = 0; emis = cond_ref(int'(cond), flags_in) != pred_taken; end
        10: begin eok = 0; emis = (a != imm); end
        11: begin er = a; eok = cond_ref(int'(cond), flags_in); emis = eok != pred_taken; end
        default: eok = 0;
      endcase
      checks++;
      if (result_ok !== eok || misspec !== emis || (eok && result !== er)) begin
        failures++;
        if (failures < 10) $display("FAIL op %0d: ok %b/%b mis %b/%b res %h/%h", k, result_ok, eok, misspec, emis, result, er);
      end
      if (k inside {1, 2, 3, 4, 5, 6, 7, 8}) begin
        checks++;
        if (flags_out !== {arith ? eo : 1'b0, arith ? ec : 1'b0, er[XLEN-1], er == '0}) begin
          failures++;
          if (failures < 10) $display("FAIL flags op %0d: %b", k, flags_out);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
