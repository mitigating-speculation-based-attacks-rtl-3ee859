// tb_sc_marking_decode -- exhaustive check of the prefix decoder.
// Every combination of prefix presence, the 11 prefix bits and the three
// control-flow kinds is applied; the expected marking is computed here from
// the option table (restriction, dependency and branch marking, barrier).
module tb_sc_marking_decode;
  import sc_pkg::*;

  logic       present;
  sc_prefix_t prefix;
  ctl_e       ctl;
  sc_mark_t   mark;
  int checks = 0, failures = 0;

  sc_marking_decode dut (.prefix_present(present), .prefix(prefix), .ctl(ctl), .mark(mark));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 2; p++)
      for (int c = 0; c < 3; c++)
        for (int v = 0; v < 2048; v++) begin
          res_e e_res; dep_e e_bd, e_br; logic e_bar;
          logic [10:0] raw;
          raw     = 11'(v);
          present = p[0];
          prefix  = raw;
          ctl     = ctl_e'(c);
          #1;
          // expected values from the option table
          if (p == 0)       e_res = RES_NO;
          else if (raw[10]) e_res = RES_FE;
          else if (raw[9])  e_res = RES_BE;
          else              e_res = RES_NO;
          e_bd  = (p == 0) ? DEP_INVALID : (raw[8] ? DEP_VALID : DEP_NO);
          e_br  = (c == 0) ? DEP_NO : e_bd;
          e_bar = (c == 1 && p == 0) || (c == 2 && !(p == 1 && raw[8] == 1'b0));
          checks++;
          if (mark.res !== e_res || mark.bd !== e_bd || mark.br !== e_br ||
              mark.barrier !== e_bar || mark.ctl !== ctl ||
              mark.branch_id !== raw[7:4] || mark.dep_branch_id !== raw[3:0]) begin
            failures++;
            if (failures < 10)
              $display("mismatch p=%0d c=%0d raw=%03h got res=%0d bd=%0d br=%0d bar=%0b",
                       p, c, raw, mark.res, mark.bd, mark.br, mark.barrier);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
