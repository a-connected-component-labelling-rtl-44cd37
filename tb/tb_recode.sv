// tb_recode: random label groups and merger lists; the expected output is
// computed by applying the mergers one after the other in the testbench.
module tb_recode;
  import ccl_pkg::*;
  localparam int NL = 4, NM = 3;
  label_t li [NL], lo [NL];
  merge_t mi [NM];
  int checks = 0, failures = 0;

  recode #(.N_LABELS(NL), .N_MERGES(NM)) dut (.labels_i(li), .merges_i(mi), .labels_o(lo));

  initial begin
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < NL; i++) li[i] = label_t'($urandom % 8);
      for (int k = 0; k < NM; k++) begin
        mi[k].valid = ($urandom % 4) != 0;
        mi[k].src   = label_t'($urandom % 8);
        mi[k].dst   = label_t'($urandom % 8);
      end
      if (t == 0) begin  // paper example: group labels 1,4 with 4->1, 7->1
        li = '{label_t'(1), label_t'(0), label_t'(4), label_t'(0)};
        mi[0] = '{1'b1, label_t'(4), label_t'(1)};
        mi[1] = '{1'b1, label_t'(7), label_t'(1)};
        mi[2] = '0;
      end
      #1;
      for (int i = 0; i < NL; i++) begin
        label_t e;
        e = li[i];
        for (int k = 0; k < NM; k++)
          if (mi[k].valid && e != 0 && e == mi[k].src) e = mi[k].dst;
        checks++;
        if (lo[i] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL t%0d i%0d got %0d exp %0d", t, i, lo[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
