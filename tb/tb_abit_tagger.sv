// tb_abit_tagger -- self-checking testbench for abit_tagger.
//
// Random PA, V, HWPID and ring: the extended address must carry the HWPID
// in bits [47:41] only when V is set in user mode, and the PA unchanged.
module tb_abit_tagger;
  import spc_pkg::*;
  pa_t pa; logic v_bit; hwpid_t cur_hwpid; logic [1:0] ring; epa_t epa;
  int checks = 0, failures = 0;

  abit_tagger dut (.*);

  initial begin
    for (int t = 0; t < 1000; t++) begin
      logic [47:0] exp_epa;
      pa = {$urandom, $urandom}; v_bit = 1'($urandom); cur_hwpid = 7'($urandom);
      ring = 2'($urandom);
      #1;
      exp_epa = {(v_bit && ring == 2'd3) ? cur_hwpid : 7'd0, pa};
      checks++;
      if (epa !== exp_epa) begin failures++; $display("FAIL %h exp %h", epa, exp_epa); end
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
