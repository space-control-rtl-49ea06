// tb_perm_cache -- self-checking testbench for perm_cache.
//
// A 16-entry instance under random fills, lookups and BISnp invalidates,
// against a model of the same policy (fill in place if present, else first
// free entry, else round robin).  Checks hit/miss and data of every lookup,
// that an invalidate removes a line, that an invalidate wins over a
// simultaneous fill of the same line, and that capacity is 16 lines.
module tb_perm_cache;
  import spc_pkg::*;
  localparam int E = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  pa_t lk_addr, fill_addr, inv_addr;
  logic lk_hit, fill_valid, inv_valid;
  line_t lk_data, fill_data;
  int checks = 0, failures = 0;
  bit mv [E]; logic [34:0] mt [E]; line_t md [E]; int rr = 0;

  perm_cache #(.ENTRIES(E)) dut (.*);

  function automatic pa_t la(int i);   // 40 distinct line addresses
    return TABLE_BASE + (pa_t'(i) << 6);
  endfunction

  task automatic model_fill(pa_t a, line_t d);
    int v; bit hit, free; v = -1; hit = 0; free = 0;
    for (int i = 0; i < E; i++) if (mv[i] && mt[i] == a[40:6]) begin v = i; hit = 1; end
    if (!hit) for (int i = E - 1; i >= 0; i--) if (!mv[i]) begin v = i; free = 1; end
    if (!hit && !free) begin v = rr; rr = (rr + 1) % E; end
    mv[v] = 1; mt[v] = a[40:6]; md[v] = d;
  endtask

  initial begin
    fill_valid = 0; inv_valid = 0; lk_addr = la(0); fill_addr = '0; inv_addr = '0; fill_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      bit ehit; line_t edata;
      lk_addr = la($urandom_range(0, 39)) + pa_t'($urandom_range(0, 63));
      fill_valid = 1'($urandom); fill_addr = la($urandom_range(0, 39));
      for (int w = 0; w < 16; w++) fill_data[w*32 +: 32] = $urandom;
      inv_valid = ($urandom_range(0, 3) == 0);
      inv_addr  = (t % 7 == 0) ? fill_addr : la($urandom_range(0, 39));
      #1;
      ehit = 0; edata = '0;
      for (int i = 0; i < E; i++) if (mv[i] && mt[i] == lk_addr[40:6]) begin ehit = 1; edata = md[i]; end
      checks++;
      if (lk_hit != ehit || (ehit && lk_data != edata)) begin
        failures++; $display("FAIL lookup t=%0d hit=%0d exp=%0d", t, lk_hit, ehit);
      end
      @(negedge clk);
      if (fill_valid) model_fill(fill_addr, fill_data);
      if (inv_valid) for (int i = 0; i < E; i++) if (mt[i] == inv_addr[40:6]) mv[i] = 0;
    end
    // capacity: 16 distinct lines all present after filling them
    fill_valid = 0; inv_valid = 0;
    rst_n = 0; @(negedge clk); rst_n = 1;
    for (int i = 0; i < E; i++) begin
      fill_valid = 1; fill_addr = la(i); fill_data = line_t'(i); @(negedge clk);
    end
    fill_valid = 0;
    for (int i = 0; i < E; i++) begin
      lk_addr = la(i); #1; checks++;
      if (!lk_hit || lk_data != line_t'(i)) begin failures++; $display("FAIL capacity %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
