// tb_lexp_store -- self-checking testbench for lexp_store.
//
// Random label records (right or wrong host, allocated or not, HWPID 0) and
// invalidates against a model map; every cycle all 128 entries are read
// back and compared.
module tb_lexp_store;
  import spc_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] host_id;
  logic [127:0] alloc_mask;
  logic wr, wr_ok, inv, rd_valid;
  label_rec_t wr_rec;
  hwpid_t inv_id, rd_id;
  label_t rd_lexp;
  logic [63:0] rd_start, rd_size;
  int checks = 0, failures = 0;
  bit m_v [128]; logic [63:0] m_l [128], m_s [128], m_z [128];

  lexp_store dut (.*);

  initial begin
    host_id = 8'd3; wr = 0; inv = 0; inv_id = 0; rd_id = 0; wr_rec = '0;
    alloc_mask = {$urandom, $urandom, $urandom, $urandom};
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      int h, p; bit ok;
      @(negedge clk);
      h = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 255) : 3;
      p = $urandom_range(0, 127);
      wr = 1'($urandom); inv = ($urandom_range(0, 7) == 0); inv_id = 7'($urandom);
      wr_rec = label_rec_t'(make_label({$urandom, $urandom}, p, h, {$urandom, $urandom}, {$urandom, $urandom}));
      if (t % 100 == 0) alloc_mask = {$urandom, $urandom, $urandom, $urandom};
      #1;
      ok = wr && h == 3 && p != 0 && alloc_mask[p];
      checks++; if (wr_ok != ok) begin failures++; $display("FAIL wr_ok"); end
      @(negedge clk);
      if (inv) m_v[inv_id] = 0;
      if (ok) begin m_v[p] = 1; m_l[p] = wr_rec.lexp; m_s[p] = wr_rec.range_start; m_z[p] = wr_rec.range_size; end
      wr = 0; inv = 0;
      for (int i = 0; i < 128; i++) begin
        rd_id = 7'(i); #1;
        checks++;
        if (rd_valid != m_v[i] || (m_v[i] && (rd_lexp != m_l[i] || rd_start != m_s[i] || rd_size != m_z[i]))) begin
          failures++; if (failures < 5) $display("FAIL entry %0d v=%0d/%0d l=%h/%h t=%0d", i, rd_valid, m_v[i], rd_lexp, m_l[i], t);
        end
      end
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
