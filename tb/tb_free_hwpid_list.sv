// tb_free_hwpid_list -- self-checking testbench for free_hwpid_list.
//
// Pops all 127 IDs and checks they come out as 1..127 in order and that the
// list then reports empty; checks HWPID_local (alloc_mask) after every step;
// checks that releasing HWPID 0, a free ID or an ID twice is refused; then
// runs random get/release traffic against a model of the free set.
module tb_free_hwpid_list;
  import spc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic get, get_ok, rel, rel_ok;
  hwpid_t get_id, rel_id;
  logic [127:0] alloc_mask;
  int checks = 0, failures = 0;
  bit model_alloc [128];
  int model_q [$];

  free_hwpid_list dut (.*);

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic check_mask();
    logic [127:0] m;
    for (int i = 0; i < 128; i++) m[i] = model_alloc[i];
    chk(alloc_mask == m, "alloc_mask");
  endtask

  initial begin
    get = 0; rel = 0; rel_id = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 1; i < 128; i++) model_q.push_back(i);
    @(negedge clk);
    check_mask();
    // drain
    for (int i = 1; i < 128; i++) begin
      get = 1;
      #1 chk(get_ok && get_id == hwpid_t'(i), $sformatf("pop %0d got %0d", i, get_id));
      @(negedge clk); get = 0;
      model_alloc[i] = 1; void'(model_q.pop_front());
    end
    check_mask();
    get = 1; #1 chk(!get_ok, "empty list"); @(negedge clk); get = 0;
    // illegal releases
    rel = 1; rel_id = 0; #1 chk(!rel_ok, "release 0 refused"); @(negedge clk);
    rel_id = 5; #1 chk(rel_ok, "release 5 accepted"); @(negedge clk);
    model_alloc[5] = 0; model_q.push_back(5);
    rel_id = 5; #1 chk(!rel_ok, "double release refused"); @(negedge clk);
    rel = 0;
    check_mask();
    // random traffic
    for (int t = 0; t < 2000; t++) begin
      get = $urandom_range(0, 1);
      rel = $urandom_range(0, 1);
      rel_id = hwpid_t'($urandom_range(0, 127));
      #1;
      if (get) begin
        chk(get_ok == (model_q.size() != 0), "get_ok");
        if (model_q.size() != 0) chk(get_id == hwpid_t'(model_q[0]), "get order");
      end
      begin
        bit relok; bit popped; int id0;
        relok  = rel && rel_id != 0 && model_alloc[rel_id];
        popped = get && model_q.size() != 0;
        id0    = popped ? model_q[0] : 0;
        chk(rel_ok == relok, "rel_ok");
        @(negedge clk);
        if (popped) begin model_alloc[id0] = 1; void'(model_q.pop_front()); end
        if (relok)  begin model_alloc[rel_id] = 0; model_q.push_back(int'(rel_id)); end
        check_mask();
      end
      // a release is judged on the mask before this cycle's pop
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
