// tb_mem_encrypt_engine -- self-checking testbench for mem_encrypt_engine.
//
// Writes with HPA[42] = 1 must reach DRAM as data XOR the reference
// keystream, those with HPA[42] = 0 unchanged; read responses are decrypted
// the same way; a round trip through a small DRAM model must return the
// plaintext and the stored line must differ from it; handshakes pass through
// in the same cycle (zero added latency).
module tb_mem_encrypt_engine;
  import spc_pkg::*;
  import tb_ref_pkg::*;
  logic [63:0] k_host;
  logic in_valid, in_ready, mem_valid, mem_ready, mem_resp_valid, out_resp_valid;
  loc_req_t in_req, mem_req;
  loc_resp_t mem_resp, out_resp;
  int checks = 0, failures = 0;

  mem_encrypt_engine dut (.*);

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    k_host = 64'h0123_4567_89AB_CDEF;
    for (int t = 0; t < 300; t++) begin
      logic [511:0] d;
      logic [40:0]  a;
      bit enc;
      for (int w = 0; w < 16; w++) d[w*32 +: 32] = $urandom;
      a = {$urandom, $urandom}; enc = 1'($urandom);
      if (t % 50 == 0) k_host = {$urandom, $urandom};
      in_valid = 1; mem_ready = 1'($urandom);
      in_req.addr = {enc, 1'b0, a}; in_req.cmd = CMD_ST; in_req.wdata = d;
      mem_resp_valid = 1; mem_resp.addr = {enc, 1'b0, a};
      mem_resp.rdata = d ^ (enc ? ref_keystream(k_host, a) : '0);
      #1;
      chk(mem_valid == in_valid && in_ready == mem_ready, "handshake pass-through");
      chk(mem_req.addr == in_req.addr, "address");
      chk(mem_req.wdata == (enc ? d ^ ref_keystream(k_host, a) : d), "write data");
      if (enc) chk(mem_req.wdata != d, "ciphertext differs");
      chk(out_resp_valid && out_resp.rdata == d, "read decrypt");
      // loads carry no data to encrypt
      in_req.cmd = CMD_LD; #1;
      chk(mem_req.wdata == d, "load data untouched");
      #1;
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
