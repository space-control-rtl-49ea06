// sdm_model -- behavioural model of the shared disaggregated memory (SDM)
// behind a CXL link, for the testbenches.
//
// What it does: accepts downstream requests (valid/ready, ready drops at
// random while `rand_ready` is high), applies stores to a sparse line memory
// at once and sends no response for them, and answers every load after a
// latency of MIN_LAT..MAX_LAT cycles.  Responses come back out of order:
// each cycle one response whose latency has elapsed is picked at random.
// The response carries the request's address and tag.  Lines never written
// read as zero.  Testbenches preload and inspect the memory through
// `mem` (indexed by line address) and the `wr_count` of accepted stores.
//
// This is a test model; none of it is taken from the paper beyond the
// existence of a load/store memory across the link with a latency.
module sdm_model
  import spc_pkg::*;
#(
  parameter int unsigned MIN_LAT      = 4,
  parameter int unsigned MAX_LAT      = 24
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     rand_ready,     // 1: ready drops at random (1 cycle in 10)
  input  logic     dreq_valid,
  output logic     dreq_ready,
  input  dn_req_t  dreq,
  output logic     uresp_valid,
  output up_resp_t uresp
);

  typedef struct {
    up_resp_t    r;
    longint      due;
  } pend_t;

  line_t  mem [logic [PA_W-7:0]];
  pend_t  pend [$];
  longint now;
  int     wr_count;
  int     rd_count;

  function automatic line_t peek(pa_t a);
    return mem.exists(a[PA_W-1:6]) ? mem[a[PA_W-1:6]] : '0;
  endfunction

  task automatic poke(pa_t a, line_t d);
    mem[a[PA_W-1:6]] = d;
  endtask

  initial begin
    now = 0; wr_count = 0; rd_count = 0;
    dreq_ready = 1'b1;
    uresp_valid = 1'b0;
    uresp = '0;
  end

  always @(posedge clk) begin
    now <= now + 1;
    if (!rst_n) begin
      pend.delete();
      uresp_valid <= 1'b0;
      dreq_ready  <= 1'b1;
    end else begin
      // accept
      if (dreq_valid && dreq_ready) begin
        if (dreq.cmd == CMD_ST) begin
          mem[dreq.addr[PA_W-1:6]] = dreq.wdata;
          wr_count++;
        end else begin
          pend_t p;
          p.r.addr  = dreq.addr;
          p.r.tag   = dreq.tag;
          p.r.rdata = peek(dreq.addr);
          p.due     = now + longint'(MIN_LAT + $urandom_range(MAX_LAT - MIN_LAT));
          pend.push_back(p);
          rd_count++;
        end
      end
      dreq_ready <= rand_ready ? ($urandom_range(9) != 0) : 1'b1;
      // respond: one ripe response, chosen at random
      begin
        int ripe [$];      // static: emptied every cycle
        ripe.delete();
        for (int i = 0; i < pend.size(); i++)
          if (pend[i].due <= now) ripe.push_back(i);
        if (ripe.size() != 0) begin
          int k;
          k = ripe[$urandom_range(ripe.size() - 1)];
          uresp_valid <= 1'b1;
          uresp       <= pend[k].r;
          pend.delete(k);
        end else begin
          uresp_valid <= 1'b0;
        end
      end
    end
  end

endmodule
