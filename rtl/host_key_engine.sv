// host_key_engine -- holder of the host secret key K_host.
//
// K_host keys the labels SPACE generates and the local memory encryption.
// The key is provisioned once after reset (by the platform's trusted boot
// path; the paper does not say how) and the register then locks: further
// writes are ignored until the next reset, and the key is only wired to the
// MAC and the encryption engine, never to a software-readable port.
// From the paper: a host key engine holding the 64-bit K_host.  The
// write-once provisioning port and the lock are this design's choices.
//
// Interface: `prov_wr`/`prov_key` load the key when `locked` is low; the key
// is on `k_host` from the next edge and `locked` rises at the same time.
module host_key_engine
  import spc_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             prov_wr,
  input  logic [KEY_W-1:0] prov_key,
  output logic [KEY_W-1:0] k_host,
  output logic             locked
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_host <= '0;
      locked <= 1'b0;
    end else if (prov_wr && !locked) begin
      k_host <= prov_key;
      locked <= 1'b1;
    end
  end

endmodule
