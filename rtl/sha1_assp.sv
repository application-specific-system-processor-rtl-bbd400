// sha1_assp: the application-specific processor, NI independent SHA-1 cores.
//
// The design reaches its throughput by replicating the iterative core rather
// than pipelining the rounds: NI cores run side by side, each with its own
// message port, handshake and hash output, and all share one clock and reset.
// With one round per clock, one core hashes 512 bits every 80 clocks, so the
// array delivers 512*NI/(80*Tclk) bits per second. NI = 48 is the largest
// configuration the design reports; L (maximum blocks per message) is this
// implementation's choice. Per-core ports are packed arrays indexed by core.
module sha1_assp
  import sha1_pkg::*;
#(
  parameter int unsigned NI = 48,                  // parallel instances
  parameter int unsigned L  = 4,                   // max blocks per message
  localparam int unsigned ZW    = 512 * L,
  localparam int unsigned MSG_W = ZW - 65,
  localparam int unsigned LEN_W = $clog2(ZW)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [NI-1:0]                  start,
  output logic [NI-1:0]                  ready,
  input  logic [NI-1:0][MSG_W-1:0]       m,
  input  logic [NI-1:0][LEN_W-1:0]       k_len,
  output logic [NI-1:0][HASH_W-1:0]      hash,
  output logic [NI-1:0]                  hash_valid
);
  for (genvar i = 0; i < NI; i++) begin : g_core
    sha1_core #(.L(L)) u_core (
      .clk, .rst_n,
      .start      (start[i]),
      .ready      (ready[i]),
      .m          (m[i]),
      .k_len      (k_len[i]),
      .hash       (hash[i]),
      .hash_valid (hash_valid[i])
    );
  end
endmodule
