// sha1_co: output concatenation CO.
//
// Joins the five 32-bit hash words into the 160-bit hash code
// h_i = {ha, hb, hc, hd, he} (ha in the top bits) and registers it when
// capture is high, which the core raises in the last round of a message's last
// block with the updated words. valid pulses for one clock in the cycle after
// the capture; hash holds its value until the next capture. The description
// calls the result "a serial signal"; a bit-serial output could not keep up
// with a new hash every 80 clocks, so it is read here as the concatenated
// 160-bit word.
module sha1_co
  import sha1_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              capture,
  input  word_t             ha,
  input  word_t             hb,
  input  word_t             hc,
  input  word_t             hd,
  input  word_t             he,
  output logic [HASH_W-1:0] hash,
  output logic              valid
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hash  <= '0;
      valid <= 1'b0;
    end else begin
      valid <= capture;
      if (capture) hash <= {ha, hb, hc, hd, he};
    end
  end
endmodule
