// hash_unit: pipelined 64-bit key hash for the key-value APU.
//
// The paper gives the KVS a pipelined hash unit for the hash value and bucket
// index but not the function; this design uses the 64-bit finalizer of
// MurmurHash3 (xor-shift 33, multiply, xor-shift 33, multiply, xor-shift 33)
// spread over three register stages. A new key is accepted every cycle; the
// hash of a key appears three cycles after it is accepted together with the
// tag that entered with it. When the output is not taken (out_ready low while
// out_valid is high) the whole pipeline holds.
module hash_unit #(
  parameter int unsigned TAG_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [63:0]       in_key,
  input  logic [TAG_W-1:0]  in_tag,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [63:0]       out_hash,
  output logic [TAG_W-1:0]  out_tag
);

  localparam logic [63:0] C1 = 64'hff51afd7ed558ccd;
  localparam logic [63:0] C2 = 64'hc4ceb9fe1a85ec53;

  logic              v1, v2, v3;
  logic [63:0]       h1, h2, h3;
  logic [TAG_W-1:0]  t1, t2, t3;
  logic              en;

  assign en        = !v3 || out_ready;
  assign in_ready  = en;
  assign out_valid = v3;
  assign out_hash  = h3;
  assign out_tag   = t3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, v2, v3} <= '0;
      {h1, h2, h3} <= '0;
      {t1, t2, t3} <= '0;
    end else if (en) begin
      v1 <= in_valid;
      h1 <= (in_key ^ (in_key >> 33)) * C1;
      t1 <= in_tag;
      v2 <= v1;
      h2 <= (h1 ^ (h1 >> 33)) * C2;
      t2 <= t1;
      v3 <= v2;
      h3 <= h2 ^ (h2 >> 33);
      t3 <= t2;
    end
  end

endmodule
