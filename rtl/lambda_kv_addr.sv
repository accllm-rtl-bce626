// lambda_kv_addr: KV-cache slot mapping for Lambda-shaped attention.
//
// Lambda-shaped attention keeps the keys and values of the first SINK tokens
// ("attention sinks") for good, plus those of the most recent WIN tokens, so the KV
// cache has a fixed SINK + WIN slots whatever the sequence length. This unit maps a
// token position to its slot: sink tokens to slots 0..SINK-1, every later token to a
// ring buffer, slot SINK + (pos - SINK) mod WIN, where it overwrites the token WIN
// positions older (evict = 1). It also reports how many cached tokens a query at
// position pos attends to: min(pos + 1, SINK + WIN).
// Purely combinational. The cache policy (4 sink + 2044 recent = 2048 entries)
// follows the paper; the ring-buffer addressing is this design's choice.
module lambda_kv_addr
  import accllm_pkg::*;
#(
  parameter int unsigned SINK = KV_SINK,
  parameter int unsigned WIN  = KV_WIN,
  localparam int unsigned SW  = $clog2(SINK + WIN),
  localparam int unsigned NW  = $clog2(SINK + WIN + 1)
) (
  input  logic [31:0]   pos,
  output logic [SW-1:0] slot,
  output logic [NW-1:0] n_valid,
  output logic          evict
);

  always_comb begin
    if (pos < SINK) slot = SW'(pos);
    else            slot = SW'(SINK + (pos - SINK) % WIN);
    if (pos >= SINK + WIN - 1) n_valid = NW'(SINK + WIN);
    else                       n_valid = NW'(pos + 1);
    evict = (pos >= SINK + WIN);
  end

endmodule
