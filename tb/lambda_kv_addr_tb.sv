// lambda_kv_addr_tb: walks token positions through the paper's 4 sink + 2044 window
// cache, keeping its own model of which token occupies each slot: sinks must never
// be overwritten, a new window token must replace exactly the token WIN positions
// older, and the visible-key count must saturate at 2048.
module lambda_kv_addr_tb;
  import accllm_pkg::*;
  localparam int S = KV_SINK, W = KV_WIN;
  logic [31:0] pos;
  logic [10:0] slot;
  logic [11:0] n_valid;
  logic evict;
  int occ [S+W];
  int checks = 0, failures = 0;

  lambda_kv_addr dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < S+W; s++) occ[s] = -1;
    for (int p = 0; p < 3*(S+W) + 17; p++) begin
      int expv;
      pos = p; #1;
      checks++;
      // the slot must hold nothing, or a window token exactly W positions older
      if (p < S) begin
        if (slot !== 11'(p) || occ[slot] != -1 || evict) begin
          failures++; $display("FAIL sink p=%0d slot=%0d", p, slot);
        end
      end else begin
        if (slot < S || (occ[slot] != -1 && occ[slot] != p - W) ||
            (evict !== (occ[slot] != -1))) begin
          failures++; $display("FAIL p=%0d slot=%0d holds %0d evict=%0d", p, slot, occ[slot], evict);
        end
      end
      occ[slot] = p;
      expv = (p + 1 < S + W) ? p + 1 : S + W;
      checks++;
      if (n_valid !== 12'(expv)) begin
        failures++; $display("FAIL p=%0d n_valid=%0d exp %0d", p, n_valid, expv);
      end
    end
    // sinks survive
    for (int s = 0; s < S; s++) begin
      checks++;
      if (occ[s] != s) begin failures++; $display("FAIL sink %0d lost", s); end
    end
    pos = 32'd1000000; #1;
    checks++;
    if (slot !== 11'(S + (1000000 - S) % W)) begin failures++; $display("FAIL far"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
