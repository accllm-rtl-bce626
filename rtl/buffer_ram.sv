// buffer_ram: one bank of the on-chip buffer.
//
// A simple dual-port RAM (one write port, one read port) with byte-lane write
// enables and a registered read: rdata holds mem[raddr] one clock edge after raddr
// was presented. The accelerator builds its Weight/KV buffer (one bank per PE block),
// Input buffer (one bank per tile) and Output buffer from this bank. The paper
// names these buffers only; depth, width, porting and byte enables are this
// design's choices. WIDTH must be a multiple of 8.
module buffer_ram #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic               clk,
  input  logic               we,
  input  logic [AW-1:0]      waddr,
  input  logic [WIDTH-1:0]   wdata,
  input  logic [WIDTH/8-1:0] wbe,
  input  logic [AW-1:0]      raddr,
  output logic [WIDTH-1:0]   rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int b = 0; b < WIDTH/8; b++)
        if (wbe[b]) mem[waddr][8*b +: 8] <= wdata[8*b +: 8];
    end
    rdata <= mem[raddr];
  end

endmodule
