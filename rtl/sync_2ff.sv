// sync_2ff: two-flop synchroniser for signals that enter a clock domain
// asynchronously (NINO levels, the muon trigger, handshake levels).
//
// Each bit of `d` is sampled by two flip-flops in series on `clk`; `q`
// follows `d` two to three clock edges later. Bits are synchronised
// independently, so a multi-bit `d` is only safe for signals whose bits
// are unrelated (like separate detector channels) or that change one bit
// at a time. The reset value of both stages is RST_VAL. The synchroniser
// itself is a standard choice of this design; the source text does not
// discuss metastability.
module sync_2ff #(
  parameter int unsigned     WIDTH   = 1,
  parameter logic [WIDTH-1:0] RST_VAL = '0
) (
  input  logic             clk,
  input  logic             rst_n,   // active low, synchronous to clk
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  logic [WIDTH-1:0] meta;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      meta <= RST_VAL;
      q    <= RST_VAL;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end

endmodule
