// pipe_delay: fixed-length register chain.
//
// Delays a W-bit word by N clock cycles (N = 0 is a wire). Used to pad the
// functional units to the Long/Short latencies of the hardware model and to
// carry tags alongside the arithmetic pipelines. No reset: the data it
// carries is qualified by a separately reset valid chain.
module pipe_delay #(
  parameter int W = 1,
  parameter int N = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (N == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] r [N];
    always_ff @(posedge clk) begin
      r[0] <= d;
      for (int i = 1; i < N; i++) r[i] <= r[i-1];
    end
    assign q = r[N-1];
  end
endmodule
