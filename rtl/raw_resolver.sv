// raw_resolver -- read-after-write hazard guard in front of a gather PE.
//
// The gather PE reads, adds and writes back over three cycles, so an update
// accepted within HAZ_WIN cycles of an earlier update to the same destination
// would read the old value. The resolver keeps the destinations of the
// updates it passed in each of the last HAZ_WIN cycles and stalls (in_ready
// low, out_valid low) an update that matches any of them, until the earlier
// write has landed. Hazards are resolved by stalling, as in the original
// design; the history mechanism is this design's choice. stall is high in a
// cycle where a valid update is held back by a hazard. out_upd is in_upd
// wired straight through (only the handshake is gated), so a synthesis
// report lists those output bits as idle.
module raw_resolver
  import hpgnn_pkg::*;
#(
  parameter int unsigned HAZ_WIN = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  upd_t in_upd,
  output logic in_ready,
  output logic out_valid,
  output upd_t out_upd,
  input  logic out_ready,
  output logic stall
);
  logic hv [HAZ_WIN];
  vid_t ha [HAZ_WIN];
  logic hazard, fire;

  always_comb begin
    hazard = 1'b0;
    for (int i = 0; i < HAZ_WIN; i++)
      if (hv[i] && (ha[i] == in_upd.dst)) hazard = 1'b1;
  end

  assign out_valid = in_valid && !hazard;
  assign out_upd   = in_upd;
  assign in_ready  = out_ready && !hazard;
  assign fire      = in_valid && in_ready;
  assign stall     = in_valid && hazard;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < HAZ_WIN; i++) begin
        hv[i] <= 1'b0;
        ha[i] <= '0;
      end
    end else begin
      hv[0] <= fire;
      ha[0] <= in_upd.dst;
      for (int i = 1; i < HAZ_WIN; i++) begin
        hv[i] <= hv[i-1];
        ha[i] <= ha[i-1];
      end
    end
  end
endmodule
