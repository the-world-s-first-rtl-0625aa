// Antenna splitter / bandwidth combiner on the last SDR of a subsystem.
//
// Each of the NCO co-processors sends the precoded subcarriers of its own
// sub-band over its link, NA beats per subcarrier in round-robin antenna
// order. The splitter rebuilds the full band in subcarrier order: it listens
// only to the link that owns the next expected subcarrier (the others are
// held by link_ready low), collects NA beats into one vector and hands the
// vector to all NA transmit chains at once. After NUSED subcarriers it
// starts again at subcarrier 0.
// Timing: NA cycles to collect, one to hand over when all chains are ready.
// The paper gives the function (Fig. 4: n_co : n_sub*n_ant router); the
// ordering rule and link format are this design's.
module antenna_splitter
  import lumami_pkg::*;
#(
  parameter int unsigned NA    = 16,
  parameter int unsigned NCO   = 4,
  parameter int unsigned NUSED = 1200
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [NCO-1:0] link_valid,
  output logic [NCO-1:0] link_ready,
  input  beat_t          link_beat [NCO],
  output logic           out_valid,
  input  logic  [NA-1:0] out_ready,
  output beat_t          out_beat [NA]
);
  localparam int unsigned NSC = NUSED / NCO;

  logic [10:0]             sc;
  localparam int unsigned SLW = (NA > 1) ? $clog2(NA) : 1;
  localparam int unsigned TW  = (NCO > 1) ? $clog2(NCO) : 1;

  logic [SLW-1:0]          slot;
  logic                    full;
  logic [TW-1:0]           src;

  assign src = $bits(src)'(sc / 11'(NSC));

  always_comb begin
    for (int j = 0; j < int'(NCO); j++) link_ready[j] = !full && (src == TW'(j));
  end
  assign out_valid = full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sc   <= '0;
      slot <= '0;
      full <= 1'b0;
      for (int a = 0; a < int'(NA); a++) out_beat[a] <= '0;
    end else if (!full) begin
      if (link_valid[src]) begin
        out_beat[slot] <= link_beat[src];
        if (slot == $bits(slot)'(NA - 1)) begin
          full <= 1'b1;
          slot <= '0;
        end else slot <= slot + 1'b1;
      end
    end else if (&out_ready) begin
      full <= 1'b0;
      sc   <= (sc == 11'(NUSED - 1)) ? '0 : sc + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (rst_n) begin
      a_order: assert (full || !link_valid[src] || (link_beat[src].sc == sc));
    end
  end

endmodule
