// Antenna combiner / bandwidth splitter on the first SDR of a subsystem.
//
// All NA antenna chains of the subsystem deliver the same subcarrier at the
// same time (the SDRs start on a common trigger). The combiner takes one
// subcarrier from all of them at once, picks the co-processor that owns the
// subcarrier's sub-band (sub-band j holds subcarriers j*NUSED/NCO ..
// (j+1)*NUSED/NCO-1) and sends the NA values over that co-processor's link,
// one beat per cycle in round-robin antenna order 0 .. NA-1. Each link thus
// carries NA interleaved antenna streams, at NA times the per-antenna
// subcarrier rate of its sub-band. The chains are held (in_ready low) while
// a subcarrier is being sent.
// Timing: NA cycles per subcarrier while the link is ready.
// The paper gives the function (Fig. 4: n_sub*n_ant : n_co router, data
// interleaved before it is sent) and the streams per link (n_sub*n_ant);
// the link format is this design's.
module antenna_combiner
  import lumami_pkg::*;
#(
  parameter int unsigned NA    = 16,
  parameter int unsigned NCO   = 4,
  parameter int unsigned NUSED = 1200
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic  [NA-1:0] in_valid,
  output logic           in_ready,
  input  beat_t          in_beat [NA],
  output logic [NCO-1:0] link_valid,
  input  logic [NCO-1:0] link_ready,
  output beat_t          link_beat [NCO]
);
  localparam int unsigned NSC = NUSED / NCO;

  logic                        busy;
  localparam int unsigned SLW = (NA > 1) ? $clog2(NA) : 1;
  localparam int unsigned TW  = (NCO > 1) ? $clog2(NCO) : 1;

  logic [SLW-1:0]              slot;
  logic [TW-1:0]               tgt;
  beat_t                       hold [NA];

  assign in_ready = !busy;

  always_comb begin
    for (int j = 0; j < int'(NCO); j++) begin
      link_valid[j] = busy && (tgt == TW'(j));
      link_beat[j]  = hold[slot];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      slot <= '0;
      tgt  <= '0;
      for (int a = 0; a < int'(NA); a++) hold[a] <= '0;
    end else if (!busy) begin
      if (&in_valid) begin
        hold <= in_beat;
        tgt  <= $bits(tgt)'(in_beat[0].sc / 11'(NSC));
        slot <= '0;
        busy <= 1'b1;
      end
    end else if (link_ready[tgt]) begin
      if (slot == $bits(slot)'(NA - 1)) busy <= 1'b0;
      slot <= slot + 1'b1;
    end
  end

  // all chains of a subsystem run in lock step
  always_ff @(posedge clk or negedge rst_n) begin
    if (rst_n) begin
      a_lockstep: assert (busy || !(|in_valid) || (&in_valid));
    end
  end

endmodule
