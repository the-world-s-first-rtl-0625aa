// Frame timing of the base station.
//
// A frame has NSYM OFDM symbols of NFFT+NCP samples (140 symbols of 2192
// samples in 10 ms at 30.72 MS/s). The scheduler waits for the rising edge
// of the common trigger, then counts ADC sample strobes (sample_tick) and
// tells the antenna chains, for every sample, the type of the symbol it
// belongs to (sym_type) and whether it is the first sample of a symbol
// (sym_first). At the first sample of a DL pilot or DL data symbol it
// pulses dl_req with the symbol type, which starts DL processing in the
// co-processors. Frames repeat without a gap.
// The symbol-type table can be rewritten before start-up (cfg_we, cfg_addr,
// cfg_type). Its reset content is the default frame: subframe 0 (symbols
// 0-13) is the control / synchronisation subframe; each of the 18 other
// slots of 7 symbols is UL pilot, UL data, UL data, guard, DL, DL data,
// guard, where the first DL symbol is a DL pilot in the two slots of
// subframe 1 and DL data elsewhere.
// The frame and slot layout follow the paper's frame-structure figure and
// text; the sample counting on ADC strobes is this design's choice.
module frame_scheduler
  import lumami_pkg::*;
#(
  parameter int unsigned NFFT = 2048,
  parameter int unsigned NCP  = 144,
  parameter int unsigned NSYM = 140,
  parameter int unsigned SPS  = 7,      // symbols per slot
  localparam int unsigned AW  = $clog2(NSYM)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          trigger,
  input  logic          sample_tick,
  input  logic          cfg_we,
  input  logic [AW-1:0] cfg_addr,
  input  sym_t          cfg_type,
  output logic          running,
  output sym_t          sym_type,
  output logic          sym_first,
  output logic [AW-1:0] sym_idx,
  output logic          dl_req,
  output sym_t          dl_req_type,
  output logic [15:0]   frame_cnt
);
  localparam int unsigned SL = NFFT + NCP;

  sym_t table_q [NSYM];
  logic trig_q;
  logic [$clog2(SL+1)-1:0] smp;

  function automatic sym_t default_type(int unsigned n);
    int unsigned slot, pos;
    slot = n / SPS;
    pos  = n % SPS;
    if (slot < 2) return SYM_CTRL;
    case (pos)
      0: return SYM_UL_PIL;
      1, 2: return SYM_UL_DATA;
      4: return (slot < 4) ? SYM_DL_PIL : SYM_DL_DATA;
      5: return SYM_DL_DATA;
      default: return SYM_GUARD;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < int'(NSYM); n++) table_q[n] <= default_type(n);
    end else if (cfg_we && !running) begin
      table_q[cfg_addr] <= cfg_type;
    end
  end

  always_comb begin
    sym_type    = table_q[sym_idx];
    sym_first   = running && (smp == '0);
    dl_req      = sym_first && sample_tick && (sym_type == SYM_DL_PIL || sym_type == SYM_DL_DATA);
    dl_req_type = sym_type;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_q    <= 1'b0;
      running   <= 1'b0;
      smp       <= '0;
      sym_idx   <= '0;
      frame_cnt <= '0;
    end else begin
      trig_q <= trigger;
      if (!running) begin
        if (trigger && !trig_q) running <= 1'b1;   // rising edge starts the radios
      end else if (sample_tick) begin
        if (smp == $bits(smp)'(SL - 1)) begin
          smp <= '0;
          if (sym_idx == AW'(NSYM - 1)) begin
            sym_idx   <= '0;
            frame_cnt <= frame_cnt + 1'b1;
          end else sym_idx <= sym_idx + 1'b1;
        end else smp <= smp + 1'b1;
      end
    end
  end

endmodule
