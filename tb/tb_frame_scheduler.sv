// Testbench of frame_scheduler (NFFT 16, NCP 4, 140 symbols).
// Before start it rewrites two table entries and checks that nothing runs
// until the trigger rises. Then it gives random sample strobes for two and a
// half frames and follows the frame with its own sample and symbol counters:
// symbol type (reference table built here from the slot pattern UL pilot,
// UL, UL, guard, DL, DL, guard with control in subframe 0 and DL pilots in
// subframe 1), first-sample flag, symbol index, DL request pulses and the
// frame counter are checked every strobe. A table write while running must
// be ignored. Watchdog: 10 ms.
module tb_frame_scheduler;
  import lumami_pkg::*;
  localparam int NFFT = 16, NCP = 4, NSYM = 140, SL = NFFT + NCP;
  logic clk = 0, rst_n = 0, trigger = 0, sample_tick = 0, cfg_we = 0;
  logic [7:0] cfg_addr = '0;
  sym_t cfg_type = SYM_GUARD;
  logic running, sym_first, dl_req;
  sym_t sym_type, dl_req_type;
  logic [7:0] sym_idx;
  logic [15:0] frame_cnt;
  int checks = 0, failures = 0;
  sym_t ref_tbl [NSYM];
  int smp = 0, sidx = 0, frames = 0, dl_reqs = 0;

  frame_scheduler #(.NFFT(NFFT), .NCP(NCP), .NSYM(NSYM)) dut (.*);
  always #2.5ns clk = ~clk;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 8) $display("%t fail: %s (smp %0d sym %0d)", $time, what, smp, sidx);
    end
  endtask

  initial begin
    #10ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int slot, pos;
    for (int n = 0; n < NSYM; n++) begin
      slot = n / 7; pos = n % 7;
      if (slot < 2) ref_tbl[n] = SYM_CTRL;
      else if (pos == 0) ref_tbl[n] = SYM_UL_PIL;
      else if (pos == 1 || pos == 2) ref_tbl[n] = SYM_UL_DATA;
      else if (pos == 4 && (slot == 2 || slot == 3)) ref_tbl[n] = SYM_DL_PIL;
      else if (pos == 4 || pos == 5) ref_tbl[n] = SYM_DL_DATA;
      else ref_tbl[n] = SYM_GUARD;
    end
    ref_tbl[30] = SYM_UL_PIL;   // rearranged before start-up
    ref_tbl[139] = SYM_DL_DATA;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    cfg_we <= 1; cfg_addr <= 30; cfg_type <= SYM_UL_PIL;
    @(posedge clk);
    cfg_addr <= 139; cfg_type <= SYM_DL_DATA;
    @(posedge clk);
    cfg_we <= 0;
    repeat (10) begin
      sample_tick <= 1;
      @(posedge clk);
      chk(!running, "running before trigger");
    end
    trigger <= 1;
    @(posedge clk);
    sample_tick <= 0;
    @(posedge clk);
    chk(running, "not running after trigger edge");
    // write while running must not change the table
    cfg_we <= 1; cfg_addr <= 50; cfg_type <= SYM_CTRL;
    @(posedge clk);
    cfg_we <= 0;
    while (frames < 2 || sidx < 70) begin
      sample_tick <= ($urandom_range(0, 2) == 0);
      #1;
      if (sample_tick) begin
        chk(sym_type == ref_tbl[sidx], "symbol type");
        chk(int'(sym_idx) == sidx, "symbol index");
        chk(sym_first == (smp == 0), "first flag");
        chk(dl_req == (smp == 0 && (ref_tbl[sidx] == SYM_DL_PIL || ref_tbl[sidx] == SYM_DL_DATA)), "dl_req");
        if (dl_req) begin
          dl_reqs++;
          chk(dl_req_type == ref_tbl[sidx], "dl_req type");
        end
        chk(int'(frame_cnt) == frames, "frame counter");
        smp++;
        if (smp == SL) begin
          smp = 0; sidx++;
          if (sidx == NSYM) begin sidx = 0; frames++; end
        end
      end
      @(posedge clk);
    end
    // per frame 18 slots with 2 DL symbols plus the rearranged one; then
    // slots 2..9 of the third frame
    chk(dl_reqs == 2 * 37 + 16, "number of DL requests");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
