// Testbench of antenna_combiner (NA 4, NCO 2, NUSED 48).
// The NA antenna chains offer the 48 subcarriers of three symbols in lock
// step (random gaps common to all, as the chains share the ADC clock). The
// links are read with random ready. Link j must carry exactly the
// subcarriers of sub-band j (24 each), each as NA beats in antenna order
// with the sent value, subcarrier and type; no beat may appear on the other
// link. Watchdog: 5 ms.
module tb_antenna_combiner;
  import lumami_pkg::*;
  localparam int NA = 4, NCO = 2, NUSED = 48, NSYM = 3;
  logic clk = 0, rst_n = 0;
  logic [NA-1:0] in_valid = '0;
  logic in_ready;
  beat_t in_beat [NA];
  logic [NCO-1:0] link_valid, link_ready = '0;
  beat_t link_beat [NCO];
  int checks = 0, failures = 0;
  int got [NCO];
  cplx_t val [NSYM][NUSED][NA];

  antenna_combiner #(.NA(NA), .NCO(NCO), .NUSED(NUSED)) dut (.*);
  always #2.5ns clk = ~clk;

  initial begin
    #5ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(negedge clk) for (int j = 0; j < NCO; j++) link_ready[j] = ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n) for (int j = 0; j < NCO; j++) if (link_valid[j] && link_ready[j]) begin
    int n, sy, sc, a;
    n = got[j]; a = n % NA; sc = j * (NUSED / NCO) + (n / NA) % (NUSED / NCO); sy = n / (NA * NUSED / NCO);
    checks++;
    if (sy >= NSYM || link_beat[j].s != val[sy][sc][a] || int'(link_beat[j].sc) != sc
        || link_beat[j].st != ((sy == 0) ? SYM_UL_PIL : SYM_UL_DATA)) begin
      failures++;
      if (failures < 5) $display("link %0d beat %0d wrong (sc %0d)", j, n, link_beat[j].sc);
    end
    got[j]++;
  end

  initial begin
    for (int j = 0; j < NCO; j++) got[j] = 0;
    for (int a = 0; a < NA; a++) in_beat[a] = '0;
    for (int sy = 0; sy < NSYM; sy++)
      for (int sc = 0; sc < NUSED; sc++)
        for (int a = 0; a < NA; a++) val[sy][sc][a] = '{re: 12'($urandom), im: 12'($urandom)};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int sy = 0; sy < NSYM; sy++)
      for (int sc = 0; sc < NUSED; sc++) begin
        @(negedge clk);
        while ($urandom_range(0, 2) == 0) begin in_valid = '0; @(negedge clk); end
        in_valid = '1;
        for (int a = 0; a < NA; a++)
          in_beat[a] = '{s: val[sy][sc][a], sc: 11'(sc), st: (sy == 0) ? SYM_UL_PIL : SYM_UL_DATA};
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    @(negedge clk);
    in_valid = '0;
    repeat (100) @(posedge clk);
    for (int j = 0; j < NCO; j++) begin
      checks++;
      if (got[j] != NSYM * NA * NUSED / NCO) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
