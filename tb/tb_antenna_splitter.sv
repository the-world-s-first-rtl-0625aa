// Testbench of antenna_splitter (NA 4, NCO 2, NUSED 48).
// Each co-processor link offers, for its sub-band of 24 subcarriers, NA
// beats per subcarrier (antenna order) for three symbols, with random valid
// gaps. The NA antenna outputs are read with independent random ready. Each
// antenna must see every subcarrier 0..47 in order, each symbol, with the
// value sent for it. Watchdog: 5 ms.
module tb_antenna_splitter;
  import lumami_pkg::*;
  localparam int NA = 4, NCO = 2, NUSED = 48, NSYM = 3, NSC = NUSED / NCO;
  logic clk = 0, rst_n = 0;
  logic [NCO-1:0] link_valid = '0, link_ready;
  beat_t link_beat [NCO];
  logic out_valid;
  logic [NA-1:0] out_ready = '0;
  beat_t out_beat [NA];
  int checks = 0, failures = 0, nvec = 0;
  cplx_t val [NSYM][NUSED][NA];
  logic [NA-1:0] taken = '0;

  antenna_splitter #(.NA(NA), .NCO(NCO), .NUSED(NUSED)) dut (.*);
  always #2.5ns clk = ~clk;

  initial begin
    #5ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  for (genvar j = 0; j < NCO; j++) begin : g_src
    initial begin
      link_beat[j] = '0;
      wait (rst_n);
      for (int sy = 0; sy < NSYM; sy++)
        for (int sc = j * NSC; sc < (j + 1) * NSC; sc++)
          for (int a = 0; a < NA; a++) begin
            @(negedge clk);
            while ($urandom_range(0, 2) == 0) begin link_valid[j] = 0; @(negedge clk); end
            link_valid[j] = 1;
            link_beat[j] = '{s: val[sy][sc][a], sc: 11'(sc), st: SYM_DL_DATA};
            @(posedge clk);
            while (!link_ready[j]) @(posedge clk);
          end
      @(negedge clk);
      link_valid[j] = 0;
    end
  end

  // the vector is handed over when all antennas are ready together
  always @(negedge clk) out_ready = ($urandom_range(0, 3) != 0) ? '1 : 4'($urandom);

  always @(posedge clk) if (rst_n && out_valid && (&out_ready)) begin
    int sy, sc;
    sy = nvec / NUSED; sc = nvec % NUSED;
    for (int a = 0; a < NA; a++) begin
      checks++;
      if (sy >= NSYM || out_beat[a].s != val[sy][sc][a] || int'(out_beat[a].sc) != sc) begin
        failures++;
        if (failures < 5) $display("vector %0d antenna %0d wrong", nvec, a);
      end
    end
    nvec++;
  end

  initial begin
    for (int sy = 0; sy < NSYM; sy++)
      for (int sc = 0; sc < NUSED; sc++)
        for (int a = 0; a < NA; a++) val[sy][sc][a] = '{re: 12'($urandom), im: 12'($urandom)};
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (nvec == NSYM * NUSED);
    repeat (50) @(posedge clk);
    checks++;
    if (nvec != NSYM * NUSED) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
