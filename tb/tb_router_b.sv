// Testbench of router_b (M 10, NA 4: links of 4, 4 and 2 antennas).
// Offers 200 random precoded M-vectors with random valid gaps; every link
// is read with its own random ready. Each link must deliver, per vector,
// its antennas' values in order with the vector's subcarrier and type, and
// in_ready must only return once all links have taken their part.
// Watchdog: 5 ms.
module tb_router_b;
  import lumami_pkg::*;
  localparam int M = 10, NA = 4, NSS = 3, NV = 200;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  cplx_t in_x [M];
  logic [10:0] in_sc = '0;
  sym_t in_st = SYM_DL_DATA;
  logic [NSS-1:0] link_valid, link_ready = '0;
  beat_t link_beat [NSS];
  int checks = 0, failures = 0, nin = 0;
  int got [NSS];
  cplx_t vec [NV][M];
  sym_t vst [NV];

  router_b #(.M(M), .NA(NA)) dut (.*);
  always #2.5ns clk = ~clk;

  initial begin
    #5ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(negedge clk) for (int s = 0; s < NSS; s++) link_ready[s] = ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NSS; s++) if (link_valid[s] && link_ready[s]) begin
      int cnt, v, a;
      cnt = (M - s * NA < NA) ? M - s * NA : NA;
      v = got[s] / cnt; a = got[s] % cnt;
      checks++;
      if (v >= NV || link_beat[s].s != vec[v][s * NA + a] || int'(link_beat[s].sc) != v % 1200
          || link_beat[s].st != vst[v]) begin
        failures++;
        if (failures < 5) $display("link %0d beat %0d wrong", s, got[s]);
      end
      got[s]++;
    end
  end

  initial begin
    for (int m = 0; m < M; m++) in_x[m] = '0;
    for (int s = 0; s < NSS; s++) got[s] = 0;
    for (int v = 0; v < NV; v++) begin
      vst[v] = sym_t'($urandom_range(3, 4));
      for (int m = 0; m < M; m++) vec[v][m] = '{re: 12'($urandom), im: 12'($urandom)};
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      @(negedge clk);
      while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; in_sc = 11'(v); in_st = vst[v];
      for (int m = 0; m < M; m++) in_x[m] = vec[v][m];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1;
      // the previous vector must be fully sent before this one is taken
      checks++;
      if (v > 0 && got[NSS - 1] < 2 * (v - 1)) failures++;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (200) @(posedge clk);
    for (int s = 0; s < NSS; s++) begin
      checks++;
      if (got[s] != NV * ((M - s * NA < NA) ? M - s * NA : NA)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
