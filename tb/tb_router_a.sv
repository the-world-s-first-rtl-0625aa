// Testbench of router_a (M 10, NA 4: links of 4, 4 and 2 antennas).
// For each of 200 subcarriers it builds a random M-vector; each link
// process offers its antennas' beats in order with random valid gaps, and
// the output side takes vectors with random ready. Every output vector must
// equal the sent one for antennas below m_active and zero above, with the
// same subcarrier and symbol type. m_active changes between runs (10, 7,
// 4). Watchdog: 5 ms.
module tb_router_a;
  import lumami_pkg::*;
  localparam int M = 10, NA = 4, NSS = 3, NV = 200;
  logic clk = 0, rst_n = 0;
  logic [7:0] m_active = 8'(M);
  logic [NSS-1:0] link_valid = '0, link_ready;
  beat_t link_beat [NSS];
  logic out_valid, out_ready = 0;
  cplx_t out_y [M];
  logic [10:0] out_sc;
  sym_t out_st;
  int checks = 0, failures = 0, nout = 0;
  cplx_t vec [NV][M];
  sym_t vst [NV];

  router_a #(.M(M), .NA(NA)) dut (.*);
  always #2.5ns clk = ~clk;

  initial begin
    #5ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  for (genvar s = 0; s < NSS; s++) begin : g_src
    initial begin
      link_beat[s] = '0;
      wait (rst_n);
      for (int v = 0; v < NV; v++)
        for (int a = 0; a < NA && s * NA + a < M; a++) begin
          @(negedge clk);
          while ($urandom_range(0, 2) == 0) begin link_valid[s] = 0; @(negedge clk); end
          link_valid[s] = 1;
          link_beat[s] = '{s: vec[v][s * NA + a], sc: 11'(v), st: vst[v]};
          @(posedge clk);
          while (!link_ready[s]) @(posedge clk);
        end
      @(negedge clk);
      link_valid[s] = 0;
    end
  end

  always @(negedge clk) out_ready = ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    for (int m = 0; m < M; m++) begin
      checks++;
      if (out_y[m] != ((m < int'(m_active)) ? vec[nout][m] : cplx_t'(0))) failures++;
    end
    checks++;
    if (int'(out_sc) != nout || out_st != vst[nout]) failures++;
    nout++;
    if (nout == 70) m_active <= 7;
    if (nout == 140) m_active <= 4;
  end

  initial begin
    for (int v = 0; v < NV; v++) begin
      vst[v] = sym_t'($urandom_range(1, 2));
      for (int m = 0; m < M; m++) vec[v][m] = '{re: 12'($urandom), im: 12'($urandom)};
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (nout == NV);
    repeat (20) @(posedge clk);
    checks++;
    if (nout != NV) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
