// Testbench of recip_comp.
// Writes random calibration coefficients, streams random samples with random
// input gaps and random output back-pressure, and compares every output
// sample, first flag and type against a queue of values computed here as
// round(x * c / 2^10) saturated to 12 bits. Watchdog: 1 ms.
module tb_recip_comp;
  import lumami_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cal_we = 0, in_valid = 0, in_first = 0, out_ready = 0;
  cplx_t cal_coef = '0, in_data = '0, out_data;
  sym_t in_type = SYM_GUARD, out_type;
  logic in_ready, out_valid, out_first;
  int checks = 0, failures = 0;
  int cre = 1024, cim = 0;
  logic [31:0] q_re[$], q_im[$], q_misc[$];

  recip_comp dut (.*);
  always #2.5ns clk = ~clk;

  function automatic int sat(longint v);
    if (v > 2047) return 2047;
    if (v < -2048) return -2048;
    return int'(v);
  endfunction

  initial begin
    #1ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (q_re.size() == 0) failures++;
      else begin
        int er, ei, em;
        er = q_re.pop_front(); ei = q_im.pop_front(); em = q_misc.pop_front();
        if (int'(out_data.re) != er || int'(out_data.im) != ei || {out_first, out_type} != 4'(em)) begin
          failures++;
          if (failures < 5) $display("mismatch got %0d,%0d exp %0d,%0d", out_data.re, out_data.im, er, ei);
        end
      end
    end
    if (in_valid && in_ready) begin
      longint xr, xi;
      xr = longint'(in_data.re); xi = longint'(in_data.im);
      q_re.push_back(32'(sat((xr * cre - xi * cim + 512) >>> 10)));
      q_im.push_back(32'(sat((xr * cim + xi * cre + 512) >>> 10)));
      q_misc.push_back(32'({in_first, in_type}));
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int blk = 0; blk < 8; blk++) begin
      // new coefficient between blocks, with the pipe drained
      @(posedge clk);
      in_valid <= 0; out_ready <= 1;
      repeat (4) @(posedge clk);
      cre = (blk == 0) ? 1024 : int'($urandom_range(0, 2047)) - 1024;
      cim = (blk == 0) ? 0 : int'($urandom_range(0, 2047)) - 1024;
      cal_coef <= '{re: 12'(cre), im: 12'(cim)}; cal_we <= 1;
      @(posedge clk); cal_we <= 0;
      for (int n = 0; n < 300; n++) begin
        in_valid  <= ($urandom_range(0, 3) != 0);
        in_first  <= ($urandom_range(0, 9) == 0);
        in_type   <= sym_t'($urandom_range(0, 5));
        in_data   <= '{re: 12'($urandom), im: 12'($urandom)};
        out_ready <= ($urandom_range(0, 3) != 0);
        @(posedge clk);
        while (in_valid && !in_ready) begin out_ready <= 1; @(posedge clk); end
      end
    end
    in_valid <= 0; out_ready <= 1;
    repeat (5) @(posedge clk);
    checks++;
    if (q_re.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
