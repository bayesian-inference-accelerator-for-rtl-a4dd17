// tb_controller: runs passes of random channel count and checks the control
// sequence: rows 0..3*C-1 read in order one per clock, PE enable one clock
// behind each read with clear on the first, exactly 3*C enabled clocks (the
// 3-clocks-per-3x3-filter rate), buffer load and aggregation start after the
// last accumulation, done after agg_done, run ignored while busy.
module tb_controller;
  import bsnn_pkg::*;

  logic clk = 0, rst_n = 0, run = 0, agg_done = 0;
  logic [9:0] n_cin = '0;
  logic busy, done, pe_clear, pe_en, tb_load, agg_start;
  logic [10:0] rd_addr;
  int checks = 0, failures = 0;

  controller dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string tag);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", tag); end
  endtask

  // models the 17-clock aggregation core
  int agg_cnt = -1;
  always @(posedge clk) begin
    agg_done <= 0;
    if (agg_start) agg_cnt <= 17;
    else if (agg_cnt > 0) begin
      agg_cnt <= agg_cnt - 1;
      if (agg_cnt == 1) agg_done <= 1;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int pass = 0; pass < 60; pass++) begin
      int c, rows, cyc, n_en, n_clr, exp_addr, first_en, load_cyc, last_en;
      bit prev_rd;
      c = (pass == 0) ? 1 : (pass == 1) ? 512 : $urandom_range(1, 64);
      rows = 3 * c;
      @(negedge clk);
      run = 1; n_cin = 10'(c);
      @(posedge clk); #1 run = 0;
      cyc = 0; n_en = 0; n_clr = 0; exp_addr = 0; first_en = -1; load_cyc = -1; last_en = -1;
      while (!done && cyc < 3000) begin
        @(posedge clk); #1 cyc++;
        if (pe_en) begin
          n_en++; last_en = cyc;
          if (first_en < 0) first_en = cyc;
          if (pe_clear) n_clr++;
          chk(pe_clear == (n_en == 1), "clear on first row only");
        end
        if (tb_load) begin load_cyc = cyc; chk(agg_start, "start with load"); end
        chk(busy || done, "busy during pass");
        if (cyc == 5) begin
          // a second run while busy must be ignored
          run = 1; n_cin = 10'd7;
        end else run = 0;
        if (cyc < rows) chk(rd_addr == 11'(cyc), "row order");
      end
      chk(n_en == rows, "3 PE clocks per channel");
      chk(n_clr == 1, "one clear");
      chk(first_en == 1, "first PE clock one after the first read");
      chk(load_cyc == last_en + 2, "load after last accumulation");
      chk(cyc == rows + 21, $sformatf("latency %0d rows %0d", cyc, rows));
      @(posedge clk); #1;
      chk(!busy, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
