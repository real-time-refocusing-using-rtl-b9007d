// refocus_row_workload_tb -- full-width lines of the evaluated image sizes
// through single 1-D processors.
//
// A fully parallel array at these sizes is too large to simulate, but every
// one of its processors handles one complete row (or column) at a time.
// This bench therefore runs whole lines of the evaluated widths through one
// processor each:
//   843 pixels, M = 3, 5 cells:   a = 0/3, 1/3, 2/3
//   1405 pixels, M = 5, 5 cells:  a = 0/5, 1/5
//   3201 pixels, M = 11, 11 cells: a = 0/11, 1/11
// The vertical stage sees the column lengths 561, 935 and 3201; those lines
// run through the same processors. Random pixels are compared with the
// direct-form reference. The bench also checks one pixel per clock, the
// two-edge latency of the first pixel, and the line time (line length + 2
// clocks to the last output).
module refocus_row_workload_tb;
  import refocus_pkg::*;
  import refocus_ref_pkg::*;

  localparam int NP = 3;
  localparam int MS   [NP] = '{3, 5, 11};
  localparam int TS   [NP] = '{5, 5, 11};
  localparam int ROWL [NP] = '{843, 1405, 3201};
  localparam int COLL [NP] = '{561, 935, 3201};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic        rst_n;
  logic        cfg_we   [NP];
  logic [3:0]  cfg_row  [NP];
  logic [11:0] cfg_data [NP];
  pix_t        in_pix   [NP];
  pix_t        out_pix  [NP];
  logic        clip     [NP];

  processor_1d #(.M(3), .TAPS(5)) u_m3 (
    .clk, .rst_n, .cfg_we(cfg_we[0]), .cfg_row(cfg_row[0][1:0]),
    .cfg_data(cfg_data[0][5:0]), .in_pix(in_pix[0]), .out_pix(out_pix[0]),
    .out_clip(clip[0]));
  processor_1d #(.M(5), .TAPS(5)) u_m5 (
    .clk, .rst_n, .cfg_we(cfg_we[1]), .cfg_row(cfg_row[1][2:0]),
    .cfg_data(cfg_data[1][5:0]), .in_pix(in_pix[1]), .out_pix(out_pix[1]),
    .out_clip(clip[1]));
  processor_1d #(.M(11), .TAPS(11)) u_m11 (
    .clk, .rst_n, .cfg_we(cfg_we[2]), .cfg_row(cfg_row[2][3:0]),
    .cfg_data(cfg_data[2][11:0]), .in_pix(in_pix[2]), .out_pix(out_pix[2]),
    .out_clip(clip[2]));

  logic [15:0] cur [NP][];
  int          hold [NP];
  int          lines = 0, held = 0, clips = 0;

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // a = 0/M: row p closes cell TAPS-M+p, write enable on the last row only;
  // a = 1/M: the last M cells closed on every row
  function automatic logic [15:0] row_of(int a, int p, int m, int taps);
    string s;
    s = "";
    for (int w = 0; w < m; w++)
      s = {s, (a == 1 || w == p) ? "1" : "0"};
    return mk_row(s, taps, (a == 1) || (p == m - 1));
  endfunction

  task automatic load(int k, logic [15:0] rows []);
    cur[k] = rows;
    for (int r = 0; r < rows.size(); r++) begin
      @(negedge clk);
      cfg_we[k] = 1'b1; cfg_row[k] = 4'(r); cfg_data[k] = 12'(rows[r]);
    end
    @(negedge clk) cfg_we[k] = 1'b0;
  endtask

  task automatic run_line(int k, int len, string tag);
    int_q x, y, got;
    int   t_first_in, t_first_out, t_last_out;
    for (int n = 0; n < len; n++) x.push_back(int'($urandom_range(255)));
    y = ref_line(x, cur[k], MS[k], TS[k], MS[k], hold[k]);
    fork
      begin
        for (int n = 0; n < len; n++) begin
          @(negedge clk);
          in_pix[k] = '{valid: 1'b1, first: (n == 0), data: 8'(x[n])};
          if (n == 0) t_first_in = cycle;
        end
        @(negedge clk) in_pix[k] = PIX_IDLE;
      end
      begin
        while (got.size() < len) begin
          @(posedge clk); #1;
          if (out_pix[k].valid) begin
            if (got.size() == 0) t_first_out = cycle;
            chk(out_pix[k].first, got.size() == 0, {tag, " first flag"});
            if (got.size() > 0 && out_pix[k].data == 8'(got[$])) held++;
            got.push_back(out_pix[k].data);
            t_last_out = cycle;
          end
          if (clip[k]) clips++;
        end
      end
    join
    foreach (y[i]) chk(got[i], y[i], $sformatf("%s n=%0d", tag, i));
    // the input pixel driven before edge c is sampled at edge c and
    // appears after edge c+2, i.e. three cycle counts later
    chk(t_first_out - t_first_in, 3, {tag, " first-pixel latency"});
    chk(t_last_out - t_first_out, len - 1, {tag, " one pixel per clock"});
    lines++;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < NP; k++) begin
      cfg_we[k] = 1'b0; cfg_row[k] = '0; cfg_data[k] = '0;
      in_pix[k] = PIX_IDLE; hold[k] = 0;
    end
    rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // M = 3: the three published matrices
    begin
      logic [15:0] r [];
      r = new[3];
      for (int p = 0; p < 3; p++) r[p] = 16'(LUT_A0_M3[p]);
      load(0, r);
      run_line(0, ROWL[0], "843 a=0/3");
      run_line(0, COLL[0], "561 a=0/3");
      for (int p = 0; p < 3; p++) r[p] = 16'(LUT_A1_M3[p]);
      load(0, r);
      run_line(0, ROWL[0], "843 a=1/3");
      for (int p = 0; p < 3; p++) r[p] = 16'(LUT_A2_M3[p]);
      load(0, r);
      run_line(0, ROWL[0], "843 a=2/3");
      run_line(0, COLL[0], "561 a=2/3");
    end

    // M = 5 and M = 11: nearest-neighbour a = 0/M and the moving sum a = 1/M
    for (int k = 1; k < NP; k++) begin
      for (int a = 0; a < 2; a++) begin
        logic [15:0] r [];
        r = new[MS[k]];
        for (int p = 0; p < MS[k]; p++) r[p] = row_of(a, p, MS[k], TS[k]);
        load(k, r);
        run_line(k, ROWL[k], $sformatf("%0d a=%0d/%0d", ROWL[k], a, MS[k]));
        run_line(k, COLL[k], $sformatf("%0d a=%0d/%0d", COLL[k], a, MS[k]));
      end
    end

    // mechanisms: every line run, nearest-neighbour holds seen, no clipping
    // (at most M cells closed per sum)
    checks++;
    if (lines != 13) begin failures++; $display("FAIL lines %0d", lines); end
    checks++;
    if (held == 0) begin failures++; $display("FAIL no held output"); end
    checks++;
    if (clips != 0) begin failures++; $display("FAIL clip %0d", clips); end
    $display("lines=%0d held=%0d", lines, held);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
