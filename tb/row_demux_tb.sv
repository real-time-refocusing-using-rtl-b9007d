// row_demux_tb -- checks that row l's pixel reaches column (count - l) mod K
// only, with the first flag marking row 0, for rows 0, 2 and 5 and K = 3, 4.
module row_demux_tb;
  import refocus_pkg::*;

  int checks = 0, failures = 0;
  logic [1:0] count;
  pix_t d;
  pix_t q0 [3], q2 [3], q5 [3], q2b [4];

  row_demux               dut  (.count(count), .d(d), .q(q0));
  row_demux #(.ROW(2))    dut2 (.count(count), .d(d), .q(q2));
  row_demux #(.ROW(5))    dut5 (.count(count), .d(d), .q(q5));
  row_demux #(.K(4), .ROW(2)) dutb (.count(count), .d(d), .q(q2b));

  task automatic chk_row(pix_t q [], int k, int row, int cnt);
    int sel;
    sel = ((cnt - row) % k + k) % k;
    for (int c = 0; c < k; c++) begin
      pix_t e;
      e = PIX_IDLE;
      if (d.valid && c == sel) e = '{valid: 1'b1, first: (row == 0), data: d.data};
      checks++;
      if (q[c] !== e) begin
        failures++;
        $display("FAIL row %0d K %0d count %0d col %0d: got %h expected %h", row, k, cnt, c, q[c], e);
      end
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      d = pix_t'($urandom);
      count = 2'($urandom_range(0, 2));
      #1;
      chk_row(q0, 3, 0, count);
      chk_row(q2, 3, 2, count);
      chk_row(q5, 3, 5, count);
      count = 2'($urandom_range(0, 3));
      #1;
      chk_row(q2b, 4, 2, count);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
