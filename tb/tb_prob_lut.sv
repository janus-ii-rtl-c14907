// tb_prob_lut: fills the per-copy tables, checks reset values, the selected
// table output and the host read port, and that out-of-range writes are
// ignored.
module tb_prob_lut;
  localparam int unsigned NC = 5;
  localparam int unsigned CW = $clog2(NC+1);
  logic clk = 0, rst_n = 0, we = 0;
  logic [CW-1:0] wcopy = 0, sel = 0, rcopy = 0;
  logic [2:0] widx = 0, ridx = 0;
  logic [31:0] wdata = 0, rdata;
  logic [6:0][31:0] table_o;
  logic [31:0] shadow [NC][7];
  int checks = 0, failures = 0;

  prob_lut #(.NCOPIES(NC)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NC; c++) begin
      sel = c; #1;
      checks++; if (table_o !== '0) failures++;
    end
    @(negedge clk);
    for (int c = 0; c < NC; c++)
      for (int n = 0; n < 7; n++) begin
        we = 1; wcopy = c; widx = n; wdata = $urandom();
        shadow[c][n] = wdata;
        @(negedge clk);
      end
    // ignored writes: index 7 and copy out of range
    we = 1; wcopy = 0; widx = 7; wdata = 32'hDEAD; @(negedge clk);
    we = 1; wcopy = NC; widx = 0; wdata = 32'hBEEF; @(negedge clk);
    we = 0;
    for (int c = 0; c < NC; c++) begin
      sel = c;
      for (int n = 0; n < 7; n++) begin
        rcopy = c; ridx = n; #1;
        checks += 2;
        if (table_o[n] !== shadow[c][n]) begin failures++; $display("tbl %0d %0d %h %h", c, n, table_o[n], shadow[c][n]); end
        if (rdata !== shadow[c][n]) failures++;
      end
    end
    sel = NC; #1; checks++; if (table_o !== '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
