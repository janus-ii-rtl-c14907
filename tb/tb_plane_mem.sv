// tb_plane_mem: writes planes and single words into the lattice memory and
// reads them back against a shadow copy, including plane-write priority over
// a word write in the same clock and the one-clock read latency.
module tb_plane_mem;
  localparam int unsigned DEPTH = 12, WPP = 4;
  logic clk = 0;
  logic rd_en = 0, wr_en = 0, ww_en = 0;
  logic [$clog2(DEPTH)-1:0] rd_addr = 0, wr_addr = 0, ww_addr = 0;
  logic [WPP*32-1:0] rd_data, wr_data = 0;
  logic [$clog2(WPP+1)-1:0] ww_word = 0;
  logic [31:0] ww_data = 0;
  logic [WPP*32-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  plane_mem #(.DEPTH(DEPTH), .WPP(WPP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      wr_en = 1; wr_addr = a; wr_data = {$urandom(), $urandom(), $urandom(), $urandom()};
      shadow[a] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    for (int it = 0; it < 400; it++) begin
      int a;
      a = $urandom() % DEPTH;
      case ($urandom() % 4)
        0: begin
          wr_en = 1; wr_addr = a; wr_data = {$urandom(), $urandom(), $urandom(), $urandom()};
          shadow[a] = wr_data;
          // a word write in the same clock loses
          ww_en = 1; ww_addr = a; ww_word = $urandom() % WPP; ww_data = $urandom();
        end
        1: begin
          ww_en = 1; ww_addr = a; ww_word = $urandom() % WPP; ww_data = $urandom();
          shadow[a][ww_word*32 +: 32] = ww_data;
        end
        default: begin
          rd_en = 1; rd_addr = a;
          @(negedge clk);
          rd_en = 0;
          checks++;
          if (rd_data !== shadow[a]) begin
            failures++;
            if (failures < 5) $display("addr %0d got %h want %h", a, rd_data, shadow[a]);
          end
          continue;
        end
      endcase
      @(negedge clk);
      wr_en = 0; ww_en = 0;
    end
    for (int a = 0; a < DEPTH; a++) begin
      rd_en = 1; rd_addr = a;
      @(negedge clk);
      checks++;
      if (rd_data !== shadow[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
