// tb_iop: the IOP against 16 simple SP stand-ins. Each stand-in takes a
// request when its (randomly stalled) ready is high, logs writes, and answers
// a read one clock later with a value made of its index and the address.
// Checked: unicast writes reach only their SP, broadcast writes reach all 16
// exactly once, reads return the right SP's answer, and IOP status reads
// return the busy lines.
module tb_iop;
  import sg_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic host_valid = 0, host_we = 0, host_ready, host_rvalid;
  logic [4:0] host_target = 0;
  logic [31:0] host_addr = 0, host_wdata = 0, host_rdata;
  host_req_t [N-1:0] sp_req;
  logic [N-1:0] sp_ready, sp_busy;
  host_rsp_t [N-1:0] sp_rsp;
  int wr_count [N];
  logic [31:0] last_w [N];
  int checks = 0, failures = 0, bstall = 0;

  iop #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      sp_rsp[i].valid <= 1'b0;
      if (sp_req[i].valid && sp_ready[i]) begin
        if (sp_req[i].we) begin wr_count[i] <= wr_count[i] + 1; last_w[i] <= sp_req[i].wdata; end
        else begin sp_rsp[i].valid <= 1'b1; sp_rsp[i].rdata <= {i[7:0], sp_req[i].addr[23:0]}; end
      end
    end
  end
  always @(negedge clk) begin
    for (int i = 0; i < N; i++) sp_ready[i] = ($urandom() % 4 != 0);
    if (sp_req != '0 && (sp_req[0].valid && !sp_ready[0])) bstall++;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hwrite(int tgt, int unsigned a, int unsigned d);
    host_valid = 1; host_we = 1; host_target = 5'(tgt); host_addr = a; host_wdata = d;
    do @(negedge clk); while (!host_ready);
    // request is taken on the first rising edge with host_ready
    host_valid = 0;
  endtask

  task automatic hread(int tgt, int unsigned a, output int unsigned d);
    while (!host_ready) @(negedge clk);
    host_valid = 1; host_we = 0; host_target = 5'(tgt); host_addr = a;
    @(negedge clk);
    host_valid = 0;
    while (!host_rvalid) @(negedge clk);
    d = host_rdata;
  endtask

  initial begin
    int unsigned d;
    for (int i = 0; i < N; i++) begin wr_count[i] = 0; sp_rsp[i] = '0; end
    sp_busy = 16'hA5C3;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      int tgt, prior [N];
      int unsigned val;
      tgt = $urandom() % 18;
      val = $urandom();
      for (int i = 0; i < N; i++) prior[i] = wr_count[i];
      if ($urandom() % 2 == 0 && tgt < 17) begin
        while (!host_ready) @(negedge clk);
        hwrite(tgt, $urandom() % 1000, val);
        while (!host_ready) @(negedge clk);
        @(negedge clk);
        for (int i = 0; i < N; i++) begin
          int want;
          want = prior[i] + ((tgt == 16 || tgt == i) ? 1 : 0);
          checks++;
          if (wr_count[i] != want) begin failures++; if (failures < 5) $display("it %0d sp %0d writes %0d want %0d", it, i, wr_count[i], want); end
          if (want != prior[i]) begin checks++; if (last_w[i] != val) failures++; end
        end
      end else begin
        int unsigned a;
        a = $urandom() % 1000;
        if (tgt == 17) a = 0;
        if (tgt == 16) tgt = $urandom() % 16;
        hread(tgt, a, d);
        checks++;
        if (tgt == 17) begin
          if (d != 32'(sp_busy)) begin failures++; $display("status %h", d); end
        end else if (d != {8'(tgt), 24'(a)}) begin
          failures++; if (failures < 5) $display("read sp %0d got %h", tgt, d);
        end
      end
    end
    sp_busy = '0;
    hread(17, 1, d); checks++; if (d != 1) failures++;
    checks++; if (bstall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
