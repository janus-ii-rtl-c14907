// tb_pr_wheel: checks the parallel Parisi-Rapuano wheel against a sequential
// generator. The wheel is filled with 61 loads of an xorshift stream; every
// clock with adv high it must give the next NOUT values of the sequential
// generator, in order, and hold them while adv is low.
module tb_pr_wheel;
  import sg_ref_pkg::*;
  localparam int unsigned NOUT = 16;
  logic clk = 0, rst_n = 0, adv = 0, load = 0;
  logic [31:0] load_data = 0;
  logic [NOUT*32-1:0] rnd;
  int checks = 0, failures = 0;

  pr_wheel #(.NOUT(NOUT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pr_gen g;
    int unsigned st;
    g = new();
    st = 32'h1234_5678;
    g.seed_stream(st);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < 61; k++) begin
      st = xs32(st);
      load = 1; load_data = st;
      @(negedge clk);
    end
    load = 0;
    for (int step = 0; step < 40; step++) begin
      logic [31:0] exp_v [NOUT];
      for (int i = 0; i < NOUT; i++) exp_v[i] = g.next();
      // hold with adv low for a clock first on some steps
      if (step % 5 == 2) begin
        @(negedge clk);
      end
      for (int i = 0; i < NOUT; i++) begin
        checks++;
        if (rnd[i*32 +: 32] !== exp_v[i]) begin
          failures++;
          if (failures < 5) $display("step %0d out %0d: got %h want %h", step, i, rnd[i*32 +: 32], exp_v[i]);
        end
      end
      adv = 1;
      @(negedge clk);
      adv = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
