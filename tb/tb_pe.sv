// tb_pe: checks every operation of one processing element against values
// worked out in the testbench: stationary load, WS/IS multiply-add into the
// passing partial sum, OS accumulation, clear, drain, and the one-cycle east
// register of the west operand.
module tb_pe;
  import tnn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pe_op_e op = PE_IDLE;
  dataflow_e df = DF_WS;
  data_t h_in = '0, h_out;
  acc_t  v_in = '0, v_out;

  pe dut (.clk, .rst_n, .op, .df, .h_in, .v_in, .h_out, .v_out);

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic step(pe_op_e o, dataflow_e d, int h, int v);
    @(negedge clk);
    op = o; df = d; h_in = data_t'(h); v_in = acc_t'(v);
    @(posedge clk); #1;
  endtask

  initial begin
    int acc, w, x;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // WS / IS: load a stationary operand, then v_out = v_in + stat * h_in
    for (int n = 0; n < 50; n++) begin
      w = int'($urandom_range(255)) - 128;
      step(PE_LOAD, DF_WS, 0, w);
      check("load passes value down", v_out, w);
      for (int r = 0; r < 4; r++) begin
        automatic int h = int'($urandom_range(255)) - 128;
        automatic int p = int'($urandom_range(2000000)) - 1000000;
        step(PE_COMPUTE, (r % 2) ? DF_IS : DF_WS, h, p);
        check("ws psum", v_out, p + w * h);
        check("h register", h_out, h);
      end
    end
    // OS: clear, accumulate h_in * v_in[7:0], pass v_in down unchanged, drain
    for (int n = 0; n < 20; n++) begin
      step(PE_CLEAR, DF_OS, 0, 0);
      acc = 0;
      for (int k = 0; k < 8; k++) begin
        x = int'($urandom_range(255)) - 128;
        w = int'($urandom_range(255)) - 128;
        step(PE_COMPUTE, DF_OS, x, w);
        acc += x * w;
        check("os passes operand", v_out, w);
      end
      // drain: v_out shows acc combinationally, then acc takes v_in
      @(negedge clk); op = PE_DRAIN; v_in = 1234 + n; #1;
      check("drain shows acc", v_out, acc);
      @(posedge clk); #1;
      check("drain shifts in", v_out, 1234 + n);
      step(PE_IDLE, DF_OS, 0, 0);
    end
    // idle holds the partial-sum register
    step(PE_LOAD, DF_WS, 0, 77);
    step(PE_IDLE, DF_WS, 5, 999);
    check("idle holds", v_out, 77);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
