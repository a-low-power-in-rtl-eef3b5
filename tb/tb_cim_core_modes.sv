// tb_cim_core_modes: runs the core in the five input/weight precision
// patterns of the reference evaluation: 3-bit input with 1-bit weight,
// 2/2, 3/2, 4/4 and 8/8 bits. Each pattern is a cim_mode_run instance
// (32 rows, 4 neurons, full-range random inputs and weights, six MACs each,
// codes and latency checked against an integer reference). The lower
// precisions are obtained purely through the IN_BITS and W_BITS parameters
// of the core; fewer input bits mean fewer M-RD4 digits and a shorter MAC.
module tb_cim_core_modes;

  logic clk = 1'b0, rst_n = 1'b0;
  logic done [5];
  int   chk [5], fail [5];

  always #5 clk = ~clk;

  int cycles = 0;
  always @(posedge clk) cycles++;

  cim_mode_run #(.IN_BITS(3), .W_BITS(1)) u_3_1 (.clk(clk), .rst_n(rst_n), .done(done[0]), .checks(chk[0]), .failures(fail[0]));
  cim_mode_run #(.IN_BITS(2), .W_BITS(2)) u_2_2 (.clk(clk), .rst_n(rst_n), .done(done[1]), .checks(chk[1]), .failures(fail[1]));
  cim_mode_run #(.IN_BITS(3), .W_BITS(2)) u_3_2 (.clk(clk), .rst_n(rst_n), .done(done[2]), .checks(chk[2]), .failures(fail[2]));
  cim_mode_run #(.IN_BITS(4), .W_BITS(4)) u_4_4 (.clk(clk), .rst_n(rst_n), .done(done[3]), .checks(chk[3]), .failures(fail[3]));
  cim_mode_run #(.IN_BITS(8), .W_BITS(8)) u_8_8 (.clk(clk), .rst_n(rst_n), .done(done[4]), .checks(chk[4]), .failures(fail[4]));

  function automatic int total(input int a [5]);
    int s = 0;
    foreach (a[i]) s += a[i];
    return s;
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", total(chk), total(fail) + 1);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    wait (done[0] && done[1] && done[2] && done[3] && done[4]);
    foreach (chk[i])
      $display("pattern %0d: checks=%0d failures=%0d", i, chk[i], fail[i]);
    $display("finished after %0d clock cycles", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", total(chk), total(fail));
    $finish;
  end

endmodule
