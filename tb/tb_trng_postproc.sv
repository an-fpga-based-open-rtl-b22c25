// tb_trng_postproc: self-checking test of the three post-processing methods.
// One instance per method is fed the same random raw bit stream (with gaps
// in raw_valid). A reference model written here from the textbook
// definitions predicts every output bit: XOR of each group of XOR_N bits,
// the Von Neumann pair rule (01 -> 0, 10 -> 1, equal pairs dropped) and the
// LFSR whitener (raw bit XORed into the feedback of a 32-bit LFSR with taps
// 32, 22, 2, 1; top bit out). Output order, values and count are compared;
// each output must appear one cycle after the raw bit that completes it.
`timescale 1ns/1ps
module tb_trng_postproc;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;

  logic raw_valid = 0, raw = 0;
  logic ov [3], ob [3];
  int checks = 0, failures = 0;

  trng_postproc #(.MODE(PP_XOR), .XOR_N(4)) d_xor  (.clk, .rst_n, .raw_valid, .raw, .out_valid(ov[0]), .out_bit(ob[0]));
  trng_postproc #(.MODE(PP_VN))             d_vn   (.clk, .rst_n, .raw_valid, .raw, .out_valid(ov[1]), .out_bit(ob[1]));
  trng_postproc #(.MODE(PP_LFSR))           d_lfsr (.clk, .rst_n, .raw_valid, .raw, .out_valid(ov[2]), .out_bit(ob[2]));

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // reference state
  int xcnt = 0; bit xacc = 0;
  bit vhave = 0, vfirst = 0;
  bit [31:0] lf = 32'h1;
  bit exp_v [3], exp_b [3];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nout [3] = '{0, 0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      // outputs for the raw bit driven in the previous cycle
      for (int m = 0; m < 3; m++) begin
        check(ov[m] == exp_v[m], $sformatf("mode %0d cycle %0d valid", m, c));
        if (exp_v[m]) begin
          check(ob[m] == exp_b[m], $sformatf("mode %0d cycle %0d bit", m, c));
          nout[m]++;
        end
      end
      raw_valid = ($urandom_range(3) != 0);
      raw = 1'($urandom);
      for (int m = 0; m < 3; m++) exp_v[m] = 0;
      if (raw_valid) begin
        // XOR
        if (xcnt == 3) begin exp_v[0] = 1; exp_b[0] = xacc ^ raw; xcnt = 0; xacc = 0; end
        else begin xcnt++; xacc ^= raw; end
        // Von Neumann
        if (!vhave) begin vhave = 1; vfirst = raw; end
        else begin vhave = 0; if (vfirst != raw) begin exp_v[1] = 1; exp_b[1] = vfirst; end end
        // LFSR
        exp_v[2] = 1; exp_b[2] = lf[31];
        lf = {lf[30:0], lf[31] ^ lf[21] ^ lf[1] ^ lf[0] ^ raw};
      end
    end
    check(nout[0] > 500 && nout[1] > 300 && nout[2] > 2000, "all methods produced output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
