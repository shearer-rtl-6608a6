// tb_popcount_maj: self-checking testbench for popcount_maj.
//
// Streams 300 input vectors of N = 310 bits into the tree, one per cycle
// (plus all-zero and all-one vectors), and compares every result with a
// reference computed here from the definition of the local-majority count. Also checks
// that the result appears exactly 6 (1 + ceil(log2 of 18 leaves)) cycles after the input.
module tb_popcount_maj;
  import hd_pkg::*;
  localparam int unsigned N = 310;
  localparam int unsigned OUT_W = tree_out_w(N);
  localparam int unsigned EXP_LAT = 6;
  localparam int unsigned NVEC = 300;

  logic clk = 0, rst_n = 0, in_valid = 0, tie = 0, out_valid;
  logic [N-1:0] bits = '0;
  logic [OUT_W-1:0] sum;
  int checks = 0, failures = 0;
  int unsigned exp_q[$];
  longint unsigned t_in[$];
  longint unsigned cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  popcount_maj #(.N(N)) dut (.clk, .rst_n, .in_valid, .bits, .tie, .out_valid, .sum);

  // sum over groups of six of: 1 if more than three ones, tie if three
  function automatic int unsigned ref_sum(input logic [N-1:0] v, input logic t);
    int unsigned s, c; s = 0;
    for (int g = 0; g < N; g += 6) begin
      c = 0;
      for (int k = g; k < g + 6 && k < N; k++) c += v[k];
      s += (c > 3) ? 1 : (c == 3) ? t : 0;
    end
    return s;
  endfunction

  // time stamp of the clock edge that takes each input
  always @(posedge clk) if (rst_n && in_valid) t_in.push_back(cyc);

  // compare outputs in order
  always @(posedge clk) if (rst_n && out_valid) begin
    int unsigned e; longint unsigned t0;
    e = exp_q.pop_front(); t0 = t_in.pop_front();
    checks++;
    if (sum != OUT_W'(e)) begin
      failures++; $display("FAIL value: got %0d expected %0d", sum, e);
    end
    checks++;
    if (cyc - t0 != EXP_LAT) begin
      failures++; $display("FAIL latency %0d expected %0d", cyc - t0, EXP_LAT);
    end
  end

  initial begin
    #100000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic drive(input logic [N-1:0] v, input logic t);
    bits <= v; tie <= t; in_valid <= 1;
    exp_q.push_back(ref_sum(v, t));
    @(posedge clk);
  endtask

  initial begin
    logic [N-1:0] v;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    drive('0, 0); drive('1, 0); drive('1, 1);
    for (int i = 0; i < NVEC; i++) begin
      for (int k = 0; k < N; k++) begin
        // vary density so that ties and near-ties occur
        int unsigned dens; dens = (i % 5) * 25;
        v[k] = ($urandom_range(99) < dens + (i % 3) * 5);
      end
      drive(v, 1'(i % 2));
    end
    in_valid <= 0;
    repeat (EXP_LAT + 5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
