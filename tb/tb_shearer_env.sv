// tb_shearer_env: drives one shearer_encoder instance through a complete run
// and checks it against tb_hd_ref_pkg.
//
// It loads the level rows (level*SEGS+seg) and the seed-ID windows (row
// seg*NGROUPS+grp = seed bits from seg*DMEM+grp*F on), then sends NSAMPLES
// random samples, the second one back to back with the first, and compares
// every output segment with the reference. It also checks the throughput the
// design promises: consecutive back-to-back samples start SEGS*NGROUPS cycles
// apart, segment results come every NGROUPS cycles, and the first result
// comes NGROUPS + tree latency + 2 cycles after acceptance. done rises when
// all is checked; checks/failures, mechanism counters and the measured sample
// period (cycles between the first two acceptances) are outputs.
module tb_shearer_env
  import hd_pkg::*, tb_hd_ref_pkg::*;
#(
  parameter int unsigned DHV = 512,
  parameter int unsigned DIV = 50,
  parameter int unsigned F = 20,
  parameter int unsigned DMEM = 16,
  parameter int unsigned LEVELS = 16,
  parameter enc_mode_e MODE = ENC_MAJ,
  parameter int unsigned TRUNC_K = 3,
  parameter int unsigned NSAMPLES = 3,
  parameter logic [DMEM-1:0] TIE_BITS = DMEM'(64'h9E37_79B9_7F4A_7C15)
) (
  input  logic clk,
  output bit   done,
  output int   checks,
  output int   failures,
  output int   n_b2b,
  output int   n_masked_groups,
  output int   period
);
  localparam int unsigned SEGS = (DHV + DMEM - 1) / DMEM;
  localparam int unsigned NGROUPS = (DIV + F - 1) / F;
  localparam int unsigned IDW = DMEM + F - 1;
  localparam int unsigned LW = idx_w(LEVELS);
  localparam int unsigned SW = idx_w(SEGS);
  localparam int unsigned WRW = $clog2(LEVELS * SEGS);
  localparam int unsigned ACC_W = tree_out_w(DIV);
  localparam int unsigned LAT = tree_latency(MODE, F);

  logic rst_n = 0, in_valid = 0, in_ready;
  logic [LW-1:0] in_sample [DIV];
  logic lvl_wr_en = 0, id_wr_en = 0;
  logic [WRW-1:0] lvl_wr_row = '0;
  logic [DMEM-1:0] lvl_wr_data = '0;
  logic [8:0] id_wr_row = '0;
  logic [IDW-1:0] id_wr_data = '0;
  logic out_valid, out_last;
  logic [SW-1:0] out_seg;
  logic [ACC_W-1:0] out_enc [DMEM];

  shearer_encoder #(.DHV(DHV), .DIV(DIV), .F(F), .DMEM(DMEM), .LEVELS(LEVELS),
                    .MODE(MODE), .TRUNC_K(TRUNC_K), .TIE_BITS(TIE_BITS)) dut (.*);

  hd_model m;
  int unsigned samples [NSAMPLES][];
  longint unsigned cyc = 0, t_acc[$], t_prev_out = 0;
  int n_acc = 0, n_out = 0, exp_seg = 0, cur = 0;

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      t_acc.push_back(cyc);
      if (n_acc > 0) begin
        checks++;
        if (cyc - t_acc[t_acc.size() - 2] < SEGS * NGROUPS) begin
          failures++; $display("FAIL samples accepted %0d cycles apart", cyc - t_acc[t_acc.size() - 2]);
        end
        if (cyc - t_acc[t_acc.size() - 2] == SEGS * NGROUPS) n_b2b++;
        if (n_acc == 1) period = int'(cyc - t_acc[t_acc.size() - 2]);
      end
      n_acc++;
    end
    if (out_valid) begin
      int bad;
      bad = 0;
      for (int d = 0; d < DMEM; d++) begin
        int unsigned e;
        e = m.enc_dim(samples[cur], out_seg * DMEM + d);
        if (out_enc[d] != ACC_W'(e)) begin
          if (bad < 3) $display("FAIL mode %s sample %0d seg %0d dim %0d: got %0d expected %0d",
                                MODE.name(), cur, out_seg, d, out_enc[d], e);
          bad++;
        end
      end
      checks++;
      if (bad) failures++;
      checks++;
      if (out_seg != SW'(exp_seg) || out_last != (exp_seg == SEGS - 1)) begin
        failures++; $display("FAIL segment order: %0d expected %0d", out_seg, exp_seg);
      end
      // timing: first result NGROUPS + LAT + 2 cycles after acceptance,
      // later results NGROUPS cycles apart
      checks++;
      if (exp_seg == 0) begin
        if (cyc - t_acc[cur] != NGROUPS + LAT + 2) begin
          failures++; $display("FAIL first-result latency %0d expected %0d", cyc - t_acc[cur], NGROUPS + LAT + 2);
        end
      end else if (cyc - t_prev_out != NGROUPS) begin
        failures++; $display("FAIL result spacing %0d expected %0d", cyc - t_prev_out, NGROUPS);
      end
      t_prev_out = cyc;
      n_out++;
      if (exp_seg == SEGS - 1) begin exp_seg = 0; cur++; end
      else exp_seg++;
    end
  end

  initial begin
    m = new(DHV, DIV, F, DMEM, LEVELS, MODE, TRUNC_K);
    for (int d = 0; d < DMEM; d++) m.ties[d] = TIE_BITS[d];
    for (int s = 0; s < NSAMPLES; s++) begin
      samples[s] = new[DIV];
      foreach (samples[s][k]) samples[s][k] = $urandom_range(LEVELS - 1);
    end
    for (int k = 0; k < DIV; k++) in_sample[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // load level rows
    for (int l = 0; l < LEVELS; l++)
      for (int s = 0; s < SEGS; s++) begin
        @(negedge clk);
        lvl_wr_en = 1; lvl_wr_row = WRW'(l * SEGS + s);
        for (int b = 0; b < DMEM; b++) lvl_wr_data[b] = (s * DMEM + b < DHV) ? m.lhv[l][s * DMEM + b] : 1'b0;
      end
    @(negedge clk); lvl_wr_en = 0;
    // load seed-ID windows
    for (int s = 0; s < SEGS; s++)
      for (int g = 0; g < NGROUPS; g++) begin
        @(negedge clk);
        id_wr_en = 1; id_wr_row = 9'(s * NGROUPS + g);
        for (int i = 0; i < IDW; i++) id_wr_data[i] = m.seed[(s * DMEM + g * F + i) % DHV];
      end
    @(negedge clk); id_wr_en = 0;
    // samples: 0 and 1 back to back, the rest after a pause
    for (int s = 0; s < NSAMPLES; s++) begin
      @(negedge clk);
      for (int k = 0; k < DIV; k++) in_sample[k] = LW'(samples[s][k]);
      in_valid = 1;
      while (!in_ready) @(negedge clk);
      @(negedge clk);
      in_valid = 0;
      if (s >= 1) repeat (5) @(negedge clk);
    end
    wait (n_out == NSAMPLES * SEGS);
    repeat (5) @(negedge clk);
    checks++;
    if (n_out != NSAMPLES * SEGS) begin failures++; $display("FAIL %0d results", n_out); end
    if (DIV % F != 0) n_masked_groups = NSAMPLES * SEGS;
    done = 1;
  end
endmodule
