// tb_color_workloads: the 1-jet and 2-jet colour workloads (6 and 24 colour
// flows) run on the contraction unit at its default size of 120 flows. The
// smaller colour matrix is written into the top-left corner of the folded
// coefficient store, every other coefficient is zero, and amplitudes beyond
// the process's flows are zero, so the folded sum must give exactly the
// result of the small process. Each result is compared bit-exactly with the
// fixed-point model evaluated at the small size and with the double sum; the
// events follow each other every 4 cycles, the 120-flow rate.
module tb_color_workloads;
  import me_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int N = 120;

  logic in_valid, in_ready, out_valid, out_ready, cfg_we;
  logic [12:0] cfg_addr;
  coef_t cfg_data;
  logic [2*16*N-1:0] in_amps;
  logic signed [31:0] out_result;

  color_matrix_product dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .in_valid, .in_ready, .in_amps, .out_valid, .out_ready, .out_result);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  longint cq [$];
  real    cm [$];
  longint re [$], im [$];
  longint exp_q [$];
  real    exp_r [$];

  task automatic run(int n, int nev);
    int ng, sent, got, t_first, t_last;
    bit taken;
    ng = n_gluons(n);
    cq.delete(); cm.delete(); exp_q.delete(); exp_r.delete();
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) cm.push_back(color_entry(ng, i, j));
    for (int i = 0; i < n; i++)
      for (int j = i; j < n; j++) cq.push_back(coef_q(ng, i, j));
    // whole 120-flow store: small matrix in the corner, zero elsewhere
    for (int i = 0; i < N; i++)
      for (int j = i; j < N; j++) begin
        @(negedge clk);
        cfg_we = 1;
        cfg_addr = 13'(i*N - i*(i-1)/2 + (j-i));
        cfg_data = (i < n && j < n) ? coef_t'(cq[i*n - i*(i-1)/2 + (j-i)]) : '0;
      end
    @(negedge clk);
    cfg_we = 0;
    sent = 0; got = 0; taken = 0; t_first = 0; t_last = 0;
    while (got < nev) begin
      @(negedge clk);
      if (taken) in_valid = 0;
      out_ready = 1;
      if (!in_valid && sent < nev) begin
        re.delete(); im.delete();
        in_amps = '0;
        for (int j = 0; j < n; j++) begin
          re.push_back(longint'(int'($urandom % 4096) - 2048));
          im.push_back(longint'(int'($urandom % 4096) - 2048));
          in_amps[32*j +: 16]      = 16'(re[j]);
          in_amps[32*j + 16 +: 16] = 16'(im[j]);
        end
        exp_q.push_back(color_fixed(n, cq, re, im));
        exp_r.push_back(color_real(n, cm, re, im));
        in_valid = 1;
      end
      #1;
      taken = in_valid && in_ready;
      if (taken) sent++;
      if (out_valid && out_ready) begin
        longint q;
        real r;
        q = exp_q.pop_front();
        r = exp_r.pop_front();
        checks += 2;
        if (longint'(out_result) != q) begin
          failures++;
          $display("%0d flows, event %0d: raw %0d expected %0d", n, got, out_result, q);
        end
        if (rabs(fx2r(longint'(out_result), 13) - r) > 0.02 + 0.01 * rabs(r)) begin
          failures++;
          $display("%0d flows, event %0d: %f, double sum %f", n, got, fx2r(longint'(out_result), 13), r);
        end
        if (got == 0) t_first = cyc;
        t_last = cyc;
        got++;
      end
    end
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (t_last - t_first != 4 * (nev - 1)) begin
      failures++;
      $display("%0d flows: results not 4 cycles apart", n);
    end else
      $display("%0d flows on the 120-flow unit: %0d events, bit-exact, one every 4 cycles", n, nev);
  endtask

  initial begin
    in_valid = 0; out_ready = 0; cfg_we = 0; cfg_addr = 0; cfg_data = 0; in_amps = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(6, 30);
    run(24, 30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
