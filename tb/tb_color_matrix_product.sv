// tb_color_matrix_product: the colour contraction for the three processes.
// Three instances, 6 flows at one event per cycle, 24 flows at one per cycle
// and 120 flows at one per four cycles, are loaded with the SU(3) colour
// matrices of gg -> ttbar + 1, 2, 3 gluons (computed here from the Fierz
// identity) and fed random amplitudes. Every result must equal a bit-exact
// model of the fixed-point casts, and agree with the real-valued double sum
// sum_ij A_i* C_ij A_j to within the coefficient rounding. Events are sent
// back to back to check the initiation intervals (1, 1 and 4 cycles), then
// with random output stalls.
module tb_color_matrix_product;
  import me_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NC [3] = '{6, 24, 120};
  localparam int IIS [3] = '{1, 1, 4};

  logic [2:0] in_valid, in_ready, out_valid, out_ready, cfg_we;
  logic [12:0] cfg_addr;
  coef_t cfg_data;
  logic [2*16*120-1:0] in_amps;
  logic signed [31:0] out_result [3];

  for (genvar g = 0; g < 3; g++) begin : gi
    color_matrix_product #(.NCOLOR(NC[g]), .II(IIS[g])) dut (.clk, .rst_n,
      .cfg_we(cfg_we[g]), .cfg_addr(cfg_addr[$clog2(NC[g]*(NC[g]+1)/2)-1:0]), .cfg_data,
      .in_valid(in_valid[g]), .in_ready(in_ready[g]), .in_amps(in_amps[2*16*NC[g]-1:0]),
      .out_valid(out_valid[g]), .out_ready(out_ready[g]), .out_result(out_result[g]));
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint cq [$];
  real    cm [$];
  longint re [$], im [$];
  longint exp_q [$];
  real    exp_r [$];
  int     t_out [$];
  int     cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // All handshakes are decided just after the falling edge: the values set
  // there are what the design sees at the next rising edge.
  task automatic new_vector(int n);
    re.delete(); im.delete();
    in_amps = '0;
    for (int j = 0; j < n; j++) begin
      // |A| below 1 keeps the sums inside the intermediate formats
      re.push_back(longint'(int'($urandom % 4096) - 2048));
      im.push_back(longint'(int'($urandom % 4096) - 2048));
      in_amps[32*j +: 16]      = 16'(re[j]);
      in_amps[32*j + 16 +: 16] = 16'(im[j]);
    end
    exp_q.push_back(color_fixed(n, cq, re, im));
    exp_r.push_back(color_real(n, cm, re, im));
  endtask

  task automatic run(int g, int nev, bit stalls);
    int n, sent, got;
    bit taken;
    real worst;
    n = NC[g];
    sent = 0; got = 0; worst = 0.0; taken = 0;
    exp_q.delete(); exp_r.delete(); t_out.delete();
    while (got < nev) begin
      @(negedge clk);
      if (taken) in_valid[g] = 0;
      out_ready[g] = stalls ? ($urandom % 3 != 0) : 1'b1;
      if (!in_valid[g] && sent < nev) begin
        new_vector(n);
        in_valid[g] = 1;
      end
      #1;
      taken = in_valid[g] && in_ready[g];
      if (taken) sent++;
      if (out_valid[g] && out_ready[g]) begin
        longint q;
        real r, d;
        q = exp_q.pop_front();
        r = exp_r.pop_front();
        t_out.push_back(cyc);
        checks++;
        if (longint'(out_result[g]) != q) begin
          failures++;
          $display("n=%0d event %0d: raw %0d expected %0d", n, got, out_result[g], q);
        end
        d = rabs(fx2r(longint'(out_result[g]), 13) - r);
        checks++;
        if (d > 0.02 + 0.01 * rabs(r)) begin
          failures++;
          $display("n=%0d event %0d: %f, double sum %f", n, got, fx2r(longint'(out_result[g]), 13), r);
        end
        if (d > worst) worst = d;
        got++;
      end
    end
    @(negedge clk);
    in_valid[g] = 0;
    if (!stalls) begin
      checks++;
      if (t_out[nev-1] - t_out[0] != (nev - 1) * IIS[g]) begin
        failures++;
        $display("n=%0d: results not %0d cycles apart (%0d over %0d)", n, IIS[g],
                 t_out[nev-1] - t_out[0], nev - 1);
      end else
        $display("n=%0d: one event every %0d cycles; largest deviation from the double sum %f",
                 n, IIS[g], worst);
    end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; cfg_we = 0; cfg_addr = 0; cfg_data = 0; in_amps = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 3; g++) begin
      int n, ng, t;
      n = NC[g];
      ng = n_gluons(n);
      cq.delete(); cm.delete();
      for (int i = 0; i < n; i++)
        for (int j = 0; j < n; j++) cm.push_back(color_entry(ng, i, j));
      t = 0;
      for (int i = 0; i < n; i++)
        for (int j = i; j < n; j++) begin
          cq.push_back(coef_q(ng, i, j));
          @(negedge clk);
          cfg_we[g] = 1; cfg_addr = 13'(t); cfg_data = coef_t'(cq[t]);
          t++;
        end
      @(negedge clk);
      cfg_we = 0;
      run(g, 12, 0);
      run(g, 20, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
