// tb_gpe: stage 1 is given random Gaussians and pixels around them; a_alpha
// must match alpha = min(0.99, o*exp(-p)) computed in real arithmetic within
// 0.004 + 1 % and a_done must come exactly four cycles after a_start. Stage 2 is
// then run over lists of these alphas and checked against a real-valued
// front-to-back blend: non-contributory flags (alpha < 1/255), the Gaussian
// that terminates the pixel (T below 1e-4), final T and colour.
module tb_gpe;
  import ags_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic a_start = 1'b0;
  gfeat_t a_feat = '0;
  logic signed [15:0] a_px = '0, a_py = '0;
  logic a_busy, a_done;
  logic [15:0] a_alpha;
  logic clear = 1'b0;
  logic [15:0] thresh_alpha = ALPHA_THRESH_DEF;
  logic b_valid = 1'b0;
  logic [15:0] b_alpha = '0;
  rgb_t b_col = '0;
  logic b_nc, b_term, term;
  logic [15:0] trans;
  rgb_t color;

  gpe dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_nc = 0, n_term = 0;

  task automatic alpha_of(input gfeat_t f, input int px, input int py, output logic [15:0] a);
    int lat;
    @(negedge clk);
    a_start = 1'b1; a_feat = f; a_px = 16'(px * 16); a_py = 16'(py * 16);
    @(negedge clk);
    a_start = 1'b0;
    lat = 1;
    while (!a_done && lat < 10) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 4) begin failures++; $display("stage 1 latency %0d", lat); end
    a = a_alpha;
  endtask

  initial begin
    gfeat_t fl [16];
    logic [15:0] al [16];
    real r, d, t, cr, cg, cb, tt;
    bit done;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < 150; l++) begin
      int px, py, n;
      px = $urandom_range(0, 3); py = $urandom_range(0, 3);
      n = $urandom_range(4, 16);
      for (int i = 0; i < n; i++) begin
        fl[i] = rand_feat(0, 0, 3);
        alpha_of(fl[i], px, py, al[i]);
        r = ref_alpha(fl[i], real'(px), real'(py));
        d = real'(al[i]) / 65536.0 - r;
        if (d < 0.0) d = -d;
        checks++;
        if (d > 0.004 + 0.01 * r) begin
          failures++;
          if (failures < 10) $display("alpha %f expected %f", real'(al[i]) / 65536.0, r);
        end
      end
      // stage 2 over the list
      @(negedge clk);
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      t = 1.0; cr = 0.0; cg = 0.0; cb = 0.0; done = 0;
      for (int i = 0; i < n; i++) begin
        real a;
        bit enc, eterm;
        a = real'(al[i]) / 65536.0;
        b_valid = 1'b1; b_alpha = al[i]; b_col = fl[i].col;
        #1;
        enc = (al[i] < ALPHA_THRESH_DEF);
        tt = t * (1.0 - a);
        eterm = !enc && (tt < 1.0e-4);
        if (!done) begin
          checks++;
          if (b_nc !== enc || (b_term !== eterm && (tt > 1.3e-4 || tt < 0.7e-4))) begin
            failures++;
            $display("list %0d pos %0d: nc %b term %b expected %b %b (T %f)", l, i, b_nc, b_term, enc, eterm, tt);
          end
          n_nc   += int'(enc);
          n_term += int'(eterm);
          if (b_term) done = 1;
          else if (!enc) begin
            cr += real'(fl[i].col.r) / 65536.0 * a * t;
            cg += real'(fl[i].col.g) / 65536.0 * a * t;
            cb += real'(fl[i].col.b) / 65536.0 * a * t;
            t = tt;
          end
        end
        @(negedge clk);
      end
      b_valid = 1'b0;
      checks++;
      d = (real'(trans) / 65536.0) - t;
      if (d < 0.0) d = -d;
      if (d > 0.002 || term !== done) begin failures++; $display("T %f expected %f", real'(trans) / 65536.0, t); end
      checks++;
      d = (real'(color.r) / 65536.0) - cr;
      if (d < 0.0) d = -d;
      if (d > 0.003) begin failures++; $display("C.r %f expected %f", real'(color.r) / 65536.0, cr); end
      d = (real'(color.b) / 65536.0) - cb;
      if (d < 0.0) d = -d;
      if (d > 0.003) begin failures++; $display("C.b %f expected %f", real'(color.b) / 65536.0, cb); end
    end
    // forced early termination: opaque Gaussians at their centre
    @(negedge clk); clear = 1'b1; @(negedge clk); clear = 1'b0;
    for (int i = 0; i < 4; i++) begin
      b_valid = 1'b1; b_alpha = ALPHA_MAX; b_col = '0;
      @(negedge clk);
    end
    b_valid = 1'b0;
    checks++;
    if (!term) begin failures++; $display("opaque Gaussians did not terminate the pixel"); end
    n_term += int'(term);
    checks++;
    if (n_nc == 0 || n_term == 0) begin failures++; $display("mechanisms: nc %0d term %0d", n_nc, n_term); end
    $display("non-contributory %0d, early terminations %0d", n_nc, n_term);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
