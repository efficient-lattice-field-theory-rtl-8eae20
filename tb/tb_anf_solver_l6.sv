// tb_anf_solver_l6: the end-to-end flow on a 6 x 6 lattice, the second
// lattice size run on silicon in the published experiments (scalar phi^4
// theory and the graphene-wire effective theory both use it). The solver is
// built with L = 6 (P = 2, so 9 patches); all other parameters keep their
// defaults. The network is the same LoRA mixer as in tb_anf_solver, widened
// to 9 tokens, and its feature-buffer regions are reused so that it fits the
// 256-word buffer: x_a and later s1/s2 at 0, X at 36, the token and channel
// hidden layers both at 108, the output embedding at 180. Three samples of
// 8 steps (a normal one, one after new LoRA weights, one that saturates the
// converters) are compared bit for bit with anf_ref_pkg, and every mechanism
// is required to occur.
module tb_anf_solver_l6;
  import anf_pkg::*;
  import anf_ref_pkg::*;
  localparam int L = 6, P = 2, V = L * L, NS = 8, NL = 7;
  localparam int IN_BASE = 0, OUT_BASE = 0;
  logic clk = 0, rst_n = 0;
  logic prog_en = 0; logic [4:0] prog_row = 0, prog_col = 0; gcode_t prog_g = 0;
  logic wv_start = 0; logic [4:0] wv_row = 0, wv_col = 0; gcode_t wv_target = 0;
  logic wv_busy, wv_done, wv_ok; logic [7:0] wv_cycles;
  logic desc_we = 0; logic [3:0] desc_waddr = 0; layer_desc_t desc_wdata = '0;
  logic temb_we = 0; logic [2:0] temb_wstep = 0; logic [4:0] temb_wchan = 0; data_t temb_wdata = 0;
  logic bn_we = 0; logic [5:0] bn_waddr = 0; data_t bn_wgamma = 0, bn_wbeta = 0;
  logic lora_we = 0; logic [8:0] lora_waddr = 0; data_t lora_wdata = 0;
  logic x_we = 0; logic [5:0] x_waddr = 0, x_raddr = 0; data_t x_wdata = 0, x_rdata;
  logic start = 0; logic [4:0] n_layers = 0; logic [3:0] n_steps = 0;
  baddr_t in_base = 0, out_base = 0;
  logic busy, done; logic [2:0] cur_step; logic signed [31:0] logdet;
  int checks = 0, failures = 0;
  layer_desc_t net [NL];
  int n_even_steps = 0, n_odd_steps = 0, n_reads = 0, n_lora_runs = 0;

  anf_solver #(.L(L), .P(P)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // events observed inside the design
  always @(posedge clk) if (rst_n) begin
    if (dut.u_xbar.adc_valid) n_reads++;
    if (dut.u_eng.lora_done) n_lora_runs++;
    if (dut.upd_start) begin
      if (cur_step[0]) n_odd_steps++; else n_even_steps++;
    end
  end

  function automatic layer_desc_t mk(int sb, int svs, int ses, int db, int dvs, int des,
      int nv, int ni, int no, int rb, int cb);
    layer_desc_t d = '0;
    d.src_base = baddr_t'(sb); d.src_vstride = baddr_t'(svs); d.src_estride = baddr_t'(ses);
    d.dst_base = baddr_t'(db); d.dst_vstride = baddr_t'(dvs); d.dst_estride = baddr_t'(des);
    d.n_vec = 6'(nv); d.in_len = 6'(ni); d.out_len = 6'(no);
    d.row_base = 5'(rb); d.col_base = 5'(cb);
    return d;
  endfunction

  task automatic load_lora(int amp);
    for (int k = 0; k < 512; k++) begin
      @(negedge clk); lora_we = 1; lora_waddr = 9'(k);
      lw[k] = int'($urandom_range(0, 2 * amp)) - amp; lora_wdata = data_t'(lw[k]);
    end
    @(negedge clk); lora_we = 0;
  endtask

  task automatic sample(int amp, bit pos);
    int xf [] = new [V];
    longint ld = 0;
    for (int k = 0; k < V; k++) begin
      @(negedge clk); x_we = 1; x_waddr = 6'(k);
      xf[k] = pos ? int'($urandom_range(amp / 2, amp)) : int'($urandom_range(0, 2 * amp)) - amp;
      x_wdata = data_t'(xf[k]);
    end
    @(negedge clk); x_we = 0;
    n_layers = 5'(NL); n_steps = 4'(NS); in_base = baddr_t'(IN_BASE); out_base = baddr_t'(OUT_BASE);
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int t = 0; t < NS; t++) begin
      load_frozen(xf, t, IN_BASE, L, P);
      for (int l = 0; l < NL; l++) run_layer(net[l], t);
      coupling(xf, t, OUT_BASE, L, P, ld);
    end
    for (int k = 0; k < V; k++) begin
      x_raddr = 6'(k); #1;
      checks++;
      if (int'(x_rdata) != xf[k]) begin
        failures++; $display("phi[%0d] = %0d, expected %0d", k, x_rdata, xf[k]);
      end
    end
    checks++;
    if (longint'(logdet) != ld) begin failures++; $display("logdet %0d expected %0d", logdet, ld); end
  endtask

  initial begin
    init();
    // buffer map: 0 x_a (36), later s1/s2 (72) | 36 X (9x8) | 108 token hidden (8x8),
    //             later channel hidden (9x8) | 180 output embedding (36x2)
    net[0] = mk(0, 4, 1, 36, 8, 1, 9, 4, 8, 0, 0);        // patch embedding, ReLU
    net[0].relu_analog = 1;
    net[1] = mk(36, 1, 8, 108, 8, 1, 8, 9, 8, 12, 0);     // token mixing W1
    net[1].temb_en = 1; net[1].bn_en = 1; net[1].chan_is_vec = 1; net[1].bn_base = 6'd0;
    net[1].lora_en = 1; net[1].lora_base = 10'd0; net[1].relu_digital = 1;
    net[2] = mk(108, 8, 1, 36, 1, 8, 8, 8, 9, 4, 0);      // token mixing W2, skip
    net[2].lora_en = 1; net[2].lora_base = 10'd64; net[2].residual = 1;
    net[3] = mk(36, 8, 1, 108, 8, 1, 9, 8, 8, 4, 9);      // channel mixing W3
    net[3].bn_en = 1; net[3].bn_base = 6'd8; net[3].lora_en = 1; net[3].lora_base = 10'd128;
    net[3].relu_analog = 1;
    net[4] = mk(108, 8, 1, 36, 8, 1, 9, 8, 8, 4, 17);     // channel mixing W4, skip
    net[4].lora_en = 1; net[4].lora_base = 10'd192; net[4].residual = 1;
    net[5] = mk(36, 8, 1, 180, 8, 1, 9, 8, 8, 21, 0);     // output embedding
    net[6] = mk(180, 2, 1, 0, 2, 1, 36, 2, 2, 29, 0);     // per-pixel regression
    repeat (2) @(posedge clk); rst_n = 1;
    for (int l = 0; l < NL; l++) begin
      @(negedge clk); desc_we = 1; desc_waddr = 4'(l); desc_wdata = net[l];
    end
    @(negedge clk); desc_we = 0;
    for (int r = 0; r < 31; r++) for (int c = 0; c < 25; c++) begin
      @(negedge clk); prog_en = 1; prog_row = 5'(r); prog_col = 5'(c);
      G[r][c] = int'($urandom_range(42, 58)); prog_g = gcode_t'(G[r][c]);
    end
    @(negedge clk); prog_en = 0;
    for (int s = 0; s < NS; s++) for (int c = 0; c < 32; c++) begin
      @(negedge clk); temb_we = 1; temb_wstep = 3'(s); temb_wchan = 5'(c);
      temb[s][c] = int'($urandom_range(0, 128)) - 64; temb_wdata = data_t'(temb[s][c]);
    end
    @(negedge clk); temb_we = 0;
    for (int k = 0; k < 64; k++) begin
      @(negedge clk); bn_we = 1; bn_waddr = 6'(k);
      bng[k] = int'($urandom_range(160, 320)); bnb[k] = int'($urandom_range(0, 64)) - 32;
      bn_wgamma = data_t'(bng[k]); bn_wbeta = data_t'(bnb[k]);
    end
    @(negedge clk); bn_we = 0;
    load_lora(24);
    sample(512, 0);
    load_lora(40);            // new LoRA weights, same crossbar
    sample(512, 0);
    // large positive prior sample through strong patch-embedding weights
    for (int r = 0; r < 4; r++) begin
      @(negedge clk); prog_en = 1; prog_row = 5'(r); prog_col = 5'(0); G[r][0] = 80; prog_g = 7'd80;
    end
    @(negedge clk); prog_en = 0;
    sample(30000, 1);
    // every mechanism must have happened
    checks++; if (n_relu_analog_clip == 0)  begin failures++; $display("no analog ReLU clip"); end
    checks++; if (n_relu_digital_clip == 0) begin failures++; $display("no digital ReLU clip"); end
    checks++; if (n_residual == 0)          begin failures++; $display("no residual add"); end
    checks++; if (n_lora == 0 || n_lora_runs == 0) begin failures++; $display("no LoRA"); end
    checks++; if (n_temb == 0)              begin failures++; $display("no time embedding"); end
    checks++; if (n_bn == 0)                begin failures++; $display("no normalization"); end
    checks++; if (n_adc_sat == 0)           begin failures++; $display("no ADC saturation"); end
    checks++; if (n_out_sat == 0)           begin failures++; $display("no output saturation"); end
    checks++; if (n_frozen == 0 || n_updated == 0) begin failures++; $display("no mask split"); end
    checks++; if (n_even_steps == 0 || n_odd_steps == 0) begin failures++; $display("no mask alternation"); end
    checks++; if (n_reads != 3 * NS * (9 + 8 + 8 + 9 + 9 + 9 + 36)) begin
      failures++; $display("crossbar reads %0d", n_reads);
    end
    $display("events: relu_a=%0d relu_d=%0d residual=%0d lora=%0d/%0d temb=%0d bn=%0d adc_sat=%0d out_sat=%0d exp_sat=%0d frozen=%0d updated=%0d steps=%0d/%0d reads=%0d",
      n_relu_analog_clip, n_relu_digital_clip, n_residual, n_lora, n_lora_runs, n_temb, n_bn,
      n_adc_sat, n_out_sat, n_exp_sat, n_frozen, n_updated, n_even_steps, n_odd_steps, n_reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
