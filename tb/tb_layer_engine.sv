// tb_layer_engine: self-checking test of one-layer execution on the hybrid
// datapath (layer_engine driving the crossbar model analog_mvm_core).
// Random conductances, buffer contents, time embeddings, normalization
// pairs and LoRA weights are written both into the design and into the
// reference model anf_ref_pkg. Several layer descriptors exercising every
// option (time embedding, batch normalization with channel = vector or
// element, LoRA, analog and digital ReLU, residual add, strided/transposed
// addressing, ADC and output saturation) are run, and after each layer the
// whole feature buffer is compared word by word with the reference.
module tb_layer_engine;
  import anf_pkg::*;
  import anf_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done;
  layer_desc_t desc;
  logic [2:0] step = 0;
  logic dac_clr, dac_we, read_start, relu_en, adc_valid;
  logic [4:0] dac_row; data_t dac_code; adc_t adc_code [32];
  logic prog_en = 0; logic [4:0] prog_row = 0, prog_col = 0; gcode_t prog_g = 0;
  logic temb_we = 0; logic [2:0] temb_wstep = 0; logic [4:0] temb_wchan = 0; data_t temb_wdata = 0;
  logic bn_we = 0; logic [5:0] bn_waddr = 0; data_t bn_wgamma = 0, bn_wbeta = 0;
  logic lora_we = 0; logic [8:0] lora_waddr = 0; data_t lora_wdata = 0;
  logic buf_we = 0; baddr_t buf_waddr = 0, buf_raddr0 = 0, buf_raddr1 = 0; data_t buf_wdata = 0, buf_rdata0, buf_rdata1;
  int checks = 0, failures = 0;

  analog_mvm_core u_xbar (.clk, .rst_n, .prog_en, .prog_row, .prog_col, .prog_g,
    .pulse_set(1'b0), .pulse_reset(1'b0), .pulse_row(5'd0), .pulse_col(5'd0), .pulse_wl(8'd0),
    .verify_row(5'd0), .verify_col(5'd0), .verify_g(),
    .dac_clr, .dac_we, .dac_row, .dac_code, .read_start, .relu_en, .adc_valid, .adc_code);
  layer_engine dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic set_g(int r, int c, int g);
    @(negedge clk); prog_en = 1; prog_row = 5'(r); prog_col = 5'(c); prog_g = gcode_t'(g);
    G[r][c] = g; @(negedge clk); prog_en = 0;
  endtask

  task automatic run(layer_desc_t d, int t);
    desc = d; step = 3'(t);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    run_layer(d, t);
    for (int a = 0; a < 256; a++) begin
      buf_raddr0 = baddr_t'(a); #1;
      checks++;
      if (int'(buf_rdata0) != fb[a]) begin
        failures++;
        if (failures < 10) $display("buf[%0d] = %0d, expected %0d", a, buf_rdata0, fb[a]);
      end
    end
  endtask

  function automatic layer_desc_t mk(int sb, int svs, int ses, int db, int dvs, int des,
      int nv, int ni, int no, int rb, int cb);
    layer_desc_t d = '0;
    d.src_base = baddr_t'(sb); d.src_vstride = baddr_t'(svs); d.src_estride = baddr_t'(ses);
    d.dst_base = baddr_t'(db); d.dst_vstride = baddr_t'(dvs); d.dst_estride = baddr_t'(des);
    d.n_vec = 6'(nv); d.in_len = 6'(ni); d.out_len = 6'(no);
    d.row_base = 5'(rb); d.col_base = 5'(cb);
    return d;
  endfunction

  initial begin
    layer_desc_t d;
    init();
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 32; r++) for (int c = 0; c < 31; c++) set_g(r, c, int'($urandom_range(38, 62)));
    set_g(3, 31, 48);       // a reference cell away from 50
    for (int a = 0; a < 256; a++) begin
      @(negedge clk); buf_we = 1; buf_waddr = baddr_t'(a);
      fb[a] = int'($urandom_range(0, 1024)) - 512; buf_wdata = data_t'(fb[a]);
    end
    @(negedge clk); buf_we = 0;
    for (int s = 0; s < 8; s++) for (int c = 0; c < 32; c++) begin
      @(negedge clk); temb_we = 1; temb_wstep = 3'(s); temb_wchan = 5'(c);
      temb[s][c] = int'($urandom_range(0, 256)) - 128; temb_wdata = data_t'(temb[s][c]);
    end
    @(negedge clk); temb_we = 0;
    for (int k = 0; k < 64; k++) begin
      @(negedge clk); bn_we = 1; bn_waddr = 6'(k);
      bng[k] = int'($urandom_range(128, 384)); bnb[k] = int'($urandom_range(0, 128)) - 64;
      bn_wgamma = data_t'(bng[k]); bn_wbeta = data_t'(bnb[k]);
    end
    @(negedge clk); bn_we = 0;
    for (int k = 0; k < 512; k++) begin
      @(negedge clk); lora_we = 1; lora_waddr = 9'(k);
      lw[k] = int'($urandom_range(0, 128)) - 64; lora_wdata = data_t'(lw[k]);
    end
    @(negedge clk); lora_we = 0;

    // token-mixing style: channel = vector, strided (transposed) input
    d = mk(32, 1, 8, 64, 8, 1, 8, 4, 8, 0, 8);
    d.temb_en = 1; d.bn_en = 1; d.chan_is_vec = 1; d.lora_en = 1; d.relu_digital = 1;
    d.lora_base = 10'd0; d.bn_base = 6'd0;
    run(d, 3);
    // back-projection with residual add into the strided source
    d = mk(64, 8, 1, 32, 1, 8, 8, 8, 4, 4, 0);
    d.lora_en = 1; d.residual = 1; d.lora_base = 10'd64;
    run(d, 3);
    // channel-mixing style: BN per element, analog ReLU then LoRA
    d = mk(32, 8, 1, 128, 8, 1, 4, 8, 8, 4, 4);
    d.bn_en = 1; d.bn_base = 6'd8; d.relu_analog = 1; d.lora_en = 1; d.lora_base = 10'd128;
    run(d, 5);
    // full-width layer without options
    d = mk(0, 32, 1, 160, 31, 1, 2, 32, 31, 0, 0);
    run(d, 0);
    // large inputs and weights: ADC and output saturation
    for (int r = 0; r < 8; r++) for (int c = 20; c < 28; c++) set_g(r, c, 90);
    for (int a = 200; a < 208; a++) begin
      @(negedge clk); buf_we = 1; buf_waddr = baddr_t'(a); fb[a] = 30000; buf_wdata = data_t'(30000);
    end
    @(negedge clk); buf_we = 0;
    d = mk(200, 0, 1, 220, 8, 1, 1, 8, 8, 0, 20);
    d.residual = 1;
    run(d, 0);
    checks++;
    if (n_adc_sat == 0 || n_relu_analog_clip == 0 || n_relu_digital_clip == 0 || n_out_sat == 0) begin
      failures++; $display("coverage: adc_sat %0d relu_a %0d relu_d %0d out_sat %0d",
                           n_adc_sat, n_relu_analog_clip, n_relu_digital_clip, n_out_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
