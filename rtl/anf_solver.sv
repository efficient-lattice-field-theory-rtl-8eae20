// anf_solver: top level of the hybrid analog-digital solver that runs an
// adaptive normalizing flow and turns a Gaussian sample into a lattice field
// configuration.
//
// The flow applies one inverse coupling layer per timestep, with the same
// weights at every step and a per-step time embedding. In each step:
//   LOAD    the frozen half x_a = x o M^t of the field is copied into the
//           feature buffer at in_base, patch by patch (non-frozen sites are
//           written as 0);
//   LAYERS  the network (patch embedding, m mixer blocks, output embedding,
//           regression) runs as n_layers layer descriptors, one after the
//           other, on layer_engine and the resistive crossbar; the last
//           layer leaves (s1, s2) pairs per site at out_base;
//   UPDATE  coupling_update rewrites the non-frozen sites,
//           x <- (x - s1) e^(-s2), and accumulates sum s2.
// After n_steps steps the field holds the configuration phi, logdet holds
// sum_t sum_k s2, and done pulses. The host derives log q(phi) from the
// prior density and logdet, and runs the Metropolis accept/reject.
//
// Interface: the host programs the crossbar, either cell by cell through the
// closed write-verify loop (wv_*: one cell per request, done/ok/cycles report
// the outcome) or by writing conductance codes directly (prog_*, used when
// the device spread is not of interest), then the layer descriptor
// table (desc_*), the LoRA weights (lora_*), the normalization parameters
// (bn_*), the time embeddings (temb_*) and the prior sample (x_*), then
// pulses start. x_raddr/x_rdata read the field while the solver is idle.
// Timing: one field update per step costs L*L + sum over layers of the
// layer_engine time + L*L + 1 cycles plus a few cycles of sequencing.
// The step loop and the division of work follow the source; the host
// interface, sequencing and descriptor table are this design's own.
module anf_solver
  import anf_pkg::*;
#(
  parameter int L          = 4,
  parameter int P          = 2,
  parameter int NSTEPS     = 8,
  parameter int MAX_LAYERS = 16,
  parameter int ROWS       = 32,
  parameter int COLS       = 32,
  parameter int TEMB_LEN   = 32,
  parameter int BN_DEPTH   = 64,
  parameter int LORA_RANK  = 2,
  parameter int LORA_DEPTH = 512,
  parameter int BUF_DEPTH  = 256
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // crossbar programming
  input  logic                              prog_en,
  input  logic [XW-1:0]                     prog_row,
  input  logic [XW-1:0]                     prog_col,
  input  gcode_t                            prog_g,
  // write-verify programming of one cell
  input  logic                              wv_start,
  input  logic [XW-1:0]                     wv_row,
  input  logic [XW-1:0]                     wv_col,
  input  gcode_t                            wv_target,
  output logic                              wv_busy,
  output logic                              wv_done,
  output logic                              wv_ok,
  output logic [7:0]                        wv_cycles,
  // layer descriptor table
  input  logic                              desc_we,
  input  logic [$clog2(MAX_LAYERS)-1:0]     desc_waddr,
  input  layer_desc_t                       desc_wdata,
  // digital parameter memories
  input  logic                              temb_we,
  input  logic [$clog2(NSTEPS)-1:0]         temb_wstep,
  input  logic [$clog2(TEMB_LEN)-1:0]       temb_wchan,
  input  data_t                             temb_wdata,
  input  logic                              bn_we,
  input  logic [$clog2(BN_DEPTH)-1:0]       bn_waddr,
  input  data_t                             bn_wgamma,
  input  data_t                             bn_wbeta,
  input  logic                              lora_we,
  input  logic [$clog2(LORA_DEPTH)-1:0]     lora_waddr,
  input  data_t                             lora_wdata,
  // field access
  input  logic                              x_we,
  input  logic [$clog2(L*L)-1:0]            x_waddr,
  input  data_t                             x_wdata,
  input  logic [$clog2(L*L)-1:0]            x_raddr,
  output data_t                             x_rdata,
  // run control
  input  logic                              start,
  input  logic [$clog2(MAX_LAYERS+1)-1:0]   n_layers,
  input  logic [$clog2(NSTEPS+1)-1:0]       n_steps,
  input  baddr_t                            in_base,
  input  baddr_t                            out_base,
  output logic                              busy,
  output logic                              done,
  output logic [$clog2(NSTEPS)-1:0]         cur_step,
  output logic signed [31:0]                logdet
);

  localparam int V  = L * L;
  localparam int VW = $clog2(V);

  typedef enum logic [2:0] {T_IDLE, T_LOAD, T_LAYER, T_LWAIT, T_UPD, T_UWAIT} tstate_t;

  tstate_t      st;
  layer_desc_t  dtab [MAX_LAYERS];
  logic [$clog2(MAX_LAYERS+1)-1:0] l;
  logic [$clog2(NSTEPS+1)-1:0]     t;
  logic [$clog2(MAX_LAYERS+1)-1:0] n_layers_q;
  logic [$clog2(NSTEPS+1)-1:0]     n_steps_q;
  baddr_t       in_base_q, out_base_q;
  logic [VW-1:0] k;

  // crossbar interface
  logic         dac_clr, dac_we, read_start, relu_en, adc_valid;
  logic [XW-1:0] dac_row;
  data_t        dac_code;
  adc_t         adc_code [COLS];
  logic         pulse_set, pulse_reset;
  logic [XW-1:0] pulse_row, pulse_col, verify_row, verify_col;
  logic [7:0]   pulse_wl;
  gcode_t       verify_g;

  // engine / update interface
  logic         eng_start, eng_busy, eng_done;
  logic         buf_we;
  baddr_t       buf_waddr, s1_addr, s2_addr;
  data_t        buf_wdata, s1, s2;
  logic         upd_start, upd_busy, upd_done, acc_clr;
  logic [VW-1:0] cu_raddr;
  data_t        cu_rdata;
  int unsigned  li, lj;

  analog_mvm_core #(.ROWS(ROWS), .COLS(COLS)) u_xbar (
    .clk, .rst_n,
    .prog_en, .prog_row, .prog_col, .prog_g,
    .pulse_set, .pulse_reset, .pulse_row, .pulse_col, .pulse_wl,
    .verify_row, .verify_col, .verify_g,
    .dac_clr, .dac_we, .dac_row, .dac_code,
    .read_start, .relu_en, .adc_valid, .adc_code);

  write_verify_ctrl #(.ROWS(ROWS), .COLS(COLS)) u_wv (
    .clk, .rst_n,
    .start(wv_start), .row(wv_row), .col(wv_col), .target(wv_target),
    .busy(wv_busy), .done(wv_done), .ok(wv_ok), .cycles(wv_cycles),
    .pulse_set, .pulse_reset, .pulse_row, .pulse_col, .pulse_wl,
    .verify_row, .verify_col, .verify_g);

  layer_engine #(
    .COLS(COLS), .NSTEPS(NSTEPS), .TEMB_LEN(TEMB_LEN), .BN_DEPTH(BN_DEPTH),
    .LORA_RANK(LORA_RANK), .LORA_DEPTH(LORA_DEPTH), .BUF_DEPTH(BUF_DEPTH)
  ) u_eng (
    .clk, .rst_n,
    .start(eng_start), .desc(dtab[l[$clog2(MAX_LAYERS)-1:0]]),
    .step(t[$clog2(NSTEPS)-1:0]),
    .busy(eng_busy), .done(eng_done),
    .dac_clr, .dac_we, .dac_row, .dac_code, .read_start, .relu_en,
    .adc_valid, .adc_code,
    .temb_we, .temb_wstep, .temb_wchan, .temb_wdata,
    .bn_we, .bn_waddr, .bn_wgamma, .bn_wbeta,
    .lora_we, .lora_waddr, .lora_wdata,
    .buf_we, .buf_waddr, .buf_wdata,
    .buf_raddr0(s1_addr), .buf_rdata0(s1),
    .buf_raddr1(s2_addr), .buf_rdata1(s2));

  coupling_update #(.L(L), .P(P), .NSTEPS(NSTEPS)) u_cpl (
    .clk, .rst_n,
    .x_we(x_we && st == T_IDLE), .x_waddr, .x_wdata,
    .x_raddr(cu_raddr), .x_rdata(cu_rdata),
    .acc_clr, .start(upd_start), .step(t[$clog2(NSTEPS)-1:0]),
    .out_base(out_base_q), .busy(upd_busy), .done(upd_done),
    .s1_addr, .s2_addr, .s1, .s2, .logdet);

  always_ff @(posedge clk) begin
    if (desc_we && st == T_IDLE) dtab[desc_waddr] <= desc_wdata;
  end

  always_comb begin
    li        = int'(k) / L;
    lj        = int'(k) % L;
    cu_raddr  = (st == T_LOAD) ? k : x_raddr;
    x_rdata   = cu_rdata;
    buf_we    = (st == T_LOAD);
    buf_waddr = in_base_q + baddr_t'(patch_addr(li, lj, L, P));
    buf_wdata = mask_bit(int'(t), li, lj) ? cu_rdata : '0;
    eng_start = (st == T_LAYER);
    upd_start = (st == T_UPD);
    acc_clr   = (st == T_IDLE) && start;
    busy      = (st != T_IDLE);
    cur_step  = t[$clog2(NSTEPS)-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; l <= '0; t <= '0; k <= '0; done <= 1'b0;
      n_layers_q <= '0; n_steps_q <= '0; in_base_q <= '0; out_base_q <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        T_IDLE: if (start) begin
          n_layers_q <= n_layers; n_steps_q <= n_steps;
          in_base_q  <= in_base;  out_base_q <= out_base;
          t <= '0; k <= '0; l <= '0;
          st <= (n_steps == 0) ? T_IDLE : T_LOAD;
          if (n_steps == 0) done <= 1'b1;
        end
        T_LOAD: begin
          if (k == VW'(V - 1)) begin
            k <= '0; l <= '0;
            st <= (n_layers_q == 0) ? T_UPD : T_LAYER;
          end else begin
            k <= k + 1'b1;
          end
        end
        T_LAYER: st <= T_LWAIT;
        T_LWAIT: if (eng_done) begin
          if (l == n_layers_q - 1) st <= T_UPD;
          else begin
            l <= l + 1'b1; st <= T_LAYER;
          end
        end
        T_UPD: st <= T_UWAIT;
        T_UWAIT: if (upd_done) begin
          if (t == n_steps_q - 1) begin
            st <= T_IDLE; done <= 1'b1;
          end else begin
            t <= t + 1'b1; k <= '0; st <= T_LOAD;
          end
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  a_engine_idle_on_start: assert property (@(posedge clk) disable iff (!rst_n)
    eng_start |-> !eng_busy && !upd_busy);

  // Cells may only be reprogrammed while no flow is running.
  a_no_program_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (wv_start || prog_en) |-> !busy);

endmodule
