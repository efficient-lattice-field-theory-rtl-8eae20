// layer_engine: runs one layer of the mixer network on the hybrid
// analog-digital datapath, vector by vector.
//
// Every weight layer of the network (patch embedding, the two token-mixing
// and two channel-mixing layers of each mixer block, output embedding,
// per-pixel regression) is a matrix applied to many vectors: to every patch,
// to every channel or to every pixel. A layer_desc_t says where those
// vectors are in the feature buffer (base address, stride between vectors,
// stride between elements; swapping the strides is the transpose between
// token and channel mixing), which block of the crossbar holds the base
// weights, and which digital operations apply. For each vector the engine:
//   1. LOAD   reads the in_len input elements, adds the time embedding
//             (temb_en) and batch-normalizes (bn_en), keeps the result for
//             the LoRA branch and writes it into the DAC row registers
//             row_base.. (one element per cycle);
//   2. FIRE   starts the crossbar read (ReLU in the TIA if relu_analog) and,
//             if lora_en, the LoRA branch on the same input;
//   3. WAIT   waits for the ADC codes and the LoRA result;
//   4. WB     for each of the out_len outputs forms
//             y = (adc[col_base + j] << ADC_DROP) + lora[j],
//             applies a digital ReLU (relu_digital), adds the old destination
//             value (residual, the skip connection of the mixer blocks) and
//             writes y back with saturation (one element per cycle).
// The DAC rows are cleared when a layer starts, so rows of other layers
// contribute nothing.
//
// The feature buffer (BUF_DEPTH words of Q8.8) lives here. While the engine
// is idle the buf_* port writes it; its two read ports work at any time.
// The memories of time_embedding, batchnorm_unit and lora_unit are written
// through the temb_*, bn_* and lora_* ports.
//
// Timing per vector: in_len + 2 + max(READ_CYCLES, LoRA cycles) + out_len
// cycles; done pulses once after the last vector.
// The split of work between the analog and digital parts follows the
// source system; the descriptor scheme, buffer and schedule are this
// design's own.
module layer_engine
  import anf_pkg::*;
#(
  parameter int COLS      = 32,
  parameter int NSTEPS    = 8,
  parameter int TEMB_LEN  = 32,
  parameter int BN_DEPTH  = 64,
  parameter int LORA_RANK = 2,
  parameter int LORA_DEPTH= 512,
  parameter int BUF_DEPTH = 256
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // control
  input  logic                          start,
  input  layer_desc_t                   desc,
  input  logic [$clog2(NSTEPS)-1:0]     step,
  output logic                          busy,
  output logic                          done,
  // crossbar macro
  output logic                          dac_clr,
  output logic                          dac_we,
  output logic [XW-1:0]                 dac_row,
  output data_t                         dac_code,
  output logic                          read_start,
  output logic                          relu_en,
  input  logic                          adc_valid,
  input  adc_t                          adc_code [COLS],
  // parameter memories
  input  logic                          temb_we,
  input  logic [$clog2(NSTEPS)-1:0]     temb_wstep,
  input  logic [$clog2(TEMB_LEN)-1:0]   temb_wchan,
  input  data_t                         temb_wdata,
  input  logic                          bn_we,
  input  logic [$clog2(BN_DEPTH)-1:0]   bn_waddr,
  input  data_t                         bn_wgamma,
  input  data_t                         bn_wbeta,
  input  logic                          lora_we,
  input  logic [$clog2(LORA_DEPTH)-1:0] lora_waddr,
  input  data_t                         lora_wdata,
  // feature buffer access
  input  logic                          buf_we,
  input  baddr_t                        buf_waddr,
  input  data_t                         buf_wdata,
  input  baddr_t                        buf_raddr0,
  output data_t                         buf_rdata0,
  input  baddr_t                        buf_raddr1,
  output data_t                         buf_rdata1
);

  typedef enum logic [2:0] {E_IDLE, E_LOAD, E_FIRE, E_WAIT, E_WB} estate_t;

  estate_t      st;
  layer_desc_t  d;
  logic [$clog2(NSTEPS)-1:0] step_q;
  logic [5:0]   v, i;
  data_t        fbuf [BUF_DEPTH];
  data_t        xin  [VLEN_MAX];
  data_t        lora_y [VLEN_MAX];
  logic         adc_got, lora_busy, lora_done, lora_got, lora_start;

  baddr_t       src_addr, dst_addr;
  logic [5:0]   chan;
  data_t        x_raw, x_temb, x_bn;
  logic signed [39:0] ysum;
  data_t        y;
  logic [XW-1:0] col;

  time_embedding #(.NSTEPS(NSTEPS), .TEMB_LEN(TEMB_LEN)) u_temb (
    .clk, .rst_n,
    .we(temb_we), .wstep(temb_wstep), .wchan(temb_wchan), .wdata(temb_wdata),
    .en(d.temb_en), .step(step_q), .chan(chan[$clog2(TEMB_LEN)-1:0]),
    .x_in(x_raw), .x_out(x_temb));

  batchnorm_unit #(.DEPTH(BN_DEPTH)) u_bn (
    .clk, .rst_n,
    .we(bn_we), .waddr(bn_waddr), .wgamma(bn_wgamma), .wbeta(bn_wbeta),
    .en(d.bn_en), .idx($clog2(BN_DEPTH)'(d.bn_base + chan)),
    .x_in(x_temb), .y_out(x_bn));

  lora_unit #(.RANK(LORA_RANK), .DEPTH(LORA_DEPTH), .VLEN(VLEN_MAX)) u_lora (
    .clk, .rst_n,
    .we(lora_we), .waddr(lora_waddr), .wdata(lora_wdata),
    .start(lora_start), .base($clog2(LORA_DEPTH)'(d.lora_base)),
    .in_len(d.in_len), .out_len(d.out_len), .x(xin),
    .busy(lora_busy), .done(lora_done), .y(lora_y));

  assign busy       = (st != E_IDLE);
  assign buf_rdata0 = fbuf[buf_raddr0];
  assign buf_rdata1 = fbuf[buf_raddr1];

  always_comb begin
    src_addr  = d.src_base + baddr_t'(v) * d.src_vstride + baddr_t'(i) * d.src_estride;
    dst_addr  = d.dst_base + baddr_t'(v) * d.dst_vstride + baddr_t'(i) * d.dst_estride;
    chan      = d.chan_is_vec ? v : i;
    x_raw     = fbuf[src_addr];
    col       = d.col_base + XW'(i);
    ysum      = 40'(adc_code[col]) <<< ADC_DROP;
    if (d.lora_en)      ysum = ysum + 40'(lora_y[i[4:0]]);
    if (d.relu_digital && ysum < 0) ysum = '0;
    if (d.residual)     ysum = ysum + 40'(fbuf[dst_addr]);
    y         = sat16(ysum);
    dac_we    = (st == E_LOAD);
    dac_row   = d.row_base + XW'(i);
    dac_code  = x_bn;
    dac_clr   = (st == E_IDLE) && start;
    read_start= (st == E_FIRE);
    relu_en   = d.relu_analog;
    lora_start= (st == E_FIRE) && d.lora_en;
  end

  always_ff @(posedge clk) begin
    if (st == E_WB)                 fbuf[dst_addr] <= y;
    else if (st == E_IDLE && buf_we) fbuf[buf_waddr] <= buf_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= E_IDLE; d <= '0; step_q <= '0; v <= '0; i <= '0;
      adc_got <= 1'b0; lora_got <= 1'b0; done <= 1'b0;
      for (int q = 0; q < VLEN_MAX; q++) xin[q] <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        E_IDLE: if (start) begin
          d <= desc; step_q <= step; v <= '0; i <= '0;
          st <= E_LOAD;
        end
        E_LOAD: begin
          xin[i[4:0]] <= x_bn;
          if (i == d.in_len - 1) st <= E_FIRE;
          else                   i  <= i + 1'b1;
        end
        E_FIRE: begin
          adc_got  <= 1'b0;
          lora_got <= !d.lora_en;
          st       <= E_WAIT;
        end
        E_WAIT: begin
          if (adc_valid) adc_got  <= 1'b1;
          if (lora_done) lora_got <= 1'b1;
          if ((adc_got || adc_valid) && (lora_got || lora_done)) begin
            i  <= '0;
            st <= E_WB;
          end
        end
        E_WB: begin
          if (i == d.out_len - 1) begin
            i <= '0;
            if (v == d.n_vec - 1) begin
              st <= E_IDLE; done <= 1'b1;
            end else begin
              v <= v + 1'b1; st <= E_LOAD;
            end
          end else begin
            i <= i + 1'b1;
          end
        end
        default: st <= E_IDLE;
      endcase
    end
  end

  // The LoRA branch must have finished the previous vector before it is
  // started again, and a layer must use at least one row and one column.
  a_lora_free: assert property (@(posedge clk) disable iff (!rst_n)
    (st == E_FIRE && d.lora_en) |-> !lora_busy);
  a_desc_len: assert property (@(posedge clk) disable iff (!rst_n)
    (st == E_LOAD) |-> (d.in_len != 0 && d.out_len != 0 && d.n_vec != 0));

endmodule
