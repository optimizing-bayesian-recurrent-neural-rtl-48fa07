// One LSTM layer engine of the accelerator, optionally Bayesian (Monte Carlo
// dropout).
//
// Datapath: the input x_t (I features) and the previous hidden state h_{t-1}
// (H features) each go through a DX unit that gives every gate its own masked
// copy. Eight MVM units (four for x with reuse factor RX, four for h with
// reuse factor RH) compute the gate pre-activations, a bias is added, sigmoid
// (i, f, o) and tanh (g) lookup tables are applied, and the LSTM tail produces
// c_t and h_t. h_t and c_t are kept for the next step and h_t is sent out.
// When BAYES is set, a Bernoulli sampler supplies the masks: a fresh mask set
// is read at the first step of every sequence (one Monte Carlo pass) and held
// for all its T steps. When BAYES is clear, no sampler or DX is built.
//
// Stream interface: the input is a valid/ready stream of x_t vectors with
// in_first/in_last marking the first and last step of a pass; h_0 = c_0 = 0
// at in_first. The output is a valid/ready stream of h_t with out_first/out_last
// copied from the input. The next step may start while h_t waits in the
// output register; the engine stalls only if a second h_t is ready before the
// first was taken (backpressure).
//
// Timing per time step: with the output free, x_t is accepted every
//   II = max(CX, CH) + 9 cycles, CX = ceil(I*H/MX), MX = ceil(I*H/RX),
//                                CH = ceil(H*H/MH), MH = ceil(H*H/RH),
// and h_t appears on the output II cycles after x_t was accepted (1 cycle
// start, CX/CH MVM cycles, 1 result, 2 lookup, 3 tail, 2 to the output
// register). At the first step of a pass a Bayesian layer spends 8 more cycles
// reading its mask set. II is the interval of the time-step loop, since step
// t+1 needs h_t. MX and MH are the numbers of multipliers per MVM.
//
// Weights and biases are written through cfg_we/cfg_addr/cfg_data with the map
//   gate q x-weights  [q*I*H + row*I + col]
//   gate q h-weights  [4*I*H + q*H*H + row*H + col]
//   gate q bias       [4*I*H + 4*H*H + q*H + row]      (gates 0..3 = i, f, g, o)
// The structure (DX, 8 MVMs, activations, tail, sampler per Bayesian layer,
// masks fixed over the T steps) follows the paper; the stream handshake, the
// configuration port and the schedule are this design's choices.
module lstm_layer
  import brnn_pkg::*;
#(
  parameter int           I     = 1,
  parameter int           H     = 16,
  parameter int           RX    = 16,
  parameter int           RH    = 5,
  parameter bit           BAYES = 1'b1,
  parameter logic [127:0] SEED  = 128'h0123_4567_89AB_CDEF_FEDC_BA98_7654_3210,
  localparam int          NCFG  = 4*I*H + 4*H*H + 4*H,
  localparam int          CAW   = $clog2(NCFG)
) (
  input  logic           clk,
  input  logic           rst_n,
  // configuration
  input  logic           cfg_we,
  input  logic [CAW-1:0] cfg_addr,
  input  data_t          cfg_data,
  // x_t stream
  input  logic           in_valid,
  output logic           in_ready,
  input  data_t          in_vec [I],
  input  logic           in_first,
  input  logic           in_last,
  // h_t stream
  output logic           out_valid,
  input  logic           out_ready,
  output data_t          out_vec [H],
  output logic           out_first,
  output logic           out_last,
  // event flags for monitoring
  output logic           stall_o,
  output logic           mask_load_o
);
  localparam int XAW = $clog2(I*H) > 0 ? $clog2(I*H) : 1;
  localparam int HAW = $clog2(H*H) > 0 ? $clog2(H*H) : 1;
  localparam int MW  = (I > H) ? I : H;

  typedef enum logic [2:0] {S_IDLE, S_MASK, S_START, S_MVM, S_ACT, S_LUT, S_TAIL, S_OUT} state_e;
  state_e state;

  data_t x_reg [I];
  data_t h_reg [H];
  cell_t c_reg [H];
  data_t bias  [4][H];
  logic  first_q, last_q;

  // ---------------- masks
  logic [I-1:0] mask_x [4];
  logic [H-1:0] mask_h [4];
  logic [2:0]   mword;
  logic         smp_valid, smp_pop;
  logic [MW-1:0] smp_word;

  if (BAYES) begin : g_sampler
    bernoulli_sampler #(.I(I), .H(H), .FIFO_DEPTH(8), .SEED(SEED)) u_smp (
      .clk, .rst_n, .pop(smp_pop), .word_o(smp_word), .valid_o(smp_valid)
    );
  end else begin : g_no_sampler
    assign smp_valid = 1'b0;
    assign smp_word  = '0;
  end
  assign smp_pop     = (state == S_MASK) && smp_valid;
  assign mask_load_o = smp_pop;

  // ---------------- DX units
  data_t xg [4][I];
  data_t hg [4][H];
  if (BAYES) begin : g_dx
    dx #(.N(I)) u_dx_x (.vec(x_reg), .mask(mask_x), .bayes_en(1'b1), .gate_vec(xg));
    dx #(.N(H)) u_dx_h (.vec(h_reg), .mask(mask_h), .bayes_en(1'b1), .gate_vec(hg));
  end else begin : g_no_dx
    always_comb begin
      for (int q = 0; q < 4; q++) begin
        xg[q] = x_reg;
        hg[q] = h_reg;
      end
    end
  end

  // ---------------- MVMs
  logic  mvm_start;
  logic  [3:0] xdone, hdone, xbusy, hbusy;
  acc_t  yx [4][H];
  acc_t  yh [4][H];
  logic  xd_seen, hd_seen;

  for (genvar q = 0; q < 4; q++) begin : g_gate
    mvm #(.N(I), .H(H), .R(RX)) u_mvm_x (
      .clk, .rst_n,
      .w_we  (cfg_we && (int'(cfg_addr) >= q*I*H) && (int'(cfg_addr) < (q+1)*I*H)),
      .w_addr(XAW'(int'(cfg_addr) - q*I*H)),
      .w_data(cfg_data),
      .start (mvm_start), .vec(xg[q]), .busy(xbusy[q]), .done(xdone[q]), .y(yx[q])
    );
    mvm #(.N(H), .H(H), .R(RH)) u_mvm_h (
      .clk, .rst_n,
      .w_we  (cfg_we && (int'(cfg_addr) >= 4*I*H + q*H*H) && (int'(cfg_addr) < 4*I*H + (q+1)*H*H)),
      .w_addr(HAW'(int'(cfg_addr) - 4*I*H - q*H*H)),
      .w_data(cfg_data),
      .start (mvm_start), .vec(hg[q]), .busy(hbusy[q]), .done(hdone[q]), .y(yh[q])
    );
  end

  always_ff @(posedge clk) begin
    if (cfg_we && int'(cfg_addr) >= 4*I*H + 4*H*H)
      bias[(int'(cfg_addr) - 4*I*H - 4*H*H) / H][(int'(cfg_addr) - 4*I*H - 4*H*H) % H] <= cfg_data;
  end
  initial for (int q = 0; q < 4; q++) for (int h = 0; h < H; h++) bias[q][h] = '0;

  // ---------------- activations
  acc_t  pre [4][H];
  data_t act [4][H];
  for (genvar q = 0; q < 4; q++) begin : g_act
    for (genvar h = 0; h < H; h++) begin : g_el
      act_lut #(.FUNC(q == GATE_G ? ACT_TANH : ACT_SIGMOID)) u_lut (.clk, .x(pre[q][h]), .y(act[q][h]));
    end
  end

  // ---------------- tail
  logic  tail_valid;
  cell_t c_new [H];
  data_t h_new [H];
  lstm_tail #(.H(H)) u_tail (
    .clk, .rst_n, .in_valid(state == S_LUT),
    .gi(act[GATE_I]), .gf(act[GATE_F]), .gg(act[GATE_G]), .go(act[GATE_O]),
    .c_prev(c_reg), .out_valid(tail_valid), .c_o(c_new), .h_o(h_new)
  );

  // ---------------- control
  assign in_ready  = (state == S_IDLE);
  assign mvm_start = (state == S_START);
  assign stall_o   = (state == S_OUT) && out_valid && !out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      first_q   <= 1'b0;
      last_q    <= 1'b0;
      mword     <= '0;
      xd_seen   <= 1'b0;
      hd_seen   <= 1'b0;
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_last  <= 1'b0;
      for (int n = 0; n < I; n++) x_reg[n] <= '0;
      for (int h = 0; h < H; h++) begin
        h_reg[h] <= '0; c_reg[h] <= '0; out_vec[h] <= '0;
      end
      for (int q = 0; q < 4; q++) begin
        mask_x[q] <= '1; mask_h[q] <= '1;
        for (int h = 0; h < H; h++) pre[q][h] <= '0;
      end
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid) begin
          x_reg   <= in_vec;
          first_q <= in_first;
          last_q  <= in_last;
          if (in_first) begin
            for (int h = 0; h < H; h++) begin
              h_reg[h] <= '0; c_reg[h] <= '0;
            end
          end
          mword <= '0;
          state <= (in_first && BAYES) ? S_MASK : S_START;
        end
        S_MASK: if (smp_valid) begin
          if (mword < 3'd4) mask_x[mword[1:0]] <= smp_word[I-1:0];
          else              mask_h[mword[1:0]] <= smp_word[H-1:0];
          mword <= mword + 1'b1;
          if (mword == 3'd7) state <= S_START;
        end
        S_START: begin
          xd_seen <= 1'b0;
          hd_seen <= 1'b0;
          state   <= S_MVM;
        end
        S_MVM: begin
          if (xdone[0]) xd_seen <= 1'b1;
          if (hdone[0]) hd_seen <= 1'b1;
          if ((xdone[0] || xd_seen) && (hdone[0] || hd_seen)) begin
            for (int q = 0; q < 4; q++)
              for (int h = 0; h < H; h++)
                pre[q][h] <= yx[q][h] + yh[q][h] + (acc_t'(bias[q][h]) <<< FRAC);
            state <= S_ACT;
          end
        end
        S_ACT:  state <= S_LUT;      // lookup tables read pre
        S_LUT:  state <= S_TAIL;     // activations valid, tail starts
        S_TAIL: if (tail_valid) begin
          h_reg <= h_new;
          c_reg <= c_new;
          state <= S_OUT;
        end
        S_OUT: if (!out_valid || out_ready) begin
          out_valid <= 1'b1;
          out_vec   <= h_reg;
          out_first <= first_q;
          out_last  <= last_q;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A word offered on the output stream stays stable until it is taken.
  property p_out_stable;
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_last);
  endproperty
  a_out_stable: assert property (p_out_stable);

  // Unused busy flags of the MVMs: all four gates of a kind run in lock step.
  logic unused_ok;
  assign unused_ok = ^{xbusy, hbusy, xdone[3:1], hdone[3:1]};
endmodule
