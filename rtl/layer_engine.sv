// layer_engine: computes one neural-network layer, without its activation,
// out of an accelerator's private memory.
//
// Two operations (stage_cfg_t.op):
//   OP_CONV  out[co][y][x] = sat((b[co]<<FRAC + sum_{ci,ky,kx}
//              in[ci][y*s+ky][x*s+kx] * w[co][ci][ky][kx]) >>> FRAC)
//            A fully connected layer is the same with in_h = in_w = k = 1 and
//            in_ch inputs.
//   OP_POOL  out[c][y][x] = max_{ky,kx} in[c][y*s+ky][x*s+kx]
// Tensors are stored channel-major, then row, then column, at the base
// addresses of the descriptor; weights are [co][ci][ky][kx], one bias per
// output channel. Elements are Q8.8; sums are kept at full precision, then
// shifted right (floor) and saturated to 16 bits.
//
// The engine is a single multiply-accumulate unit with nested loop counters.
// It issues an activation address on read port A and a weight address on read
// port B each cycle and accumulates the pair that returns one cycle later.
// Per output it spends one cycle loading the bias (or presetting the maximum),
// one cycle per term, one cycle to drain the last term and one to write, so a
// layer with N outputs of T terms takes N*(T+3) cycles from start to done.
//
// The paper's layers are gem5-Aladdin models whose insides it does not give;
// the datapath, number format and storage order here are this design's own.
module layer_engine
  import sidebar_pkg::*;
#(
  parameter int ACC_W = 40
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  stage_cfg_t       cfg,
  output logic             busy,
  output logic             done,
  output logic [PM_AW-1:0] ra_addr,
  input  elem_t            ra_data,
  output logic [PM_AW-1:0] rb_addr,
  input  elem_t            rb_data,
  output logic             we,
  output logic [PM_AW-1:0] waddr,
  output elem_t            wdata
);
  typedef enum logic [2:0] {S_IDLE, S_INIT, S_RUN, S_DRAIN, S_WRITE} state_e;
  typedef enum logic [1:0] {K_NONE, K_BIAS, K_MAC} kind_e;

  state_e state_q;
  stage_cfg_t c_q;                    // descriptor latched at start
  logic [DIM_W-1:0] co_q, y_q, x_q;   // output position
  logic [DIM_W-1:0] ci_q;             // input channel of the current term
  logic [3:0]       ky_q, kx_q;       // kernel position of the current term
  kind_e            kind_q;           // what the data returning this cycle is
  logic signed [ACC_W-1:0] acc_q;

  logic is_pool;
  logic last_kx, last_ky, last_ci, last_term;
  logic last_x, last_y, last_co;
  logic [DIM_W-1:0] ci_eff;
  logic [PM_AW-1:0] row, col, in_addr, w_addr, out_addr;

  assign is_pool = c_q.op == OP_POOL;
  assign ci_eff  = is_pool ? co_q : ci_q;

  assign last_kx   = kx_q == c_q.k - 4'd1;
  assign last_ky   = ky_q == c_q.k - 4'd1;
  assign last_ci   = is_pool || (ci_q == c_q.in_ch - 1'b1);
  assign last_term = last_kx && last_ky && last_ci;
  assign last_x    = x_q  == c_q.out_w  - 1'b1;
  assign last_y    = y_q  == c_q.out_h  - 1'b1;
  assign last_co   = co_q == c_q.out_ch - 1'b1;

  always_comb begin
    row      = PM_AW'(y_q) * PM_AW'(c_q.stride) + PM_AW'(ky_q);
    col      = PM_AW'(x_q) * PM_AW'(c_q.stride) + PM_AW'(kx_q);
    in_addr  = c_q.in_base + (PM_AW'(ci_eff) * PM_AW'(c_q.in_h) + row) * PM_AW'(c_q.in_w) + col;
    w_addr   = c_q.w_base + ((PM_AW'(co_q) * PM_AW'(c_q.in_ch) + PM_AW'(ci_q)) * PM_AW'(c_q.k)
                             + PM_AW'(ky_q)) * PM_AW'(c_q.k) + PM_AW'(kx_q);
    out_addr = c_q.out_base + (PM_AW'(co_q) * PM_AW'(c_q.out_h) + PM_AW'(y_q)) * PM_AW'(c_q.out_w)
               + PM_AW'(x_q);
  end

  // read addresses: the bias in S_INIT, operands in S_RUN
  assign ra_addr = in_addr;
  assign rb_addr = (state_q == S_INIT) ? c_q.b_base + PM_AW'(co_q) : w_addr;

  // result, shifted and saturated
  localparam logic signed [ACC_W-1:0] EMAX = ACC_W'(32767);
  localparam logic signed [ACC_W-1:0] EMIN = -ACC_W'(32768);
  logic signed [ACC_W-1:0] shifted;
  assign shifted = is_pool ? acc_q : (acc_q >>> FRAC);
  always_comb begin
    if (shifted > EMAX)      wdata = elem_t'(EMAX);
    else if (shifted < EMIN) wdata = elem_t'(EMIN);
    else                     wdata = elem_t'(shifted);
  end
  assign we    = state_q == S_WRITE;
  assign waddr = out_addr;
  assign busy  = state_q != S_IDLE;

  logic signed [2*ELEM_W-1:0] prod;
  assign prod = ra_data * rb_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      kind_q  <= K_NONE;
      done    <= 1'b0;
      acc_q   <= '0;
      c_q     <= '0;
      {co_q, y_q, x_q, ci_q, ky_q, kx_q} <= '0;
    end else begin
      done <= 1'b0;
      // accumulate what was read in the previous cycle
      case (kind_q)
        K_BIAS:  acc_q <= ACC_W'(rb_data) <<< FRAC;
        K_MAC:   if (is_pool) begin
                   if (ACC_W'(ra_data) > acc_q) acc_q <= ACC_W'(ra_data);
                 end else begin
                   acc_q <= acc_q + ACC_W'(prod);
                 end
        default: ;
      endcase
      kind_q <= K_NONE;

      case (state_q)
        S_IDLE: if (start) begin
          c_q <= cfg;
          {co_q, y_q, x_q} <= '0;
          state_q <= S_INIT;
        end
        S_INIT: begin
          {ci_q, ky_q, kx_q} <= '0;
          if (is_pool) acc_q <= EMIN;
          else         kind_q <= K_BIAS;
          state_q <= S_RUN;
        end
        S_RUN: begin
          kind_q <= K_MAC;
          if (!last_kx) kx_q <= kx_q + 4'd1;
          else begin
            kx_q <= '0;
            if (!last_ky) ky_q <= ky_q + 4'd1;
            else begin
              ky_q <= '0;
              ci_q <= ci_q + 1'b1;
            end
          end
          if (last_term) state_q <= S_DRAIN;
        end
        S_DRAIN: state_q <= S_WRITE;
        S_WRITE: begin
          if (!last_x) begin
            x_q <= x_q + 1'b1;
            state_q <= S_INIT;
          end else begin
            x_q <= '0;
            if (!last_y) begin
              y_q <= y_q + 1'b1;
              state_q <= S_INIT;
            end else begin
              y_q <= '0;
              if (!last_co) begin
                co_q <= co_q + 1'b1;
                state_q <= S_INIT;
              end else begin
                state_q <= S_IDLE;
                done <= 1'b1;
              end
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
