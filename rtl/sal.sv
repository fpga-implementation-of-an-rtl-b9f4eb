// sal: saliency block (SAL).
//
// Keeps, for every pixel P, a state s_P (RAM_FR, 21-bit Q12.8) and the time of
// its last update (RAM_TIME), and tracks the most salient pixel P*. For each
// incoming pixel event at time t it
//   1-2. reads t_old and s_P(t_old) through port B of the two RAMs,
//   3.   computes s_P(t) = g + s_P(t_old) * exp((t_old - t) / tau) in Exp_Func,
//        where g is the top-down modulated gain (1.0 without modulation),
//   4.   writes s_P(t) and t back through port A,
//   5.   reads P*'s state the same way and decays it to the same time t
//        with gain 0 (this value is only compared, not written back; using
//        the event's own time means an event on P* itself never "beats" P*),
//   6.   hands both to Sal_Func, which moves P* to the event pixel when
//        s_P(t) > s*, then excites the new FOA by +S_plus and inhibits the
//        previous FOA by -S_minus (inhibition of return).
// The excitation and inhibition of each FOA pixel use the same
// read / Exp_Func / write path with gain +S_plus or -S_minus, so each pixel is
// decayed to the present, stepped and re-stamped with the current time.
//
// Interface: pixel events with their modulated gain in (valid/ready; in_ready
// is high only while the block is idle), Sal_pixel_ID out (sal_valid, sal_x,
// sal_y, and sal_update pulsing when P* moves). inv_tau = 2^24 / tau with tau
// in timestamp ticks; s_plus and s_minus are Q12.8.
//
// Timing: an event that does not move P* takes 12 cycles from acceptance to
// the next in_ready; a move of P* adds the two FOA sweeps (about 530 cycles
// for a 16x16 FOA). Requests to the RAMs are issued one per cycle during the
// sweeps; each takes 1 cycle of RAM read and 3 cycles of Exp_Func.
module sal
  import fovea_pkg::*;
#(
  parameter int unsigned FOA_W        = 16,
  parameter int unsigned FOA_H        = 16,
  parameter int unsigned SENSOR_X     = SENSOR_W,
  parameter int unsigned SENSOR_Y     = SENSOR_H,
  parameter int unsigned CLK_PER_TICK = 100
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  pixel_ev_t   in_ev,
  input  fr_t         in_gain,
  input  logic [23:0] inv_tau,
  input  fr_t         s_plus,
  input  fr_t         s_minus,
  output logic        sal_valid,
  output coord_t      sal_x,
  output coord_t      sal_y,
  output logic        sal_update,
  output ts_t         ts
);

  typedef enum logic [1:0] {K_EVENT, K_PSTAR, K_IOR} kind_t;

  typedef struct packed {
    logic          we;
    kind_t         kind;
    logic [ADDR_W-1:0] addr;
    ts_t           ts;
  } tag_t;

  // ---------------------------------------------------------------- control
  typedef enum logic [2:0] {S_IDLE, S_WAIT_EV, S_ISSUE_P, S_WAIT_P, S_CMP, S_IOR} state_t;
  state_t state;

  logic   ior_valid, sf_busy, cmp_valid, pipe_idle;
  coord_t ior_x, ior_y;
  fr_t    ior_gain;
  coord_t ev_x, ev_y;
  fr_t    in_eve_fr, cur_sal_fr;

  // request into the read / Exp_Func / write pipeline
  logic              rq_valid, rq_we;
  kind_t             rq_kind;
  logic [ADDR_W-1:0] rq_addr;
  fr_t               rq_gain;
  ts_t               rq_ts;
  ts_t               ev_ts;

  // pipeline result
  logic  ex_valid;
  fr_t   fr_new;
  tag_t  ex_tag;

  assign in_ready  = (state == S_IDLE);
  assign cmp_valid = (state == S_CMP);

  always_comb begin
    rq_valid = 1'b0;
    rq_we    = 1'b0;
    rq_kind  = K_EVENT;
    rq_addr  = '0;
    rq_gain  = '0;
    rq_ts    = ts;
    unique case (state)
      S_IDLE: begin
        rq_valid = in_valid;
        rq_we    = 1'b1;
        rq_kind  = K_EVENT;
        rq_addr  = {in_ev.y, in_ev.x};
        rq_gain  = in_gain;
      end
      S_ISSUE_P: begin
        rq_valid = 1'b1;
        rq_we    = 1'b0;
        rq_kind  = K_PSTAR;
        rq_addr  = {sal_y, sal_x};
        rq_gain  = '0;
        rq_ts    = ev_ts;
      end
      S_IOR: begin
        rq_valid = ior_valid;
        rq_we    = 1'b1;
        rq_kind  = K_IOR;
        rq_addr  = {ior_y, ior_x};
        rq_gain  = ior_gain;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      ev_x       <= '0;
      ev_y       <= '0;
      ev_ts      <= '0;
      in_eve_fr  <= '0;
      cur_sal_fr <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          ev_x  <= in_ev.x;
          ev_y  <= in_ev.y;
          ev_ts <= ts;
          state <= S_WAIT_EV;
        end
        S_WAIT_EV: if (ex_valid && ex_tag.kind == K_EVENT) begin
          in_eve_fr <= fr_new;
          state     <= sal_valid ? S_ISSUE_P : S_CMP;
        end
        S_ISSUE_P: state <= S_WAIT_P;
        S_WAIT_P: if (ex_valid && ex_tag.kind == K_PSTAR) begin
          cur_sal_fr <= fr_new;
          state      <= S_CMP;
        end
        S_CMP: state <= S_IOR;
        S_IOR: if (!sf_busy) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- datapath
  timestamper #(.CLK_PER_TICK(CLK_PER_TICK)) u_ts (.clk, .rst_n, .ts);

  fr_t fr_dob;
  ts_t time_dob;

  dp_bram #(.ADDR_W(ADDR_W), .DATA_W(FR_W)) u_ram_fr (
    .clk,
    .ena(ex_valid && ex_tag.we), .wea(1'b1), .addra(ex_tag.addr), .dia(fr_new),
    .enb(rq_valid), .addrb(rq_addr), .dob(fr_dob)
  );

  dp_bram #(.ADDR_W(ADDR_W), .DATA_W(TS_W)) u_ram_time (
    .clk,
    .ena(ex_valid && ex_tag.we), .wea(1'b1), .addra(ex_tag.addr), .dia(ex_tag.ts),
    .enb(rq_valid), .addrb(rq_addr), .dob(time_dob)
  );

  // read stage: hold the request while the RAMs answer
  logic  r1_valid;
  tag_t  r1_tag;
  fr_t   r1_gain;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r1_valid <= 1'b0;
      r1_tag   <= '0;
      r1_gain  <= '0;
    end else begin
      r1_valid <= rq_valid;
      r1_tag   <= '{we: rq_we, kind: rq_kind, addr: rq_addr, ts: rq_ts};
      r1_gain  <= rq_gain;
    end
  end

  exp_func #(.TAG_W($bits(tag_t))) u_exp (
    .clk, .rst_n,
    .in_valid(r1_valid),
    .fr_init(fr_dob),
    .delta_t(r1_tag.ts - time_dob),
    .fr_gain(r1_gain),
    .inv_tau,
    .in_tag(r1_tag),
    .out_valid(ex_valid),
    .fr_new,
    .out_tag(ex_tag)
  );

  // operations in flight between request and write-back
  logic [3:0] in_flight;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_flight <= '0;
    else        in_flight <= in_flight + 4'(rq_valid) - 4'(ex_valid);
  end
  assign pipe_idle = (in_flight == '0);

  sal_func #(.FOA_W(FOA_W), .FOA_H(FOA_H), .SENSOR_X(SENSOR_X), .SENSOR_Y(SENSOR_Y)) u_sal_func (
    .clk, .rst_n,
    .cmp_valid,
    .in_eve_fr,
    .in_eve_x(ev_x),
    .in_eve_y(ev_y),
    .current_sal_fr(cur_sal_fr),
    .s_plus, .s_minus,
    .pipe_idle,
    .busy(sf_busy),
    .sal_valid, .sal_x, .sal_y, .sal_update,
    .ior_valid, .ior_x, .ior_y, .ior_gain
  );

  // The pipeline holds at most five operations (1 RAM read + 3 Exp_Func stages + issue)
  a_in_flight: assert property (@(posedge clk) disable iff (!rst_n) in_flight <= 4'd5);

endmodule
