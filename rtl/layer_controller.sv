// layer_controller: sequences one convolution pass of the BAC layer over the
// feature map held in the activation memory.
//
// After a one-cycle start pulse it visits the output positions (oy, ox) in
// row-major order.  For each position it spends KSIZE*KSIZE cycles issuing
// one filter tap (ky, kx) per cycle: it reads weight row ky*KSIZE+kx from the
// weight memory and the input pixel (oy+ky-PAD, ox+kx-PAD) from the
// activation memory.  Taps that fall into the zero padding around the map
// issue no activation read and are flagged with pad, so the datapath feeds a
// 0 instead.  Both memories answer one cycle after the read, so layer_en and
// pad are the issue flags delayed by one cycle.  layer_rst is raised in the
// cycle that issues tap 0, which clears all accumulators one cycle before the
// first tap reaches them.  After the last tap the controller waits two cycles
// for the layer's two-stage pipeline, then raises out_valid for one cycle
// with the window's coordinates on out_y/out_x: in that cycle the layer
// outputs hold the finished results.  The next window starts in that same
// cycle, so a window takes KSIZE*KSIZE+2 cycles.  done pulses with the
// out_valid of the last window; busy is high from the cycle after start up
// to and including the done cycle.
//
// Driving the layer's enable and accumulator reset from an external control
// module follows the published design; the window order, padding, and the
// exact cycle plan are this design's own choices.
module layer_controller #(
  parameter int unsigned KSIZE = pot_pkg::KSIZE,
  parameter int unsigned IMG_W = pot_pkg::IMG_W,
  parameter int unsigned IMG_H = pot_pkg::IMG_H,
  parameter int unsigned PAD   = pot_pkg::PAD,
  localparam int unsigned TAPS   = KSIZE * KSIZE,
  localparam int unsigned OUT_W  = IMG_W + 2 * PAD - KSIZE + 1,
  localparam int unsigned OUT_H  = IMG_H + 2 * PAD - KSIZE + 1,
  localparam int unsigned AADR_W = $clog2(IMG_W * IMG_H),
  localparam int unsigned TAP_W  = $clog2(TAPS),
  localparam int unsigned OX_W   = $clog2(OUT_W + 1),
  localparam int unsigned OY_W   = $clog2(OUT_H + 1)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  output logic              busy,
  output logic              done,
  // memory read requests
  output logic              act_rd_en,
  output logic [AADR_W-1:0] act_rd_addr,
  output logic              w_rd_en,
  output logic [TAP_W-1:0]  w_rd_row,
  // layer control, aligned with the memories' read data
  output logic              layer_rst,
  output logic              layer_en,
  output logic              pad,
  // result strobe
  output logic              out_valid,
  output logic [OY_W-1:0]   out_y,
  output logic [OX_W-1:0]   out_x
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_t;

  state_t            state_q;
  logic [TAP_W-1:0]  tap_q;
  logic [$clog2(KSIZE)-1:0] ky_q, kx_q;
  logic [OX_W-1:0]   ox_q;
  logic [OY_W-1:0]   oy_q;
  logic              drain_q;

  logic              issue, last_tap, last_window, in_map;
  int                iy, ix;

  // Result pipeline: the last tap's issue travels three stages to out_valid.
  localparam int unsigned RES_LAT = 3;
  logic [RES_LAT-1:0] res_v_q, res_last_q;
  logic [OY_W-1:0]    res_y_q [RES_LAT];
  logic [OX_W-1:0]    res_x_q [RES_LAT];

  always_comb begin
    issue       = (state_q == S_RUN);
    last_tap    = (tap_q == TAP_W'(TAPS - 1));
    last_window = (ox_q == OX_W'(OUT_W - 1)) && (oy_q == OY_W'(OUT_H - 1));
    iy          = int'(oy_q) + int'(ky_q) - int'(PAD);
    ix          = int'(ox_q) + int'(kx_q) - int'(PAD);
    in_map      = (iy >= 0) && (iy < int'(IMG_H)) && (ix >= 0) && (ix < int'(IMG_W));

    act_rd_en   = issue && in_map;
    act_rd_addr = in_map ? AADR_W'(iy * int'(IMG_W) + ix) : '0;
    w_rd_en     = issue;
    w_rd_row    = tap_q;
    layer_rst   = issue && (tap_q == '0);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q <= S_IDLE;
      tap_q   <= '0;
      ky_q    <= '0;
      kx_q    <= '0;
      ox_q    <= '0;
      oy_q    <= '0;
      drain_q <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: begin
          if (start) begin
            state_q <= S_RUN;
            tap_q   <= '0;
            ky_q    <= '0;
            kx_q    <= '0;
            ox_q    <= '0;
            oy_q    <= '0;
          end
        end
        S_RUN: begin
          if (last_tap) begin
            state_q <= S_DRAIN;
            drain_q <= 1'b0;
          end
          tap_q <= last_tap ? '0 : tap_q + 1'b1;
          if (kx_q == $bits(kx_q)'(KSIZE - 1)) begin
            kx_q <= '0;
            ky_q <= (ky_q == $bits(ky_q)'(KSIZE - 1)) ? '0 : ky_q + 1'b1;
          end else begin
            kx_q <= kx_q + 1'b1;
          end
        end
        S_DRAIN: begin
          // Two wait cycles; in the second one move to the next window.
          drain_q <= 1'b1;
          if (drain_q) begin
            if (last_window) begin
              state_q <= S_IDLE;
            end else begin
              state_q <= S_RUN;
              if (ox_q == OX_W'(OUT_W - 1)) begin
                ox_q <= '0;
                oy_q <= oy_q + 1'b1;
              end else begin
                ox_q <= ox_q + 1'b1;
              end
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Read data come back one cycle after the request.
  always_ff @(posedge clk) begin
    if (rst) begin
      layer_en <= 1'b0;
      pad      <= 1'b0;
    end else begin
      layer_en <= issue;
      pad      <= issue && !in_map;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      res_v_q    <= '0;
      res_last_q <= '0;
      for (int i = 0; i < int'(RES_LAT); i++) begin
        res_y_q[i] <= '0;
        res_x_q[i] <= '0;
      end
    end else begin
      res_v_q    <= {res_v_q[RES_LAT-2:0], issue && last_tap};
      res_last_q <= {res_last_q[RES_LAT-2:0], issue && last_tap && last_window};
      res_y_q[0] <= oy_q;
      res_x_q[0] <= ox_q;
      for (int i = 1; i < int'(RES_LAT); i++) begin
        res_y_q[i] <= res_y_q[i-1];
        res_x_q[i] <= res_x_q[i-1];
      end
    end
  end

  assign out_valid = res_v_q[RES_LAT-1];
  assign out_y     = res_y_q[RES_LAT-1];
  assign out_x     = res_x_q[RES_LAT-1];
  assign done      = res_last_q[RES_LAT-1];
  assign busy      = (state_q != S_IDLE) || (|res_v_q);

  // The accumulators must never be cleared while a tap is being fed.
  a_rst_not_en: assert property (@(posedge clk) disable iff (rst) layer_rst |-> !layer_en);
  // A new pass may only be started while idle.
  a_start_idle: assert property (@(posedge clk) disable iff (rst) start |-> !busy);

endmodule
