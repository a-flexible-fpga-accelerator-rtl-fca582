// core_ctrl: the controller of one core.
//
// It takes one convolution tile at a time (Wo x Ho output pixels, Co output
// channels, Ci input channel words, a Kx x Ky window, strides Sx, Sy) and runs
// three engines that overlap in time:
//
// Input engine. Streams the Ci input channels, each (Ho-1)*Sy+Ky rows of
// (Wo-1)*Sx+Kx values in row-major order, one value per cycle, each with the
// receiver command that turns the set of caching PEs into the set of output
// pixels whose window holds that value. For an input column x the highest
// output column reached grows when x mod Sx = 0 (up to Wo-1) and the lowest
// grows when x >= Kx and x = Kx (mod Sx). Both growing gives ShiftX, only the
// highest DilateX, only the lowest ErodeX, neither NoOp. Rows are handled
// the same way at column 0 with ShiftY, DilateY, ErodeY and RotateY; the very
// first value of a channel carries Start. Channel c+2 waits until every
// weight of channel c has been sent, so each input buffer holds at most two
// windows (double buffering).
//
// Weight engine. Streams Kx*Ky*Co weights per input channel in
// (ky, kx, co) order, each tagged with its window offset ky*Kx+kx, "first"
// (ci = 0 and offset 0), "last" (last ci and last offset) and "release"
// (co = Co-1). Channel c waits until all its inputs have been sent (input
// stall). The last channel of a tile also waits until the outputs of the
// previous tile have all been read back (output stall), so an output buffer
// never holds more than Co values.
//
// Read-back engine. Starts 4 cycles after the last weight of a tile and
// issues one request per cycle in (co, pixel) order; the answers return
// NUM_PE cycles later and are put on out_valid/out_data. It runs while the
// next tile is loaded and computed.
//
// What the controller does follows the paper; the exact scheduling rules, the
// command format and the stream handshakes are this design's own.
// Restrictions: Wo*Ho <= NUM_PE, Kx*Ky <= IBUF_DEPTH/2, Co <= OBUF_DEPTH,
// 1 <= Sx <= Kx, 1 <= Sy <= Ky, and Wo >= 2 whenever Ho >= 2 (the receiver
// table moves between rows through the receiver left on the last column).
//
// Interface: cmd (valid/ready), in and wt streams (valid/ready, one word per
// cycle), out stream (valid only: the consumer takes one word per cycle),
// registered heads of the three interconnects, o_ret from the last PE.
// The request slots put on o_req always start empty (dvalid = 0, data = 0),
// so those 33 output bits are constant by design; likewise only the valid
// and data fields of o_ret are read.
module core_ctrl
  import cnn_pkg::*;
#(
  parameter int unsigned NUM_PE     = 625,
  parameter int unsigned IBUF_DEPTH = 32,
  parameter int unsigned OBUF_DEPTH = 512
) (
  input  logic              clk,
  input  logic              rst_n,
  // tile command
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  conv_cmd_t         cmd,
  // input feature map stream
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DATA_W-1:0] in_data,
  // weight stream
  input  logic              wt_valid,
  output logic              wt_ready,
  input  logic [DATA_W-1:0] wt_data,
  // output stream
  output logic              out_valid,
  output logic [DATA_W-1:0] out_data,
  // interconnects
  output ibus_t             i_bus,
  output wbus_t             w_bus,
  output obus_t             o_req,
  input  obus_t             o_ret,
  // status
  output ctrl_stat_t        stat
);

  localparam int unsigned PW = 16;   // input row/column positions
  localparam int unsigned TW = 20;   // output word count of a tile

  // ---------------- tile registers ----------------
  logic        active;
  conv_cmd_t   cur;
  logic [PW-1:0] wi, hi;             // input tile width and height
  logic [7:0]  kk;                   // Kx*Ky
  logic [K_W-1:0] kxm, kym;          // Kx mod Sx, Ky mod Sy

  // ---------------- input engine state ----------------
  logic [CH_W-1:0] in_c;             // channel being sent = channels done
  logic [PW-1:0]   in_x, in_y;
  logic [S_W-1:0]  xm, ym;           // x mod Sx, y mod Sy
  logic [DIM_W-1:0] hx, hy;          // highest output column / row reached
  logic            in_done;

  // ---------------- weight engine state ----------------
  logic [CH_W-1:0]  w_c;             // channel being sent = channels done
  logic [7:0]       w_k;
  logic [DIM_W-1:0] w_co;
  logic             w_done;
  logic [2:0]       drain;

  // ---------------- read-back engine state ----------------
  logic             rb_busy, rb_issue;
  logic [DIM_W-1:0] rb_co, rb_ncol;
  logic [ID_W-1:0]  rb_p;
  logic [ID_W:0]    rb_npix;
  logic [TW-1:0]    rb_ret, rb_total;

  // ---------------- input command generation ----------------
  logic  x_hi_inc, x_lo_inc, y_hi_inc, y_lo_inc;
  icmd_e icmd;

  always_comb begin
    x_hi_inc = (xm == '0) && (hx < DIM_W'(cur.wo - 1'b1));
    x_lo_inc = (in_x >= PW'(cur.kx)) && (xm == S_W'(kxm));
    y_hi_inc = (ym == '0) && (hy < DIM_W'(cur.ho - 1'b1));
    y_lo_inc = (in_y >= PW'(cur.ky)) && (ym == S_W'(kym));
    if (in_x == '0) begin
      if (in_y == '0)                 icmd = CMD_START;
      else if (y_hi_inc && y_lo_inc)  icmd = CMD_SHIFTY;
      else if (y_hi_inc)              icmd = CMD_DILATEY;
      else if (y_lo_inc)              icmd = CMD_ERODEY;
      else                            icmd = CMD_ROTATEY;
    end else begin
      if (x_hi_inc && x_lo_inc)       icmd = CMD_SHIFTX;
      else if (x_hi_inc)              icmd = CMD_DILATEX;
      else if (x_lo_inc)              icmd = CMD_ERODEX;
      else                            icmd = CMD_NOP;
    end
  end

  // ---------------- handshakes ----------------
  logic in_win_ok, w_in_ok, w_out_ok, in_fire, wt_fire;

  assign cmd_ready = !active;
  assign in_win_ok = (CH_W+1)'(in_c) < (CH_W+1)'(w_c) + (CH_W+1)'(2);
  assign in_ready  = active && !in_done && in_win_ok;
  assign in_fire   = in_valid && in_ready;

  assign w_in_ok   = in_done || (w_c < in_c);
  assign w_out_ok  = !(w_c == CH_W'(cur.ci - 1'b1) && rb_busy);
  assign wt_ready  = active && !w_done && w_in_ok && w_out_ok;
  assign wt_fire   = wt_valid && wt_ready;

  logic last_x, last_y, last_k, last_co;
  assign last_x  = (in_x == wi - 1'b1);
  assign last_y  = (in_y == hi - 1'b1);
  assign last_k  = (w_k == kk - 1'b1);
  assign last_co = (w_co == DIM_W'(cur.co - 1'b1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active  <= 1'b0;
      cur     <= '0;
      wi      <= '0;
      hi      <= '0;
      kk      <= '0;
      kxm     <= '0;
      kym     <= '0;
      in_c    <= '0;
      in_x    <= '0;
      in_y    <= '0;
      xm      <= '0;
      ym      <= '0;
      hx      <= '0;
      hy      <= '0;
      in_done <= 1'b0;
      w_c     <= '0;
      w_k     <= '0;
      w_co    <= '0;
      w_done  <= 1'b0;
      drain   <= '0;
      i_bus   <= '0;
      w_bus   <= '0;
    end else begin
      // ---- accept a tile ----
      if (cmd_valid && cmd_ready) begin
        active  <= 1'b1;
        cur     <= cmd;
        wi      <= PW'(PW'(cmd.wo - 1'b1) * PW'(cmd.sx)) + PW'(cmd.kx);
        hi      <= PW'(PW'(cmd.ho - 1'b1) * PW'(cmd.sy)) + PW'(cmd.ky);
        kk      <= 8'(8'(cmd.kx) * 8'(cmd.ky));
        kxm     <= cmd.kx % cmd.sx;
        kym     <= cmd.ky % cmd.sy;
        in_c    <= '0;
        in_x    <= '0;
        in_y    <= '0;
        xm      <= '0;
        ym      <= '0;
        hx      <= '0;
        hy      <= '0;
        in_done <= 1'b0;
        w_c     <= '0;
        w_k     <= '0;
        w_co    <= '0;
        w_done  <= 1'b0;
        drain   <= '0;
      end

      // ---- input engine ----
      i_bus.valid <= in_fire;
      i_bus.data  <= in_data;
      i_bus.cmd   <= in_fire ? icmd : CMD_NOP;
      if (in_fire) begin
        if (in_x == '0 && in_y != '0 && y_hi_inc) hy <= hy + 1'b1;
        if (in_x != '0 && x_hi_inc)               hx <= hx + 1'b1;
        if (last_x) begin
          in_x <= '0;
          xm   <= '0;
          hx   <= '0;
          if (last_y) begin
            in_y <= '0;
            ym   <= '0;
            hy   <= '0;
            in_c <= in_c + 1'b1;
            if (in_c == CH_W'(cur.ci - 1'b1)) in_done <= 1'b1;
          end else begin
            in_y <= in_y + 1'b1;
            ym   <= (ym == S_W'(cur.sy - 1'b1)) ? '0 : ym + 1'b1;
          end
        end else begin
          in_x <= in_x + 1'b1;
          xm   <= (xm == S_W'(cur.sx - 1'b1)) ? '0 : xm + 1'b1;
        end
      end

      // ---- weight engine ----
      w_bus.valid       <= wt_fire;
      w_bus.data        <= wt_data;
      w_bus.first       <= (w_c == '0) && (w_k == '0);
      w_bus.last        <= (w_c == CH_W'(cur.ci - 1'b1)) && last_k;
      w_bus.release_win <= last_k && last_co;
      w_bus.koff        <= KOFF_W'(w_k);
      if (wt_fire) begin
        if (last_co) begin
          w_co <= '0;
          if (last_k) begin
            w_k <= '0;
            w_c <= w_c + 1'b1;
            if (w_c == CH_W'(cur.ci - 1'b1)) w_done <= 1'b1;
          end else begin
            w_k <= w_k + 1'b1;
          end
        end else begin
          w_co <= w_co + 1'b1;
        end
      end

      // ---- hand the finished tile to the read-back engine ----
      if (active && w_done) begin
        drain <= drain + 1'b1;
        if (drain == 3'd3) active <= 1'b0;
      end
    end
  end

  // ---------------- read-back engine ----------------
  logic rb_start;
  assign rb_start = active && w_done && (drain == 3'd3);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rb_busy   <= 1'b0;
      rb_issue  <= 1'b0;
      rb_co     <= '0;
      rb_p      <= '0;
      rb_ncol   <= '0;
      rb_npix   <= '0;
      rb_ret    <= '0;
      rb_total  <= '0;
      o_req     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      o_req <= '0;
      if (rb_start) begin
        rb_busy  <= 1'b1;
        rb_issue <= 1'b1;
        rb_co    <= '0;
        rb_p     <= '0;
        rb_ncol  <= cur.co;
        rb_npix  <= (ID_W+1)'(TW'(cur.wo) * TW'(cur.ho));
        rb_ret   <= '0;
        rb_total <= TW'(TW'(cur.wo) * TW'(cur.ho) * TW'(cur.co));
      end else if (rb_issue) begin
        o_req.req    <= 1'b1;
        o_req.req_id <= rb_p;
        if ((ID_W+1)'(rb_p) == rb_npix - 1'b1) begin
          rb_p <= '0;
          if (rb_co == rb_ncol - 1'b1) rb_issue <= 1'b0;
          else                         rb_co <= rb_co + 1'b1;
        end else begin
          rb_p <= rb_p + 1'b1;
        end
      end
      out_valid <= o_ret.dvalid;
      out_data  <= o_ret.data;
      if (o_ret.dvalid) begin
        rb_ret <= rb_ret + 1'b1;
        if (rb_ret == rb_total - 1'b1) rb_busy <= 1'b0;
      end
    end
  end

  // ---------------- status ----------------
  always_comb begin
    stat.busy      = active;
    stat.rb_busy   = rb_busy;
    stat.in_stall  = active && !w_done && wt_valid && !w_in_ok;
    stat.win_stall = active && !in_done && in_valid && !in_win_ok;
    stat.out_stall = active && !w_done && wt_valid && w_in_ok && !w_out_ok;
    stat.tile_done = o_ret.dvalid && rb_busy && (rb_ret == rb_total - 1'b1);
  end

  // ---------------- command rules ----------------
  always_ff @(posedge clk) if (rst_n && cmd_valid && cmd_ready) begin
    assert (cmd.wo != 0 && cmd.ho != 0 && cmd.co != 0 && cmd.ci != 0) else $error("core_ctrl: empty tile");
    assert (32'(cmd.wo) * 32'(cmd.ho) <= NUM_PE) else $error("core_ctrl: Wo*Ho exceeds the PE count");
    assert (32'(cmd.kx) * 32'(cmd.ky) * 2 <= IBUF_DEPTH) else $error("core_ctrl: window too large for double buffering");
    assert (32'(cmd.co) <= OBUF_DEPTH) else $error("core_ctrl: Co exceeds the output buffer");
    assert (cmd.sx != 0 && cmd.sy != 0 && cmd.sx <= cmd.kx && cmd.sy <= cmd.ky) else $error("core_ctrl: stride larger than window");
    assert (cmd.ho == 1 || cmd.wo >= 2) else $error("core_ctrl: Wo must be >= 2 when Ho >= 2");
  end

endmodule
