// wm_controller: sequences the watermark embedding pipeline over an image
// of H lines.
//
// After start, one image line is read from the input image RAM per clock,
// in order, and stored in the line buffer. Lines are grouped in stripes of
// three; stripe g covers lines 3g..3g+2 and its watermark word (one bit
// per block) is read from the watermark RAM together with line 3g+2. The
// cycle after the third line is stored, the stripe embedder's result is
// loaded into the output row buffer, and the next three cycles write the
// three lines into the output image RAM while the next stripe is read.
// So one line enters and one line leaves per clock once the pipeline is
// full. A last stripe with fewer than three lines is still timed as a
// whole stripe (missing lines are not read or written) and is passed
// through unchanged (bypass).
//
// Timing, with start high in cycle 0: line r is read in cycle r+1, the
// first line is written in cycle 6 and done pulses in cycle H+6, i.e. the
// N+6 clock pulses an N x N image takes; busy is high in cycles 1..H+5.
// The stage split (read, store, embed, write) and the bypass of a short
// last stripe are this design's choices.
//
// Interface: start in; busy, done out; read strobes and addresses for the
// input and watermark RAMs; load/select for the line buffer and output row
// buffer; write strobe and address for the output RAM.
module wm_controller
  import wm_pkg::*;
#(
  parameter int unsigned H      = 256,
  localparam int unsigned NG    = (H + BLK - 1) / BLK,   // stripes incl. a short last one
  localparam int unsigned NGF   = (H / BLK > 0) ? H / BLK : 1, // whole stripes
  localparam int unsigned AW    = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned GW    = (NGF > 1) ? $clog2(NGF) : 1,
  localparam int unsigned RW    = $clog2(NG * BLK + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  // input image RAM read port
  output logic          in_re,
  output logic [AW-1:0] in_raddr,
  // watermark RAM read port
  output logic          wm_re,
  output logic [GW-1:0] wm_raddr,
  // line buffer
  output logic          lb_load,
  output logic [1:0]    lb_sel,
  // output row buffer
  output logic          ob_load,
  output logic          ob_bypass,
  output logic [1:0]    ob_sel,
  // output image RAM write port
  output logic          out_we,
  output logic [AW-1:0] out_waddr
);
  localparam int unsigned LAST_ISSUE = NG * BLK - 1;

  typedef enum logic {S_IDLE, S_RUN} state_e;
  state_e state;

  // read stage
  logic          issuing;
  logic [RW-1:0] r;           // line being read (may run past H-1 in a short last stripe)
  logic [1:0]    p;           // position of line r in its stripe
  logic [GW-1:0] g;           // stripe of line r
  logic          row_ok;      // line r exists
  logic          last_write;  // line H-1 is written this cycle
  // store stage
  logic          b_end, b_bypass;
  logic [RW-1:0] b_base;
  // embed stage
  logic          c_bypass;
  logic [RW-1:0] c_base;
  // write stage
  logic          w_active;
  logic [RW-1:0] w_row;
  logic [1:0]    w_p;

  assign row_ok   = (r < RW'(H));
  assign in_re    = issuing && row_ok;
  assign in_raddr = AW'(r);
  assign wm_re    = issuing && (p == 2'd2) && row_ok;
  assign wm_raddr = g;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      issuing <= 1'b0;
      r       <= '0;
      p       <= '0;
      g       <= '0;
    end else begin
      if (state == S_IDLE) begin
        if (start) begin
          state   <= S_RUN;
          issuing <= 1'b1;
          r       <= '0;
          p       <= '0;
          g       <= '0;
        end
      end else begin
        if (issuing) begin
          if (r == RW'(LAST_ISSUE)) begin
            issuing <= 1'b0;
          end else begin
            r <= r + 1'b1;
            if (p == 2'd2) begin
              p <= '0;
              g <= g + 1'b1;
            end else begin
              p <= p + 1'b1;
            end
          end
        end
        if (last_write) state <= S_IDLE;
      end
    end
  end

  // store stage: the line read last cycle is on the RAM output now
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lb_load  <= 1'b0;
      lb_sel   <= '0;
      b_end    <= 1'b0;
      b_bypass <= 1'b0;
      b_base   <= '0;
    end else begin
      lb_load  <= in_re;
      lb_sel   <= p;
      b_end    <= issuing && (p == 2'd2);
      b_bypass <= !row_ok;
      b_base   <= r - RW'(2);
    end
  end

  // embed stage: the stripe is complete in the line buffer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ob_load  <= 1'b0;
      c_bypass <= 1'b0;
      c_base   <= '0;
    end else begin
      ob_load  <= b_end;
      c_bypass <= b_bypass;
      c_base   <= b_base;
    end
  end
  assign ob_bypass = c_bypass;

  // write stage: three lines out of the output row buffer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_active <= 1'b0;
      w_row    <= '0;
      w_p      <= '0;
      done     <= 1'b0;
    end else begin
      done <= last_write;
      if (ob_load) begin
        w_active <= 1'b1;
        w_row    <= c_base;
        w_p      <= '0;
      end else if (w_active) begin
        w_row <= w_row + 1'b1;
        w_p   <= w_p + 1'b1;
        if (w_p == 2'd2) w_active <= 1'b0;
      end
    end
  end

  assign out_we    = w_active && (w_row < RW'(H));
  assign out_waddr = AW'(w_row);
  assign ob_sel    = w_p;
  assign busy      = (state == S_RUN);
  assign last_write = out_we && (out_waddr == AW'(H - 1));

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
                                 ob_load |-> !w_active || w_p == 2'd2)
    else $error("wm_controller: output row buffer reloaded before it was written out");
endmodule
