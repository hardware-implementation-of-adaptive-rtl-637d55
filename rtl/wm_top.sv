// wm_top: pipelined adaptive watermark embedder for an IMG_W x IMG_H
// grey-scale image, with its three internal RAMs.
//
// The image is cut into non-overlapping 3x3 blocks and each block carries
// one watermark bit. A block whose nine MSBs hold four, five or six ones is
// "disordered" and gets the bit in bit-plane 5; any other block is
// "ordered" and gets it in bit-plane 3. In the enhanced method (ENHANCED =
// 1, default) the inverted bit also goes into the plane below (4 or 2).
// The MSB plane is never changed, so a reader can redo the classification
// on the watermarked image and recover each bit by a majority vote over
// the nine pixels of the block.
//
// Datapath: input image RAM -> line buffer (3 lines) -> stripe embedder
// (IMG_W/3 block embedders, each a congestion analyzer and nine embedding
// modules) -> output row buffer (3 lines) -> output image RAM. The
// watermark RAM holds one word of IMG_W/3 bits per stripe of three lines.
// wm_controller reads one line per clock; an image of IMG_H lines takes
// IMG_H+6 clocks from start to done.
//
// Host interface: the input image and the watermark are written a whole
// line / stripe word at a time through img_* and wm_*; the result is read a
// line at a time through res_* (one cycle read latency). Pixel c of a line
// sits at bits [8c +: 8]. The host should not write the input RAMs or read
// the output RAM while busy is high. The line-wide host ports, the memory
// layout and the edge rules (columns past the last whole block and a short
// last stripe pass through unchanged) are this design's choices; the
// image size default of 256 x 256 is also an assumption, since the
// algorithm description gives no size.
module wm_top
  import wm_pkg::*;
#(
  parameter int unsigned IMG_W    = 256,
  parameter int unsigned IMG_H    = 256,
  parameter bit          ENHANCED = 1'b1,
  localparam int unsigned NB      = IMG_W / BLK,                   // blocks per stripe
  localparam int unsigned NGF     = (IMG_H / BLK > 0) ? IMG_H / BLK : 1, // whole stripes
  localparam int unsigned AW      = (IMG_H > 1) ? $clog2(IMG_H) : 1,
  localparam int unsigned GW      = (NGF > 1) ? $clog2(NGF) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // control
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  // input image load
  input  logic                  img_we,
  input  logic [AW-1:0]         img_waddr,
  input  pixel_t [IMG_W-1:0]    img_wdata,
  // watermark message load
  input  logic                  wm_we,
  input  logic [GW-1:0]         wm_waddr,
  input  logic [NB-1:0]         wm_wdata,
  // watermarked image readout
  input  logic                  res_re,
  input  logic [AW-1:0]         res_raddr,
  output pixel_t [IMG_W-1:0]    res_rdata
);
  logic          in_re, wm_re, lb_load, ob_load, ob_bypass, out_we;
  logic [AW-1:0] in_raddr, out_waddr;
  logic [GW-1:0] wm_raddr;
  logic [1:0]    lb_sel, ob_sel;

  pixel_t [IMG_W-1:0]          in_row, out_row;
  logic   [NB-1:0]             wm_word, btypes;
  pixel_t [BLK-1:0][IMG_W-1:0] stripe, stripe_wm;

  wm_controller #(.H(IMG_H)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .in_re, .in_raddr, .wm_re, .wm_raddr,
    .lb_load, .lb_sel, .ob_load, .ob_bypass, .ob_sel,
    .out_we, .out_waddr);

  sync_ram #(.DW(IMG_W * PIX_W), .DEPTH(IMG_H)) u_in_ram (
    .clk, .rst_n, .we(img_we), .waddr(img_waddr), .wdata(img_wdata),
    .re(in_re), .raddr(in_raddr), .rdata(in_row));

  sync_ram #(.DW(NB), .DEPTH(NGF)) u_wm_ram (
    .clk, .rst_n, .we(wm_we), .waddr(wm_waddr), .wdata(wm_wdata),
    .re(wm_re), .raddr(wm_raddr), .rdata(wm_word));

  line_buffer #(.W(IMG_W)) u_lb (
    .clk, .rst_n, .load(lb_load), .row_sel(lb_sel), .row_in(in_row), .rows(stripe));

  stripe_embedder #(.W(IMG_W), .ENHANCED(ENHANCED)) u_se (
    .rows_in(stripe), .wm_bits(wm_word), .rows_out(stripe_wm), .btypes(btypes));

  output_row_buffer #(.W(IMG_W)) u_ob (
    .clk, .rst_n, .load(ob_load), .bypass(ob_bypass), .rows_emb(stripe_wm),
    .rows_orig(stripe), .rd_sel(ob_sel), .rd_row(out_row));

  sync_ram #(.DW(IMG_W * PIX_W), .DEPTH(IMG_H)) u_out_ram (
    .clk, .rst_n, .we(out_we), .waddr(out_waddr), .wdata(out_row),
    .re(res_re), .raddr(res_raddr), .rdata(res_rdata));

  // host rules: the RAMs the pipeline uses are left alone while it runs
  a_no_load_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                   busy |-> !img_we && !wm_we)
    else $error("wm_top: input RAM written while busy");
  a_no_read_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                   busy |-> !res_re)
    else $error("wm_top: output RAM read while busy");

  initial begin
    assert (IMG_W >= BLK && IMG_H >= 1)
      else $error("wm_top: the image must be at least %0d pixels wide", BLK);
  end
endmodule
