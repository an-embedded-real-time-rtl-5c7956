// lpr_top: programmable-logic part of the license plate recognition system.
//
// Two independent streaming accelerators sit side by side, each with its
// own input stream, output stream and weight load port, as they would be
// attached to the processor through separate DMA channels:
//   * lpd_accel  - plate detection: 576x576 RGB frame in, 18x18 grid of
//                  18 sigmoid outputs (3 anchors x 6 values) out;
//   * lpcr_accel - character recognition: 64x128 grey plate crop in,
//                  8-character string with per-character confidence flags out.
// Everything between the two (decoding boxes, non-maximum suppression,
// cropping and resizing the plates) runs as software on the processor, so
// the two accelerators are not connected to each other inside this module.
// All ports are plain ready/valid streams; the load ports take one weight
// memory word per cycle.
//
// From the paper: the split into two FPGA accelerators driven by the
// processor, and their networks.  This design's own: port formats and the
// load ports.
module lpr_top
  import lpr_pkg::*;
#(
  parameter int LPD_SIZE = LPD_IMG,
  parameter int PLATE_H  = LPCR_H,
  parameter int PLATE_W  = LPCR_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // detection weights
  input  logic                         lpd_wr_en,
  input  logic [3:0]                   lpd_wr_layer,
  input  logic [15:0]                  lpd_wr_addr,
  input  logic [287:0]                 lpd_wr_data,
  // detection streams
  input  logic                         frame_valid,
  output logic                         frame_ready,
  input  logic [LPD_IN_CH*PIXBITS-1:0] frame_data,
  output logic                         det_valid,
  input  logic                         det_ready,
  output logic [LPD_OUT_CH*8-1:0]      det_data,
  // recognition weights and threshold
  input  logic                         lpcr_wr_en,
  input  logic [3:0]                   lpcr_wr_layer,
  input  logic [15:0]                  lpcr_wr_addr,
  input  logic [255:0]                 lpcr_wr_data,
  input  logic [7:0]                   conf_thr,
  // recognition streams
  input  logic                         plate_valid,
  output logic                         plate_ready,
  input  logic [PIXBITS-1:0]           plate_data,
  output logic                         text_valid,
  input  logic                         text_ready,
  output logic [7:0]                   text_chars [NPOS],
  output logic [7:0]                   text_cls   [NPOS],
  output logic [NPOS-1:0]              text_kept
);
  lpd_accel #(.IMG(LPD_SIZE), .WDW(288)) u_lpd (
    .clk, .rst_n,
    .wr_en(lpd_wr_en), .wr_layer(lpd_wr_layer), .wr_addr(lpd_wr_addr), .wr_data(lpd_wr_data),
    .in_valid(frame_valid), .in_ready(frame_ready), .in_data(frame_data),
    .out_valid(det_valid), .out_ready(det_ready), .out_data(det_data));

  lpcr_accel #(.H(PLATE_H), .W(PLATE_W), .WDW(256)) u_lpcr (
    .clk, .rst_n,
    .wr_en(lpcr_wr_en), .wr_layer(lpcr_wr_layer), .wr_addr(lpcr_wr_addr), .wr_data(lpcr_wr_data),
    .conf_thr,
    .in_valid(plate_valid), .in_ready(plate_ready), .in_data(plate_data),
    .out_valid(text_valid), .out_ready(text_ready),
    .chars(text_chars), .cls(text_cls), .kept(text_kept));
endmodule
