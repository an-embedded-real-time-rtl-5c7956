// char_decoder: turns the character recogniser's pooled scores into a plate
// string.
//
// The input beat holds NPOS*NCLS unsigned ABITS-bit scores (the global max
// pooled output channels); channels k*NCLS .. k*NCLS+NCLS-1 are the class
// scores of character position k.  For one position per clock the module
//   * picks the class with the highest score (lowest index on a tie),
//   * computes the softmax denominator relative to that maximum,
//       S = sum_j 2^12 * exp(-SCALE * (x_max - x_j)),
//     from a 16-entry table (the softmax confidence of the winner is 2^12/S),
//   * keeps the character only if its confidence reaches conf_thr/256, that
//     is if S * conf_thr <= 2^20; otherwise the position becomes a space.
// After NPOS clocks the string (ASCII, position 0 in chars[0]), the class
// indices and a per-position "kept" flag are presented with out_valid.
//
// From the paper: per-position softmax over the output channels and the
// replacement of a low-confidence character by a space.  This design's own
// choices: the 8 x 37 split of the 296 channels (0-9, A-Z, space), the real
// scale SCALE of one score step, the 12-bit table and the threshold format.
//
// Interface: ready/valid; latency NPOS+1 cycles from input to output.
module char_decoder #(
  parameter int  NPOS  = 8,
  parameter int  NCLS  = 37,
  parameter int  BITS  = 4,
  parameter real SCALE = 0.5
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [7:0]                conf_thr,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [NPOS*NCLS*BITS-1:0] in_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [7:0]                chars [NPOS],
  output logic [7:0]                cls   [NPOS],
  output logic [NPOS-1:0]           kept
);
  import lpr_pkg::class_ascii;

  localparam int NE = 1 << BITS;
  typedef logic [12:0] etab_t [NE];

  function automatic etab_t make_etab();
    etab_t t;
    for (int d = 0; d < NE; d++) t[d] = 13'(int'(4096.0 * $exp(-SCALE * real'(d))));
    return t;
  endfunction
  localparam etab_t ETAB = make_etab();

  logic [NPOS*NCLS*BITS-1:0] sbuf;
  logic                      busy;
  int unsigned               pos;

  // argmax and softmax denominator of the current position
  logic [BITS-1:0] xmax;
  int unsigned     amax;
  logic [31:0]     ssum;
  logic            keep;
  always_comb begin
    xmax = '0; amax = 0;
    for (int j = 0; j < NCLS; j++)
      if (j == 0 || sbuf[(pos*NCLS + j)*BITS +: BITS] > xmax) begin
        xmax = sbuf[(pos*NCLS + j)*BITS +: BITS];
        amax = j;
      end
    ssum = '0;
    for (int j = 0; j < NCLS; j++)
      ssum += 32'(ETAB[xmax - sbuf[(pos*NCLS + j)*BITS +: BITS]]);
    keep = (ssum * 32'(conf_thr)) <= 32'h0010_0000;
  end

  assign in_ready = !busy && !out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; pos <= 0; out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        busy <= 1'b1; pos <= 0;
      end else if (busy) begin
        if (pos == NPOS - 1) begin
          busy <= 1'b0; out_valid <= 1'b1; pos <= 0;
        end else begin
          pos <= pos + 1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) sbuf <= in_data;
    if (busy) begin
      cls[pos]   <= 8'(amax);
      kept[pos]  <= keep;
      chars[pos] <= keep ? class_ascii(int'(amax)) : 8'h20;
    end
  end
endmodule
