// asc_codec: ASC-CBR feature-map codec, one encoder and one decoder.
//
// The encoder compresses blocks of feature-map values coming from the
// accelerator into endpoints plus 3-bit indices on its way to memory; the
// decoder expands compressed blocks read back from memory. The two halves are
// independent streams, as in the paper, which implements and measures the
// encoder and decoder side by side; the accelerator and the DRAM sit outside
// this module and connect to its ports.
//
// Parameters: W is the data width (8 for INT8, 16 for INT16), LANES the
// number of values handled per cycle (1 is the paper's basic design, 32 its
// scaled DDR5-6400 design), MAX_BLK_LOG2 the log2 of the largest block the
// encoder's queues can hold. Block size and endpoint mode are chosen per
// block at run time through the enc_cfg_* and dec_one_ep inputs (the paper
// fixes them per model).
//
// Timing: both halves accept one beat per cycle without stalls. See
// asc_encoder and asc_decoder for latencies.
//
// Lint note: the reset net is also used by the sub-blocks' assertions, which
// lint reports as a net used both synchronously and asynchronously; the logic
// itself only uses it as an asynchronous reset.
module asc_codec
  import asc_pkg::*;
#(
  parameter int unsigned W            = 8,
  parameter int unsigned LANES        = 1,
  parameter int unsigned MAX_BLK_LOG2 = 5,
  localparam int unsigned CFGW        = $clog2(MAX_BLK_LOG2 + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  // encoder: feature map in, compressed stream out
  input  logic                enc_cfg_one_ep,
  input  logic [CFGW-1:0]     enc_cfg_blk_log2,
  input  logic                enc_in_valid,
  input  logic signed [W-1:0] enc_in_data [LANES],
  output logic                enc_out_valid,
  output logic                enc_out_first,
  output logic                enc_out_last,
  output logic signed [W-1:0] enc_out_ep1,
  output logic signed [W-1:0] enc_out_ep2,
  output logic [IDX_W-1:0]    enc_out_idx [LANES],
  output logic                enc_out_scale_log,
  // decoder: compressed stream in, feature map out
  input  logic                dec_one_ep,
  input  logic                dec_in_valid,
  input  logic                dec_in_first,
  input  logic                dec_in_last,
  input  logic signed [W-1:0] dec_in_ep1,
  input  logic signed [W-1:0] dec_in_ep2,
  input  logic [IDX_W-1:0]    dec_in_idx [LANES],
  output logic                dec_out_valid,
  output logic                dec_out_first,
  output logic                dec_out_last,
  output logic signed [W-1:0] dec_out_data [LANES]
);

  asc_encoder #(.W(W), .LANES(LANES), .MAX_BLK_LOG2(MAX_BLK_LOG2)) u_enc (
    .clk, .rst_n,
    .cfg_one_ep   (enc_cfg_one_ep),
    .cfg_blk_log2 (enc_cfg_blk_log2),
    .in_valid     (enc_in_valid),
    .in_data      (enc_in_data),
    .out_valid    (enc_out_valid),
    .out_first    (enc_out_first),
    .out_last     (enc_out_last),
    .out_ep1      (enc_out_ep1),
    .out_ep2      (enc_out_ep2),
    .out_idx      (enc_out_idx),
    .out_scale_log(enc_out_scale_log)
  );

  asc_decoder #(.W(W), .LANES(LANES)) u_dec (
    .clk, .rst_n,
    .one_ep   (dec_one_ep),
    .in_valid (dec_in_valid),
    .in_first (dec_in_first),
    .in_last  (dec_in_last),
    .in_ep1   (dec_in_ep1),
    .in_ep2   (dec_in_ep2),
    .in_idx   (dec_in_idx),
    .out_valid(dec_out_valid),
    .out_first(dec_out_first),
    .out_last (dec_out_last),
    .out_data (dec_out_data)
  );

endmodule
