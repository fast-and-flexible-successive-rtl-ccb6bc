// End-to-end testbench of the Fast-SSCL-SPC list decoder.
//
// Builds a polar code (frozen set from the Bhattacharyya bound), derives its
// Node Sequence, and decodes random CRC-protected frames:
//  * clean frames (all LLR signs right): the output word must equal the
//    transmitted word, the CRC must pass and the path metric must be 0;
//  * frames with a few weak wrong LLRs: must decode to the transmitted word;
//  * heavily noisy frames: whenever crc_ok is reported, the CRC recomputed
//    on the output word must be zero.
// Every frame's latency is compared with the schedule worked out from the
// node list, and each mechanism (each node phase type, forks, path
// switches, multi-step LLR updates, CRC fallback) must occur at least once.
// Parameters are reduced (N = 128, P = 8) to keep the run short.
`timescale 1ns/1ps
module tb_fsscl_decoder;
  import fsscl_pkg::*;

  localparam int unsigned TN = 128;
  localparam int unsigned TP = 8;
  localparam int unsigned TL = 2;
  localparam int unsigned TK = 80;
  localparam int TS_R1  = 1;
  localparam int TS_SPC = 2;
  localparam logic [15:0] TCRC_POLY = 16'h1021;
  localparam int NFRAMES = 60;

  `include "polar_frame_gen.svh"

  `include "decoder_tb_body.svh"

  fsscl_decoder #(.N(TN), .P(TP), .L(TL)) dut (
    .clk, .rst_n, .ch_we, .ch_waddr, .ch_wdata, .ns_we, .ns_waddr, .ns_wdata, .ns_len,
    .start, .busy, .done, .dec_word, .crc_ok, .dec_pm);
endmodule
