// Full-size run of the Fast-SSCL-SPC list decoder with its default
// parameters (N = 1024, P = 64, L = 2): the P(1024,512) code with a 16-bit
// CRC and the fork limits S_Rate-1 = 1, S_SPC = 2 of the main
// configuration. Decodes a few clean, weakly corrupted and noisy frames
// and checks output, CRC flag, path metric and latency as the reduced
// end-to-end testbench does.
`timescale 1ns/1ps
module tb_fsscl_full;
  import fsscl_pkg::*;

  localparam int unsigned TN = 1024;
  localparam int unsigned TP = 64;
  localparam int unsigned TL = 2;
  localparam int unsigned TK = 512;
  localparam int TS_R1  = 1;
  localparam int TS_SPC = 2;
  localparam logic [15:0] TCRC_POLY = 16'h1021;
  localparam int NFRAMES = 6;

  `include "polar_frame_gen.svh"

  `include "decoder_tb_body.svh"

  fsscl_decoder dut (
    .clk, .rst_n, .ch_we, .ch_waddr, .ch_wdata, .ns_we, .ns_waddr, .ns_wdata, .ns_len,
    .start, .busy, .done, .dec_word, .crc_ok, .dec_pm);
endmodule
