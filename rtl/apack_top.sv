// apack_top: the APack compression layer between an accelerator's on-chip
// buffer and its off-chip memory controller.
//
// APack stores each tensor as two sequential bit streams, arithmetic-coded
// symbols and raw offsets, and restores the original 8-bit values on the way
// back in. One encoder or decoder handles one value per cycle, so the layer
// replicates them: the tensor is cut into sub-streams and every sub-stream has
// its own engine. This top holds N_ENC compression engines (on-chip buffer ->
// memory) and N_DEC decompression engines (memory -> on-chip buffer). Each has
// its own symbol and count tables, so weight and activation streams can use
// different tables; a table write on symt_in/pcnt_in goes to every engine
// whose bit is set in enc_tbl_sel/dec_tbl_sel.
//
// Defaults: 32 encoders and 32 decoders, i.e. 64 engines as in the paper's
// evaluation. The paper gives the total of 64 engines, and its area and power
// totals (1.14 mm^2, 179.2 mW) fit 32 compressors (0.02 mm^2, 2.8 mW each)
// plus 32 decompressors (0.017 mm^2, 2.65 mW each); the even split is this
// design's reading. Memory words are WORD_W = 64 bits (one DDR4 channel
// width, this design's choice). The memory controller, DRAM and the
// accelerator are outside this block: their sides are plain ports.
// Timing: see apack_enc_engine and apack_dec_engine.
module apack_top
  import apack_pkg::*;
#(
  parameter int unsigned N_ENC  = 32,
  parameter int unsigned N_DEC  = 32,
  parameter int unsigned WORD_W = 64,
  parameter int unsigned NSYM_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // table loading, before each layer
  input  symt_wr_t          symt_in,
  input  pcnt_wr_t          pcnt_in,
  input  logic [N_ENC-1:0]  enc_tbl_sel,
  input  logic [N_DEC-1:0]  dec_tbl_sel,
  // compression: values from the on-chip buffer, words to memory
  input  val_t              enc_val        [N_ENC],
  input  logic [N_ENC-1:0]  enc_en,
  input  logic [N_ENC-1:0]  enc_done,
  output logic [WORD_W-1:0] enc_code_word  [N_ENC],
  output logic [N_ENC-1:0]  enc_code_word_v,
  output logic [WORD_W-1:0] enc_ofs_word   [N_ENC],
  output logic [N_ENC-1:0]  enc_ofs_word_v,
  output logic [NSYM_W-1:0] enc_nsym       [N_ENC],
  output logic [N_ENC-1:0]  enc_nsym_v,
  output logic [N_ENC-1:0]  enc_stream_done,
  output logic [N_ENC-1:0]  enc_underflow,
  // decompression: words from memory, values to the on-chip buffer
  input  logic [N_DEC-1:0]  dec_start,
  input  logic [NSYM_W-1:0] dec_nsym       [N_DEC],
  input  logic [WORD_W-1:0] dec_code_word  [N_DEC],
  input  logic [N_DEC-1:0]  dec_code_word_v,
  output logic [N_DEC-1:0]  dec_code_word_rdy,
  input  logic [WORD_W-1:0] dec_ofs_word   [N_DEC],
  input  logic [N_DEC-1:0]  dec_ofs_word_v,
  output logic [N_DEC-1:0]  dec_ofs_word_rdy,
  output val_t              dec_val        [N_DEC],
  output logic [N_DEC-1:0]  dec_val_v,
  output logic [N_DEC-1:0]  dec_busy,
  output logic [N_DEC-1:0]  dec_stall,
  output logic [N_DEC-1:0]  dec_sym_err
);
  for (genvar e = 0; e < N_ENC; e++) begin : g_enc
    symt_wr_t symt_e;
    pcnt_wr_t pcnt_e;
    always_comb begin
      symt_e    = symt_in;
      symt_e.en = symt_in.en & enc_tbl_sel[e];
      pcnt_e    = pcnt_in;
      pcnt_e.en = pcnt_in.en & enc_tbl_sel[e];
    end
    apack_enc_engine #(.WORD_W (WORD_W), .NSYM_W (NSYM_W)) u_eng (
      .clk, .rst_n,
      .symt_in (symt_e), .pcnt_in (pcnt_e),
      .in_val (enc_val[e]), .in_en (enc_en[e]), .done (enc_done[e]),
      .code_word (enc_code_word[e]), .code_word_v (enc_code_word_v[e]),
      .ofs_word (enc_ofs_word[e]),   .ofs_word_v (enc_ofs_word_v[e]),
      .nsym (enc_nsym[e]), .nsym_v (enc_nsym_v[e]),
      .stream_done (enc_stream_done[e]), .underflow_seen (enc_underflow[e])
    );
  end

  for (genvar d = 0; d < N_DEC; d++) begin : g_dec
    symt_wr_t symt_d;
    pcnt_wr_t pcnt_d;
    always_comb begin
      symt_d    = symt_in;
      symt_d.en = symt_in.en & dec_tbl_sel[d];
      pcnt_d    = pcnt_in;
      pcnt_d.en = pcnt_in.en & dec_tbl_sel[d];
    end
    apack_dec_engine #(.WORD_W (WORD_W), .NSYM_W (NSYM_W)) u_eng (
      .clk, .rst_n,
      .symt_in (symt_d), .pcnt_in (pcnt_d),
      .cmd_start (dec_start[d]), .cmd_nsym (dec_nsym[d]),
      .code_word (dec_code_word[d]), .code_word_v (dec_code_word_v[d]),
      .code_word_rdy (dec_code_word_rdy[d]),
      .ofs_word (dec_ofs_word[d]), .ofs_word_v (dec_ofs_word_v[d]),
      .ofs_word_rdy (dec_ofs_word_rdy[d]),
      .out_val (dec_val[d]), .out_valid (dec_val_v[d]),
      .busy (dec_busy[d]), .stall (dec_stall[d]), .sym_err (dec_sym_err[d])
    );
  end
endmodule
