// apack_dec_symbol_gen: "SYMBOL Gen" block of the APack decoder, with the
// offset-stream extraction ("OFS Adj").
//
// Holds the same 16-row symbol table as the encoder ({base, ob} per row). The
// one-hot SYMi selects base and ob; the value is base plus the next ob bits of
// the offset stream. The OFS register holds the next 8 offset-stream bits,
// most significant bit first, and ofs_in presents the 8 bits that follow it.
// The offset is the top ob bits of OFS; the new OFS is OFS shifted left by ob
// with the top ob bits of ofs_in shifted in, and ofs_r = ob tells the supplier
// how many bits were taken.
//
// Purely combinational apart from the table. Table writes use symt_in
// ({enable, row, {base, ob}}). Reset loads the uniform table used by the
// encoder. The split of the OFS window into register plus look-ahead input is
// this design's own choice; the paper gives the OFS register, the 8b OFS_in and
// the MSb-first order. ofs_r keeps the 4-bit width of the decoder's port list;
// with 3-bit ob fields its top bit is always 0.
module apack_dec_symbol_gen
  import apack_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  symt_wr_t    symt_in,
  input  onehot_t     symi,
  input  val_t        ofs_q,
  input  val_t        ofs_in,
  output val_t        out_val,
  output val_t        n_ofs,
  output logic [3:0]  ofs_r
);
  symt_entry_t tbl [NSYM];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NSYM; i++) tbl[i] <= '{base: val_t'(i * 16), ob: OB_W'(4)};
    end else if (symt_in.en) begin
      tbl[symt_in.idx] <= symt_in.entry;
    end
  end

  val_t            base_sel, offset;
  logic [OB_W-1:0] ob_sel;
  logic [2*VAL_W-1:0] win2;
  always_comb begin
    base_sel = '0;
    ob_sel   = '0;
    for (int i = 0; i < NSYM; i++) begin
      if (symi[i]) begin
        base_sel = base_sel | tbl[i].base;
        ob_sel   = ob_sel   | tbl[i].ob;
      end
    end
    win2    = {ofs_q, ofs_in};
    offset  = val_t'(ofs_q >> (VAL_W - 32'(ob_sel)));
    if (ob_sel == '0) offset = '0;
    out_val = base_sel + offset;
    n_ofs   = val_t'((win2 << ob_sel) >> VAL_W);
    ofs_r   = 4'(ob_sel);
  end
endmodule
