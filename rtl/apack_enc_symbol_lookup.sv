// apack_enc_symbol_lookup: "SYMBOL Lookup" block of the APack encoder.
//
// Holds the 16-row symbol table. Row i stores base[i] (the lowest value v_min
// of the row's value range, 8b) and ob[i] (the offset length, 3b). Rows are in
// ascending value order and row 0 starts at 0, so the ranges tile 0..255 and
// row i covers base[i] .. base[i+1]-1. One comparator per row tests
// IN >= base[i]; the matching row is the last one that passes. That row is
// given as the one-hot vector SYMi and selects base and ob; the offset is
// IN - base trimmed by a mask to ob bits.
//
// Interface: the table is written one row per cycle through symt_in
// ({enable, row, {base, ob}}, the printed 11+4+1 port). The lookup is
// combinational from in_val; table writes take effect the next cycle.
// Reset loads a uniform table (base = 16*i, ob = 4), this design's own choice.
//
// The paper words the compare as "the last in order whose base is larger than
// the input value" with base = R_max - 1, but also states that only v_min is
// stored and that the decoder's table is identical and adds base to the
// offset; this block stores v_min and selects the last row with base <= IN,
// which is what makes both readings produce the same row.
module apack_enc_symbol_lookup
  import apack_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  symt_wr_t        symt_in,
  input  val_t            in_val,
  output onehot_t         symi,
  output val_t            ofs_out,   // offset, LSB-aligned, ob bits valid
  output logic [OB_W-1:0] ob_out     // offset length 0..7
);
  symt_entry_t tbl [NSYM];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NSYM; i++) tbl[i] <= '{base: val_t'(i * 16), ob: OB_W'(4)};
    end else if (symt_in.en) begin
      tbl[symt_in.idx] <= symt_in.entry;
    end
  end

  onehot_t ge;
  val_t    base_sel;
  always_comb begin
    for (int i = 0; i < NSYM; i++) ge[i] = (in_val >= tbl[i].base);
    // last row whose base does not exceed the input
    symi = '0;
    for (int i = 0; i < NSYM; i++) begin
      if (ge[i] && (i == NSYM - 1 || !ge[(i + 1) % NSYM])) symi[i] = 1'b1;
    end
    base_sel = '0;
    ob_out   = '0;
    for (int i = 0; i < NSYM; i++) begin
      if (symi[i]) begin
        base_sel = base_sel | tbl[i].base;
        ob_out   = ob_out   | tbl[i].ob;
      end
    end
    ofs_out = (in_val - base_sel) & val_t'((9'd1 << ob_out) - 9'd1);
  end
endmodule
