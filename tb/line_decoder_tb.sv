// line_decoder_tb: exhaustive check of the array line decoders for a 3x3 array and a 4x2 array.
// For every operation, compute mode, row, column, FeFET select, activation vector and column
// mask, the expected rail of every line is worked out from the write/compute bias tables
// (program: selected line +4 V, all BL/BuL 0 V; erase: selected line -4 V, selected row BuL 0 V,
// other rows -2 V; partial erase: the same with the selected BuL at the swept level; compute:
// selected BL grounded, other BLs Hi-Z, word lines per mode).
module line_decoder_tb;
  import tdimc_pkg::*;
  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run33();
    run42();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------- 3 rows x 3 columns ----------
  line_op_e op; mode_e mode; logic [1:0] row, col; fe_sel_e fe; logic [2:0] x, mask;
  wl_lvl_e wl[3], wlb[3]; bl_lvl_e bl[3]; bul_lvl_e bul[3];
  line_decoder #(.N_ROWS(3), .N_COLS(3)) dut (
    .op, .mode, .row, .col, .fe, .x, .col_mask(mask), .wl_lvl(wl), .wlb_lvl(wlb), .bl_lvl(bl), .bul_lvl(bul));

  // ---------- 4 rows x 2 columns ----------
  line_op_e op2; mode_e mode2; logic [1:0] row2; logic col2; fe_sel_e fe2; logic [1:0] x2, mask2;
  wl_lvl_e wl2[2], wlb2[2]; bl_lvl_e bl2[4]; bul_lvl_e bul2[4];
  line_decoder #(.N_ROWS(4), .N_COLS(2)) dut2 (
    .op(op2), .mode(mode2), .row(row2), .col(col2), .fe(fe2), .x(x2), .col_mask(mask2),
    .wl_lvl(wl2), .wlb_lvl(wlb2), .bl_lvl(bl2), .bul_lvl(bul2));

  // Expected rails for one line, written from the bias tables.
  function automatic void expect_col(line_op_e o, mode_e md, int c, int cs, fe_sel_e f, bit xc, bit mc,
                                     output wl_lvl_e ew, output wl_lvl_e ewb);
    ew = WL_GND; ewb = WL_GND;
    if (o == LOP_PROGRAM && c == cs) begin
      if (f == FE_MAIN) ew = WL_VPGM; else ewb = WL_VPGM;
    end
    if ((o == LOP_ERASE || o == LOP_MLS) && c == cs) begin
      if (f == FE_MAIN) ew = WL_VERS; else ewb = WL_VERS;
    end
    if (o == LOP_COMPUTE) begin
      if (md == MODE_XOR_MAC) begin ew = xc ? WL_VH : WL_GND; ewb = xc ? WL_GND : WL_VH; end
      if (md == MODE_AND_MAC) ew = xc ? WL_VH : WL_GND;
      if (md == MODE_LOGIC_AND || md == MODE_LOGIC_OR) ew = mc ? WL_VH : WL_GND;
      if (md == MODE_FULL_ADD) ew = (mc && xc) ? WL_VH : WL_GND;
      if (md == MODE_CAL_READ && c == cs) begin ew = WL_VH; ewb = WL_VH; end
    end
  endfunction

  function automatic void expect_row(line_op_e o, int r, int rs, output bl_lvl_e eb, output bul_lvl_e eu);
    eb = BL_HIZ; eu = BUL_GND;
    if (o == LOP_PROGRAM) eb = BL_GND;
    if (o == LOP_ERASE || o == LOP_MLS) begin
      eb = BL_GND;
      eu = (r != rs) ? BUL_INH : (o == LOP_MLS ? BUL_MLS : BUL_GND);
    end
    if (o == LOP_COMPUTE && r == rs) eb = BL_GND;
  endfunction

  task automatic run33();
    line_op_e ops[5] = '{LOP_IDLE, LOP_PROGRAM, LOP_ERASE, LOP_MLS, LOP_COMPUTE};
    mode_e modes[6] = '{MODE_XOR_MAC, MODE_AND_MAC, MODE_LOGIC_AND, MODE_LOGIC_OR, MODE_FULL_ADD, MODE_CAL_READ};
    wl_lvl_e ew, ewb; bl_lvl_e eb; bul_lvl_e eu;
    foreach (ops[oi]) foreach (modes[mi])
      for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) for (int f = 0; f < 2; f++)
        for (int xv = 0; xv < 8; xv++) for (int mv = 0; mv < 8; mv++) begin
          op = ops[oi]; mode = modes[mi]; row = 2'(r); col = 2'(c); fe = fe_sel_e'(f);
          x = 3'(xv); mask = 3'(mv);
          #1;
          for (int j = 0; j < 3; j++) begin
            expect_col(op, mode, j, c, fe, x[j], mask[j], ew, ewb);
            checks++;
            if (wl[j] != ew || wlb[j] != ewb) begin
              failures++;
              $display("3x3 op=%s mode=%s r%0d c%0d fe%0d x=%b m=%b col%0d: wl=%s wlb=%s exp %s %s",
                       op.name(), mode.name(), r, c, f, x, mask, j, wl[j].name(), wlb[j].name(), ew.name(), ewb.name());
            end
            expect_row(op, j, r, eb, eu);
            checks++;
            if (bl[j] != eb || bul[j] != eu) begin
              failures++;
              $display("3x3 op=%s r%0d row%0d: bl=%s bul=%s exp %s %s", op.name(), r, j, bl[j].name(), bul[j].name(), eb.name(), eu.name());
            end
          end
        end
  endtask

  task automatic run42();
    wl_lvl_e ew, ewb; bl_lvl_e eb; bul_lvl_e eu;
    for (int t = 0; t < 3000; t++) begin
      op2 = line_op_e'($urandom_range(4)); mode2 = mode_e'($urandom_range(5));
      row2 = 2'($urandom); col2 = 1'($urandom); fe2 = fe_sel_e'($urandom_range(1));
      x2 = 2'($urandom); mask2 = 2'($urandom);
      #1;
      for (int j = 0; j < 2; j++) begin
        expect_col(op2, mode2, j, int'(col2), fe2, x2[j], mask2[j], ew, ewb);
        checks++;
        if (wl2[j] != ew || wlb2[j] != ewb) begin failures++; $display("4x2 col mismatch"); end
      end
      for (int j = 0; j < 4; j++) begin
        expect_row(op2, j, int'(row2), eb, eu);
        checks++;
        if (bl2[j] != eb || bul2[j] != eu) begin failures++; $display("4x2 row mismatch"); end
      end
    end
  endtask
endmodule
