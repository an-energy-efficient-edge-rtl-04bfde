// tb_lfau: random ray tags against an independent model of lag-first selection.
// The model forms, for each valid ray, a key from the three tag components taken
// in ADOrder priority (components of negative-direction axes inverted), picks the
// smallest key (first ray on ties) and selects every valid ray with the same tag.
module tb_lfau;
  import edr_pkg::*;
  localparam int TW = 3;
  logic [2:0] adorder, dir_neg;
  logic [NRAY-1:0] valid, sel_mask;
  logic [NRAY-1:0][2:0][TW-1:0] tag;
  logic [2:0][TW-1:0] sel_tag;
  logic [2:0][NRAY-1:0] en;
  int checks = 0, failures = 0;

  lfau #(.TAG_W(TW)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pr [6][3] = '{'{0,1,2}, '{0,2,1}, '{1,0,2}, '{1,2,0}, '{2,0,1}, '{2,1,0}};
    for (int it = 0; it < 3000; it++) begin
      int best, bi, key;
      logic [NRAY-1:0] em;
      adorder = 3'($urandom_range(0, 5));
      dir_neg = 3'($urandom);
      valid   = NRAY'($urandom);
      if (valid == 0) valid = 4'b0100;
      for (int r = 0; r < NRAY; r++)
        for (int a = 0; a < 3; a++)
          tag[r][a] = ($urandom_range(0, 3) == 0) ? tag[0][a] : TW'($urandom);
      #1;
      best = 1 << 30; bi = 0;
      for (int r = 0; r < NRAY; r++) if (valid[r]) begin
        key = 0;
        for (int s = 0; s < 3; s++) begin
          int c;
          c = tag[r][pr[adorder][s]];
          if (dir_neg[pr[adorder][s]]) c = (1 << TW) - 1 - c;
          key = key * (1 << TW) + c;
        end
        if (key < best) begin best = key; bi = r; end
      end
      for (int r = 0; r < NRAY; r++) em[r] = valid[r] && tag[r] == tag[bi];
      checks++;
      if (sel_tag != tag[bi] || sel_mask != em) begin
        failures++;
        if (failures < 5) $display("FAIL it %0d: ado %0d neg %b valid %b got %h/%b exp %h/%b",
                                   it, adorder, dir_neg, valid, sel_tag, sel_mask, tag[bi], em);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
