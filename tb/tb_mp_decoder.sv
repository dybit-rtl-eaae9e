// tb_mp_decoder: exhaustive self-check of the mixed-precision decoder.
//
// For every 8-bit word, every precision (8/4/2) and both signedness modes, the
// value of each decoded sub-word, (-1)^s * m/2^(P-1) * 2^e, must equal the
// reference value of the raw sub-word. It also checks the 4-bit unsigned value
// table (0, 0.125 ... 4, 8) and the worked example 11001010 -> exponent 001,
// mantissa 10101000.
module tb_mp_decoder;
  import dybit_pkg::*;
  import tb_ref_pkg::*;

  logic [7:0] x;
  prec_e      prec;
  logic       is_signed;
  dec_t       dec;
  int         checks = 0, failures = 0;

  mp_decoder dut (.x(x), .prec(prec), .is_signed(is_signed), .dec(dec));

  // Value table of 4-bit unsigned codes, in units of 1/8.
  int table8 [16] = '{0, 1, 2, 3, 4, 5, 6, 7, 8, 10, 12, 14, 16, 24, 32, 64};

  function automatic longint dec_val(dec_t d, prec_e p, int j);
    int     P, s, e, m;
    longint v;
    P = (p == PREC8) ? 8 : (p == PREC4) ? 4 : 2;
    case (p)
      PREC8:   begin s = d.s[3];       e = d.e[2:0];        m = d.m;            end
      PREC4:   begin s = d.s[2*j+1];   e = d.e[2*j +: 2];   m = d.m[4*j +: 4];  end
      default: begin s = d.s[j];       e = d.e[j];          m = d.m[2*j +: 2];  end
    endcase
    v = longint'(m) << (e + SCALE_BITS - (P - 1));
    return s ? -v : v;
  endfunction

  initial begin
    prec_e precs [3] = '{PREC8, PREC4, PREC2};
    for (int pi = 0; pi < 3; pi++) begin
      for (int sg = 0; sg < 2; sg++) begin
        for (int c = 0; c < 256; c++) begin
          int P;
          x = 8'(c); prec = precs[pi]; is_signed = sg[0];
          #1;
          P = 8 / (1 << pi);
          for (int j = 0; j < 8 / P; j++) begin
            longint r, g;
            r = dybit_val(subw(c, P, j), P, sg[0]);
            g = dec_val(dec, prec, j);
            checks++;
            if (r != g) begin
              failures++;
              if (failures < 10)
                $display("FAIL code=%02h P=%0d signed=%0d j=%0d ref=%0d got=%0d", c, P, sg, j, r, g);
            end
          end
        end
      end
    end
    // 4-bit unsigned table, both through the reference and the decoder
    for (int c = 0; c < 16; c++) begin
      x = {4'h0, 4'(c)}; prec = PREC4; is_signed = 1'b0;
      #1;
      checks += 2;
      if (dybit_val(c, 4, 1'b0) != longint'(table8[c]) << (SCALE_BITS - 3)) failures++;
      if (dec_val(dec, PREC4, 0) != longint'(table8[c]) << (SCALE_BITS - 3)) failures++;
    end
    // Worked example
    x = 8'b11001010; prec = PREC8; is_signed = 1'b0;
    #1;
    checks++;
    if (dec.e[2:0] != 3'b001 || dec.m != 8'b10101000) begin
      failures++;
      $display("FAIL example: exp=%b man=%b", dec.e[2:0], dec.m);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
