// tb_ref_pkg: bit-exact reference models used by the testbenches.
//
// Tensors are flat dynamic arrays of int indexed [(t*25 + v)*C + c]. The
// arithmetic repeats the fixed-point rules of the RTL (Q8.8 data, products
// summed exactly, arithmetic shift right by 8, saturation to 16 bits) but is
// written directly from the equations, loop by loop, without the RTL's
// schedule.
package tb_ref_pkg;

  localparam int J = 25;

  function automatic int sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int relu(input int v);
    return (v > 0) ? v : 0;
  endfunction

  // cavity pattern row r, bit j (same table as the design's package)
  function automatic bit cav(input int r, input int c);
    bit [7:0] rows [9] = '{8'b1001_0010, 8'b0100_0100, 8'b0010_1001,
                           8'b1001_0000, 8'b0100_1000, 8'b0010_0101,
                           8'b1000_0010, 8'b0101_0000, 8'b0010_0100};
    return rows[r][c % 8];
  endfunction

  // spatial conv: y(h,w,oc) = bn( sum_k sum_i sat((sum_p x(h,p,keep[i]) G_k(p,w)) >> 8) W_k(i,oc) >> 8 ) + shortcut
  function automatic void scm_ref(input int x[], input int T, input int IN, input int OUT,
                                  input int K, input int g[], input int w[], input int keep[],
                                  input int scale[], input int shift[], ref int y[]);
    y = new[T*J*OUT];
    for (int h = 0; h < T; h++)
      for (int wc = 0; wc < J; wc++) begin
        longint acc [];
        acc = new[OUT];
        for (int oc = 0; oc < OUT; oc++) acc[oc] = 0;
        for (int k = 0; k < 3; k++)
          for (int i = 0; i < K; i++) begin
            longint s;
            int yy;
            s = 0;
            for (int p = 0; p < J; p++)
              s += longint'(x[(h*J+p)*IN + keep[i]]) * g[(k*J+p)*J + wc];
            yy = sat(s >>> 8);
            for (int oc = 0; oc < OUT; oc++) acc[oc] += longint'(yy) * w[(k*K+i)*OUT + oc];
          end
        for (int oc = 0; oc < OUT; oc++) begin
          int conv, sc;
          longint bn;
          conv = sat(acc[oc] >>> 8);
          bn = ((longint'(conv) * scale[oc]) >>> 8) + shift[oc];
          sc = (IN == OUT) ? x[(h*J+wc)*IN + oc] : 0;
          y[(h*J+wc)*OUT + oc] = sat(bn + sc);
        end
      end
  endfunction

  // temporal conv with cavity masks; tw indexed ((j*G + g)*9 + r)*6 + q
  function automatic void tcm_ref(input int x[], input int T, input int C, input int KO,
                                  input int STR, input int tw[], input int keep[],
                                  input int scale[], input int shift[], ref int y[],
                                  output int TOUT);
    int G = C / 16;
    TOUT = (T + STR - 1) / STR;
    y = new[TOUT*J*C];
    for (int to = 0; to < TOUT; to++)
      for (int v = 0; v < J; v++) begin
        int t;
        t = to * STR;
        for (int c = 0; c < C; c++) y[(to*J+v)*C + c] = x[(t*J+v)*C + c];
        for (int j = 0; j < KO; j++) begin
          longint acc;
          int conv;
          longint bn;
          acc = 0;
          for (int g = 0; g < G; g++)
            for (int r = 0; r < 9; r++) begin
              int f, q;
              f = t + r - 4;
              q = 0;
              for (int cc = 0; cc < 16; cc++)
                if (cav(r, cc)) begin
                  if (f >= 0 && f < T)
                    acc += longint'(x[(f*J+v)*C + g*16 + cc]) * tw[((j*G + g)*9 + r)*6 + q];
                  q++;
                end
            end
          conv = sat(acc >>> 8);
          bn = ((longint'(conv) * scale[keep[j]]) >>> 8) + shift[keep[j]];
          y[(to*J+v)*C + keep[j]] = sat(bn + x[(t*J+v)*C + keep[j]]);
        end
      end
  endfunction

endpackage
