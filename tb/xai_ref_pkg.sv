// xai_ref_pkg: golden model of the accelerator's arithmetic, for the testbenches.
//
// Works directly on a copy of the DRAM image with the same layer table as the hardware, but
// with plain loops instead of tiles: 3x3 same-padded convolutions and matrix products with
// 32-bit accumulation, arithmetic shift by FRAC and 16-bit saturation, ReLU and 2x2 max-pool
// (first maximum in raster order) in the forward pass; transposed / 180-degree rotated
// weights, the method's ReLU rule and unpooling in the backward pass, which starts from a
// one-hot 1.0 at the largest output.
package xai_ref_pkg;
  import xai_pkg::*;

  function automatic data_t q(input longint a, input int frac);
    longint s;
    s = longint'(int'(a)) >>> frac;   // 32-bit wrap as in the hardware, then shift
    if (s > 32767) return 16'sh7FFF;
    if (s < -32768) return 16'sh8000;
    return data_t'(s);
  endfunction

  function automatic data_t rd(ref logic [15:0] m [], input longint a);
    return data_t'(m[a]);
  endfunction

  // Store of one value with the layer's FP non-linearities handled by the caller.
  task automatic run(ref logic [15:0] m [], input net_t net, input addr_t rel,
                     input method_e method, input int frac, input bit bp,
                     output int pred);
    int nl = NET_LAYERS;
    // FP ReLU mask (pre-activation > 0) at pooled resolution, indexed like the hardware
    bit relu_m [int];
    int pidx   [int];
    for (int l = 0; l < nl; l++) begin
      layer_t L = net[l];
      int H = int'(L.h), W = int'(L.w), ci = int'(L.cin), co = int'(L.cout);
      if (L.kind == L_CONV) begin
        data_t o [] = new[co * H * W];
        for (int k = 0; k < co; k++)
          for (int y = 0; y < H; y++)
            for (int x = 0; x < W; x++) begin
              int acc = int'(rd(m, L.b_addr + k)) <<< frac;
              for (int c = 0; c < ci; c++)
                for (int kh = 0; kh < 3; kh++)
                  for (int kw = 0; kw < 3; kw++) begin
                    int yy = y + kh - 1, xx = x + kw - 1;
                    if (yy >= 0 && yy < H && xx >= 0 && xx < W)
                      acc += int'(rd(m, L.in_addr + c*H*W + yy*W + xx)) *
                             int'(rd(m, L.w_addr + ((k*ci + c)*9 + kh*3 + kw)));
                  end
              o[k*H*W + y*W + x] = q(acc, frac);
            end
        if (L.pool) begin
          int Hp = H/2, Wp = W/2;
          for (int k = 0; k < co; k++)
            for (int y = 0; y < Hp; y++)
              for (int x = 0; x < Wp; x++) begin
                data_t best = o[k*H*W + (2*y)*W + 2*x]; int bi = 0;
                int f = k*Hp*Wp + y*Wp + x;
                for (int i = 1; i < 4; i++) begin
                  data_t v = o[k*H*W + (2*y + i/2)*W + 2*x + i%2];
                  if (v > best) begin best = v; bi = i; end
                end
                pidx[int'(L.pool_base) + f] = bi;
                if (L.relu) begin
                  relu_m[int'(L.relu_base) + f] = (best > 0);
                  if (best < 0) best = 0;
                end
                m[L.out_addr + f] = best;
              end
        end else
          for (int f = 0; f < co*H*W; f++) begin
            data_t v = o[f];
            if (L.relu) begin
              relu_m[int'(L.relu_base) + f] = (v > 0);
              if (v < 0) v = 0;
            end
            m[L.out_addr + f] = v;
          end
      end else begin
        for (int j = 0; j < co; j++) begin
          int acc = int'(rd(m, L.b_addr + j)) <<< frac;
          data_t v;
          for (int i = 0; i < ci; i++)
            acc += int'(rd(m, L.in_addr + i)) * int'(rd(m, L.w_addr + j*ci + i));
          v = q(acc, frac);
          if (L.relu) begin
            relu_m[int'(L.relu_base) + j] = (v > 0);
            if (v < 0) v = 0;
          end
          m[L.out_addr + j] = v;
        end
      end
    end
    // prediction
    begin
      layer_t L = net[nl-1];
      data_t best = rd(m, L.out_addr);
      pred = 0;
      for (int j = 1; j < int'(L.cout); j++)
        if (rd(m, L.out_addr + j) > best) begin best = rd(m, L.out_addr + j); pred = j; end
    end
    if (!bp) return;
    // BP
    for (int l = nl - 1; l >= 0; l--) begin
      layer_t L = net[l];
      int H = int'(L.h), W = int'(L.w), ci = int'(L.cin), co = int'(L.cout);
      data_t g [];
      // gradient w.r.t. this layer's input, in the layer's input layout
      g = new[ci * H * W];
      if (L.kind == L_CONV) begin
        for (int c = 0; c < ci; c++)
          for (int y = 0; y < H; y++)
            for (int x = 0; x < W; x++) begin
              int acc = 0;
              for (int k = 0; k < co; k++)
                for (int kh = 0; kh < 3; kh++)
                  for (int kw = 0; kw < 3; kw++) begin
                    int yy = y + kh - 1, xx = x + kw - 1;
                    if (yy >= 0 && yy < H && xx >= 0 && xx < W)
                      acc += int'(rd(m, L.g_addr + k*H*W + yy*W + xx)) *
                             int'(rd(m, L.w_addr + ((k*ci + c)*9 + (2-kh)*3 + (2-kw))));
                  end
              g[c*H*W + y*W + x] = q(acc, frac);
            end
      end else begin
        for (int i = 0; i < ci; i++) begin
          int acc = 0;
          for (int j = 0; j < co; j++) begin
            int gj = (l == nl - 1) ? ((j == pred) ? (1 << frac) : 0)
                                   : int'(rd(m, L.g_addr + j));
            acc += gj * int'(rd(m, L.w_addr + j*ci + i));
          end
          g[i] = q(acc, frac);
        end
      end
      if (l == 0) begin
        foreach (g[f]) m[rel + f] = g[f];
      end else begin
        layer_t P = net[l-1];
        foreach (g[f]) begin
          data_t v;
          bit mk;
          int Wp, Hp, c, y, x, a, pi;
          v = g[f];
          if (P.relu) begin
            mk = relu_m[int'(P.relu_base) + f];
            case (method)
              SALIENCY:  if (!mk) v = 0;
              DECONVNET: if (v <= 0) v = 0;
              default:   if (!mk || v <= 0) v = 0;
            endcase
          end
          if (P.pool) begin
            Wp = int'(P.w)/2; Hp = int'(P.h)/2;
            c = f / (Hp*Wp); y = (f / Wp) % Hp; x = f % Wp;
            pi = pidx[int'(P.pool_base) + f];
            for (int i = 0; i < 4; i++) begin
              a = int'(P.g_addr) + c*int'(P.h)*int'(P.w) + (2*y + i/2)*int'(P.w) + 2*x + i%2;
              m[a] = (pi == i) ? v : 16'sd0;
            end
          end else
            m[P.g_addr + f] = v;
        end
      end
    end
  endtask
endpackage
