// nk_tb_pkg: job generator and reference model shared by the N-EUREKA testbenches.
//
// make_job() draws a random convolution layer (activations, signed weights of the chosen
// precision, per-channel scale/shift/bias), lays it out the way the accelerator expects and
// computes the expected output bytes with plain integer arithmetic:
//   L1 image   l1[address]       input tensor (HWC), normalization parameters
//   weights    wl[line]          256-bit weight words in the streamer's order
//   expected   exp_out[address]  output tensor (HWC, 8-bit requantized or 32-bit raw)
// reg_value() gives the value of each job register for the configuration port.
package nk_tb_pkg;
  import neureka_pkg::*;

  typedef struct {
    int mode, qw, out32, pe;
    int n_kin, n_kout, nh, nw;
    int C, K, Kt, H, W;
    int in_base, in_d0, in_d1, in_s_k, in_s_h, in_s_w;
    int out_base, out_d0, out_d1, out_s_k, out_s_h, out_s_w;
    int norm_base, w_base, n_lines;
  } job_cfg_t;

  byte unsigned l1 [int];
  logic [255:0] wl [int];
  byte unsigned exp_out [int];

  function automatic int clip8(longint v);
    if (v < 0) return 0;
    if (v > 255) return 255;
    return int'(v);
  endfunction

  function automatic job_cfg_t make_job(int mode, int qw, int out32, int n_kin, int n_kout,
                                        int nh, int nw, int pe, int in_base, int out_base,
                                        int norm_base, int w_base);
    job_cfg_t j;
    int chunk, kin_eff, words, hmax;
    int inp [];
    int wt [];
    int scale [], shift [], bias [];
    j.mode = mode; j.qw = qw; j.out32 = out32; j.pe = pe;
    j.n_kin = n_kin; j.n_kout = n_kout; j.nh = nh; j.nw = nw;
    chunk   = (mode == 1) ? 32 : 28;
    kin_eff = (mode == 2) ? 1 : n_kin;
    j.C  = (mode == 2) ? n_kout * 28 : n_kin * chunk;
    j.Kt = (mode == 2) ? 28 : 32;
    j.K  = n_kout * j.Kt;
    j.H  = nh * pe + 2;
    j.W  = nw * pe + 2;
    j.in_base = in_base; j.in_d0 = j.C; j.in_d1 = j.W * j.C;
    j.in_s_k = chunk; j.in_s_h = pe * j.in_d1; j.in_s_w = pe * j.C;
    j.out_base = out_base;
    j.out_d0 = (out32 ? 4 : 1) * j.K;
    j.out_d1 = nw * pe * j.out_d0;
    j.out_s_k = (out32 ? 4 : 1) * j.Kt;
    j.out_s_h = pe * j.out_d1;
    j.out_s_w = pe * j.out_d0;
    j.norm_base = norm_base; j.w_base = w_base;
    words = (mode == 1) ? 32 : (mode == 2) ? qw : 32 * qw;
    j.n_lines = n_kout * kin_eff * words;
    hmax = 1 << (qw - 1);

    l1.delete(); wl.delete(); exp_out.delete();
    inp = new[j.H * j.W * j.C];
    wt  = new[j.K * j.C * 9];
    scale = new[j.K]; shift = new[j.K]; bias = new[j.K];
    foreach (inp[i]) begin
      inp[i] = $urandom_range(0, 255);
      l1[in_base + i] = 8'(inp[i]);
    end
    foreach (wt[i]) wt[i] = $urandom_range(0, 2 * hmax - 1) - hmax;
    for (int k = 0; k < j.K; k++) begin
      scale[k] = $urandom_range(1, 15);
      shift[k] = $urandom_range(8, 13);
      bias[k]  = $urandom_range(0, 4000) - 2000;
    end
    // normalization parameters
    for (int ko = 0; ko < n_kout; ko++)
      for (int kk = 0; kk < j.Kt; kk++) begin
        int k, a;
        k = ko * j.Kt + kk;
        a = norm_base + ko * NK_NORM_BYTES;
        l1[a + kk] = 8'(scale[k]);
        l1[a + 32 + kk] = 8'(shift[k]);
        for (int b = 0; b < 4; b++) l1[a + 64 + 4 * kk + b] = 8'(bias[k] >> (8 * b));
      end
    // weight lines
    for (int ko = 0; ko < n_kout; ko++)
      for (int ki = 0; ki < kin_eff; ki++)
        for (int n = 0; n < words; n++) begin
          logic [255:0] line;
          line = '0;
          for (int c = 0; c < 32; c++)
            for (int r = 0; r < 9; r++) begin
              int k, cin, b, fs, w;
              if (mode == 0) begin
                if (c >= 28 || r >= 9) continue;
                k = ko * 32 + n / qw; b = n % qw; cin = ki * 28 + c; fs = r;
                w = wt[(k * j.C + cin) * 9 + fs];
                line[c * 9 + r] = w[b];
              end else if (mode == 1) begin
                if (r >= qw) continue;
                k = ko * 32 + n; b = r; cin = ki * 32 + c;
                w = wt[(k * j.C + cin) * 9 + 4];
                line[c * 8 + r] = w[b];
              end else begin
                if (c >= 28) continue;
                k = ko * 28 + c; b = n; fs = r;
                w = wt[(k * j.C + k) * 9 + fs];
                line[c * 9 + r] = w[b];
              end
            end
          wl[w_base + (ko * kin_eff + ki) * words + n] = line;
        end
    // expected outputs
    for (int ho = 0; ho < nh * pe; ho++)
      for (int wo = 0; wo < nw * pe; wo++)
        for (int k = 0; k < j.K; k++) begin
          longint acc;
          int a;
          acc = 0;
          if (mode == 0) begin
            for (int c = 0; c < j.C; c++) for (int fs = 0; fs < 9; fs++)
              acc += longint'(inp[((ho + fs / 3) * j.W + wo + fs % 3) * j.C + c]) * wt[(k * j.C + c) * 9 + fs];
          end else if (mode == 1) begin
            for (int c = 0; c < j.C; c++)
              acc += longint'(inp[((ho + 1) * j.W + wo + 1) * j.C + c]) * wt[(k * j.C + c) * 9 + 4];
          end else begin
            for (int fs = 0; fs < 9; fs++)
              acc += longint'(inp[((ho + fs / 3) * j.W + wo + fs % 3) * j.C + k]) * wt[(k * j.C + k) * 9 + fs];
          end
          a = out_base + (k / j.Kt) * j.out_s_k + ho * j.out_d1 + wo * j.out_d0;
          if (out32) begin
            for (int b = 0; b < 4; b++) exp_out[a + 4 * (k % j.Kt) + b] = 8'(acc >> (8 * b));
          end else begin
            exp_out[a + (k % j.Kt)] = 8'(clip8((acc * scale[k] + bias[k]) >>> shift[k]));
          end
        end
    return j;
  endfunction

  function automatic logic [31:0] reg_value(job_cfg_t j, int idx);
    case (idx)
      REG_MODE:      return 32'(j.mode) | (32'(j.qw) << 4) | (32'(j.out32) << 8);
      REG_W_BASE:    return 32'(j.w_base);
      REG_IN_BASE:   return 32'(j.in_base);
      REG_IN_D0:     return 32'(j.in_d0);
      REG_IN_D1:     return 32'(j.in_d1);
      REG_IN_S_K:    return 32'(j.in_s_k);
      REG_IN_S_H:    return 32'(j.in_s_h);
      REG_IN_S_W:    return 32'(j.in_s_w);
      REG_OUT_BASE:  return 32'(j.out_base);
      REG_OUT_D0:    return 32'(j.out_d0);
      REG_OUT_D1:    return 32'(j.out_d1);
      REG_OUT_S_K:   return 32'(j.out_s_k);
      REG_OUT_S_H:   return 32'(j.out_s_h);
      REG_OUT_S_W:   return 32'(j.out_s_w);
      REG_NORM_BASE: return 32'(j.norm_base);
      REG_TILES:     return 32'(j.n_kin) | (32'(j.nh) << 8) | (32'(j.nw) << 16) | (32'(j.n_kout) << 24);
      default:       return 32'd0;
    endcase
  endfunction
endpackage
