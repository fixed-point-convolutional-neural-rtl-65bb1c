// lwdd_ref.svh: behavioural reference model of the LWDD fixed-point network,
// written independently of the RTL, for the testbenches. Include it inside a
// testbench module. Arrays are flat, index ch*size*size + y*size + x.
// Format: DW-bit signed words, FRAC = DW-1 fraction bits; every layer sums
// products at full precision, rounds once (half up) and saturates.

localparam int RDW = 12;
localparam int RFRAC = RDW - 1;

int ref_ovf_count;

function automatic int ref_round_sat(input longint a);
  longint r;
  r = (a + (longint'(1) << (RFRAC - 1))) >>> RFRAC;
  if (r > (1 << (RDW - 1)) - 1) begin ref_ovf_count++; return (1 << (RDW - 1)) - 1; end
  if (r < -(1 << (RDW - 1)))    begin ref_ovf_count++; return -(1 << (RDW - 1)); end
  return int'(r);
endfunction

// 3x3 same convolution, no bias, optional ReLU.
// wts index: (oc*ic_n + ic)*9 + ky*3 + kx
function automatic void ref_conv(input int inp[], input int wts[], input int size,
                                 input int ic_n, input int oc_n, input bit relu,
                                 output int outp[]);
  outp = new[oc_n * size * size];
  for (int oc = 0; oc < oc_n; oc++)
    for (int y = 0; y < size; y++)
      for (int x = 0; x < size; x++) begin
        longint acc = 0;
        int v;
        for (int ic = 0; ic < ic_n; ic++)
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++) begin
              int yy = y + ky - 1, xx = x + kx - 1;
              if (yy >= 0 && yy < size && xx >= 0 && xx < size)
                acc += longint'(wts[(oc*ic_n + ic)*9 + ky*3 + kx]) *
                       longint'(inp[ic*size*size + yy*size + xx]);
            end
        v = ref_round_sat(acc);
        if (relu && v < 0) v = 0;
        outp[oc*size*size + y*size + x] = v;
      end
endfunction

function automatic void ref_pool(input int inp[], input int size, input int ch,
                                 output int outp[]);
  int o = size / 2;
  outp = new[ch * o * o];
  for (int c = 0; c < ch; c++)
    for (int y = 0; y < o; y++)
      for (int x = 0; x < o; x++) begin
        int m = inp[c*size*size + 2*y*size + 2*x];
        for (int d = 1; d < 4; d++) begin
          int v = inp[c*size*size + (2*y + d/2)*size + 2*x + d%2];
          if (v > m) m = v;
        end
        outp[c*o*o + y*o + x] = m;
      end
endfunction

function automatic void ref_gmp(input int inp[], input int size, input int ch,
                                output int outp[]);
  outp = new[ch];
  for (int c = 0; c < ch; c++) begin
    outp[c] = inp[c*size*size];
    for (int i = 1; i < size*size; i++)
      if (inp[c*size*size + i] > outp[c]) outp[c] = inp[c*size*size + i];
  end
endfunction

// wts index: o*n_in + i
function automatic void ref_dense(input int inp[], input int wts[], input int n_in,
                                  input int n_out, output int outp[]);
  outp = new[n_out];
  for (int o = 0; o < n_out; o++) begin
    longint acc = 0;
    for (int i = 0; i < n_in; i++) acc += longint'(wts[o*n_in + i]) * longint'(inp[i]);
    outp[o] = ref_round_sat(acc);
  end
endfunction

// Whole network. img: 784 8-bit pixels; w: all 4676 weights.
function automatic void ref_lwdd(input int img[], input int w[], output int logits[],
                                 output int cls);
  int a[], b[], ws[];
  a = new[784];
  for (int i = 0; i < 784; i++) a[i] = img[i] << (RFRAC - 8);
  ws = new[36];   for (int i = 0; i < 36; i++)   ws[i] = w[0 + i];    ref_conv(a, ws, 28, 1, 4, 1, b);
  ws = new[144];  for (int i = 0; i < 144; i++)  ws[i] = w[36 + i];   ref_conv(b, ws, 28, 4, 4, 1, a);
  ref_pool(a, 28, 4, b);
  ws = new[288];  for (int i = 0; i < 288; i++)  ws[i] = w[180 + i];  ref_conv(b, ws, 14, 4, 8, 1, a);
  ws = new[576];  for (int i = 0; i < 576; i++)  ws[i] = w[468 + i];  ref_conv(a, ws, 14, 8, 8, 1, b);
  ref_pool(b, 14, 8, a);
  ws = new[1152]; for (int i = 0; i < 1152; i++) ws[i] = w[1044 + i]; ref_conv(a, ws, 7, 8, 16, 1, b);
  ws = new[2304]; for (int i = 0; i < 2304; i++) ws[i] = w[2196 + i]; ref_conv(b, ws, 7, 16, 16, 1, a);
  ref_gmp(a, 7, 16, b);
  ws = new[176];  for (int i = 0; i < 176; i++)  ws[i] = w[4500 + i]; ref_dense(b, ws, 16, 11, logits);
  cls = 0;
  for (int i = 1; i < 11; i++) if (logits[i] > logits[cls]) cls = i;
endfunction
