// filter_model.svh: reference model of the event filter for the testbenches.
//
// Independent of the RTL: it works on whole frames, not streams. A scene is a
// list of pixel events (x = row, y = column, pol 0 = ON, 1 = OFF) that fall
// in one window. From it the model builds the G-AER packets that carry it,
// the vertical and horizontal coincidence frames, the 8x8 max-pooled frames
// packed into bytes (first pooled pixel in bit 0), the Huffman-coded
// payloads (codewords MSB first, zero padding per channel) and the complete
// output packet: "SAIC", horizontal payload, vertical payload, Fletcher-32
// of the payload (16-bit words, first byte high, sums mod 65535, sum2 first).
// Included inside a testbench module body.

  typedef struct {
    int x;
    int y;
    int pol;
  } pix_t;

  typedef byte unsigned bytes_t[$];

  // G-AER packets for a scene: per column, a column packet followed by one
  // group packet per (row group, polarity) that has pixels.
  function automatic void gaer_packets(input pix_t s[$], input int H, input int W,
                                       output logic [31:0] pk[$]);
    int G;
    logic [7:0] m[];
    G = (H + 7) / 8;
    m = new[W * G * 2];
    foreach (m[i]) m[i] = '0;
    foreach (s[i]) m[(s[i].y * G + s[i].x / 8) * 2 + s[i].pol][s[i].x % 8] = 1'b1;
    pk = {};
    for (int y = 0; y < W; y++) begin
      bit col_sent;
      col_sent = 0;
      for (int g = 0; g < G; g++)
        for (int p = 0; p < 2; p++)
          if (m[(y * G + g) * 2 + p] != 0) begin
            if (!col_sent) pk.push_back({2'b01, 21'd0, 9'(y)});
            col_sent = 1;
            pk.push_back({2'b10, 13'd0, 1'(p), 2'b00, 6'(g), m[(y * G + g) * 2 + p]});
          end
    end
  endfunction

  // coincidence frames (index x*W + y); ch 0 vertical, 1 horizontal
  function automatic void coincide(input pix_t s[$], input int H, input int W,
                                   output bit fv[], output bit fh[]);
    bit img[];
    img = new[H * W * 2];
    fv = new[H * W];
    fh = new[H * W];
    foreach (s[i]) img[(s[i].x * W + s[i].y) * 2 + s[i].pol] = 1;
    for (int x = 0; x < H; x++)
      for (int y = 0; y < W; y++)
        for (int p = 0; p < 2; p++) begin
          if (x > 0 && img[(x * W + y) * 2 + p] && img[((x - 1) * W + y) * 2 + p]) fv[x * W + y] = 1;
          if (y > 0 && img[(x * W + y) * 2 + p] && img[(x * W + y - 1) * 2 + p]) fh[x * W + y] = 1;
        end
  endfunction

  function automatic int popcount(input bit f[]);
    int n;
    n = 0;
    foreach (f[i]) n += f[i];
    return n;
  endfunction

  // 8x8 max pooling, raster order of the pooled image, packed LSB first
  function automatic bytes_t pool_bytes(input bit f[], input int H, input int W);
    bytes_t b;
    byte unsigned acc;
    int n;
    acc = 0; n = 0;
    for (int pr = 0; pr < H / 8; pr++)
      for (int pc = 0; pc < W / 8; pc++) begin
        bit any;
        any = 0;
        for (int r = 0; r < 8; r++)
          for (int c = 0; c < 8; c++) any |= f[(pr * 8 + r) * W + pc * 8 + c];
        acc[n] = any;
        n++;
        if (n == 8) begin b.push_back(acc); acc = 0; n = 0; end
      end
    if (n != 0) b.push_back(acc);
    return b;
  endfunction

  function automatic bytes_t huffman(input bytes_t sym, input int len[256], input int code[256]);
    bytes_t b;
    bit bits[$];
    foreach (sym[i])
      for (int k = len[sym[i]] - 1; k >= 0; k--) bits.push_back(code[sym[i]][k]);
    while (bits.size() % 8 != 0) bits.push_back(0);
    for (int i = 0; i < bits.size(); i += 8) begin
      byte unsigned v;
      for (int k = 0; k < 8; k++) v[7-k] = bits[i + k];
      b.push_back(v);
    end
    return b;
  endfunction

  function automatic void default_table(output int len[256], output int code[256]);
    for (int s = 0; s < 256; s++) begin
      len[s]  = (s == 0) ? 1 : 9;
      code[s] = (s == 0) ? 0 : 256 + s;
    end
  endfunction

  function automatic bytes_t packet(input bytes_t h, input bytes_t v);
    bytes_t pay, pk;
    int unsigned s1, s2;
    pay = {h, v};
    s1 = 0; s2 = 0;
    for (int i = 0; i < pay.size(); i += 2) begin
      s1 = (s1 + 256 * pay[i] + ((i + 1 < pay.size()) ? pay[i + 1] : 0)) % 65535;
      s2 = (s2 + s1) % 65535;
    end
    pk = {8'h53, 8'h41, 8'h49, 8'h43};
    pk = {pk, pay};
    pk.push_back(8'(s2 >> 8)); pk.push_back(8'(s2));
    pk.push_back(8'(s1 >> 8)); pk.push_back(8'(s1));
    return pk;
  endfunction

  // a scene of random edge segments: horizontal and vertical runs of one
  // polarity, which is what a moving outline looks like to the filter
  function automatic void scene(input int H, input int W, input int nseg, input int maxlen,
                                output pix_t s[$]);
    s = {};
    for (int k = 0; k < nseg; k++) begin
      int x, y, len, p;
      bit vert;
      x = $urandom_range(H - 1); y = $urandom_range(W - 1);
      len = $urandom_range(2, maxlen); p = $urandom_range(1); vert = k % 2;
      for (int i = 0; i < len; i++) begin
        pix_t e;
        e.x = vert ? x + i : x; e.y = vert ? y : y + i; e.pol = p;
        if (e.x < H && e.y < W) s.push_back(e);
      end
    end
  endfunction

