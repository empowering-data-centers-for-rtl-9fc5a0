// tb_mpe_gcm: checks the AES-256-GCM engine against reference vectors.
//
// The vectors (key, IV, AAD, payload, ciphertext, tag) were computed with an
// independent AES-GCM implementation; the first three are test cases 13, 14
// and 16 of the GCM specification (AES-256). Each is run twice: encrypting
// (output must be the ciphertext) and decrypting (output must be the
// payload, tag the same). The output side sees random back-pressure. Also
// checked: a start with an unallocated key is refused, the setup latency
// (42 cycles) and the payload block latency (15 cycles) without
// back-pressure, and that a block's bytes beyond its length come out zero.
module tb_mpe_gcm;
  logic clk = 0, rst_n = 0;
  logic start, decrypt_i, key_valid_i, start_err, busy;
  logic [95:0] iv_i; logic [255:0] key_i;
  logic in_valid, in_ready, in_aad, in_last; logic [127:0] in_data; logic [4:0] in_bytes;
  logic out_valid, out_ready; logic [127:0] out_data; logic [4:0] out_bytes;
  logic tag_valid; logic [127:0] tag_o;
  int checks = 0, failures = 0;
  bit bp = 0;

  mpe_gcm dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s @%0t", m, $time); end
  endtask

  localparam int NVEC = 8;
  task automatic get_vec(input int i, output logic [255:0] key, output logic [95:0] iv, output int alen, output int plen,
                        output logic [255:0] aad, output logic [639:0] pt, output logic [639:0] ct, output logic [127:0] tag);
    unique case (i)
      0: begin key = 256'h0000000000000000000000000000000000000000000000000000000000000000; iv = 96'h000000000000000000000000; alen = 0; plen = 0;
         aad = 256'h0000000000000000000000000000000000000000000000000000000000000000;
         pt = 640'h0000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000;
         ct = 640'h0000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000;
         tag = 128'h530f8afbc74536b9a963b4f1c4cb738b; end
      1: begin key = 256'h0000000000000000000000000000000000000000000000000000000000000000; iv = 96'h000000000000000000000000; alen = 0; plen = 16;
         aad = 256'h0000000000000000000000000000000000000000000000000000000000000000;
         pt = 640'h0000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000;
         ct = 640'hcea7403d4d606b6e074ec5d3baf39d1800000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000;
         tag = 128'hd0d1c8a799996bf0265b98b5d48ab919; end
      2: begin key = 256'hfeffe9928665731c6d6a8f9467308308feffe9928665731c6d6a8f9467308308; iv = 96'hcafebabefacedbaddecaf888; alen = 20; plen = 60;
         aad = 256'hfeedfacedeadbeeffeedfacedeadbeefabaddad2000000000000000000000000;
         pt = 640'hd9313225f88406e5a55909c5aff5269a86a7a9531534f7da2e4c303d8a318a721c3c0c95956809532fcf0e2449a6b525b16aedf5aa0de657ba637b390000000000000000000000000000000000000000;
         ct = 640'h522dc1f099567d07f47f37a32a84427d643a8cdcbfe5c0c97598a2bd2555d1aa8cb08e48590dbb3da7b08b1056828838c5f61e6393ba7a0abcc9f6620000000000000000000000000000000000000000;
         tag = 128'h76fc6ece0f4e1768cddf8853bb2d551b; end
      3: begin key = 256'h52f22665a60c12d289185d950ee8813609166f6b113d178d6c0fd3901ff239a1; iv = 96'ha095f20f9395650cf9380b8e; alen = 7; plen = 80;
         aad = 256'h4a6b248a1e924e00000000000000000000000000000000000000000000000000;
         pt = 640'hd0ae2e1a9492a3305f188cb610900f9e347fae886dc6507795ec745c4c3fcb2eb2c73e14934c867ee057ba72499bfa121e836b2ac15726ee7d6b0af6ab13c38e92cae0d15057b159987f94cc7411d717;
         ct = 640'h3b253c15ee0f314f44d7d764a637446287f741b314de0f21078a70afcd3ac7803fd9a82179b2b0abe0e40c2c3e699509668cdb703601a581b8c8a4c05399a1a4dd69776b56eb0dd234fe693262037e64;
         tag = 128'h7c35257d380408bf3dc8b528d24371c3; end
      4: begin key = 256'hf14579b2aa100fbbb34fa593feaed27248b762e3ab5805f0765a2b9c1d7e0f37; iv = 96'hc44921bd3f6564eadf7f142a; alen = 29; plen = 80;
         aad = 256'h668c47e223d16edd8c47b46afc5baee261f53b26152d263ba83b037cd4000000;
         pt = 640'h2e434801256b885e9c9051f320b0db83f39ea7adbd0d74e6dec7f3dfaecc8f646566641a7ba2660f3011fc3570291c57990d1a0091268919f25d9d0612df359d6026a240f4589a5d791f1dd97cfefa77;
         ct = 640'he2ebc2c14b65a6c588409574650bda744b5526a21fab5ffcb393549bae627cfe986bfcb8f042c548dccb47d3798d23c28dde526a865da41e5be44124ad5fad30f4dad2f82b8a7219ac573d9ea6fcd815;
         tag = 128'hebe9271a3ec1cd975bcc96c195c3f838; end
      5: begin key = 256'h7a7b4f15241abf57bd437ad4b129840534f3f3875c25b08bea06c2874cfaa4dd; iv = 96'h17b2d842845de82a5bc53988; alen = 16; plen = 16;
         aad = 256'ha2399ccfc9fcc2da31ce3dd166bdcd3a00000000000000000000000000000000;
         pt = 640'h847e5bbb07fd07ca47784231b19af45800000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000;
         ct = 640'h8e1a8450dd3f6723113b0d04ce3be6cc00000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000;
         tag = 128'he63284f1032ada935dbc9bfd3b23d446; end
      6: begin key = 256'h72ceefb9fc59f4f95d14381a3a783256347b9ffce69cd7007ae8a758cca415d5; iv = 96'ha91ee863c8b6c0337ae32d6f; alen = 16; plen = 1;
         aad = 256'h16cdf2f8b8657666bef215b9282bfe2000000000000000000000000000000000;
         pt = 640'h2600000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000;
         ct = 640'h6f00000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000;
         tag = 128'he70355a7de73c6341ccff20ddeb81de4; end
      7: begin key = 256'h97e777cea7259cd398fa79a8ef59278c8c210503ccf8b9a61a86bfef236ffcdf; iv = 96'h31d3df360740364a803dc396; alen = 16; plen = 64;
         aad = 256'h428b6bd5210fe8bd5ae575a995d0e78400000000000000000000000000000000;
         pt = 640'hd3eae080218826868204df70c62e9b01c6cc262c24799eb91e8e0f53ae84878e7bc8c61be28f0e3f30460ac51981738f07c2e4e91071539cf9819b8333b1467300000000000000000000000000000000;
         ct = 640'h4b91e3c08f0f383b11791e0ab1c7614ce810adffd7e6555791500c5b8d2b088820b6baea6b5b11e740f756c6aa6330374aded83eee585843a59d5ad658cdd36300000000000000000000000000000000;
         tag = 128'h6a043f7d9b5d6c6a472af1f23d706b8c; end
      default: begin key = '0; iv = '0; alen = 0; plen = 0; aad = '0; pt = '0; ct = '0; tag = '0; end
    endcase
  endtask
  // output collector
  logic [127:0] got [$];
  logic [4:0]   gotn [$];
  always @(posedge clk) if (out_valid && out_ready) begin got.push_back(out_data); gotn.push_back(out_bytes); end
  always @(negedge clk) out_ready <= bp ? ($urandom_range(0, 2) != 0) : 1'b1;

  task automatic send(input logic [127:0] d, input int n, input bit aad, input bit last);
    @(negedge clk);
    in_valid = 1; in_data = d | (n < 16 ? 128'({$urandom, $urandom, $urandom, $urandom}) >> (8 * n) : '0);
    in_bytes = 5'(n); in_aad = aad; in_last = last;
    @(posedge clk); while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask

  task automatic run(input int v, input bit dir, input bit timed);
    logic [255:0] key, aad; logic [95:0] iv; logic [639:0] pt, ct, src, exp; logic [127:0] tag;
    int alen, plen, nab, npb, cyc;
    get_vec(v, key, iv, alen, plen, aad, pt, ct, tag);
    src = dir ? ct : pt; exp = dir ? pt : ct;
    got.delete(); gotn.delete();
    @(negedge clk); start = 1; key_i = key; iv_i = iv; decrypt_i = dir; key_valid_i = 1;
    @(negedge clk); start = 0; key_valid_i = 0; key_i = '0;
    cyc = 1;
    while (!in_ready) begin @(negedge clk); cyc++; end
    if (timed) chk(cyc == 42, $sformatf("setup latency %0d", cyc));
    nab = (alen + 15) / 16; npb = (plen + 15) / 16;
    for (int b = 0; b < nab; b++)
      send(aad[255 - 128 * b -: 128], (alen - 16 * b > 16) ? 16 : alen - 16 * b, 1, (b == nab - 1) && npb == 0);
    for (int b = 0; b < npb; b++) begin
      send(src[639 - 128 * b -: 128], (plen - 16 * b > 16) ? 16 : plen - 16 * b, 0, b == npb - 1);
      if (timed && b == 0) begin
        cyc = 0;
        while (!out_valid) begin @(posedge clk); cyc++; end
        chk(cyc == 15, $sformatf("block latency %0d", cyc));
      end
    end
    if (nab == 0 && npb == 0) send('0, 0, 0, 1);
    while (!tag_valid) @(negedge clk);
    repeat (3) @(negedge clk);
    chk(got.size() == npb, $sformatf("vec %0d dir %0d blocks %0d", v, dir, got.size()));
    for (int b = 0; b < npb && b < got.size(); b++) begin
      automatic int n = (plen - 16 * b > 16) ? 16 : plen - 16 * b;
      chk(got[b] == exp[639 - 128 * b -: 128], $sformatf("vec %0d dir %0d block %0d %h", v, dir, b, got[b]));
      chk(gotn[b] == 5'(n), "block length");
    end
    chk(tag_o == tag, $sformatf("vec %0d dir %0d tag %h exp %h", v, dir, tag_o, tag));
  endtask

  initial begin
    start = 0; decrypt_i = 0; key_valid_i = 0; iv_i = '0; key_i = '0;
    in_valid = 0; in_data = '0; in_bytes = '0; in_aad = 0; in_last = 0; out_ready = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    // refused start: the FDU has no key
    @(negedge clk); start = 1; key_valid_i = 0; key_i = {8{32'h5a5a5a5a}};
    @(negedge clk); start = 0;
    chk(start_err && !busy, "start without key refused");
    @(negedge clk); chk(!start_err && !busy, "engine stays idle");
    run(1, 0, 1);
    for (int r = 0; r < 2; r++) begin
      bp = (r == 1);
      for (int v = 0; v < NVEC; v++) begin run(v, 0, 0); run(v, 1, 0); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
