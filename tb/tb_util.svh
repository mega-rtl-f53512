// tb_util.svh: behavioural helpers shared by the testbenches, included inside
// a testbench module.
//
// ap_packer writes node values into a 64-bit word memory in the
// Adaptive-Package format, as the Encoder would: values of successive nodes
// are appended to the open package until it would exceed 192 bits or the
// bitwidth changes; the package is then closed with the shortest Mode
// (64/128/192 bits) that holds its header and values, padded with zeros.

  class ap_packer;
    logic [63:0]  words [int];
    logic [191:0] preg;
    int pused, pbw, wptr, npk;

    function new(int base);
      preg = '0; pused = 0; pbw = 0; wptr = base; npk = 0;
    endfunction

    function void flush();
      int len, nw;
      if (pused == 0) return;
      len = (5 + pused <= 64) ? 64 : (5 + pused <= 128) ? 128 : 192;
      nw = len / 64;
      preg[1:0] = (len == 64) ? 2'b00 : (len == 128) ? 2'b01 : 2'b10;
      preg[4:2] = 3'(pbw);
      for (int w = 0; w < nw; w++) words[wptr + w] = preg[w*64 +: 64];
      wptr += nw;
      npk++;
      preg = '0; pused = 0;
    endfunction

    function void put(int v, int b);
      if (pused != 0 && b != pbw) flush();
      if (5 + pused + b > 192) flush();
      pbw = b;
      for (int t = 0; t < b; t++) preg[5 + pused + t] = 1'(v >> t);
      pused += b;
    endfunction
  endclass

  // Sign-extend a field of w bits held in the low bits of v.
  function automatic int sext(input longint v, input int w);
    longint m;
    m = longint'(1) << (w - 1);
    v = v & ((longint'(1) << w) - 1);
    return int'((v ^ m) - m);
  endfunction

