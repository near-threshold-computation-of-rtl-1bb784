// trivium: Trivium keystream generator used as the accelerator's random bit source.
//
// The 288-bit state s1..s288 is loaded with the 80-bit key in s1..s80, the 80-bit IV
// in s94..s173 and ones in s286..s288, then clocked 4*288 = 1152 times without output
// (warm-up). After that every advance yields one keystream bit z. The update is the
// published Trivium recurrence; bit i of `key`/`iv` is K(i+1)/IV(i+1), a convention of
// this design. The paper names Trivium as its random number generator and gives
// nothing more.
//
// Interface: pulse `load` with key/iv valid; `ready` rises after the warm-up. While
// ready, `z` is the current keystream bit and `take` consumes it (state advances).
// One bit per clock at most.
module trivium (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  logic [79:0] key,
  input  logic [79:0] iv,
  output logic        ready,
  output logic        z,
  input  logic        take
);
  localparam int WARMUP = 4 * 288;

  logic [288:1] s;
  logic [10:0]  warm_cnt;
  logic         warming;
  logic         t1, t2, t3;

  always_comb begin
    t1 = s[66] ^ s[93];
    t2 = s[162] ^ s[177];
    t3 = s[243] ^ s[288];
    z  = t1 ^ t2 ^ t3;
  end

  function automatic logic [288:1] step(input logic [288:1] st);
    logic a1, a2, a3;
    logic [288:1] n;
    a1 = st[66] ^ st[93] ^ (st[91] & st[92]) ^ st[171];
    a2 = st[162] ^ st[177] ^ (st[175] & st[176]) ^ st[264];
    a3 = st[243] ^ st[288] ^ (st[286] & st[287]) ^ st[69];
    n = st;
    n[93:2]    = st[92:1];
    n[1]       = a3;
    n[177:95]  = st[176:94];
    n[94]      = a1;
    n[288:179] = st[287:178];
    n[178]     = a2;
    return n;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s        <= '0;
      warm_cnt <= '0;
      warming  <= 1'b0;
      ready    <= 1'b0;
    end else if (load) begin
      s          <= '0;
      s[80:1]    <= key;
      s[173:94]  <= iv;
      s[288:286] <= 3'b111;
      warm_cnt   <= '0;
      warming    <= 1'b1;
      ready      <= 1'b0;
    end else if (warming) begin
      s <= step(s);
      if (warm_cnt == 11'(WARMUP - 1)) begin
        warming <= 1'b0;
        ready   <= 1'b1;
      end
      warm_cnt <= warm_cnt + 11'd1;
    end else if (ready && take) begin
      s <= step(s);
    end
  end
endmodule
