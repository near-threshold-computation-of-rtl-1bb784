0000000000000000
0000000000000000
020000000000000e
0180000000000071
01000000000001b6
008000000000029b
0100000000000e51
0080000000001584
00800000000024f1
0080000000005d08
008000000000a742
0080000000017ac1
008000000002c191
008000000005ee59
000000000000f1ca
00800000000b3735
00800000001be490
00000000000162d3
00800000003a138f
0080000000661924
00000000002ccc98
0080000000c5880d
0080000001b3ebcd
000000000030fd9e
0080000002e820e8
0000000000fce530
00800000078155bf
00000000044f1dbd
008000000b96c241
000000000901ed84
00800000117e4828
00000000186fb428
00800000219e68a4
000000003190bea2
008000005cce511a
000000006347247b
0080000092765e9e
00000000245dbb9d
00800001e12bef66
00000000a85ead23
0000000074ea1281
00800003e0fe6956
000000039548eccd
00800006166672cf
000000074654d532
0080000b07108f23
00000002d5d1ba26
0000000137a8eaf1
008000192f1fea2f
0000001727c0076d
00800027b60f8a5a
00000004eff3bcc7
0000001189c831a8
00800041ee839374
0000001501170b35
0000006c19bda626
008000a0170bc915
000000f7aacf484f
0000000482b68a60
008001c8346690d2
00000148dfd89d88
00800364b47108bd
000001607d7a8ffa
00000075e0896583
0080041a9064fda2
00000035d36164ca
000000a932ea77e7
00800af349646d73
0000065891967302
00000384bd1c57f2
00801271e9508ad7
00000c42a7803857
000006da816db28f
00000654b5cf4346
0080282729a117c4
0000250822cb5346
0000346bd16d256f
00804a26e3531f09
00006c81b8e3717d
00000c2042242a31
0080a9de49c9825d
00005977edf8940d
0000b5aabbf00564
008127f8e704fb6b
00004bbd0518c592
0000e7a960057ee3
0000596bedf10af6
0082aa4534b2066c
00006a81327fb489
000206d525c14786
