// 64-bit instruction blocks, one per line, address 8*n
000000003c081234
0000000035085678
0000000000084900
0000000000086022
00000000000c5103
00000000000c6902
0000000001097026
0000000001097824
0000000001098025
000000000188882a
000000000188902b
0000000029930005
000000003194ff00
000000003915ffff
0000000001095827
0000000020020003
000000002042ffff
000000001440fff0
00000000ac0800c8
000000008c1600c8
0000000002d6b820
0000000020010068
00000000f8200000
00000000f8210008
0000000000000000
0000000000000000
00000000fc000001
dd30424fe0e8049c
581742f4e300bffd
61a3cf4333706e61
36655b2cc9045f1f
000000008c1a0040
000000008c1b0044
0000000010000008
00000000201c0001
00000000ac1b0060
