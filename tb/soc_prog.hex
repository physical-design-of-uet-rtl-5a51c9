00001417
80040413
00000297
1e828293
30529073
00000913
00000993
00000a13
00000a93
00000b13
00000b93
90002c37
0c000cb7
0ff00293
005c2023
0a500293
005c2223
018c2303
00642023
00440413
0000c2b7
eef28293
105c2023
104c2303
00642023
00440413
100c2303
00642023
00440413
00200293
005ca223
005ca623
00100293
00200337
01930333
00532023
00a00293
00002337
01930333
00532023
000012b7
88828293
30429073
30046073
90000d37
00800293
005d2423
00100293
005d2623
05a00293
005d2023
000a8063
01742023
00440413
90001db7
00200293
005da423
00100293
005da623
0c300293
005da023
004da303
00237313
fe030ce3
000da303
00642023
00440413
000da623
00100293
025c2c23
025c2623
00100293
105c2023
000a0063
01442023
00440413
020003b7
0000ce37
ff8e0e13
007e0e33
000e2283
0c828293
00004e37
007e0e33
000e2223
005e2023
00090063
01242023
00440413
00100293
0053a023
00098063
01342023
00440413
3e800293
00700313
0262ce33
01c42023
00440413
00000e97
6b4e8e93
01cea023
000ea303
00130313
00642023
00440413
006ea32f
000ea303
00642023
00440413
00000073
01642023
00440413
000022b7
22228293
105c2023
00001297
d3028293
00100313
0062a023
0000006f
00000013
00000013
00000013
34202f73
000f4c63
001b0b13
34102f73
004f0f13
341f1073
30200073
0fff7f13
00700f93
05ff0663
00300f93
05ff0e63
00200fb7
004f8f93
019f8fb3
000faf03
00100f93
01ff0863
020c2623
001a0a13
00c0006f
000d2b83
001a8a93
00200fb7
004f8f93
019f8fb3
01efa023
30200073
02004f37
004f0f13
fff00f93
01ff2023
00190913
30200073
02000f37
000f2023
00198993
30200073
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
deadbeef
deadbeef
deadbeef
deadbeef
deadbeef
deadbeef
deadbeef
deadbeef
deadbeef
deadbeef
deadbeef
deadbeef
deadbeef
deadbeef
deadbeef
deadbeef
00000000
