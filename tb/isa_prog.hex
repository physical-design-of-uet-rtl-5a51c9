00001417
80040413
00000297
61828293
30529073
00000493
12345537
67850513
9abce5b7
ef058593
00500613
ff900693
00b50333
00642023
00440413
40b50333
00642023
00440413
00c51333
00642023
00440413
00c5d333
00642023
00440413
40c5d333
00642023
00440413
00a5a333
00642023
00440413
00a5b333
00642023
00440413
00b54333
00642023
00440413
00b56333
00642023
00440413
00b57333
00642023
00440413
80050313
00642023
00440413
ffa6a313
00642023
00440413
0076b313
00642023
00440413
fff54313
00642023
00440413
7ff56313
00642023
00440413
0f05f313
00642023
00440413
01f51313
00642023
00440413
01f5d313
00642023
00440413
4115d313
00642023
00440413
fedcb337
00642023
00440413
00001317
00642023
00440413
20b52333
00642023
00440413
20b54333
00642023
00440413
20b56333
00642023
00440413
40b57333
00642023
00440413
40b56333
00642023
00440413
40b54333
00642023
00440413
60051313
00642023
00440413
60001313
00642023
00440413
60159313
00642023
00440413
60101313
00642023
00440413
60259313
00642023
00440413
0ab56333
00642023
00440413
0ab57333
00642023
00440413
0ab54333
00642023
00440413
0ab55333
00642023
00440413
60459313
00642023
00440413
60559313
00642023
00440413
0805c333
00642023
00440413
60c51333
00642023
00440413
60c55333
00642023
00440413
60d55313
00642023
00440413
001203b7
03438393
2873d313
00642023
00440413
69855313
00642023
00440413
0ab51333
00642023
00440413
0ab53333
00642023
00440413
0ab52333
00642023
00440413
48c51333
00642023
00440413
28c51333
00642023
00440413
68c51333
00642023
00440413
48c55333
00642023
00440413
49f59313
00642023
00440413
29f51313
00642023
00440413
68351313
00642023
00440413
4845d313
00642023
00440413
02b50333
00642023
00440413
02b51333
00642023
00440413
02a5a333
00642023
00440413
02b53333
00642023
00440413
02d5c333
00642023
00440413
02d5d333
00642023
00440413
02d5e333
00642023
00440413
02c5f333
00642023
00440413
02054333
00642023
00440413
02056333
00642023
00440413
800003b7
fff00e13
03c3c333
00642023
00440413
03c3e333
00642023
00440413
02d5c333
02c34333
00642023
00440413
00000e97
78ce8e93
00aea023
00be80a3
00de9323
000ea303
00642023
00440413
001e8303
00642023
00440413
001ec303
00642023
00440413
006e9303
00642023
00440413
006ed303
00642023
00440413
003ec303
00130313
00642023
00440413
004ea303
00642023
00440413
00000313
00a00393
00330313
fff38393
fe039ce3
00642023
00440413
00000313
00a50463
00130313
00a51463
00230313
00a5c463
00430313
00a5d463
00830313
00a5e463
01030313
00a5f463
02030313
00642023
00440413
1dc000ef
00642023
00440413
00000397
1d038393
000380e7
00642023
00440413
00000e97
6b0e8e93
06400393
007ea023
01700e13
01cea32f
00642023
00440413
08dea32f
00642023
00440413
20aea32f
00642023
00440413
60bea32f
00642023
00440413
40cea32f
00642023
00440413
80dea32f
00642023
00440413
a0aea32f
00642023
00440413
c0bea32f
00642023
00440413
e0dea32f
00642023
00440413
000ea303
00642023
00440413
100ea32f
00642023
00440413
18aea32f
00642023
00440413
000ea303
00642023
00440413
18bea32f
00642023
00440413
000ea303
00642023
00440413
34051073
34062373
00642023
00440413
34053373
00642023
00440413
3408d373
00642023
00440413
34002373
00642023
00440413
30102373
00642023
00440413
b00023f3
00000013
b0002e73
01c3b333
00642023
00440413
b02023f3
b0202e73
407e0333
00642023
00440413
00000073
00942023
00440413
00000000
00942023
00440413
00100073
00942023
00440413
f1151073
00942023
00440413
00000297
54428293
0012a303
00942023
00440413
00a291a3
00942023
00440413
00000297
01028293
00228293
00028067
00942023
00440413
05500313
00642023
00440413
00001297
90028293
00100313
0062a023
0000006f
06430313
00008067
00000013
34202f73
01e42023
00440413
34102f73
01e42023
00440413
34302f73
01e42023
00440413
00148493
34102f73
004f0f13
341f1073
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
11223344
00000000
00000000
