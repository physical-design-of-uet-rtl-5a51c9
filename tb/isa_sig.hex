acf13568
77777788
468acf00
04d5e6f7
fcd5e6f7
00000001
00000000
88888888
9abcdef8
12345670
12344e78
00000001
00000000
edcba987
123457ff
000000f0
00000000
00000001
ffffcd5e
fedcb000
80001120
bf258be0
e38e38d0
2c5f92b0
00000008
7777777f
77777777
00000003
00000020
00000004
00000020
00000013
12345678
9abcdef0
9abcdef0
12345678
fffffff0
ffffdef0
0000def0
468acf02
c091a2b3
b3c091a2
00ff00ff
78563412
5cd25a80
08860e94
110c1d28
12345658
12345678
12345658
00000001
1abcdef0
92345678
12345670
00000001
242d2080
f8cc93d6
f8cc93d6
0b00ea4e
0e774ddd
00000000
fffffffb
00000004
ffffffff
12345678
80000000
00000000
02e4a92c
1234f078
fffffff0
000000f0
fffffff9
0000fff9
00000013
fff93344
0000001e
0000001a
0000007e
000000e2
00000064
0000007b
fffffff9
edcba981
88888880
88888885
88888885
12345678
12345678
fffffff9
fffffff9
00000000
12345678
00000001
12345678
12345678
1234567d
00000005
00000011
40001103
00000001
00000001
0000000b
8000058c
00000000
00000001
00000002
80000598
00000000
00000002
00000003
800005a4
800005a4
00000003
00000002
800005b0
f1151073
00000004
00000004
800005c4
80000b01
00000005
00000006
800005d0
80000b03
00000006
00000000
800005e8
800005ee
00000007
00000055
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
