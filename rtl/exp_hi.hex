ff
c7
9b
78
5e
49
39
2c
23
1b
15
10
0d
0a
08
06
05
04
03
02
02
01
01
01
01
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
