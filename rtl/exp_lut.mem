ff
f0
e1
d3
c7
bb
af
a5
9b
91
88
80
78
71
6a
64
5e
58
53
4e
49
45
40
3d
39
35
32
2f
2c
2a
27
25
23
20
1e
1d
1b
19
18
16
15
14
12
11
10
0f
0e
0e
0d
0c
0b
0b
0a
09
09
08
08
07
07
06
06
06
05
05
05
04
04
04
04
03
03
03
03
03
02
02
02
02
02
02
02
02
02
01
01
01
01
01
01
01
01
01
01
01
01
01
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
