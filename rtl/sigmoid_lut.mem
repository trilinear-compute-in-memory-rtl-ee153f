80
84
88
8c
90
94
98
9c
9f
a3
a7
aa
ae
b1
b5
b8
bb
be
c1
c4
c7
ca
cc
cf
d1
d4
d6
d8
da
dc
de
e0
e1
e3
e5
e6
e8
e9
ea
eb
ed
ee
ef
f0
f1
f1
f2
f3
f4
f5
f5
f6
f6
f7
f8
f8
f8
f9
f9
fa
fa
fa
fb
fb
fb
fc
fc
fc
fc
fd
fd
fd
fd
fd
fe
fe
fe
fe
fe
fe
fe
fe
fe
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
ff
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
02
02
02
02
02
02
02
02
02
03
03
03
03
03
04
04
04
04
05
05
05
06
06
06
07
07
08
08
08
09
0a
0a
0b
0b
0c
0d
0e
0f
0f
10
11
12
13
15
16
17
18
1a
1b
1d
1f
20
22
24
26
28
2a
2c
2f
31
34
36
39
3c
3f
42
45
48
4b
4f
52
56
59
5d
61
64
68
6c
70
74
78
7c
