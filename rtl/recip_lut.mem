000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
000
100
0fe
0fc
0fa
0f8
0f6
0f4
0f2
0f0
0ef
0ed
0eb
0ea
0e8
0e6
0e5
0e3
0e1
0e0
0de
0dd
0db
0da
0d9
0d7
0d6
0d4
0d3
0d2
0d0
0cf
0ce
0cc
0cb
0ca
0c9
0c7
0c6
0c5
0c4
0c3
0c1
0c0
0bf
0be
0bd
0bc
0bb
0ba
0b9
0b8
0b7
0b6
0b5
0b4
0b3
0b2
0b1
0b0
0af
0ae
0ad
0ac
0ab
0aa
0a9
0a8
0a8
0a7
0a6
0a5
0a4
0a3
0a3
0a2
0a1
0a0
09f
09f
09e
09d
09c
09c
09b
09a
099
099
098
097
097
096
095
094
094
093
092
092
091
090
090
08f
08f
08e
08d
08d
08c
08c
08b
08a
08a
089
089
088
087
087
086
086
085
085
084
084
083
083
082
082
081
081
080
