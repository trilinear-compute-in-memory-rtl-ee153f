fff
fff
b50
93d
800
728
688
60c
5a8
555
50f
4d3
49e
470
447
422
400
3e1
3c5
3ac
394
37e
369
356
344
333
323
314
306
2f9
2ec
2e0
2d4
2c9
2be
2b4
2ab
2a1
298
290
288
280
278
271
269
263
25c
255
24f
249
243
23e
238
233
22d
228
223
21f
21a
215
211
20c
208
204
200
1fc
1f8
1f4
1f1
1ed
1ea
1e6
1e3
1df
1dc
1d9
1d6
1d3
1d0
1cd
1ca
1c7
1c4
1c2
1bf
1bc
1ba
1b7
1b5
1b2
1b0
1ad
1ab
1a9
1a6
1a4
1a2
1a0
19e
19c
19a
198
196
194
192
190
18e
18c
18a
188
187
185
183
181
180
17e
17c
17b
179
177
176
174
173
171
170
16e
16d
16b
16a
169
167
166
165
163
162
161
15f
15e
15d
15b
15a
159
158
157
155
154
153
152
151
150
14e
14d
14c
14b
14a
149
148
147
146
145
144
143
142
141
140
13f
13e
13d
13c
13b
13a
139
138
137
137
136
135
134
133
132
131
130
130
12f
12e
12d
12c
12c
12b
12a
129
128
128
127
126
125
125
124
123
122
122
121
120
11f
11f
11e
11d
11d
11c
11b
11b
11a
119
119
118
117
117
116
115
115
114
114
113
112
112
111
110
110
10f
10f
10e
10d
10d
10c
10c
10b
10b
10a
10a
109
108
108
107
107
106
106
105
105
104
104
103
103
102
102
101
101
