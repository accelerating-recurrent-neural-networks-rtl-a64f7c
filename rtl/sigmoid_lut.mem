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
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
001
002
002
002
002
002
002
002
002
002
002
002
002
002
002
002
002
002
002
002
002
002
002
002
002
002
002
002
002
002
002
002
002
002
003
003
003
003
003
003
003
003
003
003
003
003
003
003
003
003
003
003
003
003
003
004
004
004
004
004
004
004
004
004
004
004
004
004
004
004
004
005
005
005
005
005
005
005
005
005
005
005
005
005
006
006
006
006
006
006
006
006
006
006
006
007
007
007
007
007
007
007
007
007
008
008
008
008
008
008
008
008
009
009
009
009
009
009
009
009
00a
00a
00a
00a
00a
00a
00b
00b
00b
00b
00b
00b
00c
00c
00c
00c
00c
00d
00d
00d
00d
00d
00e
00e
00e
00e
00e
00f
00f
00f
00f
010
010
010
010
011
011
011
011
012
012
012
012
013
013
013
014
014
014
015
015
015
015
016
016
016
017
017
018
018
018
019
019
019
01a
01a
01b
01b
01b
01c
01c
01d
01d
01e
01e
01e
01f
01f
020
020
021
021
022
022
023
023
024
025
025
026
026
027
027
028
029
029
02a
02a
02b
02c
02c
02d
02e
02e
02f
030
031
031
032
033
034
034
035
036
037
037
038
039
03a
03b
03c
03d
03e
03e
03f
040
041
042
043
044
045
046
047
048
049
04a
04b
04d
04e
04f
050
051
052
053
055
056
057
058
05a
05b
05c
05e
05f
060
062
063
064
066
067
069
06a
06c
06d
06f
070
072
074
075
077
078
07a
07c
07d
07f
081
083
085
086
088
08a
08c
08e
090
092
094
096
098
09a
09c
09e
0a0
0a2
0a4
0a6
0a8
0ab
0ad
0af
0b1
0b4
0b6
0b8
0bb
0bd
0c0
0c2
0c5
0c7
0ca
0cc
0cf
0d1
0d4
0d6
0d9
0dc
0df
0e1
0e4
0e7
0ea
0ec
0ef
0f2
0f5
0f8
0fb
0fe
101
104
107
10a
10d
110
113
117
11a
11d
120
123
127
12a
12d
131
134
137
13b
13e
142
145
149
14c
150
153
157
15a
15e
161
165
169
16c
170
174
177
17b
17f
183
186
18a
18e
192
196
199
19d
1a1
1a5
1a9
1ad
1b1
1b5
1b8
1bc
1c0
1c4
1c8
1cc
1d0
1d4
1d8
1dc
1e0
1e4
1e8
1ec
1f0
1f4
1f8
1fc
200
204
208
20c
210
214
218
21c
220
224
228
22c
230
234
238
23c
240
244
248
24b
24f
253
257
25b
25f
263
267
26a
26e
272
276
27a
27d
281
285
289
28c
290
294
297
29b
29f
2a2
2a6
2a9
2ad
2b0
2b4
2b7
2bb
2be
2c2
2c5
2c9
2cc
2cf
2d3
2d6
2d9
2dd
2e0
2e3
2e6
2e9
2ed
2f0
2f3
2f6
2f9
2fc
2ff
302
305
308
30b
30e
311
314
316
319
31c
31f
321
324
327
32a
32c
32f
331
334
336
339
33b
33e
340
343
345
348
34a
34c
34f
351
353
355
358
35a
35c
35e
360
362
364
366
368
36a
36c
36e
370
372
374
376
378
37a
37b
37d
37f
381
383
384
386
388
389
38b
38c
38e
390
391
393
394
396
397
399
39a
39c
39d
39e
3a0
3a1
3a2
3a4
3a5
3a6
3a8
3a9
3aa
3ab
3ad
3ae
3af
3b0
3b1
3b2
3b3
3b5
3b6
3b7
3b8
3b9
3ba
3bb
3bc
3bd
3be
3bf
3c0
3c1
3c2
3c2
3c3
3c4
3c5
3c6
3c7
3c8
3c9
3c9
3ca
3cb
3cc
3cc
3cd
3ce
3cf
3cf
3d0
3d1
3d2
3d2
3d3
3d4
3d4
3d5
3d6
3d6
3d7
3d7
3d8
3d9
3d9
3da
3da
3db
3db
3dc
3dd
3dd
3de
3de
3df
3df
3e0
3e0
3e1
3e1
3e2
3e2
3e2
3e3
3e3
3e4
3e4
3e5
3e5
3e5
3e6
3e6
3e7
3e7
3e7
3e8
3e8
3e8
3e9
3e9
3ea
3ea
3ea
3eb
3eb
3eb
3eb
3ec
3ec
3ec
3ed
3ed
3ed
3ee
3ee
3ee
3ee
3ef
3ef
3ef
3ef
3f0
3f0
3f0
3f0
3f1
3f1
3f1
3f1
3f2
3f2
3f2
3f2
3f2
3f3
3f3
3f3
3f3
3f3
3f4
3f4
3f4
3f4
3f4
3f5
3f5
3f5
3f5
3f5
3f5
3f6
3f6
3f6
3f6
3f6
3f6
3f7
3f7
3f7
3f7
3f7
3f7
3f7
3f7
3f8
3f8
3f8
3f8
3f8
3f8
3f8
3f8
3f9
3f9
3f9
3f9
3f9
3f9
3f9
3f9
3f9
3fa
3fa
3fa
3fa
3fa
3fa
3fa
3fa
3fa
3fa
3fa
3fb
3fb
3fb
3fb
3fb
3fb
3fb
3fb
3fb
3fb
3fb
3fb
3fb
3fc
3fc
3fc
3fc
3fc
3fc
3fc
3fc
3fc
3fc
3fc
3fc
3fc
3fc
3fc
3fc
3fd
3fd
3fd
3fd
3fd
3fd
3fd
3fd
3fd
3fd
3fd
3fd
3fd
3fd
3fd
3fd
3fd
3fd
3fd
3fd
3fd
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3fe
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
3ff
400
400
400
400
400
400
400
400
400
400
400
400
400
400
400
400
400
400
400
400
400
400
400
400
