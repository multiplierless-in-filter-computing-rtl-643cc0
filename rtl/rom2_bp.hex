015
01a
003
3af
35c
387
046
0ff
0ff
046
387
35c
3af
003
01a
015
004
020
034
3f2
364
344
00b
0ff
0ff
00b
344
364
3f2
034
020
004
3ed
007
044
043
39c
317
3c9
0ff
0ff
3c9
317
39c
043
044
007
3ed
3eb
3e4
024
07b
3f9
30a
383
0ff
0ff
383
30a
3f9
07b
024
3e4
3eb
005
3d9
3e5
07c
064
321
33a
0ff
0ff
33a
321
064
07c
3e5
3d9
005
015
01a
003
3af
35c
387
046
0ff
0ff
046
387
35c
3af
003
01a
015
004
020
034
3f2
364
344
00b
0ff
0ff
00b
344
364
3f2
034
020
004
3ed
007
044
043
39c
317
3c9
0ff
0ff
3c9
317
39c
043
044
007
3ed
3eb
3e4
024
07b
3f9
30a
383
0ff
0ff
383
30a
3f9
07b
024
3e4
3eb
005
3d9
3e5
07c
064
321
33a
0ff
0ff
33a
321
064
07c
3e5
3d9
005
015
01a
003
3af
35c
387
046
0ff
0ff
046
387
35c
3af
003
01a
015
004
020
034
3f2
364
344
00b
0ff
0ff
00b
344
364
3f2
034
020
004
3ed
007
044
043
39c
317
3c9
0ff
0ff
3c9
317
39c
043
044
007
3ed
3eb
3e4
024
07b
3f9
30a
383
0ff
0ff
383
30a
3f9
07b
024
3e4
3eb
005
3d9
3e5
07c
064
321
33a
0ff
0ff
33a
321
064
07c
3e5
3d9
005
015
01a
003
3af
35c
387
046
0ff
0ff
046
387
35c
3af
003
01a
015
004
020
034
3f2
364
344
00b
0ff
0ff
00b
344
364
3f2
034
020
004
3ed
007
044
043
39c
317
3c9
0ff
0ff
3c9
317
39c
043
044
007
3ed
3eb
3e4
024
07b
3f9
30a
383
0ff
0ff
383
30a
3f9
07b
024
3e4
3eb
005
3d9
3e5
07c
064
321
33a
0ff
0ff
33a
321
064
07c
3e5
3d9
005
3eb
3e2
3d4
3da
009
060
0c0
0ff
0ff
0c0
060
009
3da
3d4
3e2
3eb
3f0
3e1
3c6
3ba
3df
03b
0af
0ff
0ff
0af
03b
3df
3ba
3c6
3e1
3f0
3fa
3e7
3c2
3a2
3b6
014
09c
0ff
0ff
09c
014
3b6
3a2
3c2
3e7
3fa
006
3f4
3ca
395
391
3eb
086
0ff
0ff
086
3eb
391
395
3ca
3f4
006
011
004
3dc
395
374
3c2
06e
0ff
0ff
06e
3c2
374
395
3dc
004
011
