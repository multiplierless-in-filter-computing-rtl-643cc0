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
