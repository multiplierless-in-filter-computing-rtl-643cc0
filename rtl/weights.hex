3ad
3fc
3e2
019
017
036
04c
3bc
3b8
3d9
3ed
3f6
022
013
057
030
3c3
3b6
3f8
3d3
02d
3f0
062
00d
3ce
02a
003
047
038
3cd
3a4
3ea
3d9
007
00e
024
043
041
3af
3c7
3e4
3e4
019
001
04e
01e
3ba
03b
3ef
3c1
024
3de
059
3fb
3c5
018
3fa
035
02f
3bb
014
3ec
