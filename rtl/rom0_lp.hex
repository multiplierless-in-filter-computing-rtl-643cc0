3fc
025
0ff
0ff
025
3fc
3fc
025
0ff
0ff
025
3fc
3fc
025
0ff
0ff
025
3fc
3fc
025
0ff
0ff
025
3fc
