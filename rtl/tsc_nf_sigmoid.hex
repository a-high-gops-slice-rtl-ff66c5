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
002
002
002
003
004
005
007
008
00b
00e
011
016
01b
022
02a
034
03f
04b
059
068
078
088
098
0a7
0b5
0c1
0cc
0d6
0de
0e5
0ea
0ef
0f2
0f5
0f8
0f9
0fb
0fc
0fd
0fe
0fe
0fe
0ff
0ff
0ff
0ff
100
100
100
100
100
100
100
