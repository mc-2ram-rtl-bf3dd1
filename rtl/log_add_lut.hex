2a6
26a
232
1fe
1ce
1a1
178
152
130
111
0f4
0da
0c3
0ae
09b
08a
07b
06d
061
056
04c
043
03c
035
02f
029
025
020
01d
019
016
014
011
00f
00e
00c
00b
009
008
007
006
006
005
004
004
003
003
003
002
002
002
002
001
001
001
001
001
001
001
001
001
000
000
000
