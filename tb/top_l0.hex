00
01
00
