05
f3
7f
80
00
2a
