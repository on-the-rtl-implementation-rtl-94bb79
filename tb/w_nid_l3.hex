3939
3939
3939
3939
3939
3939
3939
3939
